// merge_row: the adaptive merge network of one PE row.
//
// P PEs hold one virtual row of C in the order the paper requires: valid
// entries fill positions 0.. from the left with no gaps, and their column
// indices strictly increase to the right. Next to each PE a pe_switch holds at
// most one travelling B element. Every cycle, at every position, the PE's
// merger compares the element's column b with the stored column c:
//   b == c : the (a,b) pair is pushed into that PE's FIFO and later
//            accumulated;
//   b >  c : the element moves one position to the right;
//   b <  c or empty slot : the element asks to be inserted here.
// At most one insertion per row and cycle is granted, to the leftmost
// requester. An insertion at y shifts every entry at y..P-1 one position to
// the right in the same cycle (entries move with their partial sums and
// pending FIFO operands) and creates the new entry at y. This is the
// "shift all C*-column indices to the right" of the paper; a shift never
// makes a travelling element illegal, because the entry it creates is smaller
// than every entry it displaces.
//
// Temporal folding (overflow): if the row is full, the entry pushed out of
// position P-1 by a shift is spilled to the row's scratchpad (spill_*), and an
// element that must move past position P-1 is handed to the scratchpad for
// accumulation there (ovf_*). A shift is only granted when the last PE's FIFO
// is empty and the scratchpad can take the spill, so a spilled entry carries
// its complete partial sum. Spill and overflow share the scratchpad port;
// the spill wins.
//
// Interface: inject[p] puts a new element at position p; the caller must
// respect inj_ready[p]. spill_valid / ovf_valid are fire signals: they are
// only raised when the scratchpad's ready was high. changed[p] marks the
// positions whose column index changes at the next edge (for the IPM).
// The forward-ready chain runs combinationally from right to left across
// the row; it is acyclic.
module merge_row
  import segfold_pkg::*;
#(
  parameter int unsigned P          = 16,
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  // injection from the row shifter
  input  belem_t [P-1:0]    inject,
  output logic   [P-1:0]    inj_ready,
  // spill of an entry pushed out of the row, and overflow elements
  input  logic              spill_ready,
  output logic              spill_valid,
  output centry_t           spill_entry,
  input  logic              ovf_ready,
  output logic              ovf_valid,
  output belem_t            ovf_elem,
  // state
  output centry_t [P-1:0]   entries,
  output logic    [P-1:0]   changed,
  output logic              idle,
  // events, one bit per cycle each
  output logic              ev_shift,
  output logic              ev_append,
  output logic [$clog2(P+1)-1:0] ev_matches,
  output logic [$clog2(P+1)-1:0] ev_fwds
);
  typedef logic [$clog2(FIFO_DEPTH+1)-1:0] cnt_t;

  belem_t  [P-1:0] elem;
  cmp_t    [P-1:0] cmp;
  logic    [P-1:0] match, ins_req, fwd, leaving, free_next, down_ready;
  logic    [P-1:0] ins, shift_in, busy;
  belem_t  [P-1:0] from_left;
  centry_t [P-1:0] upd_entry;
  opnd_t   [P-1:0][FIFO_DEPTH-1:0] upd_q;
  cnt_t    [P-1:0] upd_count;

  // ---- insertion arbitration: leftmost requester -------------------------
  logic                 any_req, tail_ok, grant;
  logic [$clog2(P)-1:0] ins_pos;

  always_comb begin
    any_req = 1'b0;
    ins_pos = '0;
    for (int p = P - 1; p >= 0; p--) begin
      if (ins_req[p]) begin
        any_req = 1'b1;
        ins_pos = ($clog2(P))'(p);
      end
    end
  end

  assign tail_ok = !upd_entry[P-1].valid || (upd_count[P-1] == '0 && spill_ready);
  assign grant   = any_req && tail_ok;

  always_comb begin
    for (int p = 0; p < P; p++) begin
      ins[p]      = grant && (ins_pos == ($clog2(P))'(p));
      shift_in[p] = grant && (($clog2(P))'(p) > ins_pos);
      changed[p]  = grant && (($clog2(P))'(p) >= ins_pos);
    end
  end

  assign spill_valid = grant && upd_entry[P-1].valid;
  assign spill_entry = upd_entry[P-1];

  // ---- forward chain ------------------------------------------------------
  always_comb begin
    for (int p = 0; p < P - 1; p++) down_ready[p] = free_next[p+1];
    down_ready[P-1] = ovf_ready && !spill_valid;
  end

  assign ovf_valid = fwd[P-1];
  assign ovf_elem  = elem[P-1];

  always_comb begin
    from_left[0] = '0;
    for (int p = 1; p < P; p++) begin
      from_left[p] = fwd[p-1] ? elem[p-1] : '0;
    end
    for (int p = 0; p < P; p++) begin
      inj_ready[p] = free_next[p] && !from_left[p].valid;
    end
  end

  // ---- datapath -----------------------------------------------------------
  for (genvar p = 0; p < P; p++) begin : g_pos
    belem_t inj_q;
    assign inj_q = (inject[p].valid && inj_ready[p]) ? inject[p] : '0;

    pe_switch u_sw (
      .clk       (clk),
      .rst_n     (rst_n),
      .clear     (clear),
      .from_left (from_left[p]),
      .inject    (inj_q),
      .cmp       (cmp[p]),
      .ins_grant (ins[p]),
      .down_ready(down_ready[p]),
      .elem      (elem[p]),
      .match     (match[p]),
      .ins_req   (ins_req[p]),
      .fwd       (fwd[p]),
      .leaving   (leaving[p]),
      .free_next (free_next[p])
    );

    pe #(.FIFO_DEPTH(FIFO_DEPTH)) u_pe (
      .clk       (clk),
      .rst_n     (rst_n),
      .clear     (clear),
      .b_col     (elem[p].col),
      .cmp       (cmp[p]),
      .push      (match[p]),
      .ins       (ins[p]),
      .opnd      ('{a: elem[p].a, b: elem[p].b}),
      .ins_col   (elem[p].col),
      .shift_in  (shift_in[p]),
      .left_entry(p == 0 ? centry_t'('0) : upd_entry[(p == 0) ? 0 : p-1]),
      .left_q    (upd_q[(p == 0) ? 0 : p-1]),
      .left_count(upd_count[(p == 0) ? 0 : p-1]),
      .entry     (entries[p]),
      .upd_entry (upd_entry[p]),
      .upd_q     (upd_q[p]),
      .upd_count (upd_count[p]),
      .busy      (busy[p])
    );
  end

  always_comb begin
    idle = 1'b1;
    for (int p = 0; p < P; p++) if (elem[p].valid || busy[p]) idle = 1'b0;
  end

  assign ev_shift  = grant && cmp[ins_pos] == CMP_LT;
  assign ev_append = grant && cmp[ins_pos] == CMP_EMPTY;
  always_comb begin
    ev_matches = '0;
    ev_fwds    = '0;
    for (int p = 0; p < P; p++) begin
      ev_matches = ev_matches + ($clog2(P+1))'(match[p]);
      ev_fwds    = ev_fwds + ($clog2(P+1))'(fwd[p]);
    end
  end

  // Row saturation and column ordering hold at every cycle.
  for (genvar p = 1; p < P; p++) begin : g_order
    a_saturated: assert property (@(posedge clk) disable iff (!rst_n)
      entries[p].valid |-> entries[p-1].valid && entries[p-1].col < entries[p].col);
  end

endmodule
