// row_shifter: the per-row shifter that aligns an incoming B-row segment to
// the merge network.
//
// A segment is up to SEG consecutive nonzeros of one B row, all to be
// multiplied by the same A value (the A element selected for this PE row).
// The paper maps only the first element of a segment through the IPM and
// places the following ones at consecutive positions: element j enters the
// merge network at s+j, where s is the IPM result. This design clamps that
// position to the last PE (a position left of a legal one is still legal).
//
// Segments wait in a queue of QDEPTH entries. A segment's IPM lookup is
// issued when it is accepted; results return in order after the IPM latency
// and are stored into the queue. The segment at the head injects its elements
// in order: each cycle, every next element whose target switch is free is
// injected, stopping at the first one that must wait (no two elements share
// a switch in one cycle), so elements of a segment never overtake each other.
// When all elements are in, the head is popped. The queue and the in-order
// injection are this design's choices; the paper gives the alignment itself.
//
// Interface: valid/ready on the segment input, a lookup port to the IPM and
// its result, per-position inject with inj_ready from the merge row.
module row_shifter
  import segfold_pkg::*;
#(
  parameter int unsigned P      = 16,
  parameter int unsigned SEG    = 4,
  parameter int unsigned QDEPTH = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // segment input
  input  logic                        seg_valid,
  input  bseg_elem_t [SEG-1:0]        seg_elems,
  input  val_t                        seg_a,
  output logic                        seg_ready,
  // IPM
  output logic                        lk_valid,
  output idx_t                        lk_col,
  input  logic                        res_valid,
  input  logic [$clog2(P)-1:0]        res_pos,
  // merge network
  output belem_t [P-1:0]              inject,
  input  logic   [P-1:0]              inj_ready,
  output logic                        idle,
  output logic                        ev_offset   // a segment starts right of position 0
);
  localparam int unsigned QW = $clog2(QDEPTH);
  typedef logic [QW-1:0]              qptr_t;
  typedef logic [$clog2(QDEPTH+1)-1:0] qcnt_t;
  typedef logic [$clog2(P)-1:0]       pos_t;

  typedef struct packed {
    bseg_elem_t [SEG-1:0] elems;
    val_t                 a;
    pos_t                 pos;
    logic                 pos_ok;
    logic [SEG-1:0]       pending;
  } qent_t;

  qent_t [QDEPTH-1:0] q;
  qptr_t              head, tail, rptr;
  qcnt_t              count;

  logic           push, pop;
  logic [SEG-1:0] inj_now;

  assign seg_ready = (count < qcnt_t'(QDEPTH));
  assign push      = seg_valid && seg_ready;
  assign lk_valid  = push;
  assign lk_col    = seg_elems[0].col;
  assign idle      = (count == '0);

  // in-order injection of the head segment
  always_comb begin
    logic        blocked;
    logic [P-1:0] used;
    int unsigned t;
    t       = 0;
    inject  = '0;
    inj_now = '0;
    blocked = 1'b0;
    used    = '0;
    if (count != '0 && q[head].pos_ok) begin
      for (int j = 0; j < SEG; j++) begin
        if (q[head].pending[j] && !blocked) begin
          t = int'(q[head].pos) + j;
          if (t > P - 1) t = P - 1;
          if (inj_ready[t] && !used[t]) begin
            used[t]    = 1'b1;
            inj_now[j] = 1'b1;
            inject[t]  = '{valid: 1'b1, col: q[head].elems[j].col, a: q[head].a, b: q[head].elems[j].val};
          end else begin
            blocked = 1'b1;
          end
        end
      end
    end
  end

  assign pop = (count != '0) && q[head].pos_ok && ((q[head].pending & ~inj_now) == '0);
  assign ev_offset = res_valid && (res_pos != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q     <= '0;
      head  <= '0;
      tail  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (count != '0) q[head].pending <= q[head].pending & ~inj_now;
      if (res_valid) begin
        q[rptr].pos    <= res_pos;
        q[rptr].pos_ok <= 1'b1;
        rptr           <= (rptr == qptr_t'(QDEPTH - 1)) ? '0 : rptr + qptr_t'(1);
      end
      if (push) begin
        for (int j = 0; j < SEG; j++) begin
          q[tail].elems[j]   <= seg_elems[j];
          q[tail].pending[j] <= seg_elems[j].valid;
        end
        q[tail].a      <= seg_a;
        q[tail].pos_ok <= 1'b0;
        tail           <= (tail == qptr_t'(QDEPTH - 1)) ? '0 : tail + qptr_t'(1);
      end
      if (pop) head <= (head == qptr_t'(QDEPTH - 1)) ? '0 : head + qptr_t'(1);
      count <= count + qcnt_t'(push) - qcnt_t'(pop);
    end
  end

  a_first_valid: assert property (@(posedge clk) disable iff (!rst_n)
    seg_valid |-> seg_elems[0].valid);

endmodule
