// pe: one processing element of the SegFold array.
//
// A PE owns one position of the virtual coordinate space of C: it stores the
// column index c of the C* partial sum it holds and the partial sum itself.
// It contains the three parts the paper draws for a PE:
//   * the merger, which compares the column index b of the B element waiting
//     at this position with c and reports EMPTY, b>c, b<c or b==c;
//   * a FIFO buffer (pe_fifo) of matched operand pairs;
//   * the ALU, a multiply-accumulate that takes one pair per cycle from the
//     FIFO and adds a*b into the partial sum.
//
// The PE row drives three update commands; ins excludes the other two:
//   push     : a B element matched here; its (a,b) pair is queued.
//   ins      : a B element is inserted here as a new C* entry with column b,
//              partial sum 0 and its pair queued.
//   shift_in : this PE takes over the left neighbour's entry (column, partial
//              sum and FIFO contents, as they are after this cycle's MAC).
// upd_* outputs give this PE's entry after this cycle's MAC and push; the
// right neighbour loads them during a shift. clear empties the PE (used after
// a tile has been drained).
//
// Timing: the comparison is combinational; all state changes at the next
// clock edge. The MAC has one cycle of latency from FIFO head to partial sum.
module pe
  import segfold_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 2
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            clear,
  // merger
  input  idx_t                            b_col,
  output cmp_t                            cmp,
  // update commands
  input  logic                            push,
  input  logic                            ins,
  input  opnd_t                           opnd,
  input  idx_t                            ins_col,
  input  logic                            shift_in,
  input  centry_t                         left_entry,
  input  opnd_t [FIFO_DEPTH-1:0]          left_q,
  input  logic [$clog2(FIFO_DEPTH+1)-1:0] left_count,
  // state for the right neighbour, the IPM and the C drain
  output centry_t                         entry,
  output centry_t                         upd_entry,
  output opnd_t [FIFO_DEPTH-1:0]          upd_q,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] upd_count,
  output logic                            busy
);
  typedef logic [$clog2(FIFO_DEPTH+1)-1:0] cnt_t;

  centry_t e;
  opnd_t   head;
  cnt_t    count;
  opnd_t [FIFO_DEPTH-1:0] fifo_load_q;
  logic    mac_en;
  acc_t    prod;

  assign entry = e;
  assign busy  = (count != '0);

  // merger
  always_comb begin
    if (!e.valid)            cmp = CMP_EMPTY;
    else if (b_col > e.col)  cmp = CMP_GT;
    else if (b_col < e.col)  cmp = CMP_LT;
    else                     cmp = CMP_EQ;
  end

  // ALU: one multiply-accumulate per cycle from the FIFO head
  assign mac_en = (count != '0);
  assign prod   = acc_t'(head.a) * acc_t'(head.b);

  always_comb begin
    upd_entry = e;
    if (mac_en) upd_entry.psum = e.psum + prod;
  end

  always_comb begin
    fifo_load_q = left_q;
    if (ins) begin
      fifo_load_q    = '0;
      fifo_load_q[0] = opnd;
    end
  end

  pe_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (clear),
    .push      (push),
    .push_data (opnd),
    .pop       (mac_en),
    .load      (ins || shift_in),
    .load_q    (fifo_load_q),
    .load_count(ins ? cnt_t'(1) : left_count),
    .head      (head),
    .count     (count),
    .upd_q     (upd_q),
    .upd_count (upd_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e <= '0;
    end else if (clear) begin
      e <= '0;
    end else if (ins) begin
      e.valid <= 1'b1;
      e.col   <= ins_col;
      e.psum  <= '0;
    end else if (shift_in) begin
      e <= left_entry;
    end else begin
      e <= upd_entry;
    end
  end

  // A push may coincide with shift_in (the pushed pair then leaves with this
  // PE's entry to the right neighbour); an insertion excludes both.
  a_ins_alone: assert property (@(posedge clk) disable iff (!rst_n)
    ins |-> !(push || shift_in));

endmodule
