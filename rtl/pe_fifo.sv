// pe_fifo: the FIFO buffer inside each PE that holds matched-but-not-yet-
// consumed operand pairs (A value, B value) until the PE's multiply-
// accumulate unit takes them, one per cycle.
//
// Besides push and pop, the whole FIFO can be loaded in one cycle from the
// left neighbour's FIFO. The merge network uses this when an insertion shifts
// every C* entry to its right by one position: an entry travels together with
// its pending operands, so a shift never loses or misdirects a product.
//
// Timing: upd_q/upd_count show the contents after this cycle's pop and push;
// they are what a right neighbour loads in a shift, and what this FIFO holds
// next cycle when neither load nor clear is asserted. Priority: clear, then
// load, then pop/push. A push into a full FIFO is dropped and flagged by an
// assertion; the PE row never pushes when it is full (count < DEPTH is checked
// there). The paper gives the FIFO's purpose, not its depth; the depth is an
// assumption of this design.
module pe_fifo
  import segfold_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clear,
  input  logic                        push,
  input  opnd_t                       push_data,
  input  logic                        pop,
  input  logic                        load,
  input  opnd_t [DEPTH-1:0]           load_q,
  input  logic [$clog2(DEPTH+1)-1:0]  load_count,
  output opnd_t                       head,
  output logic [$clog2(DEPTH+1)-1:0]  count,
  output opnd_t [DEPTH-1:0]           upd_q,
  output logic [$clog2(DEPTH+1)-1:0]  upd_count
);
  typedef logic [$clog2(DEPTH+1)-1:0] cnt_t;

  opnd_t [DEPTH-1:0] q;
  cnt_t              cnt;

  assign head  = q[0];
  assign count = cnt;

  always_comb begin
    cnt_t c;
    upd_q = q;
    c     = cnt;
    if (pop && c != '0) begin
      for (int i = 0; i < DEPTH - 1; i++) upd_q[i] = upd_q[i+1];
      c = c - cnt_t'(1);
    end
    if (push && c < cnt_t'(DEPTH)) begin
      upd_q[c] = push_data;
      c = c + cnt_t'(1);
    end
    upd_count = c;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q   <= '0;
      cnt <= '0;
    end else if (clear) begin
      cnt <= '0;
    end else if (load) begin
      q   <= load_q;
      cnt <= load_count;
    end else begin
      q   <= upd_q;
      cnt <= upd_count;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (push && !pop && !clear && !load) |-> cnt < cnt_t'(DEPTH));

endmodule
