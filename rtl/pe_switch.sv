// pe_switch: the switch (router) that sits beside every PE and holds the B
// element currently visiting that merge-network position.
//
// Each cycle the element is compared with the PE's C* column by the PE's
// merger (cmp input) and the switch decides:
//   b == c      -> match: the element is consumed by this PE;
//   b <  c or
//   slot empty  -> request an insertion here (ins_req); it leaves when the row
//                  grants it (ins_grant);
//   b >  c      -> forward to the next position if that one can take it
//                  (down_ready), else wait.
// A new element enters from the left neighbour (from_left) or from the row
// shifter (inject); the PE row never offers both in one cycle, and offers
// neither unless free_next is set.
//
// This design implements the default, rightward direction of the four-port
// router only; see the PE-row description for how overflow is handled instead
// of spatial folding.
//
// Timing: decisions are combinational on the registered element; the element
// moves at the next clock edge, so a forward costs one cycle per position.
module pe_switch
  import segfold_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  belem_t from_left,
  input  belem_t inject,
  input  cmp_t   cmp,
  input  logic   ins_grant,
  input  logic   down_ready,
  output belem_t elem,
  output logic   match,
  output logic   ins_req,
  output logic   fwd,
  output logic   leaving,
  output logic   free_next
);
  belem_t e;

  assign elem      = e;
  assign match     = e.valid && (cmp == CMP_EQ);
  assign ins_req   = e.valid && (cmp == CMP_LT || cmp == CMP_EMPTY);
  assign fwd       = e.valid && (cmp == CMP_GT) && down_ready;
  assign leaving   = match || (ins_req && ins_grant) || fwd;
  assign free_next = !e.valid || leaving;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)               e <= '0;
    else if (clear)           e <= '0;
    else if (from_left.valid) e <= from_left;
    else if (inject.valid)    e <= inject;
    else if (leaving)         e <= '0;
  end

  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
    (from_left.valid || inject.valid) |-> free_next && !(from_left.valid && inject.valid));

endmodule
