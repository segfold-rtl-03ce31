// psum_spad: the per-row partial-sum scratchpad used for temporal folding.
//
// When a virtual row of C has more entries than the PE row has PEs, the
// entries pushed out of the last PE are kept here, and B elements whose
// column lies beyond the last PE's column are reduced here instead of in a PE.
// The paper gives the scratchpad's role and that each PE row owns one; its
// organisation is this design's choice: SPAD_N entries, each a (column,
// partial sum) pair, searched associatively, with its own multiply-accumulate
// for overflow elements. There is one access per cycle (the row's shared
// memory port): either a spill write or an overflow accumulate.
//
// Interface: spill_valid/ovf_valid are fire signals that the caller raises
// only while the matching ready is high, and never both at once. A spill
// takes the lowest free entry. An overflow element is added into the entry
// with the same column, or takes the lowest free entry if there is none.
// entries exposes the contents for draining; clear empties the scratchpad.
// full is raised if an element could not be placed (the tile was too large).
// Timing: all updates at the next clock edge; ready signals are combinational.
module psum_spad
  import segfold_pkg::*;
#(
  parameter int unsigned SPAD_N = 32
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clear,
  input  logic                   spill_valid,
  input  centry_t                spill_entry,
  output logic                   spill_ready,
  input  logic                   ovf_valid,
  input  belem_t                 ovf_elem,
  output logic                   ovf_ready,
  output centry_t [SPAD_N-1:0]   entries,
  output logic                   full
);
  centry_t [SPAD_N-1:0] mem;
  logic                 have_free, have_match;
  logic [$clog2(SPAD_N)-1:0] free_idx, match_idx;

  assign entries = mem;

  always_comb begin
    have_free  = 1'b0;
    free_idx   = '0;
    have_match = 1'b0;
    match_idx  = '0;
    for (int i = SPAD_N - 1; i >= 0; i--) begin
      if (!mem[i].valid) begin
        have_free = 1'b1;
        free_idx  = ($clog2(SPAD_N))'(i);
      end
      if (mem[i].valid && mem[i].col == ovf_elem.col) begin
        have_match = 1'b1;
        match_idx  = ($clog2(SPAD_N))'(i);
      end
    end
  end

  assign spill_ready = have_free;
  assign ovf_ready   = have_free || have_match;
  assign full        = !have_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem <= '0;
    end else if (clear) begin
      mem <= '0;
    end else if (spill_valid) begin
      mem[free_idx] <= spill_entry;
    end else if (ovf_valid) begin
      if (have_match) begin
        mem[match_idx].psum <= mem[match_idx].psum + acc_t'(ovf_elem.a) * acc_t'(ovf_elem.b);
      end else begin
        mem[free_idx].valid <= 1'b1;
        mem[free_idx].col   <= ovf_elem.col;
        mem[free_idx].psum  <= acc_t'(ovf_elem.a) * acc_t'(ovf_elem.b);
      end
    end
  end

  a_one_access: assert property (@(posedge clk) disable iff (!rst_n)
    !(spill_valid && ovf_valid));
  a_spill_ok: assert property (@(posedge clk) disable iff (!rst_n)
    spill_valid |-> have_free);
  a_ovf_ok: assert property (@(posedge clk) disable iff (!rst_n)
    ovf_valid |-> (have_free || have_match));

endmodule
