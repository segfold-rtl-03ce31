// pe_row: one row of the SegFold PE array with its row-local memory.
//
// A PE row owns one virtual row of C (one row m of the A tile) for the whole
// tile. It is built from:
//   * row_shifter : queues incoming B-row segments and aligns them to the
//                   merge network at the position the IPM returns;
//   * ipm         : the Index-to-PE mapper (binary-search LUT tree);
//   * merge_row   : P PEs with their switches, the adaptive merge network;
//   * psum_spad   : the scratchpad that takes entries and elements that do
//                   not fit into the P PEs (temporal folding).
// The IPM and the scratchpad form the row-local memory of the paper's
// Fig. 5(b); the scratchpad has one access per cycle.
//
// C drain: after the tile's last element has been reduced (row idle), a
// pulse on drain_start makes the row emit its C entries on c_valid/c_col/
// c_val, one slot per cycle: first the P PE positions, which are in column
// order, then the SPAD_N scratchpad slots, which hold the largest columns
// in no particular order. Empty slots are skipped without output. After the
// last slot the PEs, the scratchpad and the IPM are cleared and drain_done
// pulses. The sequential drain over a shared bus is this design's choice;
// the paper only shows a shared load/store-C bus per PE row.
module pe_row
  import segfold_pkg::*;
#(
  parameter int unsigned P          = 16,
  parameter int unsigned SEG        = 4,
  parameter int unsigned FIFO_DEPTH = 2,
  parameter int unsigned SPAD_N     = 32,
  parameter int unsigned QDEPTH     = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // segment input from the vector multicast network
  input  logic                  seg_valid,
  input  bseg_elem_t [SEG-1:0]  seg_elems,
  input  val_t                  seg_a,
  output logic                  seg_ready,
  // C drain
  input  logic                  drain_start,
  output logic                  c_valid,
  output idx_t                  c_col,
  output acc_t                  c_val,
  output logic                  drain_done,
  // status and events
  output logic                  idle,
  output logic                  spad_full,
  output logic                  ev_shift,
  output logic                  ev_append,
  output logic                  ev_spill,
  output logic                  ev_ovf,
  output logic                  ev_offset,
  output logic [$clog2(P+1)-1:0] ev_matches,
  output logic [$clog2(P+1)-1:0] ev_fwds
);
  localparam int unsigned NSLOT = P + SPAD_N;
  typedef logic [$clog2(NSLOT)-1:0] slot_t;

  logic                 lk_valid, res_valid;
  idx_t                 lk_col;
  logic [$clog2(P)-1:0] res_pos;
  belem_t  [P-1:0]      inject;
  logic    [P-1:0]      inj_ready, changed;
  centry_t [P-1:0]      entries;
  centry_t [SPAD_N-1:0] spad_entries;
  logic                 spill_ready, spill_valid, ovf_ready, ovf_valid;
  centry_t              spill_entry;
  belem_t               ovf_elem;
  logic                 rs_idle, mr_idle, upd_pending, clear;

  logic  draining;
  slot_t dslot;

  assign clear = draining && (dslot == slot_t'(NSLOT - 1));

  row_shifter #(.P(P), .SEG(SEG), .QDEPTH(QDEPTH)) u_shift (
    .clk, .rst_n,
    .seg_valid, .seg_elems, .seg_a, .seg_ready,
    .lk_valid, .lk_col, .res_valid, .res_pos,
    .inject, .inj_ready,
    .idle(rs_idle), .ev_offset
  );

  ipm #(.P(P)) u_ipm (
    .clk, .rst_n, .flush(clear),
    .lk_valid, .lk_col, .res_valid, .res_pos,
    .changed, .entries, .upd_pending
  );

  merge_row #(.P(P), .FIFO_DEPTH(FIFO_DEPTH)) u_merge (
    .clk, .rst_n, .clear,
    .inject, .inj_ready,
    .spill_ready, .spill_valid, .spill_entry,
    .ovf_ready, .ovf_valid, .ovf_elem,
    .entries, .changed, .idle(mr_idle),
    .ev_shift, .ev_append, .ev_matches, .ev_fwds
  );

  psum_spad #(.SPAD_N(SPAD_N)) u_spad (
    .clk, .rst_n, .clear,
    .spill_valid, .spill_entry, .spill_ready,
    .ovf_valid, .ovf_elem, .ovf_ready,
    .entries(spad_entries), .full(spad_full)
  );

  assign ev_spill = spill_valid;
  assign ev_ovf   = ovf_valid;
  // The IPM's pending updates do not affect results; they are not waited for.
  assign idle     = rs_idle && mr_idle && !seg_valid && !draining;

  // ---- C drain ---------------------------------------------------------------
  centry_t cur;
  always_comb begin
    cur = '0;
    if (dslot < slot_t'(P)) cur = entries[dslot[$clog2(P)-1:0]];
    else                    cur = spad_entries[($clog2(SPAD_N))'(dslot - slot_t'(P))];
  end

  assign c_valid    = draining && cur.valid;
  assign c_col      = cur.col;
  assign c_val      = cur.psum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      draining   <= 1'b0;
      dslot      <= '0;
      drain_done <= 1'b0;
    end else begin
      drain_done <= 1'b0;
      if (!draining) begin
        if (drain_start) begin
          draining <= 1'b1;
          dslot    <= '0;
        end
      end else if (dslot == slot_t'(NSLOT - 1)) begin
        draining   <= 1'b0;
        drain_done <= 1'b1;
      end else begin
        dslot <= dslot + slot_t'(1);
      end
    end
  end

  a_drain_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    drain_start |-> rs_idle && mr_idle);

endmodule
