// segfold_top: the SegFold sparse-GEMM accelerator, one tile at a time.
//
// SegFold computes C = A x B for sparse A and B with the Segment dataflow.
// The memory controller keeps an active window over the K dimension and,
// every cycle, picks A elements (m,k) so that many rows m share one k (one B
// row feeds several PE rows) and no row m is picked twice. The chosen B rows
// are streamed in segments over the vector multicast network to the PE rows;
// PE row m owns row m of C. Inside a PE row, each B element enters the merge
// network at the position given by the Index-to-PE mapper and walks right
// until it finds its C column (accumulate) or the place where that column
// belongs (insert, shifting larger columns right). Entries that do not fit
// into the row's PEs go to the row's scratchpad (temporal folding).
//
// Operation: the host writes one tile (R rows of A, the matching B rows)
// into the metadata scratchpad through wr_*, sets b_nrows and pulses start.
// When all work is reduced, every PE row drains its C row on c_valid[m],
// c_col[m], c_val[m] (one entry per cycle per row, row m of the tile) and
// done pulses. perf counts the dataflow's events since reset.
//
// Parameters default to the paper's configuration: a 16 x 16 PE array,
// an active window of 32, 4 parallel B-row multicasts. Segment length,
// FIFO depth, scratchpad size, queue depth and the scratchpad capacity for
// the tile are this design's choices. Not included: the data cache and
// DRAM behind the memory controller (the host writes the tile directly), and
// spatial folding of long rows into neighbouring PE rows.
module segfold_top
  import segfold_pkg::*;
#(
  parameter int unsigned R          = 16,
  parameter int unsigned P          = 16,
  parameter int unsigned W          = 32,
  parameter int unsigned BRL        = 4,
  parameter int unsigned SEG        = 4,
  parameter int unsigned FIFO_DEPTH = 2,
  parameter int unsigned SPAD_N     = 32,
  parameter int unsigned QDEPTH     = 4,
  parameter int unsigned K_MAX      = 32768,
  parameter int unsigned A_NNZ_MAX  = 4096,
  parameter int unsigned B_NNZ_MAX  = 8192
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_en,
  input  wr_sel_t           wr_sel,
  input  logic [15:0]       wr_addr,
  input  logic [31:0]       wr_data,
  input  logic [15:0]       b_nrows,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [R-1:0]      c_valid,
  output idx_t [R-1:0]      c_col,
  output acc_t [R-1:0]      c_val,
  output logic              spad_overflow,
  output perf_t             perf
);
  // ---- memory controller -----------------------------------------------------------
  logic [BRL-1:0]                ch_valid, ch_accept;
  bseg_elem_t [BRL-1:0][SEG-1:0] ch_elems;
  logic [BRL-1:0][R-1:0]         ch_rows;
  val_t [R-1:0]                  row_a;
  logic                          running, sched_done;
  logic                          ev_multi_k, ev_reuse, ev_retire;
  logic [$clog2(R+1)-1:0]        ev_pairs;

  mem_ctrl #(
    .R(R), .W(W), .BRL(BRL), .SEG(SEG), .R_MAX(R),
    .K_MAX(K_MAX), .A_NNZ_MAX(A_NNZ_MAX), .B_NNZ_MAX(B_NNZ_MAX)
  ) u_mc (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_addr, .wr_data, .b_nrows, .start,
    .ch_valid, .ch_elems, .ch_rows, .ch_accept, .row_a,
    .running, .sched_done, .ev_multi_k, .ev_reuse, .ev_retire, .ev_pairs
  );

  // ---- vector multicast network ------------------------------------------------------
  logic [R-1:0]                  row_valid, row_ready;
  bseg_elem_t [R-1:0][SEG-1:0]   row_elems;
  val_t [R-1:0]                  row_seg_a;

  vec_multicast #(.R(R), .BRL(BRL), .SEG(SEG)) u_mcast (
    .ch_valid, .ch_elems, .ch_rows, .ch_accept,
    .row_a, .row_valid, .row_elems, .row_seg_a, .row_ready
  );

  // ---- PE rows ------------------------------------------------------------------------
  logic [R-1:0] row_idle, drain_done, spad_full;
  logic [R-1:0] ev_shift, ev_append, ev_spill, ev_ovf, ev_offset;
  logic [R-1:0][$clog2(P+1)-1:0] ev_matches, ev_fwds;
  logic         drain_start;

  for (genvar r = 0; r < R; r++) begin : g_row
    pe_row #(
      .P(P), .SEG(SEG), .FIFO_DEPTH(FIFO_DEPTH), .SPAD_N(SPAD_N), .QDEPTH(QDEPTH)
    ) u_row (
      .clk, .rst_n,
      .seg_valid  (row_valid[r]),
      .seg_elems  (row_elems[r]),
      .seg_a      (row_seg_a[r]),
      .seg_ready  (row_ready[r]),
      .drain_start(drain_start),
      .c_valid    (c_valid[r]),
      .c_col      (c_col[r]),
      .c_val      (c_val[r]),
      .drain_done (drain_done[r]),
      .idle       (row_idle[r]),
      .spad_full  (spad_full[r]),
      .ev_shift   (ev_shift[r]),
      .ev_append  (ev_append[r]),
      .ev_spill   (ev_spill[r]),
      .ev_ovf     (ev_ovf[r]),
      .ev_offset  (ev_offset[r]),
      .ev_matches (ev_matches[r]),
      .ev_fwds    (ev_fwds[r])
    );
  end

  // ---- tile sequencing -----------------------------------------------------------------
  typedef enum logic [1:0] { S_IDLE, S_RUN, S_WAIT, S_DRAIN } state_t;
  state_t state;

  assign busy        = (state != S_IDLE);
  assign drain_start = (state == S_WAIT) && (row_idle == '1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      done          <= 1'b0;
      spad_overflow <= 1'b0;
    end else begin
      done <= 1'b0;
      if (spad_full != '0) spad_overflow <= 1'b1;
      unique case (state)
        S_IDLE:  if (start) begin
                   state         <= S_RUN;
                   spad_overflow <= 1'b0;
                 end
        S_RUN:   if (sched_done) state <= S_WAIT;
        S_WAIT:  if (drain_start) state <= S_DRAIN;
        S_DRAIN: if (drain_done[0]) begin
                   state <= S_IDLE;
                   done  <= 1'b1;
                 end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---- event counters -------------------------------------------------------------------
  logic [31:0] ev_mt, ev_fw;
  always_comb begin
    ev_mt = '0;
    ev_fw = '0;
    for (int r = 0; r < R; r++) begin
      ev_mt = ev_mt + 32'(ev_matches[r]);
      ev_fw = ev_fw + 32'(ev_fwds[r]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf <= '0;
    end else begin
      perf.cycles       <= perf.cycles + 32'(busy);
      perf.pairs        <= perf.pairs + 32'(ev_pairs);
      perf.multi_k      <= perf.multi_k + 32'(ev_multi_k);
      perf.b_reuse      <= perf.b_reuse + 32'(ev_reuse);
      perf.retires      <= perf.retires + 32'(ev_retire);
      perf.shifts       <= perf.shifts + 32'($countones(ev_shift));
      perf.appends      <= perf.appends + 32'($countones(ev_append));
      perf.spills       <= perf.spills + 32'($countones(ev_spill));
      perf.spad_accums  <= perf.spad_accums + 32'($countones(ev_ovf));
      perf.ipm_offsets  <= perf.ipm_offsets + 32'($countones(ev_offset));
      perf.pe_accums    <= perf.pe_accums + ev_mt;
      perf.forwards     <= perf.forwards + ev_fw;
    end
  end

endmodule
