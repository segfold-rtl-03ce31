// tb_segfold_top: end-to-end test of the SegFold accelerator at its default
// configuration (16 x 16 PEs, window 32, 4 multicast channels).
//
// Several tiles are generated with $urandom: a sparse A tile of 16 rows by K
// columns and a sparse B of K rows by N columns, written into the metadata
// scratchpad (A column-major with masks, B in DCSR form). After start, the
// drained C rows are collected and compared with a product computed here
// from the same dense copies. Every C entry must appear exactly once and
// with the right value; no C nonzero may be missing.
//
// The tiles are chosen so that every mechanism occurs: B-row reuse and
// several k per cycle in SelectA, window slots retiring and refilling (K
// well above the window), IPM offsets, insertions with shifts and appends,
// and, for the wide tiles, spills into the row scratchpads and reduction of
// overflow elements there. Each of these counters must be non-zero at the end.
module tb_segfold_top;
  import segfold_pkg::*;

  localparam int R = 16;
  localparam int KMAX = 160;
  localparam int NMAX = 48;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        wr_en = 1'b0;
  wr_sel_t     wr_sel = WR_A_MASK;
  logic [15:0] wr_addr = '0;
  logic [31:0] wr_data = '0;
  logic [15:0] b_nrows = '0;
  logic        start = 1'b0;
  logic        busy, done, spad_overflow;
  logic [R-1:0] c_valid;
  idx_t [R-1:0] c_col;
  acc_t [R-1:0] c_val;
  perf_t       perf;

  segfold_top dut (
    .clk, .rst_n, .wr_en, .wr_sel, .wr_addr, .wr_data, .b_nrows, .start,
    .busy, .done, .c_valid, .c_col, .c_val, .spad_overflow, .perf
  );

  int checks = 0;
  int failures = 0;

  int A   [R][KMAX];
  int B   [KMAX][NMAX];
  int ref_c [R][NMAX];
  int got [R][NMAX];
  int seen[R][NMAX];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic wr(wr_sel_t sel, int addr, int data);
    @(negedge clk);
    wr_en   = 1'b1;
    wr_sel  = sel;
    wr_addr = 16'(addr);
    wr_data = 32'(data);
    @(negedge clk);
    wr_en   = 1'b0;
  endtask

  function automatic int rnd_val();
    int v;
    v = int'($urandom_range(1, 9));
    if ($urandom_range(0, 1) == 1) v = -v;
    return v;
  endfunction

  task automatic run_tile(int K, int N, int pa, int pb, int row_skew);
    int aptr, nrows, bptr, mask;
    // generate
    for (int m = 0; m < R; m++)
      for (int k = 0; k < K; k++) begin
        int p;
        p = (m < row_skew) ? pa * 3 : pa;
        A[m][k] = (int'($urandom_range(0, 99)) < p) ? rnd_val() : 0;
      end
    for (int k = 0; k < K; k++)
      for (int n = 0; n < N; n++)
        B[k][n] = (int'($urandom_range(0, 99)) < pb) ? rnd_val() : 0;
    for (int m = 0; m < R; m++)
      for (int n = 0; n < NMAX; n++) begin
        ref_c[m][n] = 0;
        got[m][n]   = 0;
        seen[m][n]  = 0;
        for (int k = 0; k < K; k++) if (n < N) ref_c[m][n] += A[m][k] * B[k][n];
      end
    // load A, column-major
    aptr = 0;
    for (int k = 0; k < K; k++) begin
      mask = 0;
      wr(WR_A_PTR, k, aptr);
      for (int m = 0; m < R; m++) if (A[m][k] != 0) begin
        mask |= (1 << m);
        wr(WR_A_VAL, aptr, A[m][k] & 16'hffff);
        aptr++;
      end
      wr(WR_A_MASK, k, mask);
    end
    // load B as DCSR
    nrows = 0;
    bptr  = 0;
    for (int k = 0; k < K; k++) begin
      int cnt;
      cnt = 0;
      for (int n = 0; n < N; n++) if (B[k][n] != 0) cnt++;
      if (cnt > 0) begin
        wr(WR_B_ROW, nrows, k);
        wr(WR_B_PTR, nrows, bptr);
        for (int n = 0; n < N; n++) if (B[k][n] != 0) begin
          wr(WR_B_COL, bptr, n);
          wr(WR_B_VAL, bptr, B[k][n] & 16'hffff);
          bptr++;
        end
        nrows++;
      end
    end
    wr(WR_B_PTR, nrows, bptr);
    b_nrows = 16'(nrows);
    // run
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin
      @(negedge clk);
      for (int m = 0; m < R; m++) if (c_valid[m]) begin
        if (int'(c_col[m]) < NMAX) begin
          got[m][c_col[m]]  = int'(c_val[m]);
          seen[m][c_col[m]] += 1;
        end else begin
          check(0, $sformatf("row %0d column %0d out of range", m, c_col[m]));
        end
      end
    end
    // compare
    for (int m = 0; m < R; m++)
      for (int n = 0; n < N; n++) begin
        bit produced;
        produced = 0;
        for (int k = 0; k < K; k++) if (A[m][k] != 0 && B[k][n] != 0) produced = 1;
        if (produced) begin
          check(seen[m][n] == 1 && got[m][n] == ref_c[m][n],
                $sformatf("C[%0d][%0d] seen %0d got %0d expected %0d", m, n, seen[m][n], got[m][n], ref_c[m][n]));
        end else begin
          check(seen[m][n] == 0, $sformatf("C[%0d][%0d] produced without a product", m, n));
        end
      end
    check(!spad_overflow, "scratchpad filled up");
    $display("tile K=%0d N=%0d: cycles so far %0d pairs %0d shifts %0d spills %0d spad_accums %0d",
             K, N, perf.cycles, perf.pairs, perf.shifts, perf.spills, perf.spad_accums);
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run_tile(8, 12, 30, 40, 0);      // small tile
    run_tile(96, 24, 10, 20, 0);     // window slides over K
    run_tile(128, 44, 12, 25, 4);    // wide rows: spills and scratchpad reduction
    run_tile(160, 40, 6, 15, 2);
    $display("perf: cycles %0d pairs %0d multi_k %0d b_reuse %0d retires %0d shifts %0d appends %0d spills %0d spad_accums %0d ipm_offsets %0d pe_accums %0d forwards %0d",
             perf.cycles, perf.pairs, perf.multi_k, perf.b_reuse, perf.retires, perf.shifts,
             perf.appends, perf.spills, perf.spad_accums, perf.ipm_offsets, perf.pe_accums, perf.forwards);
    check(perf.multi_k     > 0, "SelectA never chose several k in one cycle");
    check(perf.b_reuse     > 0, "no B row was multicast to several rows");
    check(perf.retires     > 32, "window never slid");
    check(perf.shifts      > 0, "no insertion with shift");
    check(perf.appends     > 0, "no append");
    check(perf.spills      > 0, "no spill to the scratchpad");
    check(perf.spad_accums > 0, "no reduction in the scratchpad");
    check(perf.ipm_offsets > 0, "IPM never placed a segment right of position 0");
    check(perf.pe_accums   > 0, "no accumulation in a PE");
    check(perf.forwards    > 0, "no forward in the merge network");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
