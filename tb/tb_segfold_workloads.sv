// tb_segfold_workloads: the accelerator at its default configuration on
// tiles of the synthetic workloads used in the SegFold evaluation: square
// random matrices of size 256, 512 and 1024 with densities 0.05 and 0.1. For
// each, one tile is run: the 16 rows of A that one pass of the PE array
// holds, against a 48-column slice of B (so a C row never exceeds the 16 PE
// plus 32 scratchpad entries of a PE row; at density 0.1 rows do reach all
// 48, filling the scratchpad exactly). The tile is loaded through the
// host write port; the drained C rows are compared with a dense product
// computed here, every entry exactly once, and the scratchpad-full flag must
// be raised exactly for the tiles that have a 48-entry C row. Cycles per
// multiply-accumulate are printed for each tile, and each of the design's
// mechanisms must occur.
module tb_segfold_workloads;
  import segfold_pkg::*;

  localparam int R = 16;
  localparam int KMAX = 1024;
  localparam int NMAX = 48;
  longint macs;

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

  task automatic run_tile(int K, int N, int pa, int pb);
    longint c0;
    int aptr, nrows, bptr, mask;
    c0 = perf.cycles;
    // generate
    for (int m = 0; m < R; m++)
      for (int k = 0; k < K; k++) begin
        int p;
        p = pa;
        A[m][k] = (int'($urandom_range(0, 999)) < p) ? rnd_val() : 0;
      end
    for (int k = 0; k < K; k++)
      for (int n = 0; n < N; n++)
        B[k][n] = (int'($urandom_range(0, 999)) < pb) ? rnd_val() : 0;
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
    // the scratchpad-full flag must be raised exactly when a C row uses all
    // 16 + 32 places
    begin
      int maxrow;
      maxrow = 0;
      for (int m = 0; m < R; m++) begin
        int cnt;
        cnt = 0;
        for (int n = 0; n < N; n++) begin
          bit pr;
          pr = 0;
          for (int k = 0; k < K; k++) if (A[m][k] != 0 && B[k][n] != 0) pr = 1;
          cnt += int'(pr);
        end
        if (cnt > maxrow) maxrow = cnt;
      end
      check(spad_overflow == (maxrow >= 48), $sformatf("spad_overflow %0d with longest C row %0d", spad_overflow, maxrow));
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
    macs = 0;
    for (int m = 0; m < R; m++)
      for (int k = 0; k < K; k++)
        if (A[m][k] != 0) for (int n = 0; n < N; n++) if (B[k][n] != 0) macs++;
    $display("tile K=%0d N=%0d density %0d/1000: %0d cycles for %0d MACs (%0d.%02d cycles per MAC)",
             K, N, pa, longint'(perf.cycles) - c0, macs,
             (longint'(perf.cycles) - c0) / (macs == 0 ? 1 : macs),
             ((longint'(perf.cycles) - c0) * 100 / (macs == 0 ? 1 : macs)) % 100);
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    // one tile (16 rows of A, a 48-column slice of C) of each synthetic
    // workload: sizes 256, 512, 1024 at densities 0.05 and 0.1
    run_tile(256, 48, 50, 50);
    run_tile(256, 48, 100, 100);
    run_tile(512, 48, 50, 50);
    run_tile(512, 48, 100, 100);
    run_tile(1024, 48, 50, 50);
    run_tile(1024, 48, 100, 100);
    $display("perf: cycles %0d pairs %0d multi_k %0d b_reuse %0d retires %0d shifts %0d appends %0d spills %0d spad_accums %0d ipm_offsets %0d pe_accums %0d forwards %0d",
             perf.cycles, perf.pairs, perf.multi_k, perf.b_reuse, perf.retires, perf.shifts,
             perf.appends, perf.spills, perf.spad_accums, perf.ipm_offsets, perf.pe_accums, perf.forwards);
    check(perf.multi_k     > 0, "SelectA never chose several k in one cycle");
    check(perf.b_reuse     > 0, "no B row was multicast to several rows");
    check(perf.retires     > 64, "window never slid");
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
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
