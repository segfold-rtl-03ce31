// tb_mem_ctrl: the memory controller with its SelectA scheduler, on its own.
// Random A and B tiles are loaded into the metadata scratchpad exactly as the
// host would (A column-major with masks, B in DCSR form). The multicast
// channels are accepted at random, standing in for busy PE rows. Every
// accepted segment is multiplied, for each row it is sent to, by that row's
// A value, and summed into a C model; at sched_done this must equal the
// product computed directly from the dense tiles (so each (m,k) pair was
// dispatched exactly once, with the right A value and the full B row).
// Also checked every cycle: valid channels carry disjoint row sets, the
// columns inside a segment increase, and segments are never empty.
// The window must slide, several k must be chosen in one cycle and B rows
// must be multicast to several rows.
module tb_mem_ctrl;
  import segfold_pkg::*;
  localparam int R = 16, BRL = 4, SEG = 4;
  localparam int KMAX = 200;
  localparam int NMAX = 40;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        wr_en = 1'b0;
  wr_sel_t     wr_sel = WR_A_MASK;
  logic [15:0] wr_addr = '0;
  logic [31:0] wr_data = '0;
  logic [15:0] b_nrows = '0;
  logic        start = 1'b0;
  logic [BRL-1:0]                ch_valid;
  bseg_elem_t [BRL-1:0][SEG-1:0] ch_elems;
  logic [BRL-1:0][R-1:0]         ch_rows;
  logic [BRL-1:0]                ch_accept;
  val_t [R-1:0]                  row_a;
  logic running, sched_done, ev_multi_k, ev_reuse, ev_retire;
  logic [$clog2(R+1)-1:0] ev_pairs;

  mem_ctrl dut (.*);

  int checks = 0;
  int failures = 0;
  int n_multi = 0, n_reuse = 0, n_retire = 0, n_pairs = 0;

  int A   [R][KMAX];
  int B   [KMAX][NMAX];
  int ref_c [R][NMAX];
  int got [R][NMAX];
  int seen[R][NMAX];
  int acc_pct_now = 100;

  logic [BRL-1:0] acc_rand;
  always @(negedge clk) acc_rand = BRL'($urandom_range(0, 99) < acc_pct_now ? $urandom | $urandom : 0);
  assign ch_accept = ch_valid & acc_rand;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // sample the delivered segments just before the rising edge
  always begin
    @(negedge clk); #4;
    if (rst_n) begin
      logic [R-1:0] acc;
      acc = '0;
      n_multi += ev_multi_k; n_reuse += ev_reuse; n_retire += ev_retire; n_pairs += ev_pairs;
      for (int c = 0; c < BRL; c++) if (ch_valid[c]) begin
        check((acc & ch_rows[c]) == 0 && ch_rows[c] != 0, "channel row sets disjoint and non-empty");
        acc |= ch_rows[c];
        check(ch_elems[c][0].valid, "segment not empty");
        for (int j = 1; j < SEG; j++) if (ch_elems[c][j].valid)
          check(ch_elems[c][j-1].valid && ch_elems[c][j-1].col < ch_elems[c][j].col, "segment columns increase");
        if (ch_accept[c]) begin
          for (int m = 0; m < R; m++) if (ch_rows[c][m]) begin
            for (int j = 0; j < SEG; j++) if (ch_elems[c][j].valid) begin
              int n;
              n = int'(ch_elems[c][j].col);
              if (n >= NMAX) check(0, "column out of range");
              else begin
                got[m][n] += int'(row_a[m]) * int'(ch_elems[c][j].val);
                seen[m][n] = 1;
              end
            end
          end
        end
      end
    end
  end

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

  task automatic run_tile(int K, int N, int pa, int pb, int row_skew, int acc_pct);
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
    acc_pct_now = acc_pct;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    @(negedge clk);
    while (!sched_done) @(negedge clk);
    @(negedge clk);
    check(ch_valid == '0, "channels idle after sched_done");
    for (int m = 0; m < R; m++)
      for (int n = 0; n < N; n++) begin
        bit produced;
        produced = 0;
        for (int k = 0; k < K; k++) if (A[m][k] != 0 && B[k][n] != 0) produced = 1;
        check(seen[m][n] == int'(produced) && got[m][n] == ref_c[m][n],
              $sformatf("C[%0d][%0d] seen %0d got %0d expected %0d", m, n, seen[m][n], got[m][n], ref_c[m][n]));
      end
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run_tile(8, 12, 30, 40, 0, 100);
    run_tile(120, 30, 10, 20, 0, 70);
    run_tile(200, 40, 8, 15, 5, 40);
    run_tile(64, 20, 40, 30, 16, 90);
    $display("events multi_k %0d reuse %0d retire %0d pairs %0d", n_multi, n_reuse, n_retire, n_pairs);
    check(n_multi > 0 && n_reuse > 0 && n_retire > 64, "scheduling mechanisms used");
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
