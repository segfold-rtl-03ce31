// tb_ipm: first the worked example of the paper (a 16-position row, columns
// 0 2 3 4 5 6 8 9 10 at positions 0..8, lookup of b = 11 ends at position 8),
// with the pipeline latency of three cycles checked. Then random rows: after
// the update queue has drained, every lookup must return the position that a
// search written here over the same columns returns, and that position must
// be legal (all columns left of it smaller than b). Lookups issued while
// updates are still pending must also be legal.
module tb_ipm;
  import segfold_pkg::*;
  localparam int P = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic flush = 0, lk_valid = 0, res_valid, upd_pending;
  idx_t lk_col = '0;
  logic [3:0] res_pos;
  logic [P-1:0] changed = '0;
  centry_t [P-1:0] entries = '0;
  int checks = 0, failures = 0;

  ipm #(.P(P)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  // search over the row as the tree does it: 3 levels, leaf not compared
  function automatic int ref_search(int b);
    int lo, hi, node;
    node = 0;
    for (int l = 0; l < 3; l++) begin
      int pos;
      pos = (2 * node + 1) * (1 << (3 - l)) - 1;
      if (entries[pos].valid && b > int'(entries[pos].col)) node = 2 * node + 1;
      else node = 2 * node;
    end
    return 2 * node;
  endfunction

  function automatic bit legal(int b, int s);
    for (int i = 0; i < s; i++) if (entries[i].valid && int'(entries[i].col) >= b) return 0;
    return 1;
  endfunction

  task automatic lookup(int b, output int pos, output int lat);
    @(negedge clk);
    lk_valid = 1; lk_col = idx_t'(b);
    @(negedge clk);
    lk_valid = 0;
    lat = 1;
    while (!res_valid) begin @(negedge clk); lat++; end
    pos = int'(res_pos);
  endtask

  task automatic load_row(int n, int base);
    int c;
    c = base;
    for (int p = 0; p < P; p++) begin
      if (p < n) begin
        c += $urandom_range(1, 3);
        entries[p] = '{valid: 1'b1, col: idx_t'(c), psum: '0};
      end else entries[p] = '0;
    end
  endtask

  initial begin
    int cols[9] = '{0, 2, 3, 4, 5, 6, 8, 9, 10};
    int pos, lat;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < P; p++) entries[p] = (p < 9) ? '{valid: 1'b1, col: idx_t'(cols[p]), psum: '0} : '0;
    changed = '1;
    @(negedge clk);
    changed = '0;
    while (upd_pending) @(negedge clk);
    lookup(11, pos, lat);
    chk(pos == 8, $sformatf("paper example: b=11 -> %0d, expected 8", pos));
    chk(lat == 3, $sformatf("lookup latency %0d, expected 3", lat));
    lookup(1, pos, lat);
    chk(pos == 0, "b=1 -> 0");
    lookup(7, pos, lat);
    chk(legal(7, pos), "b=7 legal");
    // random rows
    for (int it = 0; it < 300; it++) begin
      int b;
      @(negedge clk);
      if (it % 10 == 0) begin
        // a shift: columns only decrease at each position
        if (it % 50 == 0) begin
          flush = 1; @(negedge clk); flush = 0;
          load_row($urandom_range(0, P), 0);
        end else begin
          for (int p = P - 1; p > 0; p--) if (entries[p-1].valid) entries[p] = entries[p-1];
          if (entries[0].valid && entries[0].col > 0) entries[0].col = entries[0].col - 1;
        end
        changed = '1;
        @(negedge clk);
        changed = '0;
      end
      b = $urandom_range(0, 50);
      lookup(b, pos, lat);
      chk(legal(b, pos), $sformatf("legal start for b=%0d got %0d", b, pos));
      if (!upd_pending) begin
        lookup(b, pos, lat);
        chk(pos == ref_search(b), $sformatf("b=%0d got %0d expected %0d", b, pos, ref_search(b)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
