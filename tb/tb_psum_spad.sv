// tb_psum_spad: spills and overflow elements against a column -> sum model.
// Checks that an overflow element lands on the entry with its column or a new
// one, that readiness follows free space and matches, and that clear empties.
module tb_psum_spad;
  import segfold_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, spill_valid = 0, ovf_valid = 0;
  centry_t spill_entry = '0;
  belem_t ovf_elem = '0;
  logic spill_ready, ovf_ready, full;
  centry_t [N-1:0] entries;
  int checks = 0, failures = 0;
  int model_sum[64];
  bit model_has[64];

  psum_spad #(.SPAD_N(N)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  function automatic int n_used();
    int c = 0;
    for (int i = 0; i < 64; i++) if (model_has[i]) c++;
    return c;
  endfunction

  initial begin
    for (int i = 0; i < 64; i++) begin model_sum[i] = 0; model_has[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      int col, a, b;
      bit do_spill;
      @(negedge clk);
      spill_valid = 0; ovf_valid = 0; clear = 0;
      if (it % 300 == 299) begin
        clear = 1;
        for (int i = 0; i < 64; i++) begin model_sum[i] = 0; model_has[i] = 0; end
        continue;
      end
      col = $urandom_range(0, 11);
      do_spill = ($urandom_range(0, 3) == 0);
      if (do_spill) begin
        col = 20 + it % 40;
        if (col > 63) col = 63;
      end
      a = $urandom_range(0, 10) - 5;
      b = $urandom_range(0, 10) - 5;
      spill_entry = '{valid: 1'b1, col: idx_t'(col), psum: acc_t'(a * 100 + b)};
      ovf_elem = '{valid: 1'b1, col: idx_t'(col), a: val_t'(a), b: val_t'(b)};
      #1;
      chk(spill_ready == (n_used() < N), "spill_ready follows free space");
      chk(ovf_ready == (n_used() < N || model_has[col]), "ovf_ready follows free space or match");
      if (do_spill && !model_has[col] && spill_ready) begin
        spill_valid = 1;
        model_has[col] = 1;
        model_sum[col] = a * 100 + b;
      end else if (!do_spill && ovf_ready) begin
        ovf_valid = 1;
        model_has[col] = 1;
        model_sum[col] += a * b;
      end
      @(posedge clk); #1;
      for (int c = 0; c < 64; c++) begin
        int cnt, sum;
        cnt = 0; sum = 0;
        for (int i = 0; i < N; i++) if (entries[i].valid && entries[i].col == idx_t'(c)) begin
          cnt++;
          sum = int'(entries[i].psum);
        end
        if (model_has[c]) chk(cnt == 1 && sum == model_sum[c], $sformatf("column %0d", c));
        else chk(cnt == 0, $sformatf("column %0d present", c));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
