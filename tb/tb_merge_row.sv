// tb_merge_row: random B elements are injected into a 4-PE merge row, at
// several positions per cycle, each at a legal position (its column is
// greater than the column held left of it, computed here from the row
// contents), often with the column already held there so that operand pairs
// queue in the PE FIFOs while insertions shift them.
// The testbench plays the scratchpad: it accepts spills and overflow
// elements (with random back-pressure) and sums them. At the end of each of
// 12 rounds (after which the row is cleared) the row contents plus the
// scratchpad model must hold exactly the per-column sums of the injected
// products, every column once, the row in increasing order.
// Shifts, spills and overflow elements must all have occurred.
module tb_merge_row;
  import segfold_pkg::*;
  localparam int P = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0;
  belem_t [P-1:0] inject = '0;
  logic [P-1:0] inj_ready, changed;
  logic spill_ready = 1, spill_valid, ovf_ready = 1, ovf_valid, idle;
  centry_t spill_entry;
  belem_t ovf_elem;
  centry_t [P-1:0] entries;
  logic ev_shift, ev_append;
  logic [2:0] ev_matches, ev_fwds;
  int checks = 0, failures = 0;
  int expect_sum [32];
  int spad_sum   [32];
  int spad_cnt   [32];
  int n_shift = 0, n_spill = 0, n_ovf = 0, n_match = 0;

  merge_row #(.P(P), .FIFO_DEPTH(2)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  // sampled shortly before each rising edge, after the inputs have settled
  always begin
    @(negedge clk);
    #4;
    if (rst_n) begin
    if (spill_valid) begin
      spad_sum[spill_entry.col] += int'(spill_entry.psum);
      spad_cnt[spill_entry.col] += 1;
      n_spill++;
    end
    if (ovf_valid) begin
      spad_sum[ovf_elem.col] += int'(ovf_elem.a) * int'(ovf_elem.b);
      if (spad_cnt[ovf_elem.col] == 0) spad_cnt[ovf_elem.col] = 1;
      n_ovf++;
    end
    if (ev_shift) n_shift++;
    n_match += int'(ev_matches);
    end
  end

  initial begin
    for (int i = 0; i < 32; i++) begin expect_sum[i] = 0; spad_sum[i] = 0; spad_cnt[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 12; round++) begin
    for (int it = 0; it < 150; it++) begin
      int col, s, a, b;
      @(negedge clk);
      inject = '0;
      spill_ready = ($urandom_range(0, 3) != 0);
      ovf_ready   = ($urandom_range(0, 3) != 0);
      #1;
      // try every position; a legal column for position s is greater than
      // the column held left of s; often reuse the column held at s (match)
      for (s = 0; s < P; s++) begin
        int lo;
        lo = (s == 0) ? 0 : (entries[s-1].valid ? int'(entries[s-1].col) + 1 : 99);
        if (lo <= 31 && $urandom_range(0, 2) != 0 && inj_ready[s]) begin
          case ($urandom_range(0, 2))
            0: col = entries[s].valid ? int'(entries[s].col) : $urandom_range(lo, 31);
            1: col = (entries[s].valid && int'(entries[s].col) > lo) ? $urandom_range(lo, int'(entries[s].col) - 1)
                                                                       : $urandom_range(lo, 31);
            default: col = $urandom_range(lo, 31);
          endcase
          a = $urandom_range(1, 7);
          b = $urandom_range(1, 7);
          inject[s] = '{valid: 1'b1, col: idx_t'(col), a: val_t'(a), b: val_t'(b)};
          expect_sum[col] += a * b;
        end
      end
      // ordering invariant of the row
      for (int p = 1; p < P; p++)
        if (entries[p].valid) chk(entries[p-1].valid && entries[p-1].col < entries[p].col, "row order");
    end
    @(negedge clk);
    inject = '0;
    spill_ready = 1;
    ovf_ready = 1;
    while (!idle) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int c = 0; c < 32; c++) begin
      int got, cnt;
      got = spad_sum[c];
      cnt = spad_cnt[c];
      for (int p = 0; p < P; p++) if (entries[p].valid && entries[p].col == idx_t'(c)) begin
        got += int'(entries[p].psum);
        cnt++;
      end
      if (expect_sum[c] != 0 || cnt != 0)
        chk(got == expect_sum[c] && cnt == 1, $sformatf("round %0d column %0d sum %0d expected %0d places %0d", round, c, got, expect_sum[c], cnt));
      expect_sum[c] = 0; spad_sum[c] = 0; spad_cnt[c] = 0;
    end
    // empty the row for the next round
    clear = 1;
    @(negedge clk);
    clear = 0;
    end
    chk(n_shift > 0, "shift occurred");
    chk(n_spill > 0, "spill occurred");
    chk(n_ovf > 0, "overflow element occurred");
    chk(n_match > 0, "match occurred");
    $display("shifts %0d spills %0d ovf %0d matches %0d", n_shift, n_spill, n_ovf, n_match);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
