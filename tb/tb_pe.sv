// tb_pe: checks the merger comparison, insertion, matching pushes, the
// one-pair-per-cycle multiply-accumulate and taking over a left entry.
module tb_pe;
  import segfold_pkg::*;
  localparam int D = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, push = 0, ins = 0, shift_in = 0;
  idx_t b_col = '0, ins_col = '0;
  cmp_t cmp;
  opnd_t opnd = '0;
  centry_t left_entry = '0;
  opnd_t [D-1:0] left_q = '0;
  logic [1:0] left_count = '0;
  centry_t entry, upd_entry;
  opnd_t [D-1:0] upd_q;
  logic [1:0] upd_count;
  logic busy;
  int checks = 0, failures = 0;

  pe #(.FIFO_DEPTH(D)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  task automatic step();
    @(negedge clk);
    push = 0; ins = 0; shift_in = 0; clear = 0;
  endtask

  initial begin
    int exp_sum;
    repeat (2) @(negedge clk);
    rst_n = 1;
    b_col = 5; #1;
    chk(cmp == CMP_EMPTY, "empty slot");
    // insert column 5 with a=3, b=4
    ins = 1; ins_col = 5; opnd = '{a: 3, b: 4};
    step();
    chk(entry.valid && entry.col == 5 && entry.psum == 0, "inserted entry");
    b_col = 5; #1; chk(cmp == CMP_EQ, "b == c");
    b_col = 7; #1; chk(cmp == CMP_GT, "b > c");
    b_col = 2; #1; chk(cmp == CMP_LT, "b < c");
    // the MAC takes the queued pair in this cycle; push two more pairs
    exp_sum = 12;
    push = 1; opnd = '{a: -2, b: 7};
    step();
    chk(entry.psum == 12, "first product accumulated after one cycle");
    exp_sum += -14;
    push = 1; opnd = '{a: 6, b: -5};
    step();
    chk(entry.psum == exp_sum, "second product");
    exp_sum += -30;
    step();
    chk(entry.psum == exp_sum, "third product");
    chk(!busy, "FIFO drained");
    // random pushes, with a sum tracked here
    for (int i = 0; i < 200; i++) begin
      int a, b;
      a = $urandom_range(0, 20) - 10;
      b = $urandom_range(0, 20) - 10;
      push = 1; opnd = '{a: val_t'(a), b: val_t'(b)};
      exp_sum += a * b;
      step();
    end
    step();
    chk(entry.psum == exp_sum, "random accumulation");
    // take over a left entry together with its pending operand
    shift_in = 1;
    left_entry = '{valid: 1'b1, col: 16'd3, psum: 32'sd100};
    left_q = '0; left_q[0] = '{a: 2, b: 5}; left_count = 1;
    #1;
    chk(upd_entry.col == 5 && upd_entry.psum == exp_sum, "own entry offered to the right");
    step();
    chk(entry.col == 3 && entry.psum == 100, "left entry taken over");
    step();
    chk(entry.psum == 110, "pending operand of the left entry accumulated");
    clear = 1;
    step();
    chk(!entry.valid, "cleared");
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
