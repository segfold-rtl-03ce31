// tb_pe_switch: drives the switch through all merger outcomes and checks
// the match / insertion request / forward decisions and the element register.
module tb_pe_switch;
  import segfold_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0;
  belem_t from_left = '0, inject = '0, elem;
  cmp_t cmp = CMP_EMPTY;
  logic ins_grant = 0, down_ready = 0;
  logic match, ins_req, fwd, leaving, free_next;
  int checks = 0, failures = 0;

  pe_switch dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", s); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    #1 chk(free_next && !match && !ins_req && !fwd, "empty switch");
    inject = '{valid: 1'b1, col: 16'd9, a: 16'sd2, b: 16'sd3};
    @(negedge clk); inject = '0;
    chk(elem.valid && elem.col == 9, "injected element held");
    // b > c but downstream busy: wait
    cmp = CMP_GT; down_ready = 0; #1;
    chk(!fwd && !free_next, "blocked forward holds");
    @(negedge clk);
    chk(elem.valid, "still held");
    down_ready = 1; #1;
    chk(fwd && leaving && free_next, "forward when downstream ready");
    // a new element from the left arrives in the same cycle
    from_left = '{valid: 1'b1, col: 16'd4, a: 16'sd1, b: 16'sd1};
    @(negedge clk); from_left = '0;
    chk(elem.col == 4, "element from the left taken");
    cmp = CMP_LT; ins_grant = 0; #1;
    chk(ins_req && !leaving, "insertion request waits for grant");
    ins_grant = 1; #1;
    chk(leaving, "granted insertion leaves");
    @(negedge clk); ins_grant = 0;
    chk(!elem.valid, "switch empty after insertion");
    inject = '{valid: 1'b1, col: 16'd6, a: 16'sd1, b: 16'sd1};
    @(negedge clk); inject = '0;
    cmp = CMP_EQ; #1;
    chk(match && leaving && !ins_req && !fwd, "match consumes");
    @(negedge clk);
    chk(!elem.valid, "empty after match");
    cmp = CMP_EMPTY;
    inject = '{valid: 1'b1, col: 16'd6, a: 16'sd1, b: 16'sd1};
    @(negedge clk); inject = '0;
    #1 chk(ins_req, "empty slot requests insertion");
    clear = 1;
    @(negedge clk); clear = 0;
    chk(!elem.valid, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
