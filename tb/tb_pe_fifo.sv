// tb_pe_fifo: random push/pop/load/clear traffic against a queue model.
// Checks the head, the count and the post-update contents every cycle.
module tb_pe_fifo;
  import segfold_pkg::*;
  localparam int D = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear = 0, push = 0, pop = 0, load = 0;
  opnd_t push_data = '0;
  opnd_t [D-1:0] load_q = '0;
  logic [1:0] load_count = '0;
  opnd_t head;
  logic [1:0] count, upd_count;
  opnd_t [D-1:0] upd_q;
  int checks = 0, failures = 0;
  opnd_t model[$];

  pe_fifo #(.DEPTH(D)) dut (.*);

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      // check current state
      checks++;
      if (count != 2'(model.size()) || (model.size() > 0 && head != model[0])) begin
        failures++;
        if (failures < 10) $display("FAIL it %0d count %0d model %0d", it, count, model.size());
      end
      clear = ($urandom_range(0, 40) == 0);
      load  = !clear && ($urandom_range(0, 10) == 0);
      pop   = ($urandom_range(0, 2) != 0);
      push  = ($urandom_range(0, 1) == 1) && (model.size() - ((pop && model.size() > 0) ? 1 : 0) < D);
      push_data = opnd_t'($urandom);
      load_count = 2'($urandom_range(0, D));
      for (int i = 0; i < D; i++) load_q[i] = opnd_t'($urandom);
      #1;
      // model update
      if (pop && model.size() > 0) void'(model.pop_front());
      if (push) model.push_back(push_data);
      checks++;
      if (upd_count != 2'(model.size())) failures++;
      for (int i = 0; i < model.size(); i++) begin
        checks++;
        if (upd_q[i] != model[i]) failures++;
      end
      if (clear) model.delete();
      else if (load) begin
        model.delete();
        for (int i = 0; i < load_count; i++) model.push_back(load_q[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
