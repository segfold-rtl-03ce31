// tb_vec_multicast: random channel requests with disjoint row sets, random
// segments, A values and row readiness are applied to the multicast crossbar.
// A channel must be accepted exactly when it is valid and all its rows are
// ready; each row must receive the segment of the accepted channel that names
// it (and nothing otherwise), together with its own A value.
module tb_vec_multicast;
  import segfold_pkg::*;
  localparam int R = 16, BRL = 4, SEG = 4;
  logic [BRL-1:0]                ch_valid;
  bseg_elem_t [BRL-1:0][SEG-1:0] ch_elems;
  logic [BRL-1:0][R-1:0]         ch_rows;
  logic [BRL-1:0]                ch_accept;
  val_t [R-1:0]                  row_a;
  logic [R-1:0]                  row_valid;
  bseg_elem_t [R-1:0][SEG-1:0]   row_elems;
  val_t [R-1:0]                  row_seg_a;
  logic [R-1:0]                  row_ready;
  int checks = 0, failures = 0, n_acc = 0, n_multi = 0;

  vec_multicast #(.R(R), .BRL(BRL), .SEG(SEG)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  initial begin
    for (int it = 0; it < 20000; it++) begin
      int owner[R];
      // each row is given to one random channel or none
      ch_rows = '0;
      for (int r = 0; r < R; r++) begin
        owner[r] = $urandom_range(0, BRL);
        if (owner[r] < BRL) ch_rows[owner[r]][r] = 1'b1;
      end
      ch_valid = BRL'($urandom);
      for (int c = 0; c < BRL; c++)
        for (int j = 0; j < SEG; j++)
          ch_elems[c][j] = '{valid: 1'($urandom), col: idx_t'($urandom), val: val_t'($urandom)};
      for (int r = 0; r < R; r++) row_a[r] = val_t'($urandom);
      row_ready = ($urandom_range(0, 1) == 0) ? '1 : R'($urandom | $urandom);
      #1;
      for (int c = 0; c < BRL; c++) begin
        bit exp;
        exp = ch_valid[c] && ((ch_rows[c] & ~row_ready) == 0);
        chk(ch_accept[c] == exp, $sformatf("accept ch %0d", c));
        if (exp) begin n_acc++; if ($countones(ch_rows[c]) > 1) n_multi++; end
      end
      for (int r = 0; r < R; r++) begin
        bit ev;
        ev = owner[r] < BRL && ch_valid[owner[r]] && ((ch_rows[owner[r]] & ~row_ready) == 0);
        chk(row_valid[r] == ev, $sformatf("row_valid %0d", r));
        if (ev) chk(row_elems[r] == ch_elems[owner[r]], $sformatf("row %0d segment", r));
        chk(row_seg_a[r] == row_a[r], "row A value");
      end
      #9;
    end
    chk(n_acc > 1000 && n_multi > 1000, $sformatf("accepts %0d multicasts %0d", n_acc, n_multi));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
