// tb_select_a: random active windows (random valid slots, masks, free rows
// and free channel counts) are applied to the SelectA scheduler, with R_MAX
// set below R so the pair limit is exercised. A reference model of the greedy
// scan in the testbench (slot order, each row at most once, at most
// n_free_ch distinct k, at most R_MAX pairs) gives the expected take sets and
// selected slot list, which must match the DUT exactly.
module tb_select_a;
  localparam int W = 32, R = 16, R_MAX = 12, BRL = 4;
  logic [W-1:0]                  slot_valid;
  logic [W-1:0][R-1:0]           slot_mask;
  logic [R-1:0]                  row_free;
  logic [$clog2(BRL+1)-1:0]      n_free_ch;
  logic [W-1:0][R-1:0]           take;
  logic [BRL-1:0]                sel_valid;
  logic [BRL-1:0][$clog2(W)-1:0] sel_slot;
  int checks = 0, failures = 0;
  int multi_row = 0, capped = 0;

  select_a #(.W(W), .R(R), .R_MAX(R_MAX), .BRL(BRL)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  initial begin
    for (int it = 0; it < 20000; it++) begin
      logic [W-1:0][R-1:0] e_take;
      logic [BRL-1:0]      e_sv;
      int                  e_ss[BRL];
      logic [R-1:0]        used;
      int                  nk, nsel;
      slot_valid = {$urandom, $urandom} >> $urandom_range(0, 32);
      for (int w = 0; w < W; w++) begin
        slot_mask[w] = R'($urandom);
        if ($urandom_range(0, 2) == 0) slot_mask[w] = slot_mask[w] & R'($urandom);
        if ($urandom_range(0, 3) == 0) slot_mask[w] = '0;
      end
      row_free  = ($urandom_range(0, 3) == 0) ? R'($urandom) : '1;
      n_free_ch = 3'($urandom_range(0, BRL));
      #1;
      // reference: greedy scan
      e_take = '0; e_sv = '0; used = '0; nk = 0; nsel = 0;
      for (int i = 0; i < BRL; i++) e_ss[i] = 0;
      for (int w = 0; w < W; w++) begin
        logic [R-1:0] av;
        av = slot_mask[w] & ~used & row_free;
        if (slot_valid[w] && av != 0 && nk < int'(n_free_ch) && nsel < R_MAX) begin
          for (int m = 0; m < R; m++)
            if (av[m] && nsel < R_MAX) begin
              e_take[w][m] = 1; used[m] = 1; nsel++;
            end
          e_sv[nk] = 1; e_ss[nk] = w; nk++;
        end
      end
      if (nsel == R_MAX) capped++;
      for (int w = 0; w < W; w++)
        if ($countones(e_take[w]) > 1) multi_row++;
      chk(take == e_take, $sformatf("take mismatch it %0d", it));
      chk(sel_valid == e_sv, $sformatf("sel_valid %b exp %b", sel_valid, e_sv));
      for (int i = 0; i < BRL; i++)
        if (e_sv[i]) chk(int'(sel_slot[i]) == e_ss[i], $sformatf("sel_slot[%0d] %0d exp %0d", i, sel_slot[i], e_ss[i]));
      // invariants: no row twice, only free rows, only valid slots
      begin
        logic [R-1:0] acc;
        bit ok;
        acc = '0; ok = 1;
        for (int w = 0; w < W; w++) begin
          if ((acc & take[w]) != 0) ok = 0;
          if ((take[w] & ~(slot_mask[w] & row_free)) != 0) ok = 0;
          if (!slot_valid[w] && take[w] != 0) ok = 0;
          acc |= take[w];
        end
        chk(ok, "take sets disjoint and legal");
      end
      #9;
    end
    chk(multi_row > 1000, $sformatf("B reuse cases %0d", multi_row));
    chk(capped > 100, $sformatf("R_MAX cap cases %0d", capped));
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
