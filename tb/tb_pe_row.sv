// tb_pe_row: one complete PE row at the paper's size (16 PEs) with its
// shifter, IPM, merge network and partial-sum scratchpad. Each test feeds the
// row several random sparse B rows (each multiplied by a random A value),
// cut into segments of up to SEG elements and offered with random gaps; B
// rows span up to 44 distinct output columns, so elements are inserted,
// shifted, spilled and folded into the scratchpad. After the row is idle it
// is drained; every nonzero C column must come out exactly once with the
// value of a dense reference, and the mechanisms must all have been used.
module tb_pe_row;
  import segfold_pkg::*;
  localparam int P = 16, SEG = 4, NCOL = 44;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic seg_valid = 0, seg_ready, drain_start = 0;
  bseg_elem_t [SEG-1:0] seg_elems = '0;
  val_t seg_a = '0;
  logic c_valid, drain_done, idle, spad_full;
  idx_t c_col;
  acc_t c_val;
  logic ev_shift, ev_append, ev_spill, ev_ovf, ev_offset;
  logic [$clog2(P+1)-1:0] ev_matches, ev_fwds;
  int checks = 0, failures = 0;
  longint n_shift = 0, n_append = 0, n_spill = 0, n_ovf = 0, n_offset = 0, n_match = 0;

  pe_row #(.P(P), .SEG(SEG)) dut (.*);

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  always @(posedge clk) if (rst_n) begin
    n_shift += ev_shift; n_append += ev_append; n_spill += ev_spill;
    n_ovf += ev_ovf; n_offset += ev_offset; n_match += ev_matches;
    if (spad_full) chk(0, "scratchpad full");
  end

  longint ref_c[NCOL];
  int     seen[NCOL];

  task automatic send(bseg_elem_t [SEG-1:0] e, val_t a);
    seg_elems = e; seg_a = a; seg_valid = 1;
    do @(posedge clk); while (!seg_ready);
    #1 seg_valid = 0;
    repeat ($urandom_range(0, 2)) @(posedge clk);
    #1;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int test = 0; test < 30; test++) begin
      int nrows;
      for (int c = 0; c < NCOL; c++) begin ref_c[c] = 0; seen[c] = 0; end
      nrows = $urandom_range(1, 8);
      for (int k = 0; k < nrows; k++) begin
        int cols[$];
        val_t a;
        int dens;
        a = val_t'($urandom_range(1, 200)) - val_t'(100);
        dens = $urandom_range(5, 60);
        cols.delete();
        for (int c = 0; c < NCOL; c++) if ($urandom_range(0, 99) < dens) cols.push_back(c);
        if (cols.size() == 0) cols.push_back($urandom_range(0, NCOL - 1));
        for (int i = 0; i < cols.size(); ) begin
          bseg_elem_t [SEG-1:0] e;
          int len;
          e = '0;
          len = $urandom_range(1, SEG);
          for (int j = 0; j < len; j++) begin
            if (i < cols.size()) begin
              val_t b;
              b = val_t'($urandom_range(1, 200)) - val_t'(100);
              e[j] = '{valid: 1'b1, col: idx_t'(cols[i]), val: b};
              ref_c[cols[i]] += longint'(a) * longint'(b);
              seen[cols[i]] = 1;
              i++;
            end
          end
          send(e, a);
        end
      end
      while (!idle) @(posedge clk);
      #1 drain_start = 1;
      @(posedge clk);
      #1 drain_start = 0;
      begin
        int got[NCOL];
        int wd;
        for (int c = 0; c < NCOL; c++) got[c] = 0;
        wd = 0;
        while (1) begin
          @(negedge clk);
          if (c_valid) begin
            if (int'(c_col) >= NCOL) chk(0, $sformatf("column %0d out of range", c_col));
            else begin
              got[c_col]++;
              chk(longint'(c_val) == ref_c[c_col],
                  $sformatf("test %0d col %0d got %0d exp %0d", test, c_col, c_val, ref_c[c_col]));
            end
          end
          if (drain_done) break;
          if (++wd > 200) begin chk(0, "drain did not end"); break; end
        end
        for (int c = 0; c < NCOL; c++)
          chk(got[c] == seen[c], $sformatf("test %0d col %0d output %0d times, expected %0d", test, c, got[c], seen[c]));
      end
      @(posedge clk); #1;
    end
    chk(n_shift > 0 && n_append > 0 && n_spill > 0 && n_ovf > 0 && n_offset > 0 && n_match > 0,
        $sformatf("events shift %0d append %0d spill %0d ovf %0d offset %0d match %0d",
                  n_shift, n_append, n_spill, n_ovf, n_offset, n_match));
    $display("events shift %0d append %0d spill %0d ovf %0d offset %0d match %0d",
             n_shift, n_append, n_spill, n_ovf, n_offset, n_match);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
