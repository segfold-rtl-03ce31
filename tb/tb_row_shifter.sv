// tb_row_shifter: segments with random lengths and contents are offered with
// random gaps; an IPM model answers each lookup with a random position after
// three cycles; the merge row's inj_ready is random. Every element must be
// injected exactly once, at position min(s + j, P - 1), with its column, B
// value and the segment's A value, elements of a segment in order, and the
// lookup must use the segment's first column.
module tb_row_shifter;
  import segfold_pkg::*;
  localparam int P = 16, SEG = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic seg_valid = 0, seg_ready, lk_valid, res_valid, idle, ev_offset;
  bseg_elem_t [SEG-1:0] seg_elems = '0;
  val_t seg_a = '0;
  idx_t lk_col;
  logic [3:0] res_pos;
  belem_t [P-1:0] inject;
  logic [P-1:0] inj_ready = '1;
  int checks = 0, failures = 0;

  row_shifter #(.P(P), .SEG(SEG), .QDEPTH(4)) dut (.*);

  // IPM model: latency 3
  logic [2:0] pv;
  logic [2:0][3:0] pp;
  int lk_expect_col[$];
  always_ff @(posedge clk) begin
    pv <= {pv[1:0], lk_valid};
    pp <= {pp[1:0], 4'($urandom_range(0, P - 1))};
  end
  assign res_valid = pv[2];
  assign res_pos   = pp[2];

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  // accepted elements, flattened; e_last marks the last one of a segment
  int   e_col[$], e_b[$], e_a[$], e_j[$];
  bit   e_last[$];
  int   seg_pos[$];   // IPM answers, in order
  int   n_inj = 0, n_sent = 0;
  bit   took = 0;   // the offered segment was accepted at the last edge

  // monitor, sampled before the rising edge
  always begin
    @(negedge clk); #4;
    if (rst_n) begin
      if (lk_valid) chk(int'(lk_col) == int'(seg_elems[0].col), "lookup uses first column");
      if (res_valid) seg_pos.push_back(int'(res_pos));
      for (int p = 0; p < P; p++) begin
        if (inject[p].valid) begin
          chk(inj_ready[p], "inject only where ready");
          if (e_col.size() == 0 || seg_pos.size() == 0) chk(0, "unexpected injection");
          else begin
            int t, icol, ib, ia;
            icol = int'(inject[p].col);
            ib   = int'(inject[p].b);
            ia   = int'(inject[p].a);
            t = seg_pos[0] + e_j[0];
            if (t > P - 1) t = P - 1;
            chk(icol == e_col[0] && ib == e_b[0] && ia == e_a[0] && p == t,
                $sformatf("element j=%0d col %0d/%0d b %0d/%0d a %0d/%0d at %0d expected %0d",
                          e_j[0], e_col[0], icol, e_b[0], ib, e_a[0], ia, p, t));
            n_inj++;
            if (e_last[0]) void'(seg_pos.pop_front());
            void'(e_col.pop_front()); void'(e_b.pop_front()); void'(e_a.pop_front());
            void'(e_j.pop_front()); void'(e_last.pop_front());
          end
        end
      end
      if (seg_valid && seg_ready) begin
        for (int j = 0; j < SEG; j++)
          if (seg_elems[j].valid) begin
            e_col.push_back(int'(seg_elems[j].col));
            e_b.push_back(int'(seg_elems[j].val));
            e_a.push_back(int'(seg_a));
            e_j.push_back(j);
            e_last.push_back(j == SEG - 1 || !seg_elems[j + 1 < SEG ? j + 1 : j].valid);
          end
        took = 1;
      end
    end
  end

  initial begin
    pv = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      inj_ready = P'($urandom) | P'($urandom);
      if (!seg_valid || took) begin
        took = 0;
        seg_valid = ($urandom_range(0, 2) != 0) && it < 2800;
        if (seg_valid) begin
          int len, c;
          len = $urandom_range(1, SEG);
          c = $urandom_range(0, 20);
          for (int j = 0; j < SEG; j++) begin
            c += $urandom_range(1, 4);
            seg_elems[j] = (j < len) ? '{valid: 1'b1, col: idx_t'(c), val: val_t'($urandom_range(1, 99))} : '0;
          end
          seg_a = val_t'($urandom_range(1, 99));
          n_sent += len;
        end
      end
    end
    seg_valid = 0;
    inj_ready = '1;
    repeat (50) @(negedge clk);
    chk(n_inj == n_sent, $sformatf("injected %0d of %0d", n_inj, n_sent));
    chk(idle, "idle at the end");
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
