// select_a: the SelectA scheduler, one decision per cycle.
//
// Input is the active window: W slots, each holding one k and the bitmask of
// the A column k restricted to the tile's R rows, with the bits of already
// dispatched elements cleared. The scan follows the paper's Algorithm 1:
// slots are visited in slot order, and from each slot every A element (m,k)
// is taken whose row m has not been taken this cycle (no two selected pairs
// share m, so no two update the same C row), until R_MAX pairs are selected.
// Taking all free m of one k together is what makes one B row serve several
// A elements (B reuse). Two hardware limits are added to the algorithm: a
// row m is only eligible if its PE row is free (row_free), and at most
// n_free_ch distinct k (B rows) are chosen, because each selected B row
// occupies one channel of the vector multicast network (4 in the paper).
//
// Outputs: take[w] is the set of rows taken from slot w; the selected slots
// are also listed in order in sel_slot[0..], with sel_valid marking the used
// list entries. Purely combinational; the paper states the whole scan fits in
// one cycle for W = 32.
module select_a #(
  parameter int unsigned W     = 32,
  parameter int unsigned R     = 16,
  parameter int unsigned R_MAX = 16,
  parameter int unsigned BRL   = 4
) (
  input  logic [W-1:0]                  slot_valid,
  input  logic [W-1:0][R-1:0]           slot_mask,
  input  logic [R-1:0]                  row_free,
  input  logic [$clog2(BRL+1)-1:0]      n_free_ch,
  output logic [W-1:0][R-1:0]           take,
  output logic [BRL-1:0]                sel_valid,
  output logic [BRL-1:0][$clog2(W)-1:0] sel_slot
);
  typedef logic [$clog2(BRL+1)-1:0] kcnt_t;
  typedef logic [$clog2(R_MAX+1)-1:0] scnt_t;

  always_comb begin
    logic [R-1:0] used_m;
    kcnt_t        nk;
    scnt_t        nsel;
    logic [R-1:0] avail;
    take      = '0;
    sel_valid = '0;
    sel_slot  = '0;
    used_m    = '0;
    nk        = '0;
    nsel      = '0;
    for (int w = 0; w < W; w++) begin
      avail = slot_mask[w] & ~used_m & row_free;
      if (slot_valid[w] && avail != '0 && nk < n_free_ch && nsel < scnt_t'(R_MAX)) begin
        for (int m = 0; m < R; m++) begin
          if (avail[m] && nsel < scnt_t'(R_MAX)) begin
            take[w][m] = 1'b1;
            used_m[m]  = 1'b1;
            nsel       = nsel + scnt_t'(1);
          end
        end
        sel_valid[nk[$clog2(BRL)-1:0]] = 1'b1;
        sel_slot[nk[$clog2(BRL)-1:0]]  = ($clog2(W))'(w);
        nk = nk + kcnt_t'(1);
      end
    end
  end

endmodule
