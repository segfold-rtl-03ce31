// vec_multicast: the vector multicast network (a vectorized crossbar) that
// carries B-row segments from the memory controller to the PE rows.
//
// There are BRL channels (4 in the paper). Each channel carries one segment
// of one B row per cycle together with the set of PE rows (ch_rows) that must
// receive it: every PE row whose selected A element lies in that B row's k.
// A PE row belongs to at most one channel at a time, so for each row the
// crossbar selects the one channel that names it; the row also receives its
// own A value (row_a). A channel's segment is taken only when all of its rows
// can accept it in the same cycle (ch_accept); a multicast is never split, so
// every segment of a B row enters all of its rows in the same order.
// The crossbar structure is as the paper describes; the all-rows-ready
// handshake is this design's choice. Combinational.
module vec_multicast
  import segfold_pkg::*;
#(
  parameter int unsigned R   = 16,
  parameter int unsigned BRL = 4,
  parameter int unsigned SEG = 4
) (
  input  logic [BRL-1:0]                  ch_valid,
  input  bseg_elem_t [BRL-1:0][SEG-1:0]   ch_elems,
  input  logic [BRL-1:0][R-1:0]           ch_rows,
  output logic [BRL-1:0]                  ch_accept,
  input  val_t [R-1:0]                    row_a,
  output logic [R-1:0]                    row_valid,
  output bseg_elem_t [R-1:0][SEG-1:0]     row_elems,
  output val_t [R-1:0]                    row_seg_a,
  input  logic [R-1:0]                    row_ready
);
  always_comb begin
    for (int c = 0; c < BRL; c++) begin
      ch_accept[c] = ch_valid[c] && ((ch_rows[c] & ~row_ready) == '0);
    end
    row_valid = '0;
    row_elems = '0;
    for (int r = 0; r < R; r++) begin
      row_seg_a[r] = row_a[r];
      for (int c = 0; c < BRL; c++) begin
        if (ch_rows[c][r] && ch_accept[c]) begin
          row_valid[r] = 1'b1;
          row_elems[r] = ch_elems[c];
        end
      end
    end
  end

endmodule
