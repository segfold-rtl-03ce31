// mem_ctrl: the SegFold memory controller, which carries out the scheduling
// half of the Segment dataflow.
//
// Metadata scratchpad. The host writes one tile into on-chip arrays before
// start: A in column-major compressed form (for each column k an R-bit
// nonzero mask over the tile's rows and a pointer into the column-major value
// array; only nonzeros are stored) and B in DCSR form (the list of non-empty
// B rows, a row pointer per listed row, and the column indices and values of
// the nonzeros, row-major). A value (m,k) is found at a_ptr[k] plus the
// number of mask bits of column k below m.
//
// Active window. W slots each hold one k of the window: its remaining A mask
// (bits of already dispatched elements are cleared: the paper's consumption
// bitmask) and the extent of B row k. Each cycle one free slot is refilled
// from the DCSR row list; rows whose A column is empty are skipped, so only
// k with at least one A-B intersection enter. A slot retires when all its A
// elements have been dispatched, and the next listed k takes its place: the
// sliding window over K of the paper's Fig. 3.
//
// Scheduling. select_a picks the (m,k) pairs of this cycle. Each selected k
// is given to a free channel of the vector multicast network together with
// the set of its rows. A channel streams its B row in segments of SEG
// nonzeros, one segment per cycle when all its rows accept it; the per-channel
// pointer is the extra start pointer of the DCSR row that tracks the
// unprocessed part. When the last segment has been sent, the channel and its
// rows become free again. Each PE row therefore receives at most one B row at
// a time while up to BRL B rows stream in parallel.
//
// sched_done is high once every listed B row has been processed and all
// channels are idle; the PE rows may still be reducing.
module mem_ctrl
  import segfold_pkg::*;
#(
  parameter int unsigned R         = 16,
  parameter int unsigned W         = 32,
  parameter int unsigned BRL       = 4,
  parameter int unsigned SEG       = 4,
  parameter int unsigned R_MAX     = 16,
  parameter int unsigned K_MAX     = 32768,
  parameter int unsigned A_NNZ_MAX = 4096,
  parameter int unsigned B_NNZ_MAX = 8192
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // host writes into the metadata scratchpad
  input  logic                          wr_en,
  input  wr_sel_t                       wr_sel,
  input  logic [15:0]                   wr_addr,
  input  logic [31:0]                   wr_data,
  input  logic [15:0]                   b_nrows,   // entries in the DCSR row list
  input  logic                          start,
  // multicast channels
  output logic [BRL-1:0]                ch_valid,
  output bseg_elem_t [BRL-1:0][SEG-1:0] ch_elems,
  output logic [BRL-1:0][R-1:0]         ch_rows,
  input  logic [BRL-1:0]                ch_accept,
  output val_t [R-1:0]                  row_a,
  // status and events
  output logic                          running,
  output logic                          sched_done,
  output logic                          ev_multi_k,  // more than one k chosen this cycle
  output logic                          ev_reuse,    // one B row sent to several rows
  output logic                          ev_retire,   // a window slot retired
  output logic [$clog2(R+1)-1:0]        ev_pairs     // (m,k) pairs chosen this cycle
);
  typedef logic [15:0] ptr_t;

  // ---- metadata scratchpad ---------------------------------------------------
  logic [R-1:0] a_mask [K_MAX];
  ptr_t         a_ptr  [K_MAX];
  val_t         a_val  [A_NNZ_MAX];
  idx_t         b_row  [K_MAX];
  ptr_t         b_ptr  [K_MAX+1];
  idx_t         b_col  [B_NNZ_MAX];
  val_t         b_val  [B_NNZ_MAX];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      unique case (wr_sel)
        WR_A_MASK: a_mask[wr_addr[$clog2(K_MAX)-1:0]]     <= wr_data[R-1:0];
        WR_A_PTR:  a_ptr[wr_addr[$clog2(K_MAX)-1:0]]      <= wr_data[15:0];
        WR_A_VAL:  a_val[wr_addr[$clog2(A_NNZ_MAX)-1:0]]  <= wr_data[VAL_W-1:0];
        WR_B_ROW:  b_row[wr_addr[$clog2(K_MAX)-1:0]]      <= wr_data[IDX_W-1:0];
        WR_B_PTR:  b_ptr[wr_addr[$clog2(K_MAX+1)-1:0]]    <= wr_data[15:0];
        WR_B_COL:  b_col[wr_addr[$clog2(B_NNZ_MAX)-1:0]]  <= wr_data[IDX_W-1:0];
        WR_B_VAL:  b_val[wr_addr[$clog2(B_NNZ_MAX)-1:0]]  <= wr_data[VAL_W-1:0];
        default: ;
      endcase
    end
  end

  // ---- active window -----------------------------------------------------------
  typedef struct packed {
    logic         valid;
    logic [R-1:0] mask;     // remaining A elements of column k
    logic [R-1:0] mask0;    // full A column mask (for value ranks)
    ptr_t         aptr;
    ptr_t         bstart;
    ptr_t         bend;
  } slot_t;

  slot_t [W-1:0] slot;
  ptr_t          li;        // next entry of the DCSR row list

  logic [W-1:0]        slot_valid;
  logic [W-1:0][R-1:0] slot_mask;
  always_comb begin
    for (int w = 0; w < W; w++) begin
      slot_valid[w] = slot[w].valid;
      slot_mask[w]  = slot[w].mask;
    end
  end

  logic                  have_free_slot;
  logic [$clog2(W)-1:0]  free_slot;
  always_comb begin
    have_free_slot = 1'b0;
    free_slot      = '0;
    for (int w = W - 1; w >= 0; w--) begin
      if (!slot[w].valid) begin
        have_free_slot = 1'b1;
        free_slot      = ($clog2(W))'(w);
      end
    end
  end

  idx_t         refill_k;
  logic [R-1:0] refill_mask;
  logic         list_left;
  assign list_left   = running && (li < b_nrows);
  assign refill_k    = b_row[li[$clog2(K_MAX)-1:0]];
  assign refill_mask = a_mask[refill_k[$clog2(K_MAX)-1:0]];

  // ---- channels -----------------------------------------------------------------
  typedef struct packed {
    logic         busy;
    logic [R-1:0] rows;
    ptr_t         ptr;
    ptr_t         pend;
  } chan_t;

  chan_t [BRL-1:0] ch;

  logic [R-1:0] row_free;
  always_comb begin
    row_free = '1;
    for (int c = 0; c < BRL; c++) if (ch[c].busy) row_free &= ~ch[c].rows;
  end

  // free channels, listed in order
  logic [$clog2(BRL+1)-1:0]        n_free_ch;
  logic [BRL-1:0][$clog2(BRL)-1:0] free_ch;
  always_comb begin
    n_free_ch = '0;
    free_ch   = '0;
    for (int c = 0; c < BRL; c++) begin
      if (!ch[c].busy) begin
        free_ch[n_free_ch[$clog2(BRL)-1:0]] = ($clog2(BRL))'(c);
        n_free_ch = n_free_ch + 1'b1;
      end
    end
  end

  logic [W-1:0][R-1:0]           take;
  logic [BRL-1:0]                sel_valid;
  logic [BRL-1:0][$clog2(W)-1:0] sel_slot;

  select_a #(.W(W), .R(R), .R_MAX(R_MAX), .BRL(BRL)) u_select (
    .slot_valid, .slot_mask, .row_free,
    .n_free_ch(running ? n_free_ch : '0),
    .take, .sel_valid, .sel_slot
  );

  // segment read-out
  always_comb begin
    for (int c = 0; c < BRL; c++) begin
      ch_valid[c] = ch[c].busy;
      ch_rows[c]  = ch[c].rows;
      for (int j = 0; j < SEG; j++) begin
        ptr_t p;
        p = ch[c].ptr + ptr_t'(j);
        ch_elems[c][j].valid = ch[c].busy && (p < ch[c].pend);
        ch_elems[c][j].col   = b_col[p[$clog2(B_NNZ_MAX)-1:0]];
        ch_elems[c][j].val   = b_val[p[$clog2(B_NNZ_MAX)-1:0]];
      end
    end
  end

  // A value of each newly selected row: rank of m within its column. The
  // slot that took row m is found first (one slot at most), then the mask
  // bits below m are counted.
  logic [R-1:0]          row_new;
  logic [R-1:0][R-1:0]   row_mask0;
  ptr_t [R-1:0]          row_aptr;
  ptr_t [R-1:0]          row_aidx;
  always_comb begin
    row_new   = '0;
    row_mask0 = '0;
    row_aptr  = '0;
    for (int w = 0; w < W; w++) begin
      for (int m = 0; m < R; m++) begin
        if (take[w][m]) begin
          row_new[m]   = 1'b1;
          row_mask0[m] = slot[w].mask0;
          row_aptr[m]  = slot[w].aptr;
        end
      end
    end
    for (int m = 0; m < R; m++) begin
      ptr_t rank;
      rank = '0;
      for (int i = 0; i < m; i++) rank = rank + ptr_t'(row_mask0[m][i]);
      row_aidx[m] = row_aptr[m] + rank;
    end
  end

  // ---- sequential state ---------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot    <= '0;
      ch      <= '0;
      li      <= '0;
      running <= 1'b0;
      row_a   <= '0;
    end else begin
      if (start) begin
        running <= 1'b1;
        li      <= '0;
      end else if (sched_done) begin
        running <= 1'b0;
      end

      // consume selected elements, retire empty slots
      for (int w = 0; w < W; w++) begin
        if (slot[w].valid && take[w] != '0) begin
          slot[w].mask <= slot[w].mask & ~take[w];
          if ((slot[w].mask & ~take[w]) == '0) slot[w].valid <= 1'b0;
        end
      end

      // refill one slot per cycle from the DCSR row list
      if (list_left && have_free_slot) begin
        li <= li + 1'b1;
        if (refill_mask != '0) begin
          slot[free_slot].valid  <= 1'b1;
          slot[free_slot].mask   <= refill_mask;
          slot[free_slot].mask0  <= refill_mask;
          slot[free_slot].aptr   <= a_ptr[refill_k[$clog2(K_MAX)-1:0]];
          slot[free_slot].bstart <= b_ptr[li[$clog2(K_MAX+1)-1:0]];
          slot[free_slot].bend   <= b_ptr[li[$clog2(K_MAX+1)-1:0] + 1'b1];
        end
      end

      // stream segments
      for (int c = 0; c < BRL; c++) begin
        if (ch[c].busy && ch_accept[c]) begin
          ch[c].ptr <= ch[c].ptr + ptr_t'(SEG);
          if (ch[c].ptr + ptr_t'(SEG) >= ch[c].pend) ch[c].busy <= 1'b0;
        end
      end

      // hand selected k to free channels
      for (int j = 0; j < BRL; j++) begin
        if (sel_valid[j]) begin
          ch[free_ch[j]].busy <= 1'b1;
          ch[free_ch[j]].rows <= take[sel_slot[j]];
          ch[free_ch[j]].ptr  <= slot[sel_slot[j]].bstart;
          ch[free_ch[j]].pend <= slot[sel_slot[j]].bend;
        end
      end

      for (int m = 0; m < R; m++) begin
        if (row_new[m]) row_a[m] <= a_val[row_aidx[m][$clog2(A_NNZ_MAX)-1:0]];
      end
    end
  end

  always_comb begin
    sched_done = running && !start && !list_left && (slot_valid == '0);
    for (int c = 0; c < BRL; c++) if (ch[c].busy) sched_done = 1'b0;
  end

  // ---- events -------------------------------------------------------------------
  always_comb begin
    ev_pairs   = '0;
    ev_reuse   = 1'b0;
    ev_retire  = 1'b0;
    for (int m = 0; m < R; m++) ev_pairs = ev_pairs + ($clog2(R+1))'(row_new[m]);
    for (int w = 0; w < W; w++) begin
      if ($countones(take[w]) > 1) ev_reuse = 1'b1;
      if (slot[w].valid && take[w] != '0 && (slot[w].mask & ~take[w]) == '0) ev_retire = 1'b1;
    end
    ev_multi_k = sel_valid[BRL > 1 ? 1 : 0] && (BRL > 1);
  end

  a_take_free: assert property (@(posedge clk) disable iff (!rst_n)
    (row_new & ~row_free) == '0);

endmodule
