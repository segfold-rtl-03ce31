// ipm: Index-to-PE Mapper of one PE row.
//
// Given the column index b of the first element of a B-row segment, the IPM
// returns the merge-network position s at which the segment is injected. s
// must be legal: every C* column stored left of s is smaller than b. Because
// the columns in a PE row increase from left to right without gaps, the IPM
// finds s by binary search over a tree of lookup tables, one table per tree
// level, with a pipeline register after each level.
//
// Tree layout (as in the paper's Fig. 7 for P = 16): node i of level L
// mirrors merge position (2i+1)*2^(LG-1-L)-1, so the root mirrors position
// P/2-1 and the leaves are the even positions 0, 2, ..., P-2. At each internal
// node the search goes right if the node holds a column and b is greater than
// it, and left if b is not greater or the node is null (empty position). The
// result is the position of the leaf that is reached; as in the paper's
// worked example (b = 11 reaches the leaf of position 8 and is mapped there),
// the leaf's own column is not compared, so leaf keys are not stored.
// Latency: LG-1 cycles from lookup to result, one lookup accepted per cycle.
//
// Updates: the merge row reports which positions changed; the IPM marks them
// dirty and copies one dirty position per cycle (one write port) from the
// row's current columns into its table. Columns at a position only ever
// decrease while a tile runs (entries move right, new ones are smaller), so a
// key that is not yet updated is too large or null, and the search can only
// return a position left of the freshest legal one: still legal, as the paper
// argues. The pending set is kept as dirty bits, a queue that merges repeated
// updates of the same position; it is served round-robin. flush empties the
// table at the start of a tile.
module ipm
  import segfold_pkg::*;
#(
  parameter int unsigned P = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  flush,
  // lookup
  input  logic                  lk_valid,
  input  idx_t                  lk_col,
  output logic                  res_valid,
  output logic [$clog2(P)-1:0]  res_pos,
  // updates from the merge row
  input  logic    [P-1:0]       changed,
  input  centry_t [P-1:0]       entries,
  output logic                  upd_pending
);
  localparam int unsigned LG  = $clog2(P);
  localparam int unsigned LAT = LG - 1;  // compared levels
  typedef logic [LG-1:0] pos_t;

  // key storage, indexed by merge position (only odd positions are tree nodes)
  logic [P-1:0] key_valid;
  idx_t [P-1:0] key_col;

  function automatic pos_t node_pos(int unsigned lvl, int unsigned i);
    return pos_t'((2 * i + 1) * (1 << (LG - 1 - lvl)) - 1);
  endfunction

  function automatic logic is_node(int unsigned p);
    return (p % 2) == 1 && p < P - 1;
  endfunction

  // ---- pipelined search -----------------------------------------------------
  logic [LAT:0]         st_valid;
  idx_t [LAT:0]         st_col;
  logic [LAT:0][LG-1:0] st_node;  // node index within the level

  assign st_valid[0] = lk_valid;
  assign st_col[0]   = lk_col;
  assign st_node[0]  = '0;

  for (genvar l = 0; l < LAT; l++) begin : g_lvl
    pos_t p_here;
    logic go_right;
    assign p_here   = node_pos(l, int'(st_node[l]));
    assign go_right = key_valid[p_here] && (st_col[l] > key_col[p_here]);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        st_valid[l+1] <= 1'b0;
        st_col[l+1]   <= '0;
        st_node[l+1]  <= '0;
      end else begin
        st_valid[l+1] <= st_valid[l] && !flush;
        st_col[l+1]   <= st_col[l];
        st_node[l+1]  <= {st_node[l][LG-2:0], go_right};
      end
    end
  end

  assign res_valid = st_valid[LAT];
  assign res_pos   = node_pos(LG - 1, int'(st_node[LAT]));

  // ---- update queue -----------------------------------------------------------
  logic [P-1:0] dirty;
  pos_t         rr, wr_pos;
  logic         wr_en;

  always_comb begin
    wr_en  = 1'b0;
    wr_pos = '0;
    for (int j = P - 1; j >= 0; j--) begin
      pos_t q;
      q = rr + pos_t'(j);
      if (dirty[q]) begin
        wr_en  = 1'b1;
        wr_pos = q;
      end
    end
  end

  assign upd_pending = |dirty;

  logic [P-1:0] dirty_nxt;
  always_comb begin
    dirty_nxt = dirty;
    if (wr_en) dirty_nxt[wr_pos] = 1'b0;
    for (int p = 0; p < P; p++) if (changed[p] && is_node(p)) dirty_nxt[p] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dirty     <= '0;
      key_valid <= '0;
      key_col   <= '0;
      rr        <= '0;
    end else if (flush) begin
      dirty     <= '0;
      key_valid <= '0;
      rr        <= '0;
    end else begin
      if (wr_en) begin
        key_valid[wr_pos] <= entries[wr_pos].valid;
        key_col[wr_pos]   <= entries[wr_pos].col;
        rr                <= wr_pos + pos_t'(1);
      end
      dirty <= dirty_nxt;
    end
  end

endmodule
