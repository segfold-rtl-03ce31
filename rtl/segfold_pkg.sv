// segfold_pkg: types and constants shared by the SegFold sparse-GEMM accelerator.
//
// The paper does not give data widths. This design uses 16-bit signed integer
// operands for A and B, 32-bit signed accumulation for C partial sums and
// 16-bit column / row indices (enough for the largest evaluated matrix,
// 23133 rows). Integer arithmetic keeps results exact so that testbenches can
// compare against a reference bit for bit.
package segfold_pkg;

  localparam int unsigned IDX_W = 16;  // column index (n) and k index width
  localparam int unsigned VAL_W = 16;  // A and B operand width
  localparam int unsigned ACC_W = 32;  // partial-sum width

  typedef logic [IDX_W-1:0]        idx_t;
  typedef logic signed [VAL_W-1:0] val_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  // Operand pair waiting in a PE FIFO: the A element and the matched B element.
  typedef struct packed {
    val_t a;
    val_t b;
  } opnd_t;

  // A B element travelling through the merge network. It carries the column
  // index n of B (which is also the C column it will be reduced into) and the
  // A value it is to be multiplied with.
  typedef struct packed {
    logic valid;
    idx_t col;
    val_t a;
    val_t b;
  } belem_t;

  // One element of a B-row segment as it leaves the memory controller.
  typedef struct packed {
    logic valid;
    idx_t col;
    val_t val;
  } bseg_elem_t;

  // A C* entry: column index and partial sum.
  typedef struct packed {
    logic valid;
    idx_t col;
    acc_t psum;
  } centry_t;

  // Merger comparison of an incoming B column b against the stored C column c.
  typedef enum logic [1:0] {
    CMP_EMPTY = 2'd0,  // slot holds no C entry (end of the saturated row)
    CMP_GT    = 2'd1,  // b > c : forward to the right
    CMP_LT    = 2'd2,  // b < c : insert here, shift the rest right
    CMP_EQ    = 2'd3   // b == c: accumulate here
  } cmp_t;

  // Host write targets of the metadata scratchpad.
  typedef enum logic [2:0] {
    WR_A_MASK = 3'd0,  // A column bitmask for column k (R bits)
    WR_A_PTR  = 3'd1,  // start of column k in the A value array
    WR_A_VAL  = 3'd2,  // A nonzero values, column-major
    WR_B_ROW  = 3'd3,  // DCSR list of non-empty B rows (k ids)
    WR_B_PTR  = 3'd4,  // DCSR row pointer, one per listed row plus one
    WR_B_COL  = 3'd5,  // B column indices, row-major
    WR_B_VAL  = 3'd6   // B nonzero values, row-major
  } wr_sel_t;

  // Event counters of the accelerator, counted since reset.
  typedef struct packed {
    logic [31:0] cycles;       // cycles with a tile in progress
    logic [31:0] pairs;        // (m,k) A elements dispatched by SelectA
    logic [31:0] multi_k;      // cycles in which SelectA chose several k
    logic [31:0] b_reuse;      // cycles in which one B row went to several rows
    logic [31:0] retires;      // window slots retired
    logic [31:0] shifts;       // insertions that shifted entries right
    logic [31:0] appends;      // insertions into the first empty position
    logic [31:0] spills;       // entries pushed from a PE row into its scratchpad
    logic [31:0] spad_accums;  // B elements reduced in a scratchpad
    logic [31:0] ipm_offsets;  // segments the IPM placed right of position 0
    logic [31:0] pe_accums;     // B elements accumulated in a PE
    logic [31:0] forwards;     // single-position moves of B elements
  } perf_t;

endpackage
