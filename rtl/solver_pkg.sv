// solver_pkg: constants and types shared by the SpMV/ILU0 matrix unit, the
// vector unit and the solver sequencer.
//
// One memory line is 512 bits, the width of the card's DDR AXI ports; the
// datapaths accept one full line per cycle, i.e. LANES = 8 doubles. Matrix
// data follow this design's line layout of the CSRO format (compressed
// sparse row-offsets): a value line holds 8 non-zeros, the matching index
// line holds their 8 column indices in bits [255:0] and their 8 new-row
// offsets in bits [511:256], 32 bits each.
package solver_pkg;
  import fp64_pkg::*;

  localparam int LANES   = 8;
  localparam int LINE_W  = 512;
  localparam int ADDR_W  = 32;     // line address on a memory port
  localparam int IDX_W   = 32;     // row / column / partition index
  localparam int NOUT    = LANES + 1;  // results per cycle out of the merge unit

  typedef logic [LINE_W-1:0]         line_t;
  typedef logic [LANES-1:0][63:0]    vline_t;   // 8 doubles
  typedef logic [LANES-1:0][IDX_W-1:0] iline_t; // 8 indices

  // Operating modes of the matrix operation unit
  typedef enum logic [1:0] {
    MOP_SPMV    = 2'd0,
    MOP_ILU_FWD = 2'd1,   // forward substitution with L
    MOP_ILU_BWD = 2'd2    // backward substitution with U and the diagonal
  } mop_e;

  // Modes of a dot_axpy unit
  typedef enum logic { VOP_AXPY = 1'b0, VOP_DOT = 1'b1 } vop_e;

  // Scalar floating point operations
  // vector ops unit modes: unit 0 does the axpy or first dot; unit 1 runs a
  // second dot alongside (on input a, or on unit 0's axpy output)
  typedef enum logic [1:0] {
    VM_AXPY      = 2'd0,   // y = alpha*a + b
    VM_DOT       = 2'd1,   // d0 = a.b
    VM_DOT2      = 2'd2,   // d0 = a.b,  d1 = a.a
    VM_AXPY_NORM = 2'd3    // y = alpha*a + b,  d1 = y.y
  } vmode_e;

  typedef enum logic [1:0] { SOP_MUL = 2'd0, SOP_DIV = 2'd1, SOP_SQRT = 2'd2 } sop_e;

  // Scalar variables of the solver (variable_registers addresses)
  typedef enum logic [3:0] {
    V_ALPHA = 4'd0, V_BETA = 4'd1, V_OMEGA = 4'd2, V_RHO = 4'd3, V_RHO_NEW = 4'd4,
    V_CONV  = 4'd5, V_NORM = 4'd6, V_DOT0  = 4'd7, V_DOT1 = 4'd8, V_TMP = 4'd9
  } var_e;
  localparam int NUM_VARS = 10;

  // One input line of the SpMV pipeline
  typedef struct packed {
    vline_t             vals;
    iline_t             cols;    // addresses into the vector partition memories
    iline_t             offs;    // CSRO new-row offsets
    logic [LANES-1:0]   mask;    // lanes that carry a non-zero
    logic               first;   // first line of a color
    logic               last;    // last line of a color
  } mat_line_t;

  // Size record of one color, one memory line per color (bits [191:0] used)
  typedef struct packed {
    logic [IDX_W-1:0] part_line;  // line offset of the partition indices
    logic [IDX_W-1:0] mat_line;   // line offset of the value / index lines
    logic [IDX_W-1:0] npart;      // vector partition size
    logic [IDX_W-1:0] nnz;        // non-zeros in the color
    logic [IDX_W-1:0] nrows;      // rows in the color
    logic [IDX_W-1:0] row0;       // first row of the color
  } color_size_t;

endpackage
