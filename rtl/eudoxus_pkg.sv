// eudoxus_pkg: types and constants shared by the localization accelerator.
//
// The frontend works on 8-bit grayscale pixels, integer pixel coordinates and
// 256-bit binary (ORB/BRIEF style) descriptors. The backend works on signed
// Q16.16 fixed-point matrix elements held in scratchpad memories (SPMs).
// The image size (1280 x 720, the car configuration) and the 256-bit
// descriptor length follow the paper and the ORB descriptor it names; the
// fixed-point format, coordinate widths and record layouts are this design's
// own choices.
package eudoxus_pkg;

  // ---------------- frontend ----------------
  localparam int unsigned PIX_W   = 8;
  localparam int unsigned COORD_W = 12;   // enough for 1920 columns
  localparam int unsigned DESC_W  = 256;  // ORB descriptor length

  typedef logic [PIX_W-1:0]   pix_t;
  typedef logic [COORD_W-1:0] coord_t;
  typedef logic [DESC_W-1:0]  desc_t;

  // A key point with its descriptor, produced by feature extraction.
  typedef struct packed {
    coord_t x;
    coord_t y;
    desc_t  desc;
  } feature_t;

  // Initial or refined stereo correspondence (left key point and disparity).
  typedef struct packed {
    coord_t     x;
    coord_t     y;
    logic [7:0] disp;
    logic [15:0] cost;   // Hamming distance (MO) or SAD (DR)
  } stereo_t;

  // Temporal correspondence: key point of frame t-1 and its optical flow,
  // u and v in signed Q8.8 pixels.
  typedef struct packed {
    coord_t       x;
    coord_t       y;
    logic signed [15:0] u;
    logic signed [15:0] v;
    logic         ok;      // false when the 2x2 system was singular
  } flow_t;

  // ---------------- backend ----------------
  localparam int unsigned DATA_W = 32;    // Q16.16
  localparam int unsigned FRAC_W = 16;
  typedef logic signed [DATA_W-1:0] fx_t;

  // Matrix operations of the backend (Table 1 of the design).
  typedef enum logic [2:0] {
    OP_MULT   = 3'd0,  // C = A x B or A x B^T
    OP_TRANS  = 3'd1,  // C = A^T
    OP_DECOMP = 3'd2,  // LDL^T of a symmetric A, L and D packed in C
    OP_SUBST  = 3'd3,  // solve (L D L^T) X = B, factors in A
    OP_INV    = 3'd4,  // inverse of [diag B; B^T 6x6] structured matrix
    OP_ADD    = 3'd5,  // C = A + B   (misc. logic)
    OP_SUB    = 3'd6   // C = A - B   (misc. logic)
  } be_op_e;

  localparam int unsigned NSPM   = 4;     // matrix scratchpads in the backend
  localparam int unsigned SPM_ID_W = 2;
  localparam int unsigned DIM_W  = 9;     // matrix dimensions up to 256

  typedef struct packed {
    be_op_e              op;
    logic [SPM_ID_W-1:0] src_a;
    logic [SPM_ID_W-1:0] src_b;
    logic [SPM_ID_W-1:0] dst;
    logic [DIM_W-1:0]    m;      // rows of A (and C)
    logic [DIM_W-1:0]    k;      // cols of A / rows of B
    logic [DIM_W-1:0]    n;      // cols of B (and C)
    logic                trans_b;// OP_MULT: use B^T
  } be_cmd_t;

  // Fixed-point helpers.
  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return fx_t'(p >>> FRAC_W);
  endfunction

  function automatic fx_t fx_div(fx_t a, fx_t b);
    logic signed [2*DATA_W-1:0] num;
    if (b == 0) return '0;
    num = {{DATA_W{a[DATA_W-1]}}, a} <<< FRAC_W;
    return fx_t'(num / 64'(b));
  endfunction

endpackage
