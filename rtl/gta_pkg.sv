// gta_pkg: types and constants shared by the GTA compute fabric.
//
// The fabric is built from 8-bit multiply-accumulate processing elements
// (PEs) arranged as an 8x8 Multi-Precision Reconfigurable Array (MPRA) per
// vector lane. Wider integers (16/32/64 bit) are split into 8-bit limbs;
// limb products are recombined by shift-add accumulators.
//
// The 8-bit PE, the 8x8 array, the 2-bit Systolic Mode and 2-bit Global
// Layout fields come from the architecture description. The encodings of
// the enums, the 24-bit partial-sum width and the bus structs (data plus
// sign flag plus limb tag) are choices of this implementation.
package gta_pkg;

  localparam int LIMB_W   = 8;   // precision of one PE
  localparam int MPRA_DIM = 8;   // PEs per MPRA row and column
  localparam int PSUM_W   = 24;  // partial sum carried between PEs
  localparam int RES_W    = 136; // full-precision result of the multi-precision accumulator
  localparam int VEC_W    = MPRA_DIM * MPRA_DIM * LIMB_W; // SIMD operand width per lane (512)

  // Systolic Mode field of SysCSR (2 bits). IS uses the same PE datapath as WS;
  // only the operand that software preloads differs.
  typedef enum logic [1:0] {
    MODE_SIMD = 2'd0,
    MODE_WS   = 2'd1,
    MODE_IS   = 2'd2,
    MODE_OS   = 2'd3
  } sys_mode_e;

  // Integer precision: limbs per operand n = 1 << prec.
  typedef enum logic [1:0] {
    PREC_INT8  = 2'd0,
    PREC_INT16 = 2'd1,
    PREC_INT32 = 2'd2,
    PREC_INT64 = 2'd3
  } prec_e;

  // Global Layout field of SysCSR (2 bits): number of lane rows of the
  // logical lane grid is 1 << layout (lanes are placed row-major).
  typedef enum logic [1:0] {
    LAYOUT_R1 = 2'd0,
    LAYOUT_R2 = 2'd1,
    LAYOUT_R4 = 2'd2,
    LAYOUT_R8 = 2'd3
  } layout_e;

  // Element operation of SIMD mode.
  typedef enum logic [1:0] {
    SIMD_MUL = 2'd0,
    SIMD_MAC = 2'd1,
    SIMD_ADD = 2'd2,
    SIMD_SUB = 2'd3
  } simd_op_e;

  // Streaming operand flowing left to right: one limb with its tag.
  // sgn marks the most significant limb of a signed number.
  typedef struct packed {
    logic              vld;
    logic [2:0]        limb;
    logic              sgn;
    logic [LIMB_W-1:0] d;
  } xbus_t;

  // Weight limb (stationary in WS/IS, flowing down in OS).
  typedef struct packed {
    logic              sgn;
    logic [LIMB_W-1:0] d;
  } wbus_t;

  // Partial sum flowing down, tagged with the limb index of the input it belongs to.
  typedef struct packed {
    logic                     vld;
    logic [2:0]               limb;
    logic signed [PSUM_W-1:0] s;
  } pbus_t;

endpackage
