// mpra: Multi-Precision Reconfigurable Array of one lane.
//
// An 8x8 grid of 8-bit PEs (mpra_pe) with the multi-precision accumulator
// (mp_accumulator) under its columns and the SIMD recombination unit
// (mpra_simd_unit). Its edges connect to the neighbouring lanes through the
// slide unit, so several MPRAs form one larger systolic array:
//   west_x  -> rows, east_x  out of the last column (inputs flow right)
//   north_w -> cols, south_w out of the last row    (OS weights flow down)
//   north_p -> cols, south_p out of the last row    (partial sums flow down)
// Systolic p-GEMM at precision n = 1 << prec:
//   WS / IS: each row holds a row of n-limb weights, one per group of n
//     columns (wload_en[r] writes row r from wload_d, one limb per column).
//     Inputs enter limb-serially on west_x, row r delayed by r cycles (the
//     usual systolic skew). acc_res[g] gives sum over rows of X_r * W_r,g.
//     One 8x8 MPRA therefore holds an 8 x (8/n) weight matrix.
//   OS: row r receives limb r mod n of row r/n of the left matrix, column c
//     limb c mod n of column c/n of the right matrix, one K step per cycle,
//     skewed by row and column index. clear starts a tile; drain (held for
//     8 x lane rows cycles) reads the tile out through acc_res. One MPRA holds
//     an (8/n) x (8/n) output tile.
//   SIMD: element-wise Mul/MAC/Add/Sub on 64/(n*n) elements, one op per
//     array quadrant (simd_op[4]), see mpra_simd_unit; result two cycles
//     after simd_vld.
// acc_res/acc_vld are meaningful only on the lane at the bottom of a
// logical array; other lanes pass their partial sums on through south_p.
//
// The 8x8 size, the 8-bit PE and the per-mode data movement follow the
// architecture description; the edge bus formats and the control signals are
// choices of this implementation.
module mpra
  import gta_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  sys_mode_e               mode,
  input  prec_e                   prec,
  // systolic edges
  input  xbus_t                   west_x  [MPRA_DIM],
  output xbus_t                   east_x  [MPRA_DIM],
  input  wbus_t                   north_w [MPRA_DIM],
  output wbus_t                   south_w [MPRA_DIM],
  input  pbus_t                   north_p [MPRA_DIM],
  output pbus_t                   south_p [MPRA_DIM],
  // stationary operand load (WS / IS)
  input  logic [MPRA_DIM-1:0]     wload_en,
  input  wbus_t                   wload_d [MPRA_DIM],
  // OS control
  input  logic                    clear,
  input  logic                    drain,
  // multi-precision accumulator results
  output logic [MPRA_DIM-1:0]     acc_vld,
  output logic signed [RES_W-1:0] acc_res [MPRA_DIM],
  // SIMD mode
  input  logic                    simd_vld,
  input  simd_op_e                simd_op [4],
  input  logic [VEC_W-1:0]        simd_a,
  input  logic [VEC_W-1:0]        simd_b,
  input  logic [VEC_W-1:0]        simd_c,
  output logic                    simd_res_vld,
  output logic [VEC_W-1:0]        simd_res
);

  localparam int D = MPRA_DIM;

  // PE outputs (all registers); PE inputs are taken from the west / north
  // neighbour's output, or from the array edge
  xbus_t x_o [D][D];
  wbus_t w_o [D][D];
  pbus_t p_o [D][D];
  logic [LIMB_W-1:0]   pe_x [D][D];
  logic [LIMB_W-1:0]   pe_w [D][D];
  logic [2*LIMB_W-1:0] prod [D][D];

  for (genvar r = 0; r < D; r++) begin : g_edge_r
    assign east_x[r] = x_o[r][D-1];
  end
  for (genvar c = 0; c < D; c++) begin : g_edge_c
    assign south_w[c] = w_o[D-1][c];
    assign south_p[c] = p_o[D-1][c];
  end

  for (genvar r = 0; r < D; r++) begin : g_row
    for (genvar c = 0; c < D; c++) begin : g_col
      xbus_t x_i;
      wbus_t w_i;
      pbus_t p_i;
      if (c == 0) begin : g_w_edge
        assign x_i = west_x[r];
      end else begin : g_w_pe
        assign x_i = x_o[r][c-1];
      end
      if (r == 0) begin : g_n_edge
        assign w_i = north_w[c];
        assign p_i = north_p[c];
      end else begin : g_n_pe
        assign w_i = w_o[r-1][c];
        assign p_i = p_o[r-1][c];
      end
      mpra_pe u_pe (
        .clk, .rst_n, .mode,
        .x_in(x_i), .x_out(x_o[r][c]),
        .w_in(w_i), .w_out(w_o[r][c]),
        .p_in(p_i), .p_out(p_o[r][c]),
        .wload_en(wload_en[r]), .wload_d(wload_d[c]),
        .clear, .drain,
        .simd_x(pe_x[r][c]), .simd_w(pe_w[r][c])
      );
      // the PE partial-sum register holds the limb product in SIMD mode
      assign prod[r][c] = 16'(p_o[r][c].s);
    end
  end

  mpra_simd_unit u_simd (
    .clk, .rst_n,
    .in_vld(simd_vld && mode == MODE_SIMD),
    .prec, .op(simd_op),
    .a(simd_a), .b(simd_b), .c(simd_c),
    .pe_x, .pe_w, .prod,
    .res_vld(simd_res_vld), .res(simd_res)
  );

  mp_accumulator #(.COLS(D)) u_acc (
    .clk, .rst_n, .mode, .prec, .drain,
    .col_in(south_p),
    .res_vld(acc_vld), .res(acc_res)
  );

endmodule
