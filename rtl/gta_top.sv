// gta_top: compute fabric of the General Tensor Accelerator (GTA).
//
// GTA is a vector processor whose per-lane multiply-accumulate units are
// replaced by one Multi-Precision Reconfigurable Array (MPRA, 8x8 8-bit PEs)
// per lane. The MPRAs of all lanes are chained through the slide unit into
// one systolic array whose shape (Global Layout), dataflow (Systolic Mode)
// and partitioning into independent sub-arrays (per-lane mask bits) come
// from the SysCSR. The same hardware runs
//   * p-GEMM in WS, IS or OS dataflow at INT8/16/32/64 (limb-serial inputs,
//     limb products recombined by each lane's multi-precision accumulator);
//   * vector (SIMD) Mul/MAC/Add/Sub on 64/(n*n) elements per lane per cycle.
//
// What this module contains: NUM_LANES x mpra, sys_csr, slide_unit. The
// vector register files, the load/store unit and the lane sequencer of the
// vector processor that surrounds the fabric are not part of it; their
// traffic appears as ports:
//   csr_*          SysCSR write (layout, mode, one mask per lane)
//   prec           element precision (the vector element width)
//   edge_west_x    input operands for lanes at the west edge of a sub-array
//   edge_north_w   OS weights for lanes at the north edge of a sub-array
//   wload_*        WS/IS stationary-operand load, per lane and PE row
//   clear, drain   OS tile start and read-out (broadcast)
//   simd_*         SIMD operands and results, per lane; simd_op holds one
//                  operation per MPRA quadrant, shared by all lanes
//   acc_vld/res    accumulator results per lane and column group; valid only
//                  on lanes at the bottom of their sub-array
//   cur_*, cfg_load, *_link, bottom_lane
//                  SysCSR read-back and the resulting lane connections
// Timing: a SysCSR write takes effect in the PEs two cycles later; see mpra,
// mp_accumulator and mpra_simd_unit for the datapath latencies.
//
// The lane count of 16, the 2-bit layout and mode fields and the mask match
// follow the architecture description; port grouping and encodings are
// choices of this implementation.
module gta_top
  import gta_pkg::*;
#(
  parameter int NUM_LANES = 16,
  parameter int MASK_W    = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // SysCSR write
  input  logic                    csr_we,
  input  layout_e                 csr_layout,
  input  sys_mode_e               csr_mode,
  input  logic [MASK_W-1:0]       csr_mask     [NUM_LANES],
  input  prec_e                   prec,
  // systolic operands from the lanes' register files
  input  xbus_t                   edge_west_x  [NUM_LANES][MPRA_DIM],
  input  wbus_t                   edge_north_w [NUM_LANES][MPRA_DIM],
  input  logic [MPRA_DIM-1:0]     wload_en     [NUM_LANES],
  input  wbus_t                   wload_d      [NUM_LANES][MPRA_DIM],
  input  logic                    clear,
  input  logic                    drain,
  // SIMD mode
  input  logic [NUM_LANES-1:0]    simd_vld,
  input  simd_op_e                simd_op [4],
  input  logic [VEC_W-1:0]        simd_a       [NUM_LANES],
  input  logic [VEC_W-1:0]        simd_b       [NUM_LANES],
  input  logic [VEC_W-1:0]        simd_c       [NUM_LANES],
  output logic [NUM_LANES-1:0]    simd_res_vld,
  output logic [VEC_W-1:0]        simd_res     [NUM_LANES],
  // results
  output logic [MPRA_DIM-1:0]     acc_vld      [NUM_LANES],
  output logic signed [RES_W-1:0] acc_res      [NUM_LANES][MPRA_DIM],
  // configuration read-back
  output layout_e                 cur_layout,
  output sys_mode_e               cur_mode,
  output logic [MASK_W-1:0]       cur_mask     [NUM_LANES],
  output logic                    cfg_load,
  output logic [NUM_LANES-1:0]    west_link,
  output logic [NUM_LANES-1:0]    north_link,
  output logic [NUM_LANES-1:0]    bottom_lane
);

  sys_mode_e         lane_mode;
  logic [MASK_W-1:0] lane_mask [NUM_LANES];

  xbus_t lane_east_x  [NUM_LANES][MPRA_DIM];
  wbus_t lane_south_w [NUM_LANES][MPRA_DIM];
  pbus_t lane_south_p [NUM_LANES][MPRA_DIM];
  xbus_t lane_west_x  [NUM_LANES][MPRA_DIM];
  wbus_t lane_north_w [NUM_LANES][MPRA_DIM];
  pbus_t lane_north_p [NUM_LANES][MPRA_DIM];
  logic [NUM_LANES-1:0] south_link;
  logic [MPRA_DIM-1:0]  lane_acc_vld [NUM_LANES];

  sys_csr #(.NUM_LANES(NUM_LANES), .MASK_W(MASK_W)) u_csr (
    .clk, .rst_n, .csr_we,
    .wr_layout(csr_layout), .wr_mode(csr_mode), .wr_mask(csr_mask),
    .csr_layout(cur_layout), .csr_mode(cur_mode), .csr_mask(cur_mask),
    .lane_mode, .lane_mask, .cfg_load
  );

  slide_unit #(.NUM_LANES(NUM_LANES), .MASK_W(MASK_W)) u_slide (
    .layout(cur_layout), .mode(lane_mode), .lane_mask,
    .lane_east_x, .lane_south_w, .lane_south_p,
    .edge_west_x, .edge_north_w,
    .lane_west_x, .lane_north_w, .lane_north_p,
    .west_link, .north_link, .south_link
  );

  for (genvar l = 0; l < NUM_LANES; l++) begin : g_lane
    mpra u_mpra (
      .clk, .rst_n, .mode(lane_mode), .prec,
      .west_x(lane_west_x[l]),   .east_x(lane_east_x[l]),
      .north_w(lane_north_w[l]), .south_w(lane_south_w[l]),
      .north_p(lane_north_p[l]), .south_p(lane_south_p[l]),
      .wload_en(wload_en[l]),    .wload_d(wload_d[l]),
      .clear, .drain,
      .acc_vld(lane_acc_vld[l]), .acc_res(acc_res[l]),
      .simd_vld(simd_vld[l]),    .simd_op,
      .simd_a(simd_a[l]), .simd_b(simd_b[l]), .simd_c(simd_c[l]),
      .simd_res_vld(simd_res_vld[l]), .simd_res(simd_res[l])
    );
    assign acc_vld[l]     = south_link[l] ? '0 : lane_acc_vld[l];
    assign bottom_lane[l] = !south_link[l];
  end

endmodule
