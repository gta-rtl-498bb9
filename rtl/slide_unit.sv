// slide_unit: inter-lane interconnect of the GTA array with the mask match
// mechanism.
//
// The Global Layout field places the NUM_LANES lanes on a logical grid of
// R = 1 << layout lane rows and C = NUM_LANES / R lane columns, row-major
// (lane l at row l / C, column l mod C). Each lane's MPRA then takes
//   its west input  from the east output of lane l-1 (same lane row), and
//   its north inputs from the south outputs of lane l-C (lane row above),
// but only where the two lanes carry the same mask bits; a mismatch (or the
// edge of the grid) cuts the link and the lane takes its own edge operands
// from its vector register file instead (edge_west_x, edge_north_w, and a
// zero partial sum). This splits the lanes into independent sub-arrays.
// The Systolic Mode decides which operand sets cross a link: inputs and
// partial sums in WS/IS, additionally weights in OS, nothing in SIMD.
// The *_link outputs tell each lane whether it is connected on that side;
// a lane with no south link is the bottom of its sub-array and its
// accumulator results are final.
// Purely combinational.
//
// The layout-driven choice of source and destination lane and the
// "match permits, mismatch rejects" rule follow the architecture
// description; the row-major placement and the layout encoding are choices
// of this implementation.
module slide_unit
  import gta_pkg::*;
#(
  parameter int NUM_LANES = 16,
  parameter int MASK_W    = 2
) (
  input  layout_e           layout,
  input  sys_mode_e         mode,
  input  logic [MASK_W-1:0] lane_mask    [NUM_LANES],
  // lane outputs
  input  xbus_t             lane_east_x  [NUM_LANES][MPRA_DIM],
  input  wbus_t             lane_south_w [NUM_LANES][MPRA_DIM],
  input  pbus_t             lane_south_p [NUM_LANES][MPRA_DIM],
  // edge operands from each lane's own register file
  input  xbus_t             edge_west_x  [NUM_LANES][MPRA_DIM],
  input  wbus_t             edge_north_w [NUM_LANES][MPRA_DIM],
  // lane inputs
  output xbus_t             lane_west_x  [NUM_LANES][MPRA_DIM],
  output wbus_t             lane_north_w [NUM_LANES][MPRA_DIM],
  output pbus_t             lane_north_p [NUM_LANES][MPRA_DIM],
  output logic [NUM_LANES-1:0] west_link,
  output logic [NUM_LANES-1:0] north_link,
  output logic [NUM_LANES-1:0] south_link
);

  int unsigned ncols;  // lane columns of the logical grid

  always_comb begin
    ncols = NUM_LANES >> layout;
    if (ncols == 0) ncols = 1;
    for (int l = 0; l < NUM_LANES; l++) begin
      int unsigned wsrc, nsrc, sdst;
      logic        moving;
      moving = (mode != MODE_SIMD);
      wsrc = (l == 0) ? 0 : l - 1;
      nsrc = (l >= ncols) ? l - ncols : 0;
      sdst = (l + ncols < NUM_LANES) ? l + ncols : 0;
      west_link[l]  = moving && (l % ncols != 0) && (lane_mask[l] == lane_mask[wsrc]);
      north_link[l] = moving && (l >= ncols) && (lane_mask[l] == lane_mask[nsrc]);
      south_link[l] = moving && (l + ncols < NUM_LANES) && (lane_mask[l] == lane_mask[sdst]);
      for (int k = 0; k < MPRA_DIM; k++) begin
        lane_west_x[l][k]  = west_link[l] ? lane_east_x[wsrc][k] : edge_west_x[l][k];
        lane_north_p[l][k] = north_link[l] ? lane_south_p[nsrc][k] : '0;
        lane_north_w[l][k] = (north_link[l] && mode == MODE_OS) ? lane_south_w[nsrc][k]
                                                                 : edge_north_w[l][k];
      end
    end
  end

endmodule
