// tb_slide_unit: self-checking test of the inter-lane slide unit.
// For random layouts, modes, mask sets and random lane/edge data, every
// lane input must come from the lane to its west / north on the logical
// grid when that lane exists and has the same mask bits (and the mode moves
// that operand set), and from the lane's own edge operands otherwise. The
// link flags are checked the same way. Two fixed cases follow the printed
// examples: masks 01, 01, 10 on a 1-row layout link lanes 0 and 1 but not
// lanes 1 and 2.
module tb_slide_unit;
  import gta_pkg::*;
  localparam int L = 16, MW = 2, D = MPRA_DIM;
  layout_e layout;
  sys_mode_e mode;
  logic [MW-1:0] lane_mask [L];
  xbus_t lane_east_x [L][D], edge_west_x [L][D], lane_west_x [L][D];
  wbus_t lane_south_w [L][D], edge_north_w [L][D], lane_north_w [L][D];
  pbus_t lane_south_p [L][D], lane_north_p [L][D];
  logic [L-1:0] west_link, north_link, south_link;
  int checks = 0, failures = 0;
  logic clk = 0;

  slide_unit dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (layout %0d mode %0d)", what, layout, mode); end
  endtask

  task automatic randomize_data();
    for (int l = 0; l < L; l++)
      for (int k = 0; k < D; k++) begin
        lane_east_x[l][k]  = xbus_t'($urandom);
        edge_west_x[l][k]  = xbus_t'($urandom);
        lane_south_w[l][k] = wbus_t'($urandom);
        edge_north_w[l][k] = wbus_t'($urandom);
        lane_south_p[l][k] = pbus_t'({$urandom, $urandom});
      end
  endtask

  task automatic check_all();
    int rows = 1 << layout;
    int cols = L / rows;
    bit mv = (mode != MODE_SIMD);
    for (int l = 0; l < L; l++) begin
      int r = l / cols, c = l % cols;
      bit wl = mv && c > 0 && lane_mask[l] == lane_mask[l-1];
      bit nl = mv && r > 0 && lane_mask[l] == lane_mask[l-cols];
      bit sl = mv && r < rows - 1 && lane_mask[l] == lane_mask[l+cols];
      chk("west_link", west_link[l] == wl);
      chk("north_link", north_link[l] == nl);
      chk("south_link", south_link[l] == sl);
      for (int k = 0; k < D; k++) begin
        chk("west x", lane_west_x[l][k] == (wl ? lane_east_x[l-1][k] : edge_west_x[l][k]));
        chk("north p", lane_north_p[l][k] == (nl ? lane_south_p[l-cols][k] : pbus_t'(0)));
        chk("north w", lane_north_w[l][k] == ((nl && mode == MODE_OS) ? lane_south_w[l-cols][k]
                                                                      : edge_north_w[l][k]));
      end
    end
  endtask

  initial begin
    // printed example: masks 01 01 10 in a row
    layout = LAYOUT_R1; mode = MODE_WS;
    for (int l = 0; l < L; l++) lane_mask[l] = 2'b10;
    lane_mask[0] = 2'b01; lane_mask[1] = 2'b01;
    randomize_data();
    #1;
    chk("lane0->lane1 permitted", west_link[1] == 1 && lane_west_x[1][3] == lane_east_x[0][3]);
    chk("lane1->lane2 rejected", west_link[2] == 0 && lane_west_x[2][3] == edge_west_x[2][3]);
    check_all();
    for (int t = 0; t < 300; t++) begin
      layout = layout_e'($urandom_range(3));
      mode = sys_mode_e'($urandom_range(3));
      for (int l = 0; l < L; l++) lane_mask[l] = ($urandom_range(3) == 0) ? MW'($urandom) : '0;
      randomize_data();
      #1;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
