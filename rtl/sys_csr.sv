// sys_csr: Systolic Control and Status Register (SysCSR).
//
// Holds the three-level interconnect configuration of the lane array:
//   Global Layout  (2 bits)            logical arrangement of the lanes
//                                      (1 << layout lane rows, row-major)
//   Systolic Mode  (2 bits)            SIMD / WS / IS / OS, i.e. which
//                                      operand sets move between lanes
//   Lane Partition (MASK_W bits x lanes) one mask set per lane; only
//                                      neighbouring lanes with equal masks
//                                      exchange data
// A write (csr_we) updates all fields at once. In the following cycle the
// mask sets are copied into the per-lane mask registers and the mode is
// handed to the lanes (cfg_load pulses); the PEs' own mode registers follow
// one cycle after that. Software should therefore leave two idle cycles
// between a write and the first systolic operand.
//
// The three fields, the 2-bit widths of the first two and the per-lane mask
// sets loaded into mask registers inside each lane follow the architecture
// description (the printed mask examples are two bits wide, hence
// MASK_W = 2). Writing all fields in one access and the one-cycle load step
// are choices of this implementation; the instruction that performs the
// write belongs to the vector processor and is not modelled.
module sys_csr
  import gta_pkg::*;
#(
  parameter int NUM_LANES = 16,
  parameter int MASK_W    = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              csr_we,
  input  layout_e           wr_layout,
  input  sys_mode_e         wr_mode,
  input  logic [MASK_W-1:0] wr_mask [NUM_LANES],
  // CSR contents (read-back)
  output layout_e           csr_layout,
  output sys_mode_e         csr_mode,
  output logic [MASK_W-1:0] csr_mask [NUM_LANES],
  // lane-side copies
  output sys_mode_e         lane_mode,
  output logic [MASK_W-1:0] lane_mask [NUM_LANES],
  output logic              cfg_load
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      csr_layout <= LAYOUT_R1;
      csr_mode   <= MODE_SIMD;
      cfg_load   <= 1'b0;
      lane_mode  <= MODE_SIMD;
      for (int l = 0; l < NUM_LANES; l++) begin
        csr_mask[l]  <= '0;
        lane_mask[l] <= '0;
      end
    end else begin
      cfg_load <= csr_we;
      if (csr_we) begin
        csr_layout <= wr_layout;
        csr_mode   <= wr_mode;
        for (int l = 0; l < NUM_LANES; l++) csr_mask[l] <= wr_mask[l];
      end
      if (cfg_load) begin
        lane_mode <= csr_mode;
        for (int l = 0; l < NUM_LANES; l++) lane_mask[l] <= csr_mask[l];
      end
    end
  end

endmodule
