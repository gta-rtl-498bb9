// tb_sys_csr: self-checking test of the SysCSR.
// Random configurations are written; the CSR read-back must show them the
// cycle after the write, and the lane-side mode and mask copies exactly one
// cycle after that (with a cfg_load pulse in between). Reset values are
// checked too, and a write must not disturb the lanes before it is loaded.
module tb_sys_csr;
  import gta_pkg::*;
  localparam int L = 16, MW = 2;
  logic clk = 0, rst_n = 0;
  logic csr_we;
  layout_e wr_layout, csr_layout;
  sys_mode_e wr_mode, csr_mode, lane_mode;
  logic [MW-1:0] wr_mask [L], csr_mask [L], lane_mask [L];
  logic cfg_load;
  int checks = 0, failures = 0;

  sys_csr dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    csr_we = 0; wr_layout = LAYOUT_R1; wr_mode = MODE_SIMD;
    for (int l = 0; l < L; l++) wr_mask[l] = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    chk("reset layout", csr_layout == LAYOUT_R1);
    chk("reset mode", csr_mode == MODE_SIMD && lane_mode == MODE_SIMD);
    chk("reset load", cfg_load == 0);
    for (int t = 0; t < 100; t++) begin
      automatic layout_e   nl = layout_e'($urandom_range(3));
      automatic sys_mode_e nm = sys_mode_e'($urandom_range(3));
      logic [MW-1:0] mk [L];
      automatic sys_mode_e old_mode = lane_mode;
      logic [MW-1:0] old_mask [L];
      for (int l = 0; l < L; l++) begin mk[l] = MW'($urandom); old_mask[l] = lane_mask[l]; end
      csr_we = 1; wr_layout = nl; wr_mode = nm; wr_mask = mk;
      @(negedge clk);
      csr_we = 0; wr_layout = layout_e'($urandom_range(3)); wr_mode = sys_mode_e'($urandom_range(3));
      for (int l = 0; l < L; l++) wr_mask[l] = MW'($urandom);
      chk("csr layout", csr_layout == nl);
      chk("csr mode", csr_mode == nm);
      chk("cfg_load pulse", cfg_load == 1);
      chk("lane mode not yet", lane_mode == old_mode);
      for (int l = 0; l < L; l++) begin
        chk("csr mask", csr_mask[l] == mk[l]);
        chk("lane mask not yet", lane_mask[l] == old_mask[l]);
      end
      @(negedge clk);
      chk("cfg_load ends", cfg_load == 0);
      chk("lane mode", lane_mode == nm);
      for (int l = 0; l < L; l++) chk("lane mask", lane_mask[l] == mk[l]);
      // idle cycles keep the configuration
      repeat ($urandom_range(2)) @(negedge clk);
      chk("hold", csr_layout == nl && lane_mode == nm);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
