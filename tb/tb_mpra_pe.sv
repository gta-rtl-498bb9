// tb_mpra_pe: self-checking test of one MPRA processing element.
// WS: random stationary weight, random inputs and incoming partial sums;
//     p_out must be p_in + x*w one cycle later, with the input's limb tag,
//     and x must reappear on x_out one cycle later. Sign flags select the
//     signed interpretation of a limb.
// OS: a random K-step accumulation started by clear, then drain passes the
//     north partial sum through.
// SIMD: p_out holds the unsigned product of simd_x and simd_w.
module tb_mpra_pe;
  import gta_pkg::*;
  logic clk = 0, rst_n = 0;
  sys_mode_e mode;
  xbus_t x_in, x_out;
  wbus_t w_in, w_out, wload_d;
  pbus_t p_in, p_out;
  logic wload_en, clear, drain;
  logic [7:0] simd_x, simd_w;
  int checks = 0, failures = 0;

  mpra_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lval(input logic [7:0] d, input logic s);
    return s ? int'($signed(d)) : int'(d);
  endfunction

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    mode = MODE_WS; x_in = '0; w_in = '0; p_in = '0; wload_en = 0; wload_d = '0;
    clear = 0; drain = 0; simd_x = 0; simd_w = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);  // mode register settles
    // ---------------- WS ----------------
    for (int t = 0; t < 200; t++) begin
      wbus_t w;
      xbus_t x;
      pbus_t p;
      w.d = 8'($urandom); w.sgn = 1'($urandom);
      x = xbus_t'($urandom); x.vld = 1'b1;
      p = '0; p.s = PSUM_W'($signed(18'($urandom)));
      @(negedge clk);
      wload_en = 1; wload_d = w;
      @(negedge clk);
      wload_en = 0; x_in = x; p_in = p;
      @(negedge clk);
      chk("WS psum", longint'(p_out.s), longint'(p.s) + lval(x.d, x.sgn) * lval(w.d, w.sgn));
      chk("WS tag", {p_out.vld, p_out.limb}, {1'b1, x.limb});
      chk("WS x pass", x_out, x);
      // invalid input adds nothing
      x_in.vld = 0;
      @(negedge clk);
      chk("WS bubble", longint'(p_out.s), longint'(p.s));
    end
    // ---------------- OS ----------------
    @(negedge clk);
    mode = MODE_OS;
    repeat (2) @(negedge clk);
    for (int rep = 0; rep < 20; rep++) begin
      automatic longint acc = 0;
      for (int k = 0; k < 16; k++) begin
        xbus_t x;
        wbus_t w;
        x = xbus_t'($urandom); x.vld = 1'b1;
        w = wbus_t'($urandom);
        x_in = x; w_in = w; clear = (k == 0);
        acc = (k == 0 ? 0 : acc) + lval(x.d, x.sgn) * lval(w.d, w.sgn);
        @(negedge clk);
        chk("OS w pass", w_out, w);
      end
      clear = 0; x_in.vld = 0;
      @(negedge clk);
      chk("OS acc", longint'(p_out.s), acc);
      drain = 1; p_in.s = 24'sd12345;
      @(negedge clk);
      chk("OS drain", longint'(p_out.s), 12345);
      drain = 0;
    end
    // ---------------- SIMD ----------------
    mode = MODE_SIMD;
    repeat (2) @(negedge clk);
    for (int t = 0; t < 200; t++) begin
      simd_x = 8'($urandom); simd_w = 8'($urandom);
      @(negedge clk);
      chk("SIMD prod", longint'(p_out.s), longint'(simd_x) * longint'(simd_w));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
