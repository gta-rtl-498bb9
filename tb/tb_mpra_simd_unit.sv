// tb_mpra_simd_unit: self-checking test of the SIMD recombination unit.
// The testbench plays the 8x8 PEs itself (registered unsigned product of
// the pe_x/pe_w limbs it is given). For every precision and element
// operation, random vectors are applied back to back and each result is
// compared with element-wise arithmetic on 64/(n*n) elements of 8n bits.
// Each of the four array quadrants gets its own operation: first all four
// equal, then random per-quadrant mixes (including the INT32 Mul/Add/MAC/Sub
// split of the four quadrants). It also checks the two-cycle latency and
// one-vector-per-cycle rate.
module tb_mpra_simd_unit;
  import gta_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_vld;
  prec_e prec;
  simd_op_e op [4];
  logic [VEC_W-1:0] a, b, c, res;
  logic [7:0] pe_x [8][8], pe_w [8][8];
  logic [15:0] prod [8][8];
  logic res_vld;
  int checks = 0, failures = 0;

  mpra_simd_unit dut (.*);

  always #5 clk = ~clk;
  // PE model
  always_ff @(posedge clk)
    for (int r = 0; r < 8; r++)
      for (int k = 0; k < 8; k++)
        prod[r][k] <= 16'(pe_x[r][k]) * 16'(pe_w[r][k]);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [VEC_W-1:0] ref_op(input logic [VEC_W-1:0] x, y, z,
                                               input prec_e p, input simd_op_e oq [4]);
    logic [VEC_W-1:0] out = '0;
    int n = 1 << p;
    int ne = 64 / (n * n);
    for (int e = 0; e < ne; e++) begin
      logic [63:0] xe, ye, ze, re;
      simd_op_e o;
      int row0, col0;
      // top-left PE of the element's block, and the quadrant it lies in
      row0 = (e / (8 / n)) * n; col0 = (e % (8 / n)) * n;
      o = oq[(row0 / 4) * 2 + col0 / 4];
      xe = 64'(x[e*8*n +: 64]); ye = 64'(y[e*8*n +: 64]); ze = 64'(z[e*8*n +: 64]);
      case (o)
        SIMD_MUL: re = xe * ye;
        SIMD_MAC: re = ze + xe * ye;
        SIMD_ADD: re = xe + ye;
        default:  re = xe - ye;
      endcase
      for (int bt = 0; bt < 8 * n; bt++) out[e*8*n + bt] = re[bt];
    end
    return out;
  endfunction

  logic [VEC_W-1:0] exp_q [$];

  // scoreboard
  always @(negedge clk) begin
    if (res_vld) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected result");
      end else begin
        logic [VEC_W-1:0] e;
        e = exp_q.pop_front();
        if (res !== e) begin
          failures++;
          $display("mismatch prec=%0d op=%0d/%0d/%0d/%0d\n got %h\n exp %h", prec, op[0], op[1], op[2], op[3], res, e);
        end
      end
    end
  end

  function automatic logic [VEC_W-1:0] rnd();
    logic [VEC_W-1:0] v;
    for (int i = 0; i < VEC_W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    in_vld = 0; prec = PREC_INT8; op = '{default: SIMD_MUL}; a = '0; b = '0; c = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 4; p++) begin
      for (int o = 0; o < 8; o++) begin
        prec = prec_e'(p);
        if (o < 4) op = '{default: simd_op_e'(o)};
        else if (o == 4) op = '{SIMD_MUL, SIMD_ADD, SIMD_MAC, SIMD_SUB};
        else for (int q = 0; q < 4; q++) op[q] = simd_op_e'($urandom_range(3));
        for (int t = 0; t < 20; t++) begin
          a = rnd(); b = rnd(); c = rnd();
          if (t == 0) begin a = '1; b = '1; end
          in_vld = 1;
          exp_q.push_back(ref_op(a, b, c, prec, op));
          @(negedge clk);
        end
        in_vld = 0;
        // latency: result of the last vector appears exactly two cycles later
        checks++;
        if (exp_q.size() != 2) begin
          failures++; $display("latency: %0d results pending, expected 2", exp_q.size());
        end
        repeat (2) @(negedge clk);
        checks++;
        if (exp_q.size() != 0) begin failures++; $display("results missing"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
