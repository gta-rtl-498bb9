// tb_mpra: self-checking test of one 8x8 Multi-Precision Reconfigurable Array.
// For INT8, INT16, INT32 and INT64 (signed and unsigned operands):
//   WS: an 8 x (8/n) weight matrix is loaded row by row, a stream of input
//       vectors enters limb-serially with the systolic row skew, and every
//       group result must equal the integer dot product X_m . W_g. The cycle
//       of the first result is checked against the pipeline depth 2n + 8.
//   IS: the same stream with mode IS (same datapath, stationary inputs).
//   OS: an (8/n) x K by K x (8/n) product is accumulated in place, then
//       drained; each result must equal the integer matrix product.
//   SIMD: random Mul vectors against element-wise products.
// Reference values use plain 64/136-bit integer arithmetic.
module tb_mpra;
  import gta_pkg::*;
  localparam int D = 8;
  logic clk = 0, rst_n = 0;
  sys_mode_e mode;
  prec_e prec;
  xbus_t west_x [D], east_x [D];
  wbus_t north_w [D], south_w [D];
  pbus_t north_p [D], south_p [D];
  logic [D-1:0] wload_en;
  wbus_t wload_d [D];
  logic clear, drain;
  logic [D-1:0] acc_vld;
  logic signed [RES_W-1:0] acc_res [D];
  logic simd_vld, simd_res_vld;
  simd_op_e simd_op [4];
  logic [VEC_W-1:0] simd_a, simd_b, simd_c, simd_res;
  int checks = 0, failures = 0;
  int cyc = 0;

  mpra dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random n-limb value, signed or unsigned, as a 64-bit pattern
  function automatic longint rval(input int n, input bit sgn);
    logic [63:0] v = {$urandom, $urandom};
    if (n < 8) begin
      v = v & ((64'd1 << (8 * n)) - 1);
      if (sgn && v[8*n-1]) v = v | ~((64'd1 << (8 * n)) - 1);  // sign-extend
    end
    return longint'(v);
  endfunction

  function automatic logic signed [RES_W-1:0] wide(input longint v, input bit sgn);
    return sgn ? RES_W'(v) : RES_W'(unsigned'(v));
  endfunction

  logic signed [RES_W-1:0] expq [D][$];
  int first_res_cyc;

  always @(negedge clk) begin
    for (int g = 0; g < D; g++) begin
      if (acc_vld[g]) begin
        checks++;
        if (first_res_cyc < 0) first_res_cyc = cyc;
        if (expq[g].size() == 0) begin
          failures++; $display("unexpected result group %0d", g);
        end else begin
          automatic logic signed [RES_W-1:0] e = expq[g].pop_front();
          if (acc_res[g] !== e) begin
            failures++;
            $display("mode %0d prec %0d group %0d: got %0d expected %0d", mode, prec, g, acc_res[g], e);
          end
        end
      end
    end
  end

  task automatic idle_inputs();
    for (int k = 0; k < D; k++) begin
      west_x[k] = '0; north_w[k] = '0; north_p[k] = '0; wload_d[k] = '0;
    end
    wload_en = '0; clear = 0; drain = 0; simd_vld = 0;
  endtask

  task automatic expect_drained(input string what);
    repeat (3 * D) @(negedge clk);
    for (int g = 0; g < D; g++) begin
      checks++;
      if (expq[g].size() != 0) begin
        failures++; $display("%s: group %0d has %0d missing results", what, g, expq[g].size());
        expq[g].delete();
      end
    end
  endtask

  // ---------------- WS / IS ----------------
  task automatic run_ws(input int p, input bit sgn, input sys_mode_e md);
    int n = 1 << p;
    int ng = D / n;
    int M = 5;
    longint W [D][D];
    longint X [8][D];
    int t0;
    mode = md; prec = prec_e'(p);
    repeat (3) @(negedge clk);
    for (int r = 0; r < D; r++)
      for (int g = 0; g < ng; g++) W[r][g] = rval(n, sgn);
    for (int m = 0; m < M; m++)
      for (int r = 0; r < D; r++) X[m][r] = rval(n, sgn);
    for (int m = 0; m < M; m++)
      for (int g = 0; g < ng; g++) begin
        logic signed [RES_W-1:0] e = '0;
        for (int r = 0; r < D; r++) e += wide(X[m][r], sgn) * wide(W[r][g], sgn);
        expq[g].push_back(e);
      end
    // load weights, one PE row per cycle
    for (int r = 0; r < D; r++) begin
      wload_en = '0; wload_en[r] = 1'b1;
      for (int c = 0; c < D; c++) begin
        wload_d[c].d   = 8'(W[r][c / n] >> (8 * (c % n)));
        wload_d[c].sgn = sgn && (c % n == n - 1);
      end
      @(negedge clk);
    end
    wload_en = '0;
    // stream inputs: row r, vector m, limb i at cycle m*n + i + r
    first_res_cyc = -1;
    t0 = cyc;
    for (int t = 0; t < M * n + D; t++) begin
      for (int r = 0; r < D; r++) begin
        int k = t - r;
        west_x[r] = '0;
        if (k >= 0 && k < M * n) begin
          west_x[r].vld  = 1'b1;
          west_x[r].limb = 3'(k % n);
          west_x[r].d    = 8'(X[k / n][r] >> (8 * (k % n)));
          west_x[r].sgn  = sgn && (k % n == n - 1);
        end
      end
      @(negedge clk);
    end
    idle_inputs();
    expect_drained("WS");
    checks++;
    if (first_res_cyc - t0 != 2 * n + 8) begin
      failures++;
      $display("WS latency prec %0d: first result after %0d cycles, expected %0d", p, first_res_cyc - t0, 2 * n + 8);
    end
  endtask

  // ---------------- OS ----------------
  task automatic run_os(input int p, input bit sgn);
    int n = 1 << p;
    int nm = D / n;
    int K = 6;
    longint A [D][8];
    longint B [8][D];
    mode = MODE_OS; prec = prec_e'(p);
    repeat (3) @(negedge clk);
    for (int m = 0; m < nm; m++) for (int k = 0; k < K; k++) A[m][k] = rval(n, sgn);
    for (int k = 0; k < K; k++) for (int q = 0; q < nm; q++) B[k][q] = rval(n, sgn);
    // results leave bottom block first
    for (int m = nm - 1; m >= 0; m--)
      for (int q = 0; q < nm; q++) begin
        logic signed [RES_W-1:0] e = '0;
        for (int k = 0; k < K; k++) e += wide(A[m][k], sgn) * wide(B[k][q], sgn);
        expq[q].push_back(e);
      end
    for (int t = 0; t < K + 2 * D; t++) begin
      clear = (t == 0);
      for (int r = 0; r < D; r++) begin
        int k = t - r;
        west_x[r] = '0;
        if (k >= 0 && k < K) begin
          west_x[r].vld = 1'b1;
          west_x[r].d   = 8'(A[r / n][k] >> (8 * (r % n)));
          west_x[r].sgn = sgn && (r % n == n - 1);
        end
      end
      for (int c = 0; c < D; c++) begin
        int k = t - c;
        north_w[c] = '0;
        if (k >= 0 && k < K) begin
          north_w[c].d   = 8'(B[k][c / n] >> (8 * (c % n)));
          north_w[c].sgn = sgn && (c % n == n - 1);
        end
      end
      @(negedge clk);
    end
    idle_inputs();
    drain = 1;
    repeat (D) @(negedge clk);
    drain = 0;
    expect_drained("OS");
  endtask

  // ---------------- SIMD ----------------
  task automatic run_simd(input int p);
    int n = 1 << p;
    int ne = 64 / (n * n);
    logic [VEC_W-1:0] e;
    mode = MODE_SIMD; prec = prec_e'(p);
    repeat (3) @(negedge clk);
    for (int t = 0; t < 4; t++) begin
      for (int i = 0; i < VEC_W / 32; i++) begin
        simd_a[i*32 +: 32] = $urandom; simd_b[i*32 +: 32] = $urandom; simd_c[i*32 +: 32] = $urandom;
      end
      e = '0;
      for (int el = 0; el < ne; el++) begin
        logic [63:0] x = '0, y = '0, z;
        for (int bt = 0; bt < 8 * n; bt++) begin x[bt] = simd_a[el*8*n + bt]; y[bt] = simd_b[el*8*n + bt]; end
        z = x * y;
        for (int bt = 0; bt < 8 * n; bt++) e[el*8*n + bt] = z[bt];
      end
      simd_op = '{default: SIMD_MUL}; simd_vld = 1;
      @(negedge clk);
      simd_vld = 0;
      @(negedge clk);
      checks++;
      if (!simd_res_vld || simd_res !== e) begin
        failures++; $display("SIMD prec %0d mismatch", p);
      end
    end
  endtask

  initial begin
    mode = MODE_WS; prec = PREC_INT8; simd_op = '{default: SIMD_MUL};
    simd_a = '0; simd_b = '0; simd_c = '0;
    idle_inputs();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 4; p++) begin
      run_ws(p, 0, MODE_WS);
      run_ws(p, 1, MODE_WS);
      run_ws(p, 1, MODE_IS);
      run_os(p, 0);
      run_os(p, 1);
      run_simd(p);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
