// tb_gta_workloads: integer application kernels run end to end on the full
// 16-lane GTA fabric at its default parameters.
//
// Each kernel is lowered to a p-GEMM the way the scheduling software would do
// it. The testbench plays the vector register files: it loads the stationary
// operand, streams the other one into the lane-grid edges with the systolic
// skew, and collects the bottom lanes' accumulator results. Every result is
// checked against the kernel computed directly, not through the GEMM, so the
// check is independent of the mapping. The application classes and their
// precisions are the ones the architecture targets; the kernel sizes are
// this testbench's own choice, sized to one array tile each:
//   RGB  sRGB -> XYZ colour conversion, unsigned INT8, WS on 1 x 16 lanes:
//        3 x 3 matrix in Q1.7 fixed point, 32 pixels.
//   FFE  feed-forward equaliser (FIR filter), signed INT16, WS on 2 x 8
//        lanes: 16 taps, 48 output samples.
//   MD   Gram matrix A * A^T (the first step of a Cholesky decomposition),
//        signed INT32, OS on 4 x 4 lanes: A is 8 x 16, result 8 x 8.
//   ALI  AlexNet-style convolution, signed INT8, WS on 8 x 2 lanes: 7 input
//        channels, 6 x 6 map, 3 x 3 kernels, 16 output channels (im2col:
//        K = 63 padded to 64, 16 output pixels).
//   BNM  big-number multiplication, unsigned INT64, WS on 1 x 16 lanes:
//        512-bit x 512-bit products of four numbers by a fixed one. Their
//        64-bit words form a Toeplitz weight matrix, so column q gives the
//        exact 130-bit convolution sum of word pairs (i, j) with i + j = q;
//        the final carry pass is left to software.
// WS kernels also check the first-result latency 2n + rows. Each kernel is
// counted; one that never ran counts a failure.
module tb_gta_workloads;
  import gta_pkg::*;
  localparam int L = 16, MW = 2, D = MPRA_DIM;
  logic clk = 0, rst_n = 0;
  logic csr_we;
  layout_e csr_layout, cur_layout;
  sys_mode_e csr_mode, cur_mode;
  logic [MW-1:0] csr_mask [L], cur_mask [L];
  logic cfg_load;
  logic [L-1:0] west_link, north_link;
  prec_e prec;
  xbus_t edge_west_x [L][D];
  wbus_t edge_north_w [L][D];
  logic [D-1:0] wload_en [L];
  wbus_t wload_d [L][D];
  logic clear, drain;
  logic [L-1:0] simd_vld, simd_res_vld, bottom_lane;
  simd_op_e simd_op [4];
  logic [VEC_W-1:0] simd_a [L], simd_b [L], simd_c [L], simd_res [L];
  logic [D-1:0] acc_vld [L];
  logic signed [RES_W-1:0] acc_res [L][D];
  int checks = 0, failures = 0, cyc = 0;
  int n_rgb = 0, n_ffe = 0, n_md = 0, n_ali = 0, n_bnm = 0;

  gta_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- result collection ----------------
  logic signed [RES_W-1:0] got [L][D][$];
  int first_res [L];

  always @(negedge clk)
    for (int l = 0; l < L; l++)
      for (int g = 0; g < D; g++)
        if (acc_vld[l][g]) begin
          if (first_res[l] < 0) first_res[l] = cyc;
          got[l][g].push_back(acc_res[l][g]);
        end

  task automatic clear_got();
    for (int l = 0; l < L; l++)
      for (int g = 0; g < D; g++) got[l][g].delete();
  endtask

  // result m of global column group q (WS) from the bottom lane row
  function automatic logic signed [RES_W-1:0] ws_res(input int n, input int q, input int m);
    int rows_l = 1 << cur_layout;
    int cols_l = L / rows_l;
    int lane = (rows_l - 1) * cols_l + (q * n) / D;
    if (m >= got[lane][q % (D / n)].size()) return 'x;
    return got[lane][q % (D / n)][m];
  endfunction

  function automatic int ws_count(input int n, input int q);
    int rows_l = 1 << cur_layout;
    int cols_l = L / rows_l;
    return got[(rows_l - 1) * cols_l + (q * n) / D][q % (D / n)].size();
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic all_idle();
    for (int l = 0; l < L; l++) begin
      wload_en[l] = '0;
      for (int k = 0; k < D; k++) begin
        edge_west_x[l][k] = '0; edge_north_w[l][k] = '0; wload_d[l][k] = '0;
      end
    end
    clear = 0; drain = 0; simd_vld = '0;
  endtask

  task automatic configure(input layout_e lay, input sys_mode_e md, input prec_e p);
    logic [MW-1:0] mk [L];
    foreach (mk[i]) mk[i] = '0;
    prec = p;
    csr_we = 1; csr_layout = lay; csr_mode = md; csr_mask = mk;
    @(negedge clk);
    csr_we = 0;
    repeat (3) @(negedge clk);
    check(cur_layout == lay && cur_mode == md && cur_mask == mk, "configuration read-back");
    clear_got();
  endtask

  // ---------------- WS on the whole lane grid ----------------
  // W[r][q]: R x NG stationary matrix; X[m][r]: M input vectors
  task automatic run_ws(input int p, input bit sgn, input longint W [][], input longint X [][]);
    int n = 1 << p;
    int rows_l = 1 << cur_layout;
    int cols_l = L / rows_l;
    int R = D * rows_l;
    int M = X.size();
    int t0;
    for (int r = 0; r < D; r++) begin
      for (int lr = 0; lr < rows_l; lr++)
        for (int lc = 0; lc < cols_l; lc++) begin
          automatic int l = lr * cols_l + lc;
          wload_en[l] = '0; wload_en[l][r] = 1'b1;
          for (int c = 0; c < D; c++) begin
            automatic int gc = lc * D + c;
            wload_d[l][c].d   = 8'(W[lr * D + r][gc / n] >> (8 * (gc % n)));
            wload_d[l][c].sgn = sgn && (gc % n == n - 1);
          end
        end
      @(negedge clk);
    end
    for (int l = 0; l < L; l++) wload_en[l] = '0;
    t0 = cyc;
    for (int l = 0; l < L; l++) first_res[l] = -1;
    for (int t = 0; t < M * n + R; t++) begin
      for (int gr = 0; gr < R; gr++) begin
        automatic int l = (gr / D) * cols_l;
        automatic int k = t - gr;
        edge_west_x[l][gr % D] = '0;
        if (k >= 0 && k < M * n) begin
          edge_west_x[l][gr % D].vld  = 1'b1;
          edge_west_x[l][gr % D].limb = 3'(k % n);
          edge_west_x[l][gr % D].d    = 8'(X[k / n][gr] >> (8 * (k % n)));
          edge_west_x[l][gr % D].sgn  = sgn && (k % n == n - 1);
        end
      end
      @(negedge clk);
    end
    all_idle();
    repeat (3 * R + 4 * n + D * cols_l) @(negedge clk);
    check(first_res[(rows_l - 1) * cols_l] - t0 == 2 * n + R,
          $sformatf("WS latency %0d, expected 2n + rows = %0d", first_res[(rows_l - 1) * cols_l] - t0, 2 * n + R));
  endtask

  // ---------------- OS on the whole lane grid ----------------
  task automatic run_os(input int p, input bit sgn, input longint A [][], input longint B [][]);
    int n = 1 << p;
    int rows_l = 1 << cur_layout;
    int cols_l = L / rows_l;
    int R = D * rows_l, C = D * cols_l;
    int K = B.size();
    for (int t = 0; t < K + R + C; t++) begin
      clear = (t == 0);
      for (int gr = 0; gr < R; gr++) begin
        automatic int l = (gr / D) * cols_l;
        automatic int k = t - gr;
        edge_west_x[l][gr % D] = '0;
        if (k >= 0 && k < K && gr / n < A.size()) begin
          edge_west_x[l][gr % D].vld = 1'b1;
          edge_west_x[l][gr % D].d   = 8'(A[gr / n][k] >> (8 * (gr % n)));
          edge_west_x[l][gr % D].sgn = sgn && (gr % n == n - 1);
        end
      end
      for (int gc = 0; gc < C; gc++) begin
        automatic int l = gc / D;
        automatic int k = t - gc;
        edge_north_w[l][gc % D] = '0;
        if (k >= 0 && k < K && gc / n < B[0].size()) begin
          edge_north_w[l][gc % D].d   = 8'(B[k][gc / n] >> (8 * (gc % n)));
          edge_north_w[l][gc % D].sgn = sgn && (gc % n == n - 1);
        end
      end
      @(negedge clk);
    end
    all_idle();
    drain = 1;
    repeat (R) @(negedge clk);
    drain = 0;
    repeat (4 * n + 4) @(negedge clk);
  endtask

  // ---------------- kernels ----------------
  // RGB: XYZ = M * RGB, M in Q1.7 (round(128 * sRGB D65 matrix))
  task automatic kernel_rgb();
    localparam int NPIX = 32;
    int cm [3][3] = '{'{53, 46, 23}, '{27, 92, 9}, '{2, 15, 122}};
    int px [NPIX][3];
    longint W [][];
    longint X [][];
    configure(LAYOUT_R1, MODE_WS, PREC_INT8);
    W = new[D]; foreach (W[i]) begin W[i] = new[D * L]; foreach (W[i][j]) W[i][j] = 0; end
    for (int ch = 0; ch < 3; ch++)
      for (int o = 0; o < 3; o++) W[ch][o] = longint'(cm[o][ch]);
    X = new[NPIX];
    for (int m = 0; m < NPIX; m++) begin
      X[m] = new[D]; foreach (X[m][j]) X[m][j] = 0;
      for (int ch = 0; ch < 3; ch++) begin px[m][ch] = $urandom_range(255); X[m][ch] = longint'(px[m][ch]); end
    end
    run_ws(0, 0, W, X);
    for (int o = 0; o < 3; o++) begin
      check(ws_count(1, o) == NPIX, $sformatf("RGB: %0d results in channel %0d", ws_count(1, o), o));
      for (int m = 0; m < NPIX && m < ws_count(1, o); m++) begin
        automatic int e = cm[o][0] * px[m][0] + cm[o][1] * px[m][1] + cm[o][2] * px[m][2];
        check(ws_res(1, o, m) == RES_W'(e), $sformatf("RGB pixel %0d channel %0d: %0d vs %0d", m, o, ws_res(1, o, m), e));
      end
    end
    n_rgb++;
  endtask

  // FFE: y[t] = sum_k h[k] * s[t + 15 - k], 16 taps, signed INT16
  task automatic kernel_ffe();
    localparam int TAPS = 16, NOUT = 48;
    int h [TAPS];
    int s [NOUT + TAPS - 1];
    longint W [][];
    longint X [][];
    configure(LAYOUT_R2, MODE_WS, PREC_INT16);
    foreach (h[k]) h[k] = int'($signed(16'($urandom)));
    foreach (s[i]) s[i] = int'($signed(16'($urandom)));
    W = new[2 * D]; foreach (W[i]) begin W[i] = new[(L / 2) * D / 2]; foreach (W[i][j]) W[i][j] = 0; end
    for (int k = 0; k < TAPS; k++) W[k][0] = longint'(h[k]);
    X = new[NOUT];
    for (int t = 0; t < NOUT; t++) begin
      X[t] = new[2 * D];
      for (int k = 0; k < TAPS; k++) X[t][k] = longint'(s[t + TAPS - 1 - k]);
    end
    run_ws(1, 1, W, X);
    check(ws_count(2, 0) == NOUT, $sformatf("FFE: %0d outputs", ws_count(2, 0)));
    for (int t = 0; t < NOUT && t < ws_count(2, 0); t++) begin
      automatic longint e = 0;
      for (int k = 0; k < TAPS; k++) e += longint'(h[k]) * longint'(s[t + TAPS - 1 - k]);
      check(ws_res(2, 0, t) == RES_W'(e), $sformatf("FFE y[%0d]: %0d vs %0d", t, ws_res(2, 0, t), e));
    end
    n_ffe++;
  endtask

  // MD: G = A * A^T, A 8 x 16 signed INT32, OS on 4 x 4 lanes
  task automatic kernel_md();
    localparam int MR = 8, KK = 16;
    longint A [][];
    longint B [][];
    int rows_l, cols_l;
    configure(LAYOUT_R4, MODE_OS, PREC_INT32);
    rows_l = 1 << cur_layout; cols_l = L / rows_l;
    A = new[MR]; foreach (A[i]) begin A[i] = new[KK]; foreach (A[i][j]) A[i][j] = longint'($signed($urandom)); end
    B = new[KK]; foreach (B[k]) begin B[k] = new[MR]; foreach (B[k][j]) B[k][j] = A[j][k]; end
    run_os(2, 1, A, B);
    // drained block-rows come out last row first: entry j holds row MR-1-j
    for (int j = 0; j < MR; j++) begin
      automatic int lane = (rows_l - 1) * cols_l + (j * 4) / D;
      check(got[lane][j % 2].size() == MR, $sformatf("MD: column %0d has %0d results", j, got[lane][j % 2].size()));
      for (int e = 0; e < MR && e < got[lane][j % 2].size(); e++) begin
        automatic int i = MR - 1 - e;
        automatic logic signed [RES_W-1:0] g = '0;
        for (int k = 0; k < KK; k++) g += RES_W'(A[i][k]) * RES_W'(A[j][k]);
        check(got[lane][j % 2][e] == g, $sformatf("MD G[%0d][%0d]", i, j));
      end
    end
    n_md++;
  endtask

  // ALI: conv 7 x 6 x 6 input, 16 kernels 7 x 3 x 3, stride 1, no padding
  task automatic kernel_ali();
    localparam int CI = 7, HW = 6, KS = 3, CO = 16, HO = HW - KS + 1;
    int fm [CI][HW][HW];
    int kw [CO][CI][KS][KS];
    longint W [][];
    longint X [][];
    configure(LAYOUT_R8, MODE_WS, PREC_INT8);
    foreach (fm[c, y, x]) fm[c][y][x] = $urandom_range(127);           // post-ReLU activations
    foreach (kw[o, c, y, x]) kw[o][c][y][x] = int'($signed(8'($urandom)));
    // im2col: row r = (c, ky, kx), column = output channel
    W = new[8 * D]; foreach (W[i]) begin W[i] = new[2 * D]; foreach (W[i][j]) W[i][j] = 0; end
    foreach (kw[o, c, y, x]) W[(c * KS + y) * KS + x][o] = longint'(kw[o][c][y][x]);
    X = new[HO * HO];
    for (int oy = 0; oy < HO; oy++)
      for (int ox = 0; ox < HO; ox++) begin
        automatic int m = oy * HO + ox;
        X[m] = new[8 * D]; foreach (X[m][j]) X[m][j] = 0;
        for (int c = 0; c < CI; c++)
          for (int y = 0; y < KS; y++)
            for (int x = 0; x < KS; x++) X[m][(c * KS + y) * KS + x] = longint'(fm[c][oy + y][ox + x]);
      end
    run_ws(0, 1, W, X);
    for (int o = 0; o < CO; o++) begin
      check(ws_count(1, o) == HO * HO, $sformatf("ALI: channel %0d has %0d pixels", o, ws_count(1, o)));
      for (int oy = 0; oy < HO; oy++)
        for (int ox = 0; ox < HO; ox++) begin
          automatic int e = 0;
          for (int c = 0; c < CI; c++)
            for (int y = 0; y < KS; y++)
              for (int x = 0; x < KS; x++) e += kw[o][c][y][x] * fm[c][oy + y][ox + x];
          if (oy * HO + ox < ws_count(1, o))
            check(ws_res(1, o, oy * HO + ox) == RES_W'(e), $sformatf("ALI out[%0d][%0d][%0d]", o, oy, ox));
        end
    end
    n_ali++;
  endtask

  // BNM: 512 x 512-bit products; words of b form a Toeplitz matrix
  task automatic kernel_bnm();
    localparam int NW = 8, NA = 4;
    logic [511:0] a [NA];
    logic [511:0] b;
    longint W [][];
    longint X [][];
    configure(LAYOUT_R1, MODE_WS, PREC_INT64);
    for (int i = 0; i < 16; i++) b[i*32 +: 32] = $urandom;
    foreach (a[m]) for (int i = 0; i < 16; i++) a[m][i*32 +: 32] = $urandom;
    a[0] = '1;                           // all-ones operand: long carry chains
    W = new[D]; foreach (W[i]) begin W[i] = new[D * L / 8]; foreach (W[i][j]) W[i][j] = 0; end
    for (int r = 0; r < NW; r++)
      for (int q = r; q < r + NW; q++) W[r][q] = longint'(b[(q - r) * 64 +: 64]);
    X = new[NA];
    foreach (X[m]) begin X[m] = new[D]; for (int r = 0; r < NW; r++) X[m][r] = longint'(a[m][r * 64 +: 64]); end
    run_ws(3, 0, W, X);
    for (int m = 0; m < NA; m++) begin
      logic [1023:0] prod, acc;
      prod = 1024'(a[m]) * 1024'(b);
      acc = '0;
      for (int q = 0; q < 2 * NW - 1; q++) begin
        check(ws_count(8, q) == NA, $sformatf("BNM: column %0d has %0d results", q, ws_count(8, q)));
        if (m < ws_count(8, q)) acc += 1024'(unsigned'(ws_res(8, q, m))) << (64 * q);
      end
      check(acc == prod, $sformatf("BNM product %0d", m));
    end
    n_bnm++;
  endtask

  initial begin
    csr_we = 0; csr_layout = LAYOUT_R1; csr_mode = MODE_SIMD; prec = PREC_INT8; simd_op = '{default: SIMD_MUL};
    for (int l = 0; l < L; l++) begin
      csr_mask[l] = '0; simd_a[l] = '0; simd_b[l] = '0; simd_c[l] = '0;
    end
    all_idle();
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    kernel_rgb();
    kernel_ffe();
    kernel_md();
    kernel_ali();
    kernel_bnm();
    $display("kernels run: RGB %0d, FFE %0d, MD %0d, ALI %0d, BNM %0d", n_rgb, n_ffe, n_md, n_ali, n_bnm);
    check(n_rgb > 0 && n_ffe > 0 && n_md > 0 && n_ali > 0 && n_bnm > 0, "every kernel ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
