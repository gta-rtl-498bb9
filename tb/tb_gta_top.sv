// tb_gta_top: end-to-end test of the GTA fabric at its default size
// (16 lanes, 8x8 PEs per lane, 2-bit masks). Each phase writes the SysCSR,
// drives the lanes' edge operands as the vector register files would, and
// compares every accumulator / SIMD result with integer arithmetic.
//   1. WS, INT16, layout 2 x 8 lanes (16 x 64 PEs): K = 16, 32 outputs;
//      also checks the first-result latency 2n + rows.
//   2. Mask partition, layout 1 x 16, masks 01 on lanes 0-7 and 10 on lanes
//      8-15: two independent 8 x 64 INT8 WS arrays run concurrently.
//   3. OS, INT32, layout 4 x 4 (32 x 32 PEs): 8 x 8 outputs, drained
//      through four lanes.
//   4. IS, signed INT64, layout 8 x 2 (64 x 16 PEs): K = 64, 2 outputs.
//   5. SIMD on all lanes: INT16 MAC, INT8 SUB, INT64 MUL, INT32 ADD, then
//      INT32 with a different operation in each array quadrant
//      (Mul / Add / MAC / Sub).
// Each mechanism (layout switch, mask mismatch, WS, IS, OS drain, SIMD,
// mixed-quadrant SIMD, every precision) is counted; one that never happened counts a failure.
module tb_gta_top;
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
  int n_simd_mixed = 0;
  int n_layout = 0, n_mask_reject = 0, n_ws = 0, n_is = 0, n_os = 0, n_simd = 0;
  int n_prec [4];

  gta_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rval(input int n, input bit sgn);
    logic [63:0] v = {$urandom, $urandom};
    if (n < 8) begin
      v = v & ((64'd1 << (8 * n)) - 1);
      if (sgn && v[8*n-1]) v = v | ~((64'd1 << (8 * n)) - 1);
    end
    return longint'(v);
  endfunction

  function automatic logic signed [RES_W-1:0] wide(input longint v, input bit sgn);
    return sgn ? RES_W'(v) : RES_W'(unsigned'(v));
  endfunction

  // ---------------- scoreboard ----------------
  logic signed [RES_W-1:0] expq [L][D][$];
  int first_res [L];

  always @(negedge clk) begin
    for (int l = 0; l < L; l++)
      for (int g = 0; g < D; g++)
        if (acc_vld[l][g]) begin
          checks++;
          if (first_res[l] < 0) first_res[l] = cyc;
          if (expq[l][g].size() == 0) begin
            failures++; $display("unexpected result lane %0d group %0d", l, g);
          end else begin
            automatic logic signed [RES_W-1:0] e = expq[l][g].pop_front();
            if (acc_res[l][g] !== e) begin
              failures++;
              $display("lane %0d group %0d: got %0d expected %0d", l, g, acc_res[l][g], e);
            end
          end
        end
  end

  task automatic all_idle();
    for (int l = 0; l < L; l++) begin
      wload_en[l] = '0;
      for (int k = 0; k < D; k++) begin
        edge_west_x[l][k] = '0; edge_north_w[l][k] = '0; wload_d[l][k] = '0;
      end
    end
    clear = 0; drain = 0; simd_vld = '0;
  endtask

  task automatic expect_empty(input string what);
    repeat (200) @(negedge clk);
    for (int l = 0; l < L; l++)
      for (int g = 0; g < D; g++) begin
        checks++;
        if (expq[l][g].size() != 0) begin
          failures++;
          $display("%s: lane %0d group %0d missing %0d results", what, l, g, expq[l][g].size());
          expq[l][g].delete();
        end
      end
  endtask

  task automatic write_csr(input layout_e lay, input sys_mode_e md, input logic [MW-1:0] mk [L]);
    if (lay != cur_layout) n_layout++;
    csr_we = 1; csr_layout = lay; csr_mode = md; csr_mask = mk;
    @(negedge clk);
    csr_we = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (cur_layout != lay || cur_mode != md || cur_mask != mk) begin failures++; $display("CSR read-back wrong"); end
  endtask

  // WS / IS on lane columns [c0, c1) of the current layout (all lane rows)
  task automatic run_ws(input int p, input bit sgn, input int c0, input int c1, input int M);
    int n = 1 << p;
    int rows_l = 1 << cur_layout;
    int cols_l = L / rows_l;
    int R = D * rows_l;
    int NG = D * (c1 - c0) / n;
    longint W [][];
    longint X [][];
    int t0;
    n_prec[p]++;
    W = new[R]; foreach (W[i]) W[i] = new[NG];
    X = new[M]; foreach (X[i]) X[i] = new[R];
    foreach (W[i, j]) W[i][j] = rval(n, sgn);
    foreach (X[i, j]) X[i][j] = rval(n, sgn);
    for (int m = 0; m < M; m++)
      for (int q = 0; q < NG; q++) begin
        automatic logic signed [RES_W-1:0] e = '0;
        automatic int lane = (rows_l - 1) * cols_l + c0 + (q * n) / D;
        for (int r = 0; r < R; r++) e += wide(X[m][r], sgn) * wide(W[r][q], sgn);
        expq[lane][q % (D / n)].push_back(e);
      end
    // weight load: all lanes in parallel, one PE row per cycle
    for (int r = 0; r < D; r++) begin
      for (int lr = 0; lr < rows_l; lr++)
        for (int lc = c0; lc < c1; lc++) begin
          automatic int l = lr * cols_l + lc;
          wload_en[l] = '0; wload_en[l][r] = 1'b1;
          for (int c = 0; c < D; c++) begin
            automatic int gc = (lc - c0) * D + c;
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
        automatic int l = (gr / D) * cols_l + c0;
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
    begin
      automatic int lb = (rows_l - 1) * cols_l + c0;
      repeat (2 * n + 2) @(negedge clk);
      checks++;
      if (first_res[lb] - t0 != 2 * n + R) begin
        failures++;
        $display("WS latency: %0d cycles, expected %0d", first_res[lb] - t0, 2 * n + R);
      end
    end
  endtask

  // OS on the whole lane grid of the current layout
  task automatic run_os(input int p, input bit sgn, input int K);
    int n = 1 << p;
    int rows_l = 1 << cur_layout;
    int cols_l = L / rows_l;
    int R = D * rows_l, C = D * cols_l;
    int MO = R / n, NO = C / n;
    longint A [][];
    longint B [][];
    n_prec[p]++;
    A = new[MO]; foreach (A[i]) A[i] = new[K];
    B = new[K];  foreach (B[i]) B[i] = new[NO];
    foreach (A[i, j]) A[i][j] = rval(n, sgn);
    foreach (B[i, j]) B[i][j] = rval(n, sgn);
    for (int m = MO - 1; m >= 0; m--)
      for (int q = 0; q < NO; q++) begin
        automatic logic signed [RES_W-1:0] e = '0;
        automatic int lane = (rows_l - 1) * cols_l + (q * n) / D;
        for (int k = 0; k < K; k++) e += wide(A[m][k], sgn) * wide(B[k][q], sgn);
        expq[lane][q % (D / n)].push_back(e);
      end
    for (int t = 0; t < K + R + C; t++) begin
      clear = (t == 0);
      for (int gr = 0; gr < R; gr++) begin
        automatic int l = (gr / D) * cols_l;
        automatic int k = t - gr;
        edge_west_x[l][gr % D] = '0;
        if (k >= 0 && k < K) begin
          edge_west_x[l][gr % D].vld = 1'b1;
          edge_west_x[l][gr % D].d   = 8'(A[gr / n][k] >> (8 * (gr % n)));
          edge_west_x[l][gr % D].sgn = sgn && (gr % n == n - 1);
        end
      end
      for (int gc = 0; gc < C; gc++) begin
        automatic int l = gc / D;
        automatic int k = t - gc;
        edge_north_w[l][gc % D] = '0;
        if (k >= 0 && k < K) begin
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
    n_os++;
  endtask

  task automatic run_simd(input int p, input simd_op_e op [4]);
    int n = 1 << p;
    int ne = 64 / (n * n);
    logic [VEC_W-1:0] e [L];
    n_prec[p]++;
    prec = prec_e'(p);
    simd_op = op;
    for (int l = 0; l < L; l++) begin
      for (int i = 0; i < VEC_W / 32; i++) begin
        simd_a[l][i*32 +: 32] = $urandom; simd_b[l][i*32 +: 32] = $urandom; simd_c[l][i*32 +: 32] = $urandom;
      end
      e[l] = '0;
      for (int el = 0; el < ne; el++) begin
        logic [63:0] x, y, z, o;
        int q;
        // quadrant of the element's n x n block
        q = (((el / (8 / n)) * n) / 4) * 2 + ((el % (8 / n)) * n) / 4;
        x = '0; y = '0; z = '0;
        for (int bt = 0; bt < 8 * n; bt++) begin
          x[bt] = simd_a[l][el*8*n + bt]; y[bt] = simd_b[l][el*8*n + bt]; z[bt] = simd_c[l][el*8*n + bt];
        end
        case (op[q])
          SIMD_MUL: o = x * y;
          SIMD_MAC: o = z + x * y;
          SIMD_ADD: o = x + y;
          default:  o = x - y;
        endcase
        for (int bt = 0; bt < 8 * n; bt++) e[l][el*8*n + bt] = o[bt];
      end
    end
    simd_vld = '1;
    @(negedge clk);
    simd_vld = '0;
    @(negedge clk);
    for (int l = 0; l < L; l++) begin
      checks++;
      if (!simd_res_vld[l] || simd_res[l] !== e[l]) begin
        failures++; $display("SIMD lane %0d prec %0d mismatch", l, p);
      end
    end
    n_simd++;
  endtask

  logic [MW-1:0] mk [L];

  initial begin
    csr_we = 0; csr_layout = LAYOUT_R1; csr_mode = MODE_SIMD; prec = PREC_INT8; simd_op = '{default: SIMD_MUL};
    for (int l = 0; l < L; l++) begin
      csr_mask[l] = '0; mk[l] = '0; simd_a[l] = '0; simd_b[l] = '0; simd_c[l] = '0;
    end
    foreach (n_prec[i]) n_prec[i] = 0;
    all_idle();
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. WS INT16 on 2 x 8 lanes
    prec = PREC_INT16;
    write_csr(LAYOUT_R2, MODE_WS, mk);
    run_ws(1, 1, 0, 8, 4);
    n_ws++;
    expect_empty("WS 2x8");
    checks++;
    if (bottom_lane != 16'hff00) begin failures++; $display("bottom lanes %h", bottom_lane); end

    // 2. two partitions on 1 x 16 lanes
    for (int l = 0; l < L; l++) mk[l] = (l < 8) ? 2'b01 : 2'b10;
    prec = PREC_INT8;
    write_csr(LAYOUT_R1, MODE_WS, mk);
    // lanes 1-7 and 9-15 linked to their west neighbour, lane 8 cut off
    checks++;
    if (west_link != 16'hfefe || north_link != '0) begin
      failures++; $display("links %h %h", west_link, north_link);
    end else n_mask_reject++;
    fork
      run_ws(0, 0, 0, 8, 6);
      run_ws(0, 1, 8, 16, 6);
    join
    expect_empty("partitioned WS");

    // 3. OS INT32 on 4 x 4 lanes
    for (int l = 0; l < L; l++) mk[l] = '0;
    prec = PREC_INT32;
    write_csr(LAYOUT_R4, MODE_OS, mk);
    run_os(2, 1, 5);
    expect_empty("OS 4x4");
    checks++;
    if (bottom_lane != 16'hf000) begin failures++; $display("bottom lanes %h", bottom_lane); end

    // 4. IS signed INT64 on 8 x 2 lanes
    prec = PREC_INT64;
    write_csr(LAYOUT_R8, MODE_IS, mk);
    run_ws(3, 1, 0, 2, 3);
    n_is++;
    expect_empty("IS 8x2");

    // 5. SIMD
    write_csr(LAYOUT_R8, MODE_SIMD, mk);
    run_simd(1, '{default: SIMD_MAC});
    run_simd(0, '{default: SIMD_SUB});
    run_simd(3, '{default: SIMD_MUL});
    run_simd(2, '{default: SIMD_ADD});
    // four INT32 operations at once, one per array quadrant
    run_simd(2, '{SIMD_MUL, SIMD_ADD, SIMD_MAC, SIMD_SUB});
    n_simd_mixed++;

    // mechanism coverage
    $display("layout switches %0d, mask rejects %0d, WS %0d, IS %0d, OS drains %0d, SIMD %0d (mixed %0d), prec %0d/%0d/%0d/%0d",
             n_layout, n_mask_reject, n_ws, n_is, n_os, n_simd, n_simd_mixed, n_prec[0], n_prec[1], n_prec[2], n_prec[3]);
    foreach (n_prec[i]) begin checks++; if (n_prec[i] == 0) failures++; end
    checks++; if (n_layout == 0) failures++;
    checks++; if (n_mask_reject == 0) failures++;
    checks++; if (n_ws == 0) failures++;
    checks++; if (n_is == 0) failures++;
    checks++; if (n_os == 0) failures++;
    checks++; if (n_simd == 0) failures++;
    checks++; if (n_simd_mixed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
