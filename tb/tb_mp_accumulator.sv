// tb_mp_accumulator: self-checking test of the multi-precision accumulator.
// WS: for each precision, random signed column partial sums are presented
//     with the limb tags and the one-cycle-per-column skew a systolic array
//     produces (column c sees limb i of vector v at cycle v*n + i + c).
//     Each group result must equal sum_j sum_i psum(c=gn+j, i) * 2^(8(i+j)),
//     one result per group every n cycles.
// OS: random values are drained, row limb index n-1-(d mod n); each group
//     result must equal sum over the n drained rows and n columns of
//     value * 2^(8(i+j)).
module tb_mp_accumulator;
  import gta_pkg::*;
  localparam int C = 8;
  localparam int NV = 6;  // vectors per precision
  logic clk = 0, rst_n = 0;
  sys_mode_e mode;
  prec_e prec;
  logic drain;
  pbus_t col_in [C];
  logic [C-1:0] res_vld;
  logic signed [RES_W-1:0] res [C];
  int checks = 0, failures = 0;

  mp_accumulator dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [RES_W-1:0] expq [C][$];
  logic signed [PSUM_W-1:0] val [NV][C][8];

  always @(negedge clk) begin
    for (int g = 0; g < C; g++) begin
      if (res_vld[g]) begin
        checks++;
        if (expq[g].size() == 0) begin
          failures++; $display("unexpected result group %0d", g);
        end else begin
          logic signed [RES_W-1:0] e;
          e = expq[g].pop_front();
          if (res[g] !== e) begin
            failures++;
            $display("prec %0d group %0d: got %0d expected %0d", prec, g, res[g], e);
          end
        end
      end
    end
  end

  initial begin
    mode = MODE_WS; prec = PREC_INT8; drain = 0;
    for (int c = 0; c < C; c++) col_in[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---------------- WS / IS ----------------
    for (int p = 0; p < 4; p++) begin
      automatic int n = 1 << p;
      automatic int total;
      prec = prec_e'(p);
      mode = (p % 2 == 1) ? MODE_IS : MODE_WS;
      repeat (2) @(negedge clk);  // mode register settles
      for (int v = 0; v < NV; v++)
        for (int c = 0; c < C; c++)
          for (int i = 0; i < n; i++)
            val[v][c][i] = PSUM_W'($signed(20'($urandom)));
      for (int g = 0; g < C / n; g++)
        for (int v = 0; v < NV; v++) begin
          automatic logic signed [RES_W-1:0] e = '0;
          for (int j = 0; j < n; j++)
            for (int i = 0; i < n; i++)
              e += RES_W'(val[v][g*n+j][i]) <<< (8 * (i + j));
          expq[g].push_back(e);
        end
      total = NV * n + C;
      for (int t = 0; t < total; t++) begin
        for (int c = 0; c < C; c++) begin
          automatic int k = t - c;
          if (k >= 0 && k < NV * n) begin
            col_in[c].vld  = 1'b1;
            col_in[c].limb = 3'(k % n);
            col_in[c].s    = val[k / n][c][k % n];
          end else begin
            col_in[c] = '0;
            col_in[c].s = PSUM_W'($urandom);  // ignored while not valid
          end
        end
        @(negedge clk);
      end
      for (int c = 0; c < C; c++) col_in[c] = '0;
      repeat (4) @(negedge clk);
      for (int g = 0; g < C; g++) begin
        checks++;
        if (expq[g].size() != 0) begin failures++; $display("WS prec %0d group %0d missing results", p, g); end
      end
    end
    // ---------------- OS drain ----------------
    mode = MODE_OS;
    repeat (2) @(negedge clk);
    for (int p = 0; p < 4; p++) begin
      automatic int n = 1 << p;
      automatic int rows = 16;  // two lanes deep
      logic signed [PSUM_W-1:0] dv [16][C];
      prec = prec_e'(p);
      for (int d = 0; d < rows; d++)
        for (int c = 0; c < C; c++) dv[d][c] = PSUM_W'($urandom);
      for (int blk = 0; blk < rows / n; blk++)
        for (int g = 0; g < C / n; g++) begin
          automatic logic signed [RES_W-1:0] e = '0;
          for (int dd = 0; dd < n; dd++)
            for (int j = 0; j < n; j++)
              e += RES_W'(dv[blk*n+dd][g*n+j]) <<< (8 * (n - 1 - dd + j));
          expq[g].push_back(e);
        end
      @(negedge clk);
      for (int d = 0; d < rows; d++) begin
        drain = 1;
        for (int c = 0; c < C; c++) begin col_in[c] = '0; col_in[c].s = dv[d][c]; end
        @(negedge clk);
      end
      drain = 0;
      repeat (4) @(negedge clk);
      for (int g = 0; g < C; g++) begin
        checks++;
        if (expq[g].size() != 0) begin failures++; $display("OS prec %0d group %0d missing results", p, g); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
