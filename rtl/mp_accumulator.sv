// mp_accumulator: multi-precision accumulator under the columns of an MPRA.
//
// The systolic array only ever produces limb-level partial sums; this unit
// shifts and adds them into full-precision results. Columns are grouped in
// groups of n = 1 << prec (one n-limb weight or output per group); column c
// has limb position j = c mod n inside its group, and group g = c / n.
//
// WS / IS: the inputs of a row are fed limb-serially (limb 0 first), so the
//   column partial sum arriving with tag limb i holds sum_r X_r[i] * W_r[j]
//   with weight 2^(8(i+j)). Each column accumulates n tagged values and, on
//   limb n-1, moves the total into its hold register. The last column of a
//   group (j = n-1) finishes last; one cycle after it does, the group result
//   sum_j hold_j is registered with res_vld[g]. Throughput: one result per
//   group every n cycles, matching one n-limb input vector per n cycles.
// OS: while drain is high the PE accumulators leave the bottom of the column
//   one row per cycle, bottom row first. The drain counter d gives the limb
//   position of that row, i = n-1 - (d mod n), and the same shift-add runs
//   with i counting down; all columns finish together every n drain cycles.
// SIMD: idle. The mode is registered like the PEs' mode registers, so a
// mode switch reaches the PEs and this unit in the same cycle.
//
// Results are signed RES_W-bit values (enough for 64x64-bit products summed
// over 128 rows). Result g is valid in res[g] for g < COLS/n.
//
// Processing the limb carries in an accumulator below the array follows the
// architecture description; the hold-and-combine scheme, the tag-driven
// timing and the drain order are choices of this implementation.
module mp_accumulator
  import gta_pkg::*;
#(
  parameter int COLS = MPRA_DIM
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  sys_mode_e               mode,
  input  prec_e                   prec,
  input  logic                    drain,
  input  pbus_t                   col_in [COLS],
  output logic [COLS-1:0]         res_vld,
  output logic signed [RES_W-1:0] res [COLS]
);

  logic signed [RES_W-1:0] acc  [COLS];
  logic signed [RES_W-1:0] hold [COLS];
  logic [COLS-1:0]         done;
  logic [COLS-1:0]         fire_d, fire_q;
  logic [2:0]              dcnt;
  sys_mode_e               mode_q;  // aligned with the PEs' mode registers

  logic              c_vld  [COLS];
  logic              c_last [COLS];
  logic signed [RES_W-1:0] c_term [COLS];

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      logic [3:0] i, j;
      logic [2:0] nm1;
      nm1 = 3'((1 << prec) - 1);
      j   = 4'(c[2:0] & nm1);
      if (mode_q == MODE_OS) begin
        c_vld[c] = drain;
        i        = {1'b0, 3'(nm1 - (dcnt & nm1))};
        c_last[c] = (i == 4'd0);
      end else begin
        c_vld[c] = (mode_q != MODE_SIMD) && col_in[c].vld;
        i        = 4'(col_in[c].limb & nm1);
        c_last[c] = (i == 4'(nm1));
      end
      c_term[c] = RES_W'(col_in[c].s) <<< (8 * (i + j));
    end
  end

  always_comb begin
    fire_d = '0;
    for (int c = 0; c < COLS; c++) begin
      done[c] = c_vld[c] && c_last[c];
      if (done[c] && ((c & ((1 << prec) - 1)) == (1 << prec) - 1))
        fire_d[c >> prec] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dcnt   <= '0;
      mode_q <= MODE_SIMD;
      fire_q <= '0;
      for (int c = 0; c < COLS; c++) begin
        acc[c]  <= '0;
        hold[c] <= '0;
      end
    end else begin
      dcnt   <= drain ? dcnt + 3'd1 : 3'd0;
      mode_q <= mode;
      fire_q <= fire_d;
      for (int c = 0; c < COLS; c++) begin
        if (c_vld[c]) begin
          if (c_last[c]) begin
            hold[c] <= acc[c] + c_term[c];
            acc[c]  <= '0;
          end else begin
            acc[c]  <= acc[c] + c_term[c];
          end
        end
      end
    end
  end

  // group combine, one cycle after the last column of the group finished
  logic signed [RES_W-1:0] grp_sum [COLS];
  always_comb begin
    for (int g = 0; g < COLS; g++) begin
      grp_sum[g] = '0;
      for (int c = 0; c < COLS; c++)
        if ((c >> prec) == g) grp_sum[g] += hold[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_vld <= '0;
      for (int g = 0; g < COLS; g++) res[g] <= '0;
    end else begin
      res_vld <= fire_q;
      for (int g = 0; g < COLS; g++)
        if (fire_q[g]) res[g] <= grp_sum[g];
    end
  end

endmodule
