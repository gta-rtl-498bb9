// mpra_pe: one 8-bit processing element of the Multi-Precision Reconfigurable
// Array (MPRA).
//
// The PE multiplies one 8-bit limb pair. Each operand carries a sign flag so
// that the most significant limb of a signed number is multiplied as a signed
// value and every other limb as unsigned (a 9x9 signed multiply). The PE holds
// three operand registers (input x_q, weight w_q, partial sum p_q) and a
// systolic mode register mode_q that follows the mode field of the control
// register one cycle later.
//
// Behaviour per mode (mode_q):
//   WS / IS : w_q is stationary (written by wload_en). x flows right one PE per
//             cycle; p_out = p_in + x_in * w_q flows down one PE per cycle and
//             takes the limb tag of x_in.
//   OS      : x flows right, w flows down, p_q accumulates x_in * w_in in place.
//             clear starts a new accumulation with the current product; drain
//             shifts p_q down the column (p_q <= p_in) to read results out.
//   SIMD    : no data movement; p_q <= simd_x * simd_w (unsigned limb product),
//             collected by the SIMD unit of the array.
// All outputs are registers, so every hop costs one cycle.
//
// The 8-bit PE, the three operand registers, the mode register and the
// per-mode movement (input right, partial sum down in WS; three operand sets
// moving in OS) follow the architecture description. The sign-flag scheme, the
// limb tag and the clear/drain controls are choices of this implementation.
module mpra_pe
  import gta_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  sys_mode_e   mode,
  input  xbus_t       x_in,
  output xbus_t       x_out,
  input  wbus_t       w_in,
  output wbus_t       w_out,
  input  pbus_t       p_in,
  output pbus_t       p_out,
  input  logic        wload_en,
  input  wbus_t       wload_d,
  input  logic        clear,
  input  logic        drain,
  input  logic [LIMB_W-1:0] simd_x,
  input  logic [LIMB_W-1:0] simd_w
);

  sys_mode_e mode_q;
  xbus_t     x_q;
  wbus_t     w_q;
  pbus_t     p_q;

  logic signed [LIMB_W:0]     ma, mb;
  logic signed [2*LIMB_W+1:0] prod;
  logic signed [PSUM_W-1:0]   prod_x;

  always_comb begin
    unique case (mode_q)
      MODE_SIMD: begin
        ma = {1'b0, simd_x};
        mb = {1'b0, simd_w};
      end
      MODE_OS: begin
        ma = {x_in.sgn & x_in.d[LIMB_W-1], x_in.d};
        mb = {w_in.sgn & w_in.d[LIMB_W-1], w_in.d};
      end
      default: begin
        ma = {x_in.sgn & x_in.d[LIMB_W-1], x_in.d};
        mb = {w_q.sgn & w_q.d[LIMB_W-1], w_q.d};
      end
    endcase
    prod   = ma * mb;
    prod_x = PSUM_W'(prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= MODE_SIMD;
      x_q    <= '0;
      w_q    <= '0;
      p_q    <= '0;
    end else begin
      mode_q <= mode;
      x_q    <= x_in;
      unique case (mode_q)
        MODE_WS, MODE_IS: begin
          if (wload_en) w_q <= wload_d;
          p_q.vld  <= x_in.vld;
          p_q.limb <= x_in.limb;
          p_q.s    <= p_in.s + (x_in.vld ? prod_x : '0);
        end
        MODE_OS: begin
          w_q <= w_in;
          if (drain) begin
            p_q <= p_in;
          end else begin
            p_q.vld  <= 1'b0;
            p_q.limb <= '0;
            if (clear)         p_q.s <= x_in.vld ? prod_x : '0;
            else if (x_in.vld) p_q.s <= p_q.s + prod_x;
          end
        end
        default: begin // MODE_SIMD
          p_q.vld  <= 1'b0;
          p_q.limb <= '0;
          p_q.s    <= prod_x;
        end
      endcase
    end
  end

  assign x_out = x_q;
  assign w_out = w_q;
  assign p_out = p_q;

endmodule
