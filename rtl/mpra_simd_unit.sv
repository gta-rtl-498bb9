// mpra_simd_unit: SIMD (vector) mode of the MPRA.
//
// In SIMD mode an 8x8 MPRA behaves as a vector multiply unit: every n x n
// block of PEs (n = 1, 2, 4, 8 limbs for INT8/16/32/64) forms the n*n limb
// products of one element pair, so one lane processes 64/(n*n) elements per
// cycle: 64, 16, 4 and 1 products for INT8, INT16, INT32, INT64.
//
// Operand distribution: element e of the SEW = 8n bit vectors a and b is
// mapped to block (br, bc) with e = br*(8/n) + bc; PE (r, c) of that block
// gets limb r mod n of a[e] and limb c mod n of b[e] (pe_x, pe_w).
// Recombination: the limb products come back from the PEs one cycle later
// (prod) and are merged by a tree of mp_acc_unit shift-add units: sixteen
// W=8 units give the 2x2-block (16-bit) products, four W=16 units the
// 4x4-block (32-bit) products, one W=32 unit the 64-bit product. The low SEW
// bits of each product give the element result (modular, so the same for
// signed and unsigned operands).
// Element operations: MUL a*b, MAC c + a*b, ADD a + b, SUB a - b.
// The operation is chosen per quadrant of the 8x8 array (op[q], with
// q = 2*(row half) + (column half): q0 top-left, q1 top-right, q2
// bottom-left, q3 bottom-right), so at INT32 the four quadrants can run four
// different operations at once; an element takes the op of the quadrant its
// n x n block lies in, and the single INT64 element uses op[0].
//
// Timing: operands at cycle t (in_vld), PE products registered at t+1,
// result registered at t+2 (res_vld). One vector per cycle.
//
// The block mapping, the Mul/MAC/Add/Sub set, the four quadrants running
// different INT32 operations and the per-precision element counts follow
// the architecture description; the exact limb placement,
// the low-half result convention and the two-cycle latency are choices of
// this implementation.
module mpra_simd_unit
  import gta_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_vld,
  input  prec_e             prec,
  input  simd_op_e          op [4],   // per quadrant, see above
  input  logic [VEC_W-1:0]  a,
  input  logic [VEC_W-1:0]  b,
  input  logic [VEC_W-1:0]  c,
  // operand limbs to the PEs and their registered products
  output logic [LIMB_W-1:0] pe_x [MPRA_DIM][MPRA_DIM],
  output logic [LIMB_W-1:0] pe_w [MPRA_DIM][MPRA_DIM],
  input  logic [2*LIMB_W-1:0] prod [MPRA_DIM][MPRA_DIM],
  output logic              res_vld,
  output logic [VEC_W-1:0]  res
);

  localparam int D = MPRA_DIM;

  // ---------------- operand distribution ----------------
  always_comb begin
    for (int r = 0; r < D; r++) begin
      for (int cc = 0; cc < D; cc++) begin
        int n, e, ra, rb;
        n  = 1 << prec;
        e  = (r / n) * (D / n) + (cc / n);
        ra = e * n + (r % n);   // byte index of limb r mod n of a[e]
        rb = e * n + (cc % n);  // byte index of limb c mod n of b[e]
        pe_x[r][cc] = a[ra*LIMB_W +: LIMB_W];
        pe_w[r][cc] = b[rb*LIMB_W +: LIMB_W];
      end
    end
  end

  // stage 1: operands wait for the PE products
  logic              s1_vld;
  prec_e             s1_prec;
  simd_op_e          s1_op [4];
  logic [VEC_W-1:0]  s1_a, s1_b, s1_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_vld  <= 1'b0;
      s1_prec <= PREC_INT8;
      s1_op   <= '{default: SIMD_MUL};
      s1_a    <= '0;
      s1_b    <= '0;
      s1_c    <= '0;
    end else begin
      s1_vld  <= in_vld;
      s1_prec <= prec;
      s1_op   <= op;
      s1_a    <= a;
      s1_b    <= b;
      s1_c    <= c;
    end
  end

  // ---------------- recombination tree ----------------
  logic [31:0]  l1 [D/2][D/2];  // 2x2 blocks: 16-bit x 16-bit
  logic [63:0]  l2 [D/4][D/4];  // 4x4 blocks: 32-bit x 32-bit
  logic [127:0] l3;             // 8x8 block : 64-bit x 64-bit

  for (genvar i = 0; i < D/2; i++) begin : g_l1r
    for (genvar j = 0; j < D/2; j++) begin : g_l1c
      // rows carry limbs of a (X), columns limbs of b (Y)
      mp_acc_unit #(.W(8)) u_acc16 (
        .p11(prod[2*i][2*j]),   .p21(prod[2*i+1][2*j]),
        .p12(prod[2*i][2*j+1]), .p22(prod[2*i+1][2*j+1]),
        .p(l1[i][j])
      );
    end
  end
  for (genvar i = 0; i < D/4; i++) begin : g_l2r
    for (genvar j = 0; j < D/4; j++) begin : g_l2c
      mp_acc_unit #(.W(16)) u_acc32 (
        .p11(l1[2*i][2*j]),   .p21(l1[2*i+1][2*j]),
        .p12(l1[2*i][2*j+1]), .p22(l1[2*i+1][2*j+1]),
        .p(l2[i][j])
      );
    end
  end
  mp_acc_unit #(.W(32)) u_acc64 (
    .p11(l2[0][0]), .p21(l2[1][0]), .p12(l2[0][1]), .p22(l2[1][1]), .p(l3)
  );

  // element products, low SEW bits, packed as a vector
  logic [VEC_W-1:0] pvec;
  always_comb begin
    pvec = '0;
    unique case (s1_prec)
      PREC_INT8:
        for (int r = 0; r < D; r++)
          for (int cc = 0; cc < D; cc++)
            pvec[(r*D+cc)*8 +: 8] = prod[r][cc][7:0];
      PREC_INT16:
        for (int r = 0; r < D/2; r++)
          for (int cc = 0; cc < D/2; cc++)
            pvec[(r*(D/2)+cc)*16 +: 16] = l1[r][cc][15:0];
      PREC_INT32:
        for (int r = 0; r < D/4; r++)
          for (int cc = 0; cc < D/4; cc++)
            pvec[(r*(D/4)+cc)*32 +: 32] = l2[r][cc][31:0];
      default:
        pvec[63:0] = l3[63:0];
    endcase
  end

  // element-wise add / subtract at the current element width
  function automatic logic [VEC_W-1:0] vadd(input logic [VEC_W-1:0] x,
                                            input logic [VEC_W-1:0] y,
                                            input logic sub, input prec_e pr);
    logic [VEC_W-1:0] o;
    o = '0;
    unique case (pr)
      PREC_INT8:  for (int e = 0; e < VEC_W/8;  e++) o[e*8  +: 8]  = sub ? x[e*8  +: 8]  - y[e*8  +: 8]  : x[e*8  +: 8]  + y[e*8  +: 8];
      PREC_INT16: for (int e = 0; e < VEC_W/16; e++) o[e*16 +: 16] = sub ? x[e*16 +: 16] - y[e*16 +: 16] : x[e*16 +: 16] + y[e*16 +: 16];
      PREC_INT32: for (int e = 0; e < VEC_W/32; e++) o[e*32 +: 32] = sub ? x[e*32 +: 32] - y[e*32 +: 32] : x[e*32 +: 32] + y[e*32 +: 32];
      default:    for (int e = 0; e < VEC_W/64; e++) o[e*64 +: 64] = sub ? x[e*64 +: 64] - y[e*64 +: 64] : x[e*64 +: 64] + y[e*64 +: 64];
    endcase
    return o;
  endfunction

  // number of meaningful result bits: 64/(n*n) elements of 8n bits
  function automatic logic [VEC_W-1:0] active_mask(input prec_e pr);
    int nbits;
    nbits = (D * D * LIMB_W) >> pr;
    return (nbits >= VEC_W) ? '1 : ((VEC_W'(1) << nbits) - 1'b1);
  endfunction

  // all four candidate results; each byte then takes the one selected by
  // the quadrant of the element it belongs to
  logic [VEC_W-1:0] mac_v, add_v, sub_v, res_d;
  assign mac_v = vadd(s1_c, pvec, 1'b0, s1_prec);
  assign add_v = vadd(s1_a, s1_b, 1'b0, s1_prec);
  assign sub_v = vadd(s1_a, s1_b, 1'b1, s1_prec);

  always_comb begin
    for (int k = 0; k < VEC_W / LIMB_W; k++) begin
      int n, e, per, br, bc;
      logic [1:0] q;
      n   = 1 << s1_prec;
      e   = k / n;                  // element this byte belongs to
      per = D / n;                  // elements per block row
      br  = e / per;
      bc  = e % per;
      q   = 2'((((br * n) / (D / 2)) * 2 + (bc * n) / (D / 2)) & 3);
      unique case (s1_op[q])
        SIMD_MUL: res_d[k*LIMB_W +: LIMB_W] = pvec [k*LIMB_W +: LIMB_W];
        SIMD_MAC: res_d[k*LIMB_W +: LIMB_W] = mac_v[k*LIMB_W +: LIMB_W];
        SIMD_ADD: res_d[k*LIMB_W +: LIMB_W] = add_v[k*LIMB_W +: LIMB_W];
        default:  res_d[k*LIMB_W +: LIMB_W] = sub_v[k*LIMB_W +: LIMB_W];
      endcase
    end
    res_d &= active_mask(s1_prec);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_vld <= 1'b0;
      res     <= '0;
    end else begin
      res_vld <= s1_vld;
      if (s1_vld) res <= res_d;
    end
  end

endmodule
