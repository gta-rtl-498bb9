// mp_acc_unit: basic multi-precision accumulator unit (shift-add combiner).
//
// Given the four partial products of two 2W-bit numbers X = {X2,X1} and
// Y = {Y2,Y1} split into W-bit limbs, p11 = X1*Y1, p21 = X2*Y1, p12 = X1*Y2 and
// p22 = X2*Y2 (each 2W bits, unsigned), it returns the 4W-bit product
// X*Y = p22<<2W + (p21+p12)<<W + p11, built as W-bit slices P1..P4:
//   P1 = LSB(p11)
//   a  = LSB(p21) + MSB(p11)              (right upper adder)
//   b  = MSB(p12) + MSB(p21)              (left upper adder)
//   P2 = LSB(p12) + a                     (carry c2 goes left)
//   P3 = LSB(p22) + b + c2                (carry c3 goes left)
//   P4 = MSB(p22) + c3
// With W = 8 this is the 16-bit accumulator unit of the architecture (inputs
// are products of 8-bit limbs split into MSB[15:8] and LSB[7:0]). Wider units
// (W = 16, 32) combine the outputs of narrower ones, so a tree of these units
// forms the 32-bit and 64-bit multipliers of SIMD mode.
//
// The adder arrangement and the MSB/LSB split follow the published unit
// diagram; the carry widths (the diagram does not print them) are sized here
// so that no carry is lost. Purely combinational.
module mp_acc_unit #(
  parameter int W = 8
) (
  input  logic [2*W-1:0] p11,
  input  logic [2*W-1:0] p21,
  input  logic [2*W-1:0] p12,
  input  logic [2*W-1:0] p22,
  output logic [4*W-1:0] p
);

  logic [W:0]   a, b;   // upper adders
  logic [W+1:0] s2;     // P2 adder
  logic [W+1:0] s3;     // P3 adder
  logic [W-1:0] s4;     // P4 adder

  always_comb begin
    a  = {1'b0, p21[W-1:0]} + {1'b0, p11[2*W-1:W]};
    b  = {1'b0, p12[2*W-1:W]} + {1'b0, p21[2*W-1:W]};
    s2 = {2'b0, p12[W-1:0]} + {1'b0, a};
    // carry out of P2 (weight 2^(2W)) and the carry of adder a, which has
    // the same weight, both enter the P3 adder through s2[W+1:W]
    s3 = {2'b0, p22[W-1:0]} + {1'b0, b} + {{(W){1'b0}}, s2[W+1:W]};
    s4 = p22[2*W-1:W] + W'(s3[W+1:W]);
    p  = {s4, s3[W-1:0], s2[W-1:0], p11[W-1:0]};
  end

endmodule
