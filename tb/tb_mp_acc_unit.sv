// tb_mp_acc_unit: self-checking test of the shift-add accumulator unit.
// Random 2W-bit operands X, Y are split into W-bit limbs, the four limb
// products are fed in, and the 4W-bit output must equal X*Y computed with
// plain wide multiplication. Checked for W = 8 (the 16-bit unit) and W = 16.
module tb_mp_acc_unit;
  logic [15:0] p11, p21, p12, p22;
  logic [31:0] p;
  logic [31:0] q11, q21, q12, q22;
  logic [63:0] q;
  int checks = 0, failures = 0;

  mp_acc_unit dut (.p11, .p21, .p12, .p22, .p);
  mp_acc_unit #(.W(16)) dut16 (.p11(q11), .p21(q21), .p12(q12), .p22(q22), .p(q));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check8(input logic [15:0] x, input logic [15:0] y);
    p11 = x[7:0] * y[7:0];  p21 = x[15:8] * y[7:0];
    p12 = x[7:0] * y[15:8]; p22 = x[15:8] * y[15:8];
    #1;
    checks++;
    if (p !== 32'(x) * 32'(y)) begin
      failures++;
      $display("W=8 mismatch %h*%h got %h", x, y, p);
    end
  endtask

  task automatic check16(input logic [31:0] x, input logic [31:0] y);
    q11 = x[15:0] * y[15:0];  q21 = x[31:16] * y[15:0];
    q12 = x[15:0] * y[31:16]; q22 = x[31:16] * y[31:16];
    #1;
    checks++;
    if (q !== 64'(x) * 64'(y)) begin
      failures++;
      $display("W=16 mismatch %h*%h got %h", x, y, q);
    end
  endtask

  initial begin
    check8(16'hffff, 16'hffff);
    check8(16'h0000, 16'h1234);
    check8(16'h00ff, 16'hff00);
    check8(16'hff00, 16'h00ff);
    check16(32'hffffffff, 32'hffffffff);
    for (int k = 0; k < 2000; k++) begin
      check8(16'($urandom), 16'($urandom));
      check16($urandom, $urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
