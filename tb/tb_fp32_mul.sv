// tb_fp32_mul -- self-checking test of fp32_mul against the double-precision
// reference of fp_ref_pkg: directed special cases (zeros, infinities, NaN,
// exact cancellation, rounding ties) and 20000 random operand pairs.
module tb_fp32_mul;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y, r;
  int checks = 0, failures = 0;
  fp32_mul dut (.a_i(a), .b_i(b), .y_o(y));

  task automatic chk(input logic [31:0] ta, input logic [31:0] tb_, input logic [31:0] exp_);
    a = ta; b = tb_; #1;
    checks++;
    if (y !== exp_) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h %h -> %h expected %h", ta, tb_, y, exp_);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk(32'h3FC0_0000, 32'h4020_0000, 32'h4070_0000); // 1.5*2.5 = 3.75
    chk(32'h0000_0000, 32'h4020_0000, 32'h0000_0000);
    chk(32'h8000_0000, 32'h4020_0000, 32'h8000_0000);
    chk(32'h7F80_0000, 32'hC000_0000, 32'hFF80_0000); // inf * -2
    chk(32'h7F80_0000, 32'h0000_0000, 32'h7FC0_0000); // inf * 0
    chk(32'h7FC0_0001, 32'h3F80_0000, 32'h7FC0_0000);
    chk(32'h7F00_0000, 32'h7F00_0000, 32'h7F80_0000); // overflow
    chk(32'h0080_0000, 32'h0080_0000, 32'h0000_0000); // underflow flushes
    chk(32'h3F80_0001, 32'h3F80_0001, 32'h3F80_0002); // 1+2ulp, rounding
    for (int n = 0; n < 20000; n++) begin
      logic [31:0] x, z;
      x = frand(70, 180); z = frand(70, 180);
      chk(x, z, fmul(x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
