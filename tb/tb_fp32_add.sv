// tb_fp32_add -- self-checking test of fp32_add against the double-precision
// reference of fp_ref_pkg: directed special cases (zeros, infinities, NaN,
// exact cancellation, rounding ties) and 20000 random operand pairs.
module tb_fp32_add;
  import fp_ref_pkg::*;
  logic [31:0] a, b, y, r;
  int checks = 0, failures = 0;
  fp32_add dut (.a_i(a), .b_i(b), .y_o(y));

  task automatic chk(input logic [31:0] ta, input logic [31:0] tb_, input logic [31:0] exp_);
    a = ta; b = tb_; #1;
    checks++;
    if (y !== exp_) begin
      failures++;
      if (failures < 10) $display("FAIL add %h %h -> %h expected %h", ta, tb_, y, exp_);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk(32'h3F80_0000, 32'h3F80_0000, 32'h4000_0000); // 1+1
    chk(32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000); // 1-1
    chk(32'h4040_0000, 32'hBF80_0000, 32'h4000_0000); // 3-1
    chk(32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000); // 1 + 2^-24: tie to even
    chk(32'h3F80_0001, 32'h3380_0000, 32'h3F80_0002); // tie rounds up to even
    chk(32'h7F80_0000, 32'hFF80_0000, 32'h7FC0_0000); // inf - inf
    chk(32'h7F80_0000, 32'h3F80_0000, 32'h7F80_0000);
    chk(32'h7F7F_FFFF, 32'h7F7F_FFFF, 32'h7F80_0000); // overflow
    chk(32'h0000_0000, 32'hC020_0000, 32'hC020_0000);
    chk(32'h8000_0000, 32'h8000_0000, 32'h8000_0000);
    for (int n = 0; n < 20000; n++) begin
      logic [31:0] x, z;
      x = frand(100, 150);
      z = (n % 4 == 0) ? {~x[31], x[30:23], 23'($urandom)} : frand(100, 150);
      chk(x, z, fadd(x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
