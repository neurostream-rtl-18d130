// tb_fp32_cmp -- self-checking test of fp32_cmp: signed zeros, infinities,
// NaN, equal values and 20000 random pairs against the reference ordering
// of fp_ref_pkg.
module tb_fp32_cmp;
  import fp_ref_pkg::*;
  logic [31:0] a, b, mx, mn;
  logic gt;
  int checks = 0, failures = 0;
  fp32_cmp dut (.a_i(a), .b_i(b), .gt_o(gt), .max_o(mx), .min_o(mn));

  task automatic chk(input logic [31:0] ta, input logic [31:0] tb_, input logic [31:0] emax, input logic [31:0] emin);
    a = ta; b = tb_; #1;
    checks++;
    if (mx !== emax || mn !== emin) begin
      failures++;
      if (failures < 10) $display("FAIL cmp %h %h -> %h %h expected %h %h", ta, tb_, mx, mn, emax, emin);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk(32'h3F80_0000, 32'hBF80_0000, 32'h3F80_0000, 32'hBF80_0000);
    chk(32'hC000_0000, 32'hBF80_0000, 32'hBF80_0000, 32'hC000_0000);
    chk(32'h8000_0000, 32'h0000_0000, 32'h0000_0000, 32'h8000_0000);
    chk(32'hFF80_0000, 32'hC000_0000, 32'hC000_0000, 32'hFF80_0000);
    chk(32'h7FC0_0000, 32'h3F80_0000, 32'h7FC0_0000, 32'h7FC0_0000);
    for (int n = 0; n < 20000; n++) begin
      logic [31:0] x, z;
      x = frand(1, 254); z = (n % 8 == 0) ? x : frand(1, 254);
      chk(x, z, fmax(x, z), fmin(x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
