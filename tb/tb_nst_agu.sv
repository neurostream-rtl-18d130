// tb_nst_agu -- self-checking test of the NeuroStream address generator (nst_agu).
//
// Loads random A and S0..S2 values and applies random EN1..EN3 patterns
// (EN2 and EN3 only together with EN1, as the hardware loop produces them).
// A reference model advances A by EN1*S0 + EN2*S1 + EN3*S2 per step, the
// update rule of the paper's Fig. 8b; loads of A take priority.
// A second part walks a 3x3x4 convolution window (Fig. 8a addresses) and
// compares every address with the directly computed index.
module tb_nst_agu;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ld_a, en1, en2, en3;
  logic [2:0] ld_s;
  logic [31:0] val, addr;
  int checks = 0, failures = 0;

  nst_agu dut (.clk_i(clk), .rst_ni(rst_n), .ld_a_i(ld_a), .ld_s_i(ld_s), .val_i(val),
    .en1_i(en1), .en2_i(en2), .en3_i(en3), .addr_o(addr));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [31:0] ma, ms [3];
    ld_a = 0; ld_s = 0; en1 = 0; en2 = 0; en3 = 0; val = 0;
    ma = 0; ms = '{0, 0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      ld_a = ($urandom_range(0, 19) == 0);
      ld_s = ($urandom_range(0, 9) == 0) ? 3'($urandom_range(1, 7)) : 3'd0;
      val  = $urandom;
      en1  = $urandom_range(0, 1);
      en2  = en1 && ($urandom_range(0, 1) == 1);
      en3  = en2 && ($urandom_range(0, 1) == 1);
      @(negedge clk);
      if (ld_a) ma = val;
      else if (en1) ma = ma + ms[0] + (en2 ? ms[1] : 0) + (en3 ? ms[2] : 0);
      for (int n = 0; n < 3; n++) if (ld_s[n]) ms[n] = val;
      chk(addr == ma, $sformatf("step %0d addr %h expected %h", t, addr, ma));
    end
    // convolution window: TXI=6, TCI=4, 3x3 kernel, output pixel (1,2)
    ld_a = 0; ld_s = 0; en1 = 0; en2 = 0; en3 = 0;
    for (int n = 0; n < 3; n++) begin
      ld_s = 3'(1 << n);
      val = (n == 0) ? 1 : (n == 1) ? 0 : 4 * (6 - 3);
      @(negedge clk);
    end
    ld_s = 0; ld_a = 1; val = (2 * 6 + 1) * 4;
    @(negedge clk);
    ld_a = 0;
    for (int ky = 0; ky < 3; ky++)
      for (int kx = 0; kx < 3; kx++)
        for (int ci = 0; ci < 4; ci++) begin
          chk(addr == 32'(((2 + ky) * 6 + 1 + kx) * 4 + ci), $sformatf("window %0d %0d %0d addr %0d", ky, kx, ci, addr));
          en1 = 1; en2 = (ci == 3); en3 = (ci == 3 && kx == 2);
          @(negedge clk);
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
