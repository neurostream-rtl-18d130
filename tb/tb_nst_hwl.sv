// tb_nst_hwl -- self-checking test of the NeuroStream hardware loop (nst_hwl).
//
// Runs loop nests with random bounds E0, E1, E2 (1..6) and random step
// stalls. A software model of the three nested counters checks i, j, k, the
// step enables EN1..EN3 (EN2 when i wraps, EN3 when i and j wrap, as in the
// paper's Fig. 8b pseudo-code) and that the nest ends after exactly
// E0*E1*E2 steps. A nest with a zero bound must not start.
module tb_nst_hwl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, step, active, last, en1, en2, en3;
  logic [15:0] e0, e1, e2, i, j, k;
  int checks = 0, failures = 0;

  nst_hwl dut (.clk_i(clk), .rst_ni(rst_n), .start_i(start), .step_i(step), .e0_i(e0), .e1_i(e1), .e2_i(e2),
    .active_o(active), .last_o(last), .en1_o(en1), .en2_o(en2), .en3_o(en3), .i_o(i), .j_o(j), .k_o(k));

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
    start = 0; step = 0; e0 = 0; e1 = 0; e2 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int b0, b1, b2, mi, mj, mk, steps;
      b0 = $urandom_range(1, 6); b1 = $urandom_range(1, 6); b2 = $urandom_range(1, 6);
      if (t % 20 == 19) b1 = 0;
      e0 = 16'(b0); e1 = 16'(b1); e2 = 16'(b2);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      if (b1 == 0) begin
        chk(!active, "zero bound must not start");
        continue;
      end
      mi = 0; mj = 0; mk = 0; steps = 0;
      while (active) begin
        step = ($urandom_range(0, 3) != 0);
        #1;
        chk(i == 16'(mi) && j == 16'(mj) && k == 16'(mk), $sformatf("counters %0d %0d %0d vs %0d %0d %0d", i, j, k, mi, mj, mk));
        chk(en1 == step, "en1");
        chk(en2 == (step && mi == b0 - 1), "en2");
        chk(en3 == (step && mi == b0 - 1 && mj == b1 - 1), "en3");
        chk(last == (mi == b0 - 1 && mj == b1 - 1 && mk == b2 - 1), "last");
        if (step) begin
          steps++;
          mi++;
          if (mi == b0) begin mi = 0; mj++; end
          if (mj == b1) begin mj = 0; mk++; end
        end
        @(negedge clk);
      end
      step = 0;
      chk(steps == b0 * b1 * b2, $sformatf("nest of %0dx%0dx%0d ended after %0d steps", b0, b1, b2, steps));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
