// tb_nst_fifo -- self-checking test of the synchronous FIFO (nst_fifo).
//
// Random push/pop traffic (pushes only when not full, pops only when not
// empty, as every user in the design does) against a queue model; checks
// first-word-fall-through data, count, full and empty every cycle, and that
// both the full and the empty state were reached.
module tb_nst_fifo;
  localparam int W = 32, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, full, empty;
  logic [W-1:0] wdata, rdata;
  logic [$clog2(D+1)-1:0] count;
  int checks = 0, failures = 0, n_full = 0, n_empty = 0;

  nst_fifo #(.WIDTH(W), .DEPTH(D)) dut (.clk_i(clk), .rst_ni(rst_n), .push_i(push), .wdata_i(wdata), .pop_i(pop),
    .rdata_o(rdata), .full_o(full), .empty_o(empty), .count_o(count));

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
    logic [W-1:0] q [$];
    push = 0; pop = 0; wdata = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      int bias;
      bias = (t / 500) % 2 == 0 ? 3 : 1;
      #1;
      chk(count == $bits(count)'(q.size()), "count");
      chk(full == (q.size() == D), "full");
      chk(empty == (q.size() == 0), "empty");
      if (q.size() > 0) chk(rdata == q[0], $sformatf("data %h expected %h", rdata, q[0]));
      if (full) n_full++;
      if (empty) n_empty++;
      push = !full && ($urandom_range(0, 3) < bias);
      pop  = !empty && ($urandom_range(0, 3) >= bias);
      wdata = $urandom;
      @(negedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    checks += 2;
    if (n_full == 0) begin failures++; $display("FAIL never full"); end
    if (n_empty == 0) begin failures++; $display("FAIL never empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
