// tb_global_interconnect -- self-checking test of the AXI global
// interconnect (global_interconnect) at its default size: 16 cluster
// masters, 3 ports to the main SMC interconnect (behavioural dram_model).
//
// Every cluster runs a testbench AXI master that issues read bursts with
// random tags and lengths (several in flight) and write bursts, all to its
// own DRAM region, with random r_ready back-pressure. Checks: read data and
// IDs come back to the right cluster (cluster bits removed again), written data lands in DRAM, each port
// only carries the clusters mapped to it (cluster mod 3), the cluster number
// is placed in the upper ID bits, and clusters sharing a port had to wait
// for each other at least once.
module tb_global_interconnect;
  import nc_pkg::*;
  localparam int NCL = 16, NP = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  axi_req_t cl_req [NCL];
  axi_rsp_t cl_rsp [NCL];
  axi_req_t p_req [NP];
  axi_rsp_t p_rsp [NP];
  int checks = 0, failures = 0, n_wait = 0, n_done = 0;

  global_interconnect dut (.clk_i(clk), .rst_ni(rst_n), .cl_req_i(cl_req), .cl_rsp_o(cl_rsp),
    .port_req_o(p_req), .port_rsp_i(p_rsp));
  dram_model #(.NP(NP), .LINES(8192), .LAT(20)) u_dram (.clk_i(clk), .rst_ni(rst_n), .req_i(p_req), .rsp_o(p_rsp));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  always @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (p_req[p].ar_valid) chk(int'(p_req[p].ar.id[8:5]) % NP == p, "read on wrong port");
      if (p_req[p].aw_valid) chk(int'(p_req[p].aw.id[8:5]) % NP == p, "write on wrong port");
    end
    for (int c = 0; c < NCL; c++) if (cl_req[c].ar_valid && !cl_rsp[c].ar_ready) n_wait++;
  end

  // per-cluster master: region of 512 lines at c*512
  for (genvar g = 0; g < NCL; g++) begin : g_m
    initial begin
      int exp_len [32];
      int exp_line [32];
      int beat [32];
      int issued, returned;
      cl_req[g] = '0;
      cl_req[g].b_ready = 1'b1;
      wait (rst_n);
      @(negedge clk);
      issued = 0; returned = 0;
      // reads: 24 bursts, tag = burst number, up to 6 in flight
      while (returned < 24) begin
        bit ar_fire;
        if (!cl_req[g].ar_valid && issued < 24 && issued - returned < 6) begin
          exp_len[issued] = $urandom_range(0, 7);
          exp_line[issued] = g * 512 + $urandom_range(0, 500);
          beat[issued] = 0;
          cl_req[g].ar_valid = 1'b1;
          cl_req[g].ar = '{id: 9'(issued), addr: 32'(exp_line[issued] * 32), len: 8'(exp_len[issued])};
        end
        cl_req[g].r_ready = ($urandom_range(0, 3) != 0);
        #1;
        ar_fire = cl_req[g].ar_valid && cl_rsp[g].ar_ready;
        if (cl_rsp[g].r_valid && cl_req[g].r_ready) begin
          int tg;
          tg = int'(cl_rsp[g].r.id[4:0]);
          chk(cl_rsp[g].r.id[8:5] == 4'd0, "R id: cluster bits must be removed on the cluster side");
          chk(cl_rsp[g].r.data == u_dram.mem[exp_line[tg] + beat[tg]], $sformatf("cluster %0d tag %0d beat %0d data", g, tg, beat[tg]));
          chk(cl_rsp[g].r.last == (beat[tg] == exp_len[tg]), "R last");
          beat[tg]++;
          if (cl_rsp[g].r.last) returned++;
        end
        @(negedge clk);
        if (ar_fire) begin cl_req[g].ar_valid = 1'b0; issued++; end
      end
      cl_req[g].r_ready = 1'b0;
      // writes: 4 bursts of 4 beats
      for (int b = 0; b < 4; b++) begin
        logic [AXI_DW-1:0] d [4];
        int line;
        line = g * 512 + 504 + b;
        cl_req[g].aw_valid = 1'b1;
        cl_req[g].aw = '{id: 9'(b), addr: 32'(line * 32), len: 8'd3};
        #1;
        while (!cl_rsp[g].aw_ready) begin @(negedge clk); #1; end
        @(negedge clk);
        cl_req[g].aw_valid = 1'b0;
        for (int k = 0; k < 4; k++) begin
          d[k] = {8{$urandom}};
          cl_req[g].w_valid = 1'b1;
          cl_req[g].w = '{data: d[k], strb: '1, last: (k == 3)};
          #1;
          while (!cl_rsp[g].w_ready) begin @(negedge clk); #1; end
          @(negedge clk);
        end
        cl_req[g].w_valid = 1'b0;
        #1;
        while (!cl_rsp[g].b_valid) begin @(negedge clk); #1; end
        chk(int'(cl_rsp[g].b_id) == b, "B id");
        @(negedge clk);
        // a 4-beat burst to 4 consecutive lines: line .. line+3 (overlapping bursts, last one wins)
        for (int k = 0; k < 4; k++) chk(u_dram.mem[line + k] == d[k], $sformatf("cluster %0d write burst %0d beat %0d", g, b, k));
      end
      n_done++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int l = 0; l < 8192; l++) u_dram.mem[l] = {8{$urandom}};
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (n_done == NCL);
    $display("%0d cycles of a cluster waiting for its shared port", n_wait);
    checks++;
    if (n_wait == 0) begin failures++; $display("FAIL no port contention"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
