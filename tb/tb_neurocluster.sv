// tb_neurocluster -- end-to-end test of the whole NeuroCluster at its default
// size (16 clusters x 8 NeuroStreams, 128 kB SPM each, 3 AXI ports).
//
// The testbench plays the four RISC-V PEs of every cluster and the DRAM
// behind the SMC interconnect (dram_model). All 16 clusters work in
// parallel, each on its own 4D tile of one convolution layer, following the
// paper's computation paradigm:
//   1. the master PE moves the input tile (6x6 pixels x 4 channels, row-major,
//      channels innermost) and the filters (2 x 3x3 x 4) from DRAM into the
//      SPM with the DMA;
//   2. the 32 output pixels of the tile are dealt out to the 8 NSTs, each PE
//      programming its two NSTs with MEM_LDC and STREAM_MAC (write-back);
//   3. ReLU (STREAM_MAX with 0) in place, then 2x2 max pooling (STREAM_MAXPL);
//   4. the pooled 2x2x2 output tile is written back to DRAM by the DMA.
// The DRAM result is compared with a reference computed in the same order.
// Mechanisms that must occur at least once: SPM bank conflicts, a full NST
// command FIFO holding off a PE, more than one DMA transaction in flight,
// contention between clusters on a shared AXI port, DMA write bursts.
module tb_neurocluster;
  import nc_pkg::*;
  import fp_ref_pkg::*;

  localparam int NCL = 16, NPE = 4, NNST = 8, NP = 3;
  localparam int TXI = 6, TYI = 6, TCI = 4, KX = 3, KY = 3, TCO = 2;
  localparam int TXO = TXI - KX + 1, TYO = TYI - KY + 1;
  localparam int IN_W = 0, F_W = 256, OUT_W = 512, POOL_W = 600;   // SPM word offsets
  localparam logic [31:0] F_DRAM = 32'h0000_0000, IN_DRAM = 32'h0001_0000, OUT_DRAM = 32'h0003_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mem_req_t pe_req [NCL][NPE];
  mem_rsp_t pe_rsp [NCL][NPE];
  axi_req_t smc_req [NP];
  axi_rsp_t smc_rsp [NP];
  logic [NNST-1:0] nst_busy [NCL];
  logic [NCL-1:0]  dma_busy;
  logic [5:0]      dma_outst [NCL], conflict [NCL];

  neurocluster dut (.clk_i(clk), .rst_ni(rst_n), .pe_req_i(pe_req), .pe_rsp_o(pe_rsp),
    .smc_req_o(smc_req), .smc_rsp_i(smc_rsp), .nst_busy_o(nst_busy), .dma_busy_o(dma_busy),
    .dma_outstanding_o(dma_outst), .spm_conflict_o(conflict));

  dram_model #(.NP(NP), .LINES(8192), .LAT(20)) u_dram (.clk_i(clk), .rst_ni(rst_n), .req_i(smc_req), .rsp_o(smc_rsp));

  int checks = 0, failures = 0;
  int n_done = 0;
  longint n_conflict = 0, n_cmdfull = 0, n_multi_out = 0, n_port_wait = 0, n_wbursts = 0;
  longint cycle = 0;

  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    for (int c = 0; c < NCL; c++) begin
      if (conflict[c] != 0) n_conflict <= n_conflict + 1;
      if (dma_outst[c] > 1) n_multi_out <= n_multi_out + 1;
    end
    n_wbursts <= n_wbursts + longint'(aw_fires());
  end
  function automatic int aw_fires();
    int n = 0;
    for (int p = 0; p < NP; p++) if (smc_req[p].aw_valid && smc_rsp[p].aw_ready) n++;
    return n;
  endfunction
  // a cluster whose AXI request waits while another cluster holds its port
  always_ff @(posedge clk) begin
    for (int c = 0; c < NCL; c++)
      if (dut.cl_req[c].ar_valid && !dut.cl_rsp[c].ar_ready) n_port_wait <= n_port_wait + 1;
  end

  // ---------------- PE bus tasks ----------------
  task automatic pe_wr(input int c, input int p, input logic [31:0] a, input logic [31:0] d);
    pe_req[c][p] = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: a, wdata: d};
    #1;
    while (!pe_rsp[c][p].gnt) begin
      if (a >= NST_REG_BASE) n_cmdfull++;
      @(negedge clk);
    end
    @(negedge clk);
    pe_req[c][p] = '0;
  endtask
  task automatic pe_rd(input int c, input int p, input logic [31:0] a, output logic [31:0] d);
    pe_req[c][p] = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: a, wdata: 0};
    #1;
    while (!pe_rsp[c][p].gnt) @(negedge clk);
    @(negedge clk);
    pe_req[c][p] = '0;
    d = pe_rsp[c][p].rdata;
  endtask
  function automatic logic [31:0] nreg(input int n, input logic [3:0] off);
    return NST_REG_BASE + 32'(n * NST_REG_STRIDE) + 32'(off);
  endfunction
  task automatic nst_cmd(input int c, input int p, input int n, input nst_op_e op, input logic [23:0] a0, input logic [31:0] a1);
    pe_wr(c, p, nreg(n, NST_R_CFG), a1);
    pe_wr(c, p, nreg(n, NST_R_CMD), {op, a0});
  endtask
  task automatic nst_wait(input int c, input int p, input int n);
    logic [31:0] s;
    do pe_rd(c, p, nreg(n, NST_R_STS), s); while (s[0]);
  endtask
  task automatic dma(input int c, input logic [31:0] ext, input int spm_w, input int words, input bit to_dram);
    logic [31:0] s;
    pe_wr(c, 0, DMA_REG_BASE + 32'(DMA_R_EXT), ext);
    pe_wr(c, 0, DMA_REG_BASE + 32'(DMA_R_SPM), SPM_BASE + 32'(spm_w * 4));
    pe_wr(c, 0, DMA_REG_BASE + 32'(DMA_R_LEN), 32'(words * 4));
    pe_wr(c, 0, DMA_REG_BASE + 32'(DMA_R_CMD), {31'd0, to_dram});
    do pe_rd(c, 0, DMA_REG_BASE + 32'(DMA_R_CMD), s); while (s[0]);
  endtask

  // ---------------- DRAM contents ----------------
  function automatic logic [31:0] dram_word(input logic [31:0] byte_addr);
    return u_dram.mem[byte_addr / 32][32 * ((byte_addr / 4) % 8) +: 32];
  endfunction
  task automatic dram_put(input logic [31:0] byte_addr, input logic [31:0] v);
    u_dram.mem[byte_addr / 32][32 * ((byte_addr / 4) % 8) +: 32] = v;
  endtask

  // ---------------- one PE's share of the convolution ----------------
  task automatic pe_conv(input int c, input int p);
    for (int s = 0; s < 2; s++) begin
      int n;
      n = 2 * p + s;
      // once per layer: steps and loop bounds (AGU0 = input tile, AGU1 = filters)
      nst_cmd(c, p, n, MEM_LDC, 24'(AGU0_S0), 1);
      nst_cmd(c, p, n, MEM_LDC, 24'(AGU0_S1), TCI * (1 - 1));
      nst_cmd(c, p, n, MEM_LDC, 24'(AGU0_S2), TCI * (TXI * 1 - 1 * KX));
      nst_cmd(c, p, n, MEM_LDC, 24'(AGU1_S0), 1);
      nst_cmd(c, p, n, MEM_LDC, 24'(AGU1_S1), 0);
      nst_cmd(c, p, n, MEM_LDC, 24'(AGU1_S2), 0);
      nst_cmd(c, p, n, MEM_LDC, 24'(HWL_E0), TCI);
      nst_cmd(c, p, n, MEM_LDC, 24'(HWL_E1), KX);
      nst_cmd(c, p, n, MEM_LDC, 24'(HWL_E2), KY);
    end
    // jobs b = tco*16 + tyo*4 + txo go to NST b % 8; this PE owns NSTs 2p, 2p+1
    for (int b = 0; b < TXO * TYO * TCO; b++) begin
      int n, tco, tyo, txo;
      n = b % NNST;
      if (n / 2 != p) continue;
      tco = b / (TXO * TYO); tyo = (b / TXO) % TYO; txo = b % TXO;
      nst_cmd(c, p, n, MEM_LDC, 24'(AGU0_A), IN_W + (tyo * TXI + txo) * TCI);
      nst_cmd(c, p, n, MEM_LDC, 24'(AGU1_A), F_W + tco * KY * KX * TCI);
      nst_cmd(c, p, n, STREAM_MAC, 24'(1 << ARG0_WB), OUT_W + b);
    end
    nst_wait(c, p, 2 * p);
    nst_wait(c, p, 2 * p + 1);
  endtask

  task automatic run_cluster(input int c);
    int t0;
    dma(c, IN_DRAM + 32'(c * 4096), IN_W, TXI * TYI * TCI, 0);
    dma(c, F_DRAM, F_W, TCO * KY * KX * TCI, 0);
    if (c == 0) $display("cluster 0: input tile and filters in SPM at cycle %0d", cycle);
    t0 = int'(cycle);
    fork
      pe_conv(c, 0);
      pe_conv(c, 1);
      pe_conv(c, 2);
      pe_conv(c, 3);
    join
    if (c == 0) $display("cluster 0: %0d MACs on 8 NSTs in %0d cycles", TXO * TYO * TCO * KX * KY * TCI, int'(cycle) - t0);
    // ReLU in place on NST0
    nst_cmd(c, 0, 0, MEM_LDC, 24'(HWL_E0), TXO * TYO * TCO);
    nst_cmd(c, 0, 0, MEM_LDC, 24'(HWL_E1), 1);
    nst_cmd(c, 0, 0, MEM_LDC, 24'(HWL_E2), 1);
    nst_cmd(c, 0, 0, MEM_LDC, 24'(AGU0_S1), 0);
    nst_cmd(c, 0, 0, MEM_LDC, 24'(AGU0_S2), 0);
    nst_cmd(c, 0, 0, MEM_LDC, 24'(AGU0_A), OUT_W);
    nst_cmd(c, 0, 0, MEM_LDC, 24'(AGU1_A), OUT_W);
    nst_cmd(c, 0, 0, STREAM_MAX, 0, 32'h0);
    nst_wait(c, 0, 0);
    // 2x2 max pooling, one pooled output per NST
    for (int q = 0; q < 8; q++) begin
      int n, tco, py, px;
      n = q; tco = q / 4; py = (q / 2) % 2; px = q % 2;
      nst_cmd(c, n / 2, n, MEM_LDC, 24'(HWL_E0), 2);
      nst_cmd(c, n / 2, n, MEM_LDC, 24'(HWL_E1), 2);
      nst_cmd(c, n / 2, n, MEM_LDC, 24'(HWL_E2), 1);
      nst_cmd(c, n / 2, n, MEM_LDC, 24'(AGU0_S0), 1);
      nst_cmd(c, n / 2, n, MEM_LDC, 24'(AGU0_S1), TXO - 2);
      nst_cmd(c, n / 2, n, MEM_LDC, 24'(AGU0_A), OUT_W + tco * TXO * TYO + 2 * py * TXO + 2 * px);
      nst_cmd(c, n / 2, n, STREAM_MAXPL, 24'(1 << ARG0_WB), POOL_W + q);
    end
    for (int n = 0; n < 8; n++) nst_wait(c, n / 2, n);
    dma(c, OUT_DRAM + 32'(c * 256), POOL_W, 8, 1);
  endtask

  // one software thread per cluster
  logic go = 1'b0;
  for (genvar g = 0; g < NCL; g++) begin : g_run
    initial begin
      wait (go);
      run_cluster(g);
      n_done++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired: dma_busy %b nst_busy0 %b done %0d", dma_busy, nst_busy[0], n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NCL; c++) for (int p = 0; p < NPE; p++) pe_req[c][p] = '0;
    for (int l = 0; l < 8192; l++) u_dram.mem[l] = '0;
    for (int w = 0; w < TCO * KY * KX * TCI; w++) dram_put(F_DRAM + 32'(4 * w), frand(122, 130));
    for (int c = 0; c < NCL; c++)
      for (int w = 0; w < TXI * TYI * TCI; w++) dram_put(IN_DRAM + 32'(c * 4096 + 4 * w), frand(122, 130));
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    go = 1'b1;
    wait (n_done == NCL);

    // reference: conv (same MAC order as the hardware loops) -> ReLU -> 2x2 max pool
    for (int c = 0; c < NCL; c++) begin
      logic [31:0] conv [TCO][TYO][TXO];
      for (int tco = 0; tco < TCO; tco++)
        for (int tyo = 0; tyo < TYO; tyo++)
          for (int txo = 0; txo < TXO; txo++) begin
            logic [31:0] r;
            r = 0;
            for (int ky = 0; ky < KY; ky++)
              for (int kx = 0; kx < KX; kx++)
                for (int ci = 0; ci < TCI; ci++)
                  r = fadd(r, fmul(dram_word(IN_DRAM + 32'(c * 4096 + 4 * (((tyo + ky) * TXI + txo + kx) * TCI + ci))),
                                   dram_word(F_DRAM + 32'(4 * (((tco * KY + ky) * KX + kx) * TCI + ci)))));
            conv[tco][tyo][txo] = fmax(r, 32'h0);
          end
      for (int q = 0; q < 8; q++) begin
        int tco, py, px;
        logic [31:0] m;
        tco = q / 4; py = (q / 2) % 2; px = q % 2;
        m = FP32_NEG_INF;
        for (int y = 0; y < 2; y++) for (int x = 0; x < 2; x++) m = fmax(m, conv[tco][2 * py + y][2 * px + x]);
        checks++;
        if (dram_word(OUT_DRAM + 32'(c * 256 + 4 * q)) !== m) begin
          failures++;
          if (failures < 10) $display("FAIL cluster %0d pooled[%0d]: got %h expected %h", c, q,
                                      dram_word(OUT_DRAM + 32'(c * 256 + 4 * q)), m);
        end
      end
    end

    $display("bank-conflict cycles %0d, command-FIFO-full waits %0d, cycles with >1 DMA transaction in flight %0d, AXI port waits %0d, write bursts %0d",
             n_conflict, n_cmdfull, n_multi_out, n_port_wait, n_wbursts);
    checks += 5;
    if (n_conflict == 0)  begin failures++; $display("FAIL no SPM bank conflict"); end
    if (n_cmdfull == 0)   begin failures++; $display("FAIL command FIFO never full"); end
    if (n_multi_out == 0) begin failures++; $display("FAIL never more than one DMA transaction"); end
    if (n_port_wait == 0) begin failures++; $display("FAIL no AXI port contention"); end
    if (n_wbursts != NCL) begin failures++; $display("FAIL %0d write bursts", n_wbursts); end
    $display("total cycles %0d", cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
