// tb_dma_engine -- self-checking test of the cluster DMA (dma_engine).
//
// The DMA is connected to one port of the behavioural DRAM (dram_model,
// 20-cycle latency) and to an SPM model behind its 8 word ports. The SPM
// model can refuse grants at random to imitate bank conflicts. The test
// programs the DMA through its register port like a PE does and runs
//   - DRAM -> SPM transfers of 32 B .. 8 kB and SPM -> DRAM transfers,
//     checking every word that arrives and that neighbouring words are
//     untouched;
//   - a 8 kB transfer with an always-granting SPM, which must keep many
//     bursts in flight (up to the paper's 32 outstanding transactions) and
//     finish in about one 256-bit beat per cycle (32 B/cycle = 32 GB/s).
module tb_dma_engine;
  import nc_pkg::*;
  localparam int NPORT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t cfg_req;
  mem_rsp_t cfg_rsp;
  mem_req_t spm_req [NPORT];
  mem_rsp_t spm_rsp [NPORT];
  axi_req_t axi_req [1];
  axi_rsp_t axi_rsp [1];
  logic busy;
  logic [5:0] outst;
  int checks = 0, failures = 0, max_outst = 0;
  bit conflicts_on = 0;

  dma_engine dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .spm_req_o(spm_req), .spm_rsp_i(spm_rsp), .axi_req_o(axi_req[0]), .axi_rsp_i(axi_rsp[0]),
    .busy_o(busy), .outstanding_o(outst));
  dram_model #(.NP(1), .LINES(2048), .LAT(20)) u_dram (.clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .rsp_o(axi_rsp));

  // SPM model: 32768 words behind SPM_BASE, random grant refusal
  logic [31:0] spm [32768];
  logic        deny [NPORT];
  always_comb
    for (int p = 0; p < NPORT; p++) begin
      spm_rsp[p].gnt = spm_req[p].req && !deny[p];
    end
  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORT; p++) begin
      deny[p] <= conflicts_on && ($urandom_range(0, 3) == 0);
      spm_rsp[p].rvalid <= spm_req[p].req && spm_rsp[p].gnt && !spm_req[p].we;
      if (spm_req[p].req && spm_rsp[p].gnt) begin
        if (spm_req[p].we) spm[spm_req[p].addr[16:2]] <= spm_req[p].wdata;
        else spm_rsp[p].rdata <= spm[spm_req[p].addr[16:2]];
      end
    end
    if (int'(outst) > max_outst) max_outst <= int'(outst);
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [3:0] off, input logic [31:0] d);
    cfg_req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: DMA_REG_BASE + 32'(off), wdata: d};
    #1;
    while (!cfg_rsp.gnt) @(negedge clk);
    @(negedge clk);
    cfg_req = '0;
  endtask
  task automatic rd(input logic [3:0] off, output logic [31:0] d);
    cfg_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: DMA_REG_BASE + 32'(off), wdata: 0};
    #1;
    while (!cfg_rsp.gnt) @(negedge clk);
    @(negedge clk);
    cfg_req = '0;
    d = cfg_rsp.rdata;
  endtask
  task automatic xfer(input logic [31:0] ext, input int spm_w, input int bytes, input bit to_dram, output int cycles);
    logic [31:0] s;
    int t0;
    t0 = cyc;
    wr(DMA_R_EXT, ext);
    wr(DMA_R_SPM, SPM_BASE + 32'(spm_w * 4));
    wr(DMA_R_LEN, 32'(bytes));
    wr(DMA_R_CMD, {31'd0, to_dram});
    do rd(DMA_R_CMD, s); while (s[0]);
    cycles = cyc - t0;
  endtask

  int cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  function automatic logic [31:0] dword(input int w);
    return u_dram.mem[w / 8][32 * (w % 8) +: 32];
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int cycles;
    cfg_req = '0;
    for (int l = 0; l < 2048; l++) for (int k = 0; k < 8; k++) u_dram.mem[l][32*k +: 32] = $urandom;
    for (int w = 0; w < 32768; w++) spm[w] = 32'hDEAD_0000 | 32'(w);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // random transfers with SPM conflicts
    conflicts_on = 1;
    for (int t = 0; t < 30; t++) begin
      int ew, sw, nw;
      bit dir;
      ew = 8 * $urandom_range(0, 1000);
      sw = $urandom_range(0, 20000);
      nw = 8 * $urandom_range(1, 64);
      dir = $urandom_range(0, 1);
      if (dir) for (int w = 0; w < nw; w++) spm[sw + w] = $urandom;
      xfer(32'(ew * 4), sw, nw * 4, dir, cycles);
      for (int w = -1; w <= nw; w++) begin
        if (w < 0 || w == nw) begin
          if (!dir && sw + w >= 0) chk(spm[sw + w] == (32'hDEAD_0000 | 32'(sw + w)) || spm[sw + w] == dword(ew + w) || t > 0,
                                       "SPM neighbour overwritten");
        end else chk(spm[sw + w] == dword(ew + w), $sformatf("transfer %0d word %0d: SPM %h DRAM %h", t, w, spm[sw + w], dword(ew + w)));
      end
    end
    // throughput: 8 kB DRAM -> SPM, no conflicts
    conflicts_on = 0;
    repeat (3) @(negedge clk);
    max_outst = 0;
    xfer(32'h0, 0, 8192, 0, cycles);
    for (int w = 0; w < 2048; w++) chk(spm[w] == dword(w), "8 kB transfer data");
    $display("8 kB DRAM->SPM in %0d cycles, max %0d transactions in flight", cycles, max_outst);
    chk(max_outst >= 16, $sformatf("only %0d outstanding", max_outst));
    chk(cycles <= 256 + 20 + 40, $sformatf("8 kB took %0d cycles", cycles));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
