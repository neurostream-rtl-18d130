// nc_cluster -- one NeuroCluster processing cluster.
//
// Eight NeuroStream coprocessors, a DMA engine and the data ports of four
// RISC-V PEs share a word-level-interleaved SPM of 128 kB in 32 banks through
// the single-cycle logarithmic cluster interconnect. Each NST has two master
// ports (banking factor 32 / 16 = 2, as chosen in the paper), the DMA has
// eight (one 256-bit AXI beat per cycle) and each PE one. The PEs program
// the NSTs and the DMA through memory-mapped registers reached via pe_xbar.
// The PEs themselves (RISC-V cores with private instruction caches and MMU)
// are not part of this RTL: their data ports are ports of this module.
// The DMA's AXI master port leaves the cluster toward the global
// interconnect.
// Master numbering on the interconnect: NST n port 0/1 = 2n/2n+1, then the
// PEs, then the DMA ports.
// Lint note: verilator reports "circular combinational logic" on the
// request/response arrays (cl_rsp, dma_rsp, nst_cfg_rsp, dma_cfg_rsp,
// pe_spm_rsp). These are whole unpacked arrays of structs in which the
// grant of one element depends on the request of another (grant = f(req)
// through the arbiters); no bit depends on itself, so there is no real loop.
// The warning only affects simulation speed and is left as it is.
module nc_cluster
  import nc_pkg::*;
#(
  parameter int unsigned NNST      = 8,
  parameter int unsigned NPE       = 4,
  parameter int unsigned NB        = 32,
  parameter int unsigned SPM_BYTES = 131072,
  parameter int unsigned CMD_FIFO_DEPTH = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t pe_req_i [NPE],
  output mem_rsp_t pe_rsp_o [NPE],
  output axi_req_t axi_req_o,
  input  axi_rsp_t axi_rsp_i,
  output logic [NNST-1:0] nst_busy_o,
  output logic     dma_busy_o,
  output logic [5:0] dma_outstanding_o,
  output logic [5:0] spm_conflict_o
);
  localparam int unsigned NPORT = AXI_DW / 32;
  localparam int unsigned NM    = 2 * NNST + NPE + NPORT;
  localparam int unsigned WORDS = SPM_BYTES / 4 / NB;
  localparam int unsigned RW    = $clog2(WORDS);

  mem_req_t m_req [NM];
  mem_rsp_t m_rsp [NM];
  mem_req_t nst_cfg_req [NNST];
  mem_rsp_t nst_cfg_rsp [NNST];
  mem_req_t dma_cfg_req;
  mem_rsp_t dma_cfg_rsp;
  mem_req_t pe_spm_req [NPE];
  mem_rsp_t pe_spm_rsp [NPE];
  mem_req_t dma_req [NPORT];
  mem_rsp_t dma_rsp [NPORT];
  logic     b_req [NB], b_we [NB];
  logic [3:0]  b_be [NB];
  logic [RW-1:0] b_addr [NB];
  logic [31:0] b_wdata [NB], b_rdata [NB];
  logic [$clog2(NM+1)-1:0] conflict;

  for (genvar n = 0; n < NNST; n++) begin : g_nst
    neurostream #(.CMD_FIFO_DEPTH(CMD_FIFO_DEPTH)) u_nst (
      .clk_i, .rst_ni, .cfg_req_i(nst_cfg_req[n]), .cfg_rsp_o(nst_cfg_rsp[n]),
      .p0_req_o(m_req[2*n]), .p0_rsp_i(m_rsp[2*n]),
      .p1_req_o(m_req[2*n+1]), .p1_rsp_i(m_rsp[2*n+1]),
      .busy_o(nst_busy_o[n]));
  end

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    assign m_req[2*NNST + p] = pe_spm_req[p];
    assign pe_spm_rsp[p]     = m_rsp[2*NNST + p];
  end
  for (genvar k = 0; k < NPORT; k++) begin : g_dma
    assign m_req[2*NNST + NPE + k] = dma_req[k];
    assign dma_rsp[k]              = m_rsp[2*NNST + NPE + k];
  end

  pe_xbar #(.NPE(NPE), .NNST(NNST), .SPM_BYTES(SPM_BYTES)) u_xbar (
    .clk_i, .rst_ni, .pe_req_i, .pe_rsp_o, .spm_req_o(pe_spm_req), .spm_rsp_i(pe_spm_rsp),
    .nst_req_o(nst_cfg_req), .nst_rsp_i(nst_cfg_rsp), .dma_req_o(dma_cfg_req), .dma_rsp_i(dma_cfg_rsp));

  dma_engine u_dma (
    .clk_i, .rst_ni, .cfg_req_i(dma_cfg_req), .cfg_rsp_o(dma_cfg_rsp),
    .spm_req_o(dma_req), .spm_rsp_i(dma_rsp), .axi_req_o, .axi_rsp_i,
    .busy_o(dma_busy_o), .outstanding_o(dma_outstanding_o));

  cluster_interconnect #(.NM(NM), .NB(NB), .WORDS(WORDS)) u_ic (
    .clk_i, .rst_ni, .m_req_i(m_req), .m_rsp_o(m_rsp),
    .b_req_o(b_req), .b_we_o(b_we), .b_be_o(b_be), .b_addr_o(b_addr), .b_wdata_o(b_wdata),
    .b_rdata_i(b_rdata), .conflict_o(conflict));

  for (genvar b = 0; b < NB; b++) begin : g_bank
    spm_bank #(.WORDS(WORDS)) u_bank (
      .clk_i, .req_i(b_req[b]), .we_i(b_we[b]), .be_i(b_be[b]), .addr_i(b_addr[b]),
      .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end

  assign spm_conflict_o = 6'(conflict);
endmodule
