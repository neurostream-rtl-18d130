// neurocluster -- NeuroCluster: the processor-in-memory platform on the logic
// base die of a Smart Memory Cube.
//
// NCL = 16 clusters (nc_cluster), each with 8 NeuroStream FP32 coprocessors,
// a DMA engine and 128 kB of word-interleaved SPM, joined by the AXI-4 global
// interconnect to NP = 3 256-bit ports of the main SMC interconnect. At 1 GHz
// the 128 NeuroStreams give 256 GFLOPS peak (one MAC = 2 FLOP per cycle each).
// Outside this RTL and brought out as ports: the 4 RISC-V PEs of every
// cluster (pe_req_i / pe_rsp_o: their data ports, [cluster][pe]) and the main
// SMC interconnect with the vault controllers and DRAM behind the three AXI
// ports. Status outputs show NST and DMA activity and SPM bank conflicts.
// Lint note: verilator reports "circular combinational logic" on cl_rsp.
// The array is one unpacked array of AXI response structs: the ready of one
// cluster depends on the valid of the others through the round-robin
// arbiters. No bit depends on itself, so this is not a real loop. The warning
// only costs simulation speed, and the code is left as it is.
module neurocluster
  import nc_pkg::*;
#(
  parameter int unsigned NCL       = 16,
  parameter int unsigned NP        = 3,
  parameter int unsigned NNST      = 8,
  parameter int unsigned NPE       = 4,
  parameter int unsigned NB        = 32,
  parameter int unsigned SPM_BYTES = 131072
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t pe_req_i [NCL][NPE],
  output mem_rsp_t pe_rsp_o [NCL][NPE],
  output axi_req_t smc_req_o [NP],
  input  axi_rsp_t smc_rsp_i [NP],
  output logic [NNST-1:0] nst_busy_o [NCL],
  output logic [NCL-1:0]  dma_busy_o,
  output logic [5:0]      dma_outstanding_o [NCL],
  output logic [5:0]      spm_conflict_o [NCL]
);
  axi_req_t cl_req [NCL];
  axi_rsp_t cl_rsp [NCL];

  for (genvar c = 0; c < NCL; c++) begin : g_cl
    nc_cluster #(.NNST(NNST), .NPE(NPE), .NB(NB), .SPM_BYTES(SPM_BYTES)) u_cluster (
      .clk_i, .rst_ni, .pe_req_i(pe_req_i[c]), .pe_rsp_o(pe_rsp_o[c]),
      .axi_req_o(cl_req[c]), .axi_rsp_i(cl_rsp[c]),
      .nst_busy_o(nst_busy_o[c]), .dma_busy_o(dma_busy_o[c]),
      .dma_outstanding_o(dma_outstanding_o[c]), .spm_conflict_o(spm_conflict_o[c]));
  end

  global_interconnect #(.NCL(NCL), .NP(NP)) u_gic (
    .clk_i, .rst_ni, .cl_req_i(cl_req), .cl_rsp_o(cl_rsp), .port_req_o(smc_req_o), .port_rsp_i(smc_rsp_i));
endmodule
