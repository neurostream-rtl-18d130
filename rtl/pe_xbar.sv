// pe_xbar -- routes the data requests of the cluster's RISC-V PEs.
//
// A PE request whose address falls in the SPM window goes to the PE's own
// port on the cluster interconnect. Any other address is a peripheral
// access: the PEs share one peripheral bus (round-robin, one access per
// cycle) that reaches the memory-mapped registers of the NeuroStreams
// (NST_REG_BASE + n*NST_REG_STRIDE, four words each) and of the DMA engine
// (DMA_REG_BASE). A target may hold off a write by keeping gnt low (a full
// NST command FIFO, a busy DMA), which stalls that PE. Reads to unmapped
// addresses return 0. This routing is this design's choice: the paper gives
// only the NST register addresses and says each PE programs its NSTs through
// memory-mapped registers.
// Timing: a granted read returns rvalid/rdata one cycle later on both paths.
module pe_xbar
  import nc_pkg::*;
#(
  parameter int unsigned NPE       = 4,
  parameter int unsigned NNST      = 8,
  parameter int unsigned SPM_BYTES = 131072
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t pe_req_i [NPE],
  output mem_rsp_t pe_rsp_o [NPE],
  output mem_req_t spm_req_o [NPE],
  input  mem_rsp_t spm_rsp_i [NPE],
  output mem_req_t nst_req_o [NNST],
  input  mem_rsp_t nst_rsp_i [NNST],
  output mem_req_t dma_req_o,
  input  mem_rsp_t dma_rsp_i
);
  localparam int unsigned PW = (NPE > 1) ? $clog2(NPE) : 1;
  logic          is_spm [NPE];
  logic          per_hit;
  logic [PW-1:0] per_win, rr_q;
  mem_req_t      per_req;
  logic          per_gnt;
  logic          sel_dma, sel_nst;
  logic [31:0]   nst_off;
  int unsigned   nst_idx;
  logic          rd_v_q;
  logic [PW-1:0] rd_pe_q;
  logic          rd_dma_q, rd_nst_q;
  logic [31:0]   rd_nst_data;
  int unsigned   rd_nst_q_idx;

  always_comb begin
    per_hit = 1'b0;
    per_win = '0;
    for (int p = 0; p < NPE; p++)
      is_spm[p] = (pe_req_i[p].addr >= SPM_BASE) && (pe_req_i[p].addr < SPM_BASE + SPM_BYTES);
    for (int k = 0; k < NPE; k++) begin
      int p;
      p = (int'(rr_q) + k) % NPE;
      if (!per_hit && pe_req_i[p].req && !is_spm[p]) begin
        per_hit = 1'b1;
        per_win = PW'(p);
      end
    end
    per_req     = pe_req_i[per_win];
    per_req.req = per_hit;
    nst_off = per_req.addr - NST_REG_BASE;
    nst_idx = nst_off / NST_REG_STRIDE;
    sel_nst = (per_req.addr >= NST_REG_BASE) && (nst_idx < NNST);
    sel_dma = (per_req.addr >= DMA_REG_BASE) && (per_req.addr < DMA_REG_BASE + 32'd16);

    for (int n = 0; n < NNST; n++) begin
      nst_req_o[n]      = per_req;
      nst_req_o[n].addr = {28'd0, per_req.addr[3:0]};
      nst_req_o[n].req  = per_hit && sel_nst && (nst_idx == n);
    end
    dma_req_o      = per_req;
    dma_req_o.addr = {28'd0, per_req.addr[3:0]};
    dma_req_o.req  = per_hit && sel_dma;
    per_gnt = sel_nst ? nst_rsp_i[nst_idx % NNST].gnt : sel_dma ? dma_rsp_i.gnt : per_hit;

    rd_nst_data = nst_rsp_i[rd_nst_q_idx % NNST].rdata;
    for (int p = 0; p < NPE; p++) begin
      spm_req_o[p]     = pe_req_i[p];
      spm_req_o[p].req = pe_req_i[p].req && is_spm[p];
      pe_rsp_o[p].gnt    = is_spm[p] ? spm_rsp_i[p].gnt : (per_hit && per_win == PW'(p) && per_gnt);
      pe_rsp_o[p].rvalid = spm_rsp_i[p].rvalid;
      pe_rsp_o[p].rdata  = spm_rsp_i[p].rdata;
      if (rd_v_q && rd_pe_q == PW'(p)) begin
        pe_rsp_o[p].rvalid = 1'b1;
        pe_rsp_o[p].rdata  = rd_nst_q ? rd_nst_data : rd_dma_q ? dma_rsp_i.rdata : 32'd0;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q     <= '0;
      rd_v_q   <= 1'b0;
      rd_pe_q  <= '0;
      rd_dma_q <= 1'b0;
      rd_nst_q <= 1'b0;
      rd_nst_q_idx <= 0;
    end else begin
      rd_v_q   <= per_hit && per_gnt && !per_req.we;
      rd_pe_q  <= per_win;
      rd_dma_q <= sel_dma;
      rd_nst_q <= sel_nst;
      rd_nst_q_idx <= nst_idx;
      if (per_hit && per_gnt) rr_q <= (per_win == PW'(NPE - 1)) ? '0 : per_win + 1'b1;
    end
  end
endmodule
