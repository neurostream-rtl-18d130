// cluster_interconnect -- logarithmic interconnect between the cluster
// masters and the word-level-interleaved SPM banks.
//
// Every master (2 ports per NeuroStream, the PEs' data ports, the DMA ports)
// can reach every bank in one cycle. The SPM is word-level interleaved:
// consecutive 32-bit words sit in consecutive banks, bank = word[log2(NB)-1:0],
// row = the word bits above. Each bank has its own round-robin arbiter; when
// several masters address the same bank in a cycle (a bank conflict), one is
// granted and the others see gnt low and retry. Read data comes back one
// cycle after the grant, routed to the master that was granted. The paper
// gives the all-to-all single-cycle topology, the word-level interleaving
// and the banking factor (32 banks for 16 NeuroStream ports); the
// round-robin policy and the request/grant protocol are this design's choice.
// conflict_o counts, per cycle, the requests that were not granted.
module cluster_interconnect
  import nc_pkg::*;
#(
  parameter int unsigned NM    = 28,     // masters
  parameter int unsigned NB    = 32,     // banks
  parameter int unsigned WORDS = 1024,   // words per bank
  parameter int unsigned BW    = $clog2(NB),
  parameter int unsigned RW    = $clog2(WORDS)
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  mem_req_t    m_req_i [NM],
  output mem_rsp_t    m_rsp_o [NM],
  // bank side
  output logic        b_req_o   [NB],
  output logic        b_we_o    [NB],
  output logic [3:0]  b_be_o    [NB],
  output logic [RW-1:0] b_addr_o [NB],
  output logic [31:0] b_wdata_o [NB],
  input  logic [31:0] b_rdata_i [NB],
  output logic [$clog2(NM+1)-1:0] conflict_o
);
  localparam int unsigned MW = $clog2(NM);
  logic [MW-1:0] rr_q   [NB];
  logic [MW-1:0] win    [NB];
  logic          hit    [NB];
  logic [MW-1:0] rsp_m_q [NB];
  logic          rsp_v_q [NB];
  logic [BW-1:0] bank_of [NM];
  logic          granted [NM];

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      bank_of[m] = m_req_i[m].addr[2 +: BW];
      granted[m] = 1'b0;
    end
    for (int b = 0; b < NB; b++) begin
      hit[b] = 1'b0;
      win[b] = '0;
      // round robin: first requester at or after rr_q[b]
      for (int k = 0; k < NM; k++) begin
        int m;
        m = (int'(rr_q[b]) + k) % NM;
        if (!hit[b] && m_req_i[m].req && bank_of[m] == BW'(b)) begin
          hit[b] = 1'b1;
          win[b] = MW'(m);
        end
      end
      b_req_o[b]   = hit[b];
      b_we_o[b]    = m_req_i[win[b]].we;
      b_be_o[b]    = m_req_i[win[b]].be;
      b_addr_o[b]  = m_req_i[win[b]].addr[2 + BW +: RW];
      b_wdata_o[b] = m_req_i[win[b]].wdata;
      if (hit[b]) granted[win[b]] = 1'b1;
    end
    conflict_o = '0;
    for (int m = 0; m < NM; m++) begin
      m_rsp_o[m].gnt    = granted[m];
      m_rsp_o[m].rvalid = 1'b0;
      m_rsp_o[m].rdata  = '0;
      if (m_req_i[m].req && !granted[m]) conflict_o = conflict_o + 1'b1;
    end
    for (int b = 0; b < NB; b++) begin
      if (rsp_v_q[b]) begin
        m_rsp_o[rsp_m_q[b]].rvalid = 1'b1;
        m_rsp_o[rsp_m_q[b]].rdata  = b_rdata_i[b];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int b = 0; b < NB; b++) begin
        rr_q[b]    <= '0;
        rsp_m_q[b] <= '0;
        rsp_v_q[b] <= 1'b0;
      end
    end else begin
      for (int b = 0; b < NB; b++) begin
        rsp_v_q[b] <= hit[b] && !m_req_i[win[b]].we;
        rsp_m_q[b] <= win[b];
        if (hit[b]) rr_q[b] <= (win[b] == MW'(NM - 1)) ? '0 : win[b] + 1'b1;
      end
    end
  end
endmodule
