// global_interconnect -- AXI-4 interconnect between the cluster DMA masters
// and the ports of the main SMC interconnect.
//
// NCL cluster masters share NP slave-side ports (3 ports of 256 bits in the
// paper, 32 GB/s each at 1 GHz). Cluster c is statically attached to port
// c mod NP. On each port, read and write address requests of the attached
// clusters are arbitrated round-robin. The cluster index is written into the
// upper bits of the transaction ID (bits 8:5, the DMA uses bits 4:0), so
// read data and write responses are routed back by ID. After a write address
// is granted, the write-data channel stays with that cluster until its last
// beat, and no other write address is granted on that port meanwhile.
// The paper gives the AXI-4 protocol, the three 32 GB/s ports and the
// cluster-to-SMC role; the static port assignment, the round-robin policy
// and the ID scheme are this design's choice.
module global_interconnect
  import nc_pkg::*;
#(
  parameter int unsigned NCL = 16,
  parameter int unsigned NP  = 3
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t cl_req_i [NCL],
  output axi_rsp_t cl_rsp_o [NCL],
  output axi_req_t port_req_o [NP],
  input  axi_rsp_t port_rsp_i [NP]
);
  localparam int unsigned CW = AXI_IDW - DMA_IDW;  // cluster bits of the ID
  localparam int unsigned XW = (NCL > 1) ? $clog2(NCL) : 1;

  logic [XW-1:0] ar_rr_q [NP], aw_rr_q [NP], ar_win [NP], aw_win [NP], w_own_q [NP];
  logic          ar_hit [NP], aw_hit [NP], w_lock_q [NP];

  always_comb begin
    for (int c = 0; c < NCL; c++) cl_rsp_o[c] = '0;
    for (int p = 0; p < NP; p++) begin
      port_req_o[p] = '0;
      ar_hit[p] = 1'b0; ar_win[p] = '0;
      aw_hit[p] = 1'b0; aw_win[p] = '0;
      for (int k = 0; k < NCL; k++) begin
        int c;
        c = (int'(ar_rr_q[p]) + k) % NCL;
        if (c % NP == p && !ar_hit[p] && cl_req_i[c].ar_valid) begin
          ar_hit[p] = 1'b1;
          ar_win[p] = XW'(c);
        end
        c = (int'(aw_rr_q[p]) + k) % NCL;
        if (c % NP == p && !aw_hit[p] && cl_req_i[c].aw_valid && !w_lock_q[p]) begin
          aw_hit[p] = 1'b1;
          aw_win[p] = XW'(c);
        end
      end
      // read address
      if (ar_hit[p]) begin
        port_req_o[p].ar_valid = 1'b1;
        port_req_o[p].ar       = cl_req_i[ar_win[p]].ar;
        port_req_o[p].ar.id    = {CW'(ar_win[p]), cl_req_i[ar_win[p]].ar.id[DMA_IDW-1:0]};
        cl_rsp_o[ar_win[p]].ar_ready = port_rsp_i[p].ar_ready;
      end
      // write address
      if (aw_hit[p]) begin
        port_req_o[p].aw_valid = 1'b1;
        port_req_o[p].aw       = cl_req_i[aw_win[p]].aw;
        port_req_o[p].aw.id    = {CW'(aw_win[p]), cl_req_i[aw_win[p]].aw.id[DMA_IDW-1:0]};
        cl_rsp_o[aw_win[p]].aw_ready = port_rsp_i[p].aw_ready;
      end
      // write data follows the owner of the last granted write address
      if (w_lock_q[p]) begin
        port_req_o[p].w_valid = cl_req_i[w_own_q[p]].w_valid;
        port_req_o[p].w       = cl_req_i[w_own_q[p]].w;
        cl_rsp_o[w_own_q[p]].w_ready = port_rsp_i[p].w_ready;
      end
      // read data and write responses routed by the ID's cluster bits
      for (int c = 0; c < NCL; c++) begin
        if (c % NP == p) begin
          if (port_rsp_i[p].r_valid && port_rsp_i[p].r.id[AXI_IDW-1:DMA_IDW] == CW'(c)) begin
            cl_rsp_o[c].r_valid = 1'b1;
            cl_rsp_o[c].r       = port_rsp_i[p].r;
            cl_rsp_o[c].r.id    = AXI_IDW'(port_rsp_i[p].r.id[DMA_IDW-1:0]);
            port_req_o[p].r_ready = cl_req_i[c].r_ready;
          end
          if (port_rsp_i[p].b_valid && port_rsp_i[p].b_id[AXI_IDW-1:DMA_IDW] == CW'(c)) begin
            cl_rsp_o[c].b_valid = 1'b1;
            cl_rsp_o[c].b_id    = AXI_IDW'(port_rsp_i[p].b_id[DMA_IDW-1:0]);
            port_req_o[p].b_ready = cl_req_i[c].b_ready;
          end
        end
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int p = 0; p < NP; p++) begin
        ar_rr_q[p] <= '0; aw_rr_q[p] <= '0; w_own_q[p] <= '0; w_lock_q[p] <= 1'b0;
      end
    end else begin
      for (int p = 0; p < NP; p++) begin
        if (ar_hit[p] && port_rsp_i[p].ar_ready)
          ar_rr_q[p] <= (int'(ar_win[p]) == NCL - 1) ? '0 : ar_win[p] + 1'b1;
        if (aw_hit[p] && port_rsp_i[p].aw_ready) begin
          aw_rr_q[p]  <= (int'(aw_win[p]) == NCL - 1) ? '0 : aw_win[p] + 1'b1;
          w_own_q[p]  <= aw_win[p];
          w_lock_q[p] <= 1'b1;
        end
        if (w_lock_q[p] && port_req_o[p].w_valid && port_rsp_i[p].w_ready && port_req_o[p].w.last)
          w_lock_q[p] <= 1'b0;
      end
    end
  end
endmodule
