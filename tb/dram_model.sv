// dram_model -- behavioural model of the memory behind the NeuroCluster: the
// main SMC interconnect, the vault controllers and the DRAM dies, seen as NP
// AXI slave ports sharing one flat memory of 256-bit lines.
//
// Each port accepts read and write addresses at any time and queues them.
// A read burst starts returning data LAT cycles after its address was
// accepted, one beat per cycle while r_ready is high; bursts on a port
// return in order. Write data is taken in the order of the write addresses
// (honouring the byte strobes) and a write response follows the last beat.
// Not synthesizable; for testbenches only.
module dram_model
  import nc_pkg::*;
#(
  parameter int unsigned NP    = 3,
  parameter int unsigned LINES = 8192,
  parameter int unsigned LAT   = 20
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i [NP],
  output axi_rsp_t rsp_o [NP]
);
  typedef struct {
    axi_ax_t ax;
    longint  t;
  } pend_t;

  logic [AXI_DW-1:0] mem [LINES];
  pend_t  rq [NP][$];
  axi_ax_t wq [NP][$];
  int     rbeat [NP], wbeat [NP];
  longint now;
  int     max_rq [NP];

  initial for (int p = 0; p < NP; p++) begin
    max_rq[p] = 0;
    rbeat[p]  = 0;
    wbeat[p]  = 0;
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      now <= 0;
      for (int p = 0; p < NP; p++) rsp_o[p] <= '0;
    end else begin
      now <= now + 1;
      for (int p = 0; p < NP; p++) begin
        axi_rsp_t r;
        r = rsp_o[p];
        // read address
        if (req_i[p].ar_valid && r.ar_ready) begin
          pend_t e;
          e.ax = req_i[p].ar;
          e.t  = now + LAT;
          rq[p].push_back(e);
          if (rq[p].size() > max_rq[p]) max_rq[p] = rq[p].size();
        end
        // read data
        if (r.r_valid && req_i[p].r_ready) begin
          if (r.r.last) begin
            void'(rq[p].pop_front());
            rbeat[p] = 0;
          end else rbeat[p]++;
        end
        r.r_valid = 1'b0;
        if (rq[p].size() > 0 && rq[p][0].t <= now) begin
          int line;
          line = int'(rq[p][0].ax.addr / AXI_SW) + rbeat[p];
          r.r_valid = 1'b1;
          r.r.id    = rq[p][0].ax.id;
          r.r.data  = mem[line % LINES];
          r.r.last  = (rbeat[p] == int'(rq[p][0].ax.len));
        end
        // write address and data
        if (req_i[p].aw_valid && r.aw_ready) wq[p].push_back(req_i[p].aw);
        if (req_i[p].w_valid && r.w_ready) begin
          int line;
          line = int'(wq[p][0].addr / AXI_SW) + wbeat[p];
          for (int b = 0; b < AXI_SW; b++)
            if (req_i[p].w.strb[b]) mem[line % LINES][8*b +: 8] = req_i[p].w.data[8*b +: 8];
          if (req_i[p].w.last) begin
            r.b_valid = 1'b1;
            r.b_id    = wq[p][0].id;
            void'(wq[p].pop_front());
            wbeat[p] = 0;
          end else wbeat[p]++;
        end else if (r.b_valid && req_i[p].b_ready) r.b_valid = 1'b0;
        r.ar_ready = 1'b1;
        r.aw_ready = 1'b1;
        r.w_ready  = (wq[p].size() > 0) || (req_i[p].aw_valid && r.aw_ready);
        rsp_o[p] <= r;
      end
    end
  end
endmodule
