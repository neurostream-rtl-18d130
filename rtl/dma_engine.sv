// dma_engine -- cluster DMA engine: bulk transfers between DRAM and the SPM.
//
// A PE programs four registers (external address, SPM address, length in
// bytes, command) through the peripheral bus; the write to the command
// register starts the job (bit 0: 0 = DRAM -> SPM, 1 = SPM -> DRAM) and is
// held off while a job is running. Reading the command register returns the
// status: bit 0 busy, bits 13:8 transactions in flight.
// DRAM -> SPM: the job is cut into AXI read bursts of up to BURST_BEATS beats
// of 256 bits. Each burst gets its own transaction ID, and up to
// MAX_OUTSTANDING = 32 bursts are in flight; an ID table keeps the SPM
// address and word count of each burst, so data may return in any burst
// order. Every returning beat is written into the SPM through NPORT = 8
// parallel 32-bit ports of the cluster interconnect; the beat is accepted
// (r_ready) only when all its words have been granted, so bank conflicts
// back-pressure the AXI read channel.
// SPM -> DRAM: one burst at a time is announced on AW; each beat is first
// gathered from the SPM through the same 8 ports, then sent on W with byte
// strobes for a short last beat; bursts' write responses are counted, up to
// 32 in flight.
// From the paper: the DMA moves bulk data between the DRAM vaults and the
// cluster SPM with up to 32 outstanding transactions. This design's choices
// and limits: the external address must be 32-byte aligned and the SPM
// address and length word aligned (the paper's engine accepts any alignment
// and size); addresses are physical (the paper's DMA takes virtual ranges,
// translated by the PE's MMU, which is not part of this RTL); burst length;
// one write beat in flight at a time.
module dma_engine
  import nc_pkg::*;
#(
  parameter int unsigned MAX_OUTSTANDING = 32,
  parameter int unsigned BURST_BEATS     = 8,
  parameter int unsigned NPORT           = AXI_DW / 32
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t cfg_req_i,
  output mem_rsp_t cfg_rsp_o,
  output mem_req_t spm_req_o [NPORT],
  input  mem_rsp_t spm_rsp_i [NPORT],
  output axi_req_t axi_req_o,
  input  axi_rsp_t axi_rsp_i,
  output logic     busy_o,
  output logic [5:0] outstanding_o
);
  localparam int unsigned IDN = 2 ** DMA_IDW;   // 32 tags
  localparam int unsigned BYTES_PER_BEAT = AXI_DW / 8;

  // ---------------- registers ----------------
  logic [31:0] ext_q, spm_q, len_q;
  logic        rd_v_q;
  logic [31:0] rd_d_q;
  logic        job_q, dir_q;
  logic        start;
  logic [5:0]  outst_q;

  assign start = cfg_req_i.req && cfg_req_i.we && cfg_req_i.addr[3:0] == DMA_R_CMD && !busy_o;
  always_comb begin
    cfg_rsp_o.gnt    = cfg_req_i.req && !(cfg_req_i.we && cfg_req_i.addr[3:0] == DMA_R_CMD && busy_o);
    cfg_rsp_o.rvalid = rd_v_q;
    cfg_rsp_o.rdata  = rd_d_q;
  end

  // ---------------- job bookkeeping ----------------
  logic [31:0] ext_cur, words_left;      // words not yet put into a burst
  logic [31:0] spm_cur;                  // SPM word index of the next burst
  logic [DMA_IDW-1:0] next_id;
  logic [IDN-1:0]     id_busy;
  logic [31:0]        tab_ptr  [IDN];    // SPM word index of the next beat
  logic [31:0]        tab_left [IDN];    // words still to come in the burst
  logic [31:0]        burst_words, burst_beats;

  always_comb begin
    burst_beats = (words_left + NPORT - 1) / NPORT;
    if (burst_beats > BURST_BEATS) burst_beats = BURST_BEATS;
    burst_words = burst_beats * NPORT;
    if (burst_words > words_left) burst_words = words_left;
  end

  // ---------------- read path (DRAM -> SPM) ----------------
  logic        ar_fire, r_fire;
  logic [DMA_IDW-1:0] rid;
  logic [31:0] r_nw;
  logic [NPORT-1:0] wdone_q, wgnt;
  logic        r_all;

  // ---------------- write path (SPM -> DRAM) ----------------
  typedef enum logic [1:0] {W_AW, W_GATHER, W_SEND} wstate_e;
  wstate_e     ws_q;
  logic [31:0] wb_beats_left, wb_words_left;  // of the current write burst
  logic [31:0] w_nw;
  logic [NPORT-1:0] issued_q, have_q, rgnt;
  logic [31:0] wbuf [NPORT];
  logic        aw_fire, w_fire;

  always_comb begin
    // defaults
    axi_req_o = '0;
    for (int k = 0; k < NPORT; k++) begin
      spm_req_o[k] = '{req: 1'b0, we: 1'b0, be: 4'hF, addr: SPM_BASE, wdata: 32'd0};
      wgnt[k] = 1'b0;
      rgnt[k] = 1'b0;
    end
    ar_fire = 1'b0; r_fire = 1'b0; aw_fire = 1'b0; w_fire = 1'b0;
    rid  = axi_rsp_i.r.id[DMA_IDW-1:0];
    r_nw = (tab_left[rid] > NPORT) ? NPORT : tab_left[rid];
    r_all = 1'b1;
    w_nw = (wb_words_left > NPORT) ? NPORT : wb_words_left;

    // AR channel
    if (job_q && !dir_q && words_left != 0 && !id_busy[next_id] && outst_q < MAX_OUTSTANDING) begin
      axi_req_o.ar_valid = 1'b1;
      axi_req_o.ar       = '{id: AXI_IDW'(next_id), addr: ext_cur, len: 8'(burst_beats - 1)};
      ar_fire            = axi_rsp_i.ar_ready;
    end
    // R channel: scatter one beat to the SPM
    if (axi_rsp_i.r_valid) begin
      for (int k = 0; k < NPORT; k++) begin
        if (k < r_nw && !wdone_q[k]) begin
          spm_req_o[k] = '{req: 1'b1, we: 1'b1, be: 4'hF,
                           addr: SPM_BASE + ((tab_ptr[rid] + 32'(k)) << 2),
                           wdata: axi_rsp_i.r.data[32*k +: 32]};
          wgnt[k] = spm_rsp_i[k].gnt;
          if (!spm_rsp_i[k].gnt) r_all = 1'b0;
        end
      end
      axi_req_o.r_ready = r_all;
      r_fire = r_all;
    end

    // AW / W channels
    if (job_q && dir_q) begin
      unique case (ws_q)
        W_AW: if (words_left != 0 && outst_q < MAX_OUTSTANDING) begin
          axi_req_o.aw_valid = 1'b1;
          axi_req_o.aw       = '{id: AXI_IDW'(next_id), addr: ext_cur, len: 8'(burst_beats - 1)};
          aw_fire            = axi_rsp_i.aw_ready;
        end
        W_GATHER: for (int k = 0; k < NPORT; k++) begin
          if (k < w_nw && !issued_q[k]) begin
            spm_req_o[k] = '{req: 1'b1, we: 1'b0, be: 4'hF,
                             addr: SPM_BASE + ((spm_cur + 32'(k)) << 2), wdata: 32'd0};
            rgnt[k] = spm_rsp_i[k].gnt;
          end
        end
        W_SEND: begin
          axi_req_o.w_valid = 1'b1;
          for (int k = 0; k < NPORT; k++) begin
            axi_req_o.w.data[32*k +: 32] = wbuf[k];
            axi_req_o.w.strb[4*k +: 4]   = (k < w_nw) ? 4'hF : 4'h0;
          end
          axi_req_o.w.last = (wb_beats_left == 1);
          w_fire = axi_rsp_i.w_ready;
        end
        default: ;
      endcase
    end
    axi_req_o.b_ready = 1'b1;
  end

  logic gather_done;
  always_comb begin
    gather_done = 1'b1;
    for (int k = 0; k < NPORT; k++)
      if (k < w_nw && !(have_q[k] || spm_rsp_i[k].rvalid)) gather_done = 1'b0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ext_q <= '0; spm_q <= '0; len_q <= '0;
      rd_v_q <= 1'b0; rd_d_q <= '0;
      job_q <= 1'b0; dir_q <= 1'b0;
      ext_cur <= '0; spm_cur <= '0; words_left <= '0;
      next_id <= '0; id_busy <= '0; outst_q <= '0;
      wdone_q <= '0; issued_q <= '0; have_q <= '0;
      ws_q <= W_AW; wb_beats_left <= '0; wb_words_left <= '0;
      for (int i = 0; i < IDN; i++) begin
        tab_ptr[i]  <= '0;
        tab_left[i] <= '0;
      end
      for (int k = 0; k < NPORT; k++) wbuf[k] <= '0;
    end else begin
      // register interface
      rd_v_q <= cfg_req_i.req && !cfg_req_i.we;
      if (cfg_req_i.req && !cfg_req_i.we)
        unique case (cfg_req_i.addr[3:0])
          DMA_R_EXT: rd_d_q <= ext_q;
          DMA_R_SPM: rd_d_q <= spm_q;
          DMA_R_LEN: rd_d_q <= len_q;
          default:   rd_d_q <= {18'd0, outst_q, 7'd0, busy_o};
        endcase
      if (cfg_req_i.req && cfg_req_i.we) begin
        if (cfg_req_i.addr[3:0] == DMA_R_EXT) ext_q <= cfg_req_i.wdata;
        if (cfg_req_i.addr[3:0] == DMA_R_SPM) spm_q <= cfg_req_i.wdata;
        if (cfg_req_i.addr[3:0] == DMA_R_LEN) len_q <= cfg_req_i.wdata;
      end
      if (start) begin
        job_q      <= (len_q >> 2) != 0;
        dir_q      <= cfg_req_i.wdata[0];
        ext_cur    <= ext_q;
        spm_cur    <= (spm_q - SPM_BASE) >> 2;
        words_left <= len_q >> 2;
        ws_q       <= W_AW;
      end

      // outstanding transactions: +1 per AR/AW, -1 per last R beat / B
      outst_q <= outst_q + 6'(ar_fire) + 6'(aw_fire)
                 - 6'(r_fire && axi_rsp_i.r.last) - 6'(axi_rsp_i.b_valid);

      // ---- read bursts ----
      if (ar_fire) begin
        id_busy[next_id]  <= 1'b1;
        tab_ptr[next_id]  <= spm_cur;
        tab_left[next_id] <= burst_words;
        next_id    <= next_id + 1'b1;
        ext_cur    <= ext_cur + burst_beats * BYTES_PER_BEAT;
        spm_cur    <= spm_cur + burst_words;
        words_left <= words_left - burst_words;
      end
      if (axi_rsp_i.r_valid) begin
        if (r_fire) begin
          wdone_q <= '0;
          tab_ptr[rid]  <= tab_ptr[rid] + NPORT;
          tab_left[rid] <= tab_left[rid] - r_nw;
          if (axi_rsp_i.r.last) id_busy[rid] <= 1'b0;
        end else wdone_q <= wdone_q | wgnt;
      end

      // ---- write bursts ----
      unique case (ws_q)
        W_AW: if (aw_fire) begin
          next_id       <= next_id + 1'b1;
          ext_cur       <= ext_cur + burst_beats * BYTES_PER_BEAT;
          wb_beats_left <= burst_beats;
          wb_words_left <= burst_words;
          words_left    <= words_left - burst_words;
          issued_q      <= '0;
          have_q        <= '0;
          ws_q          <= W_GATHER;
        end
        W_GATHER: begin
          issued_q <= issued_q | rgnt;
          for (int k = 0; k < NPORT; k++)
            if (spm_rsp_i[k].rvalid) begin
              wbuf[k]   <= spm_rsp_i[k].rdata;
              have_q[k] <= 1'b1;
            end
          if (gather_done) ws_q <= W_SEND;
        end
        W_SEND: if (w_fire) begin
          issued_q      <= '0;
          have_q        <= '0;
          spm_cur       <= spm_cur + w_nw;
          wb_words_left <= wb_words_left - w_nw;
          wb_beats_left <= wb_beats_left - 1;
          ws_q          <= (wb_beats_left == 1) ? W_AW : W_GATHER;
        end
        default: ws_q <= W_AW;
      endcase

      // job ends when every word is in a burst and nothing is in flight
      if (job_q && !start && words_left == 0 && !(ar_fire || aw_fire) &&
          (dir_q ? (ws_q == W_AW) : 1'b1))
        job_q <= 1'b0;
    end
  end

  assign busy_o        = job_q || (outst_q != 0);
  assign outstanding_o = outst_q;

  a_outstanding_limit: assert property (@(posedge clk_i) disable iff (!rst_ni)
    outst_q <= MAX_OUTSTANDING) else $error("dma_engine: too many outstanding transactions");
endmodule
