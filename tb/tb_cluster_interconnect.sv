// tb_cluster_interconnect -- self-checking test of the logarithmic cluster
// interconnect (cluster_interconnect) at its default size: 28 masters,
// 32 word-interleaved banks of 1024 words.
//
// Every master issues random reads and writes and holds each request until
// it is granted. The banks are modelled in the testbench (one-cycle read
// latency like spm_bank); a shadow memory checks every read. Further checks:
// at most one grant per bank per cycle, word-level interleaving (bank = word
// address mod 32), conflict_o equals the number of denied requests, and the
// round-robin arbiter lets no master wait more than NM-1 cycles on a bank.
module tb_cluster_interconnect;
  import nc_pkg::*;
  localparam int NM = 28, NB = 32, WORDS = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t m_req [NM];
  mem_rsp_t m_rsp [NM];
  logic b_req [NB], b_we [NB];
  logic [3:0] b_be [NB];
  logic [9:0] b_addr [NB];
  logic [31:0] b_wdata [NB], b_rdata [NB];
  logic [4:0] conflict;
  int checks = 0, failures = 0;
  longint n_conf = 0;

  cluster_interconnect dut (.clk_i(clk), .rst_ni(rst_n), .m_req_i(m_req), .m_rsp_o(m_rsp),
    .b_req_o(b_req), .b_we_o(b_we), .b_be_o(b_be), .b_addr_o(b_addr), .b_wdata_o(b_wdata), .b_rdata_i(b_rdata),
    .conflict_o(conflict));

  logic [31:0] bank [NB][WORDS];
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (b_req[b]) begin
        if (b_we[b]) begin
          for (int k = 0; k < 4; k++) if (b_be[b][k]) bank[b][b_addr[b]][8*k +: 8] <= b_wdata[b][8*k +: 8];
        end else b_rdata[b] <= bank[b][b_addr[b]];
      end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  logic [31:0] shadow [NB*WORDS];
  logic [31:0] pend_exp [NM];
  bit          pend [NM];
  int          wait_c [NM];

  initial begin
    for (int b = 0; b < NB; b++) for (int w = 0; w < WORDS; w++) begin
      bank[b][w] = 32'(b * WORDS + w);
      shadow[w * NB + b] = 32'(b * WORDS + w);
    end
    for (int m = 0; m < NM; m++) begin m_req[m] = '0; pend[m] = 0; wait_c[m] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      int ngnt, nden;
      int per_bank [NB];
      // new requests from idle masters
      for (int m = 0; m < NM; m++)
        if (!m_req[m].req && $urandom_range(0, 2) != 0) begin
          logic [31:0] w;
          w = (t % 1000 < 500) ? 32'($urandom_range(0, 63)) : 32'($urandom_range(0, NB * WORDS - 1));
          m_req[m] = '{req: 1'b1, we: 1'($urandom_range(0, 1)), be: 4'($urandom_range(1, 15)),
                       addr: SPM_BASE + (w << 2), wdata: $urandom};
        end
      #1;
      ngnt = 0; nden = 0;
      for (int b = 0; b < NB; b++) per_bank[b] = 0;
      for (int m = 0; m < NM; m++) if (m_req[m].req) begin
        int w;
        w = int'(m_req[m].addr[16:2]);
        if (m_rsp[m].gnt) begin
          per_bank[w % NB]++;
          chk(b_req[w % NB] && b_addr[w % NB] == 10'(w / NB), $sformatf("master %0d word %0d routed wrong", m, w));
          if (m_req[m].we) begin
            for (int k = 0; k < 4; k++) if (m_req[m].be[k]) shadow[w][8*k +: 8] = m_req[m].wdata[8*k +: 8];
          end else begin
            pend[m] = 1; pend_exp[m] = shadow[w];
          end
          wait_c[m] = 0;
        end else begin
          nden++;
          wait_c[m]++;
          chk(wait_c[m] < NM, $sformatf("master %0d starved", m));
        end
      end
      for (int b = 0; b < NB; b++) chk(per_bank[b] <= 1, "two grants on one bank");
      chk(int'(conflict) == nden, $sformatf("conflict_o %0d, denied %0d", conflict, nden));
      n_conf += nden;
      @(posedge clk); #1;
      for (int m = 0; m < NM; m++) begin
        if (pend[m]) begin
          chk(m_rsp[m].rvalid && m_rsp[m].rdata == pend_exp[m], $sformatf("master %0d read %h expected %h", m, m_rsp[m].rdata, pend_exp[m]));
          pend[m] = 0;
        end else chk(!m_rsp[m].rvalid, "spurious rvalid");
        if (m_req[m].req && m_rsp_gnt_q[m]) m_req[m] = '0;
      end
      @(negedge clk);
    end
    checks++;
    if (n_conf == 0) begin failures++; $display("FAIL no conflicts seen"); end
    $display("%0d denied requests (bank conflicts)", n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // grant seen in the last cycle
  bit m_rsp_gnt_q [NM];
  always_ff @(posedge clk) for (int m = 0; m < NM; m++) m_rsp_gnt_q[m] <= m_req[m].req && m_rsp[m].gnt;
endmodule
