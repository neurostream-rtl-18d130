// tb_neurostream -- self-checking test of one NeuroStream coprocessor.
//
// A two-port SPM model with one-cycle read latency sits on the NST master
// ports; in the second half of the test it withholds grants at random to
// create bank-conflict stalls. The testbench plays the RISC-V PE: it writes
// CFG and CMD registers and polls Status. Covered: a 3x3 convolution window
// programmed like the paper's example (STREAM_MAC with the S0/S1
// steps of the example; S2 corrected, see conv_window), ReLU with STREAM_MAX, STREAM_MIN, SCALE,
// SHIFT, STREAM_SUM, max pooling with STREAM_MAXPL, SINGLE_ADD/MUL,
// MEM_LDA/MEM_STA, reading ACC, and a command FIFO that fills up.
// Rate check: with no conflicts a STREAM_MAC of N iterations must finish
// within N + 12 cycles of its CMD write (close to one MAC per cycle).
module tb_neurostream;
  import nc_pkg::*;
  import fp_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mem_req_t cfg_req, p0_req, p1_req;
  mem_rsp_t cfg_rsp, p0_rsp, p1_rsp;
  logic     busy;
  int checks = 0, failures = 0;
  int cycle = 0;
  logic conflicts_on = 0;
  int n_stall = 0, n_cmdfull = 0;

  neurostream dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
    .p0_req_o(p0_req), .p0_rsp_i(p0_rsp), .p1_req_o(p1_req), .p1_rsp_i(p1_rsp), .busy_o(busy));

  // ---------------- SPM model ----------------
  localparam int MW = 4096;
  logic [31:0] mem [MW];
  logic g0, g1;
  always_comb begin
    g0 = p0_req.req && !(conflicts_on && (cycle % 3 == 0));
    g1 = p1_req.req && !(conflicts_on && (cycle % 4 == 1));
    p0_rsp.gnt = g0;
    p1_rsp.gnt = g1;
  end
  always_ff @(posedge clk) begin
    cycle <= cycle + 1;
    p0_rsp.rvalid <= g0 && !p0_req.we;
    p1_rsp.rvalid <= g1 && !p1_req.we;
    if (g0 && !p0_req.we) p0_rsp.rdata <= mem[p0_req.addr[13:2]];
    if (g1 && !p1_req.we) p1_rsp.rdata <= mem[p1_req.addr[13:2]];
    if (g0 && p0_req.we) mem[p0_req.addr[13:2]] <= p0_req.wdata;
    if (g1 && p1_req.we) mem[p1_req.addr[13:2]] <= p1_req.wdata;
    if ((p0_req.req && !g0) || (p1_req.req && !g1)) n_stall <= n_stall + 1;
    if (cfg_req.req && !cfg_rsp.gnt) n_cmdfull <= n_cmdfull + 1;
  end

  // ---------------- PE side ----------------
  // PE bus tasks: called and returning just after a falling edge, so the
  // combinational grant and the registered read data are sampled mid-cycle.
  task automatic wr(input logic [3:0] off, input logic [31:0] d);
    cfg_req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: NST_REG_BASE + 32'(off), wdata: d};
    #1;
    while (!cfg_rsp.gnt) @(negedge clk);
    @(negedge clk);
    cfg_req = '0;
  endtask
  task automatic rd(input logic [3:0] off, output logic [31:0] d);
    cfg_req = '{req: 1'b1, we: 1'b0, be: 4'hF, addr: NST_REG_BASE + 32'(off), wdata: 0};
    #1;
    while (!cfg_rsp.gnt) @(negedge clk);
    @(negedge clk);
    cfg_req = '0;
    d = cfg_rsp.rdata;
    if (!cfg_rsp.rvalid) d = 32'hDEAD_BEEF;
  endtask
  task automatic issue(input nst_op_e op, input logic [23:0] a0, input logic [31:0] a1);
    wr(NST_R_CFG, a1);
    wr(NST_R_CMD, {op, a0});
  endtask
  task automatic ldc(input nst_cfg_e r, input logic [31:0] v);
    issue(MEM_LDC, 24'(r), v);
  endtask
  task automatic wait_idle();
    logic [31:0] s;
    do rd(NST_R_STS, s); while (s[0]);
  endtask
  task automatic chk(input string what, input logic [31:0] got, input logic [31:0] exp_);
    checks++;
    if (got !== exp_) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp_);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // convolution window: tile_in[TYI][TXI][TCI], filters[TCO][KY][KX][TCI]
  localparam int TXI = 6, TYI = 6, TCI = 3, KX = 3, KY = 3, SX = 1, SY = 1;
  localparam int IN_BASE = 0, F_BASE = 512, OUT_BASE = 1024, E_BASE = 2048;

  task automatic conv_window(input int tyo, input int txo, input int tco, input logic check_rate);
    logic [31:0] r, a;
    int t0, t1;
    ldc(AGU0_S0, 1);
    ldc(AGU0_S1, TCI * (SX - 1));
    // the paper's example prints TCI*(TXI*Sy - Sx*KX + 1); under the loop
    // semantics of its pseudo-code the step that reaches the next row is:
    ldc(AGU0_S2, TCI * (TXI * SY - SX * KX));
    ldc(AGU1_S0, 1);
    ldc(AGU1_S1, 0);
    ldc(AGU1_S2, 0);
    ldc(HWL_E0, TCI);
    ldc(HWL_E1, KX);
    ldc(HWL_E2, KY);
    // the step values of the paper's example belong to the input tile, so
    // AGU0 walks the input tile and AGU1 the filter
    ldc(AGU0_A, IN_BASE + (tyo * TXI + txo) * TCI);
    ldc(AGU1_A, F_BASE + tco * KY * KX * TCI);
    wait_idle();
    wr(NST_R_CFG, OUT_BASE + tco * 16 + tyo * 4 + txo);
    t0 = cycle;
    wr(NST_R_CMD, {STREAM_MAC, 24'(1 << ARG0_WB)});
    while (busy) @(negedge clk);
    t1 = cycle;
    // reference in the same order as the hardware loops
    r = 32'd0;
    for (int ky = 0; ky < KY; ky++)
      for (int kx = 0; kx < KX; kx++)
        for (int c = 0; c < TCI; c++)
          r = fadd(r, fmul(mem[F_BASE + tco * KY * KX * TCI + (ky * KX + kx) * TCI + c],
                           mem[IN_BASE + ((tyo + ky * SY) * TXI + txo + kx * SX) * TCI + c]));
    chk("conv result in SPM", mem[OUT_BASE + tco * 16 + tyo * 4 + txo], r);
    rd(NST_R_ACC, a);
    chk("conv ACC register", a, r);
    if (check_rate) begin
      checks++;
      if (t1 - t0 > KX * KY * TCI + 12) begin
        failures++;
        $display("FAIL rate: %0d MACs took %0d cycles", KX * KY * TCI, t1 - t0);
      end else $display("STREAM_MAC %0d MACs in %0d cycles", KX * KY * TCI, t1 - t0);
    end
  endtask

  initial begin
    logic [31:0] v, r;
    cfg_req = '0;
    for (int n = 0; n < MW; n++) mem[n] = 32'd0;
    for (int n = 0; n < TXI * TYI * TCI; n++) mem[IN_BASE + n] = frand(120, 134);
    for (int n = 0; n < 2 * KX * KY * TCI; n++) mem[F_BASE + n] = frand(120, 134);
    for (int n = 0; n < 64; n++) mem[E_BASE + n] = frand(120, 134);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- convolution windows (paper's STREAM_MAC programming) ----
    conv_window(0, 0, 0, 1);
    conv_window(2, 3, 1, 1);
    conv_window(3, 1, 0, 0);

    // ---- element-wise streams over E_BASE[0..15] -> E_BASE+64.. ----
    ldc(HWL_E0, 4); ldc(HWL_E1, 4); ldc(HWL_E2, 1);
    ldc(AGU0_S0, 1); ldc(AGU0_S1, 0); ldc(AGU0_S2, 0);
    ldc(AGU1_S0, 1); ldc(AGU1_S1, 0); ldc(AGU1_S2, 0);
    for (int t = 0; t < 4; t++) begin
      nst_op_e op;
      logic [31:0] k;
      op = (t == 0) ? STREAM_MAX : (t == 1) ? STREAM_MIN : (t == 2) ? STREAM_SCALE : STREAM_SHIFT;
      k  = (t == 0) ? 32'h0 : (t == 1) ? 32'h3F80_0000 : (t == 2) ? 32'hC020_0000 : 32'h4110_0000;
      ldc(AGU0_A, E_BASE);
      ldc(AGU1_A, E_BASE + 64 + 16 * t);
      issue(op, 0, k);
      wait_idle();
      for (int n = 0; n < 16; n++) begin
        logic [31:0] x;
        x = mem[E_BASE + n];
        r = (t == 0) ? fmax(x, k) : (t == 1) ? fmin(x, k) : (t == 2) ? fmul(x, k) : fadd(x, k);
        chk($sformatf("elementwise %s[%0d]", op.name(), n), mem[E_BASE + 64 + 16 * t + n], r);
      end
    end

    // ---- STREAM_SUM over 16 words, result by write-back ----
    ldc(AGU0_A, E_BASE);
    issue(STREAM_SUM, 24'(1 << ARG0_WB), E_BASE + 200);
    wait_idle();
    r = 0;
    for (int n = 0; n < 16; n++) r = fadd(r, mem[E_BASE + n]);
    chk("STREAM_SUM", mem[E_BASE + 200], r);

    // ---- max pooling: 2x2 windows of a 4x4 map with stride 2 ----
    conv_pool: for (int py = 0; py < 2; py++) for (int px = 0; px < 2; px++) begin
      ldc(HWL_E0, 2); ldc(HWL_E1, 2); ldc(HWL_E2, 1);
      ldc(AGU0_S0, 1); ldc(AGU0_S1, 4 - 2);
      ldc(AGU0_A, E_BASE + py * 8 + px * 2);
      issue(STREAM_MAXPL, 24'(1 << ARG0_WB), E_BASE + 220 + py * 2 + px);
      wait_idle();
      r = FP32_NEG_INF;
      for (int y = 0; y < 2; y++) for (int x = 0; x < 2; x++)
        r = fmax(r, mem[E_BASE + (py * 2 + y) * 4 + px * 2 + x]);
      chk("STREAM_MAXPL", mem[E_BASE + 220 + py * 2 + px], r);
    end

    // ---- single ops and accumulator transfers ----
    issue(MEM_LDA, 0, E_BASE + 5);
    issue(SINGLE_ADD, 0, 32'h4000_0000);
    issue(SINGLE_MUL, 0, 32'hBF00_0000);
    issue(MEM_STA, 0, E_BASE + 240);
    wait_idle();
    r = fmul(fadd(mem[E_BASE + 5], 32'h4000_0000), 32'hBF00_0000);
    chk("LDA/ADD/MUL/STA", mem[E_BASE + 240], r);
    rd(NST_R_ACC, v);
    chk("ACC after singles", v, r);

    // ---- command FIFO back-pressure and bank-conflict stalls ----
    conflicts_on = 1;
    ldc(HWL_E0, 16); ldc(HWL_E1, 1); ldc(HWL_E2, 1);
    ldc(AGU0_S0, 1); ldc(AGU1_S0, 1); ldc(AGU0_S1, 0); ldc(AGU1_S1, 0); ldc(AGU0_S2, 0); ldc(AGU1_S2, 0);
    for (int t = 0; t < 6; t++) begin
      ldc(AGU0_A, E_BASE);
      ldc(AGU1_A, IN_BASE + t);
      issue(STREAM_MAC, 24'(1 << ARG0_WB), E_BASE + 300 + t);
    end
    wait_idle();
    for (int t = 0; t < 6; t++) begin
      r = 0;
      for (int n = 0; n < 16; n++) r = fadd(r, fmul(mem[E_BASE + n], mem[IN_BASE + t + n]));
      chk("MAC under stalls", mem[E_BASE + 300 + t], r);
    end
    conv_window(1, 2, 1, 0);
    checks++;
    if (n_stall == 0 || n_cmdfull == 0) begin
      failures++;
      $display("FAIL: stalls %0d, command FIFO full %0d", n_stall, n_cmdfull);
    end
    $display("stall cycles %0d, CMD FIFO full cycles %0d", n_stall, n_cmdfull);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
