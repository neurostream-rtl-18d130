// nst_ctrl -- NeuroStream main controller.
//
// Receives commands from a RISC-V PE through four memory-mapped registers
// (CMD, CFG, ACC, Status, at the offsets of nc_pkg), queues them in the
// command FIFO, and executes them one at a time with a command FSM:
//  * MEM_LDC loads an AGU address/step register or a HWL bound (one cycle).
//  * MEM_LDA / MEM_STA move the accumulator from / to an SPM word.
//  * SINGLE_ADD / SINGLE_MUL combine the accumulator with an FP32 constant.
//  * STREAM_* commands start the hardware loops; every loop iteration issues
//    the SPM transactions the command needs (two reads for STREAM_MAC, one
//    read for the others) and pushes one token into the FPU command FIFO.
//    Element-wise streams (MAX, MIN, SCALE, SHIFT) also push the AGU1 address
//    into the write-address FIFO, and the FPU result is stored there through
//    port 1. Reductions (MAC, SUM, MAXPL) re-initialise ACC first unless arg0
//    bit 1 is set, and store ACC to SPM word arg1 at the end if arg0 bit 0 is
//    set.
// The paper gives the registers and their addresses, the FIFO command queue,
// two ports to the cluster interconnect, two transactions per cycle for MAC,
// and the command names; the command encoding, the read credit scheme and
// the rule that a command completes (its results are written, its reads
// returned) before the next one starts are this design's choices.
// Timing: a read is issued only if its operand FIFO has room for it counting
// reads still in flight, so the FPU is never overrun; with no bank conflicts
// a STREAM_MAC of N iterations issues one iteration per cycle.
// A write to CMD while the command FIFO is full is held off (gnt low).
module nst_ctrl
  import nc_pkg::*;
#(
  parameter int unsigned CMD_FIFO_DEPTH = 4,
  parameter int unsigned OPF_DEPTH      = 4,
  parameter int unsigned CNT_W          = 16
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // memory-mapped control port (addr[3:0] selects the register)
  input  mem_req_t    cfg_req_i,
  output mem_rsp_t    cfg_rsp_o,
  // two master ports toward the cluster interconnect
  output mem_req_t    p0_req_o,
  input  mem_rsp_t    p0_rsp_i,
  output mem_req_t    p1_req_o,
  input  mem_rsp_t    p1_rsp_i,
  // hardware loops
  output logic        hwl_start_o,
  output logic        hwl_step_o,
  output logic [CNT_W-1:0] hwl_e0_o,
  output logic [CNT_W-1:0] hwl_e1_o,
  output logic [CNT_W-1:0] hwl_e2_o,
  input  logic        hwl_active_i,
  // AGUs
  output logic [1:0]  agu_ld_a_o,
  output logic [2:0]  agu_ld_s_o [2],
  output logic [31:0] agu_val_o,
  input  logic [31:0] agu0_addr_i,
  input  logic [31:0] agu1_addr_i,
  // streaming FPU
  output logic        tok_push_o,
  output fpu_tok_t    tok_o,
  input  logic        tok_full_i,
  output logic        op1_push_o,
  output logic [31:0] op1_o,
  output logic        op2_push_o,
  output logic [31:0] op2_o,
  input  logic [$clog2(OPF_DEPTH+1)-1:0] op1_cnt_i,
  input  logic [$clog2(OPF_DEPTH+1)-1:0] op2_cnt_i,
  input  logic        res_valid_i,
  input  logic [31:0] res_i,
  output logic        res_pop_o,
  input  logic [31:0] acc_i,
  input  logic        fpu_idle_i,
  output logic        busy_o
);
  typedef enum logic [2:0] {S_IDLE, S_START, S_LDA, S_STREAM, S_TAIL, S_DRAIN} state_e;
  state_e   state_q, state_d;

  // ---------------- registers and command FIFO ----------------
  logic [31:0] cfg_q;
  nst_cmd_t    cmd_in, cmd_head, cur_q;
  logic        cmd_push, cmd_pop, cmd_full, cmd_empty;
  logic [$clog2(CMD_FIFO_DEPTH+1)-1:0] cmd_cnt;
  logic        rd_pend_q;
  logic [31:0] rd_data_q;
  logic [CNT_W-1:0] e_q [3];

  assign cmd_in   = '{op: cfg_req_i.wdata[31:24], arg0: cfg_req_i.wdata[23:0], arg1: cfg_q};
  assign cmd_push = cfg_req_i.req && cfg_req_i.we && (cfg_req_i.addr[3:0] == NST_R_CMD) && !cmd_full;

  nst_fifo #(.WIDTH($bits(nst_cmd_t)), .DEPTH(CMD_FIFO_DEPTH)) u_cmdq (
    .clk_i, .rst_ni, .push_i(cmd_push), .wdata_i(cmd_in), .pop_i(cmd_pop), .rdata_o(cmd_head),
    .full_o(cmd_full), .empty_o(cmd_empty), .count_o(cmd_cnt));

  always_comb begin
    cfg_rsp_o.gnt    = cfg_req_i.req && !(cfg_req_i.we && cfg_req_i.addr[3:0] == NST_R_CMD && cmd_full);
    cfg_rsp_o.rvalid = rd_pend_q;
    cfg_rsp_o.rdata  = rd_data_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cfg_q     <= '0;
      rd_pend_q <= 1'b0;
      rd_data_q <= '0;
    end else begin
      rd_pend_q <= cfg_req_i.req && !cfg_req_i.we;
      if (cfg_req_i.req && cfg_req_i.we && cfg_req_i.addr[3:0] == NST_R_CFG) cfg_q <= cfg_req_i.wdata;
      if (cfg_req_i.req && !cfg_req_i.we) begin
        unique case (cfg_req_i.addr[3:0])
          NST_R_ACC: rd_data_q <= acc_i;
          NST_R_STS: rd_data_q <= {16'd0, 8'(cmd_cnt), 7'd0, busy_o};
          NST_R_CFG: rd_data_q <= cfg_q;
          default:   rd_data_q <= '0;
        endcase
      end
    end
  end

  // ---------------- write path: result FIFO + write-address FIFO ----------------
  logic        wa_push, wa_full, wa_empty;
  logic [31:0] wa_in, wa_head;
  logic        wr_req;
  nst_fifo #(.WIDTH(32), .DEPTH(OPF_DEPTH)) u_waddr (
    .clk_i, .rst_ni, .push_i(wa_push), .wdata_i(wa_in), .pop_i(wr_req && p1_rsp_i.gnt),
    .rdata_o(wa_head), .full_o(wa_full), .empty_o(wa_empty), .count_o());
  assign wr_req    = res_valid_i && !wa_empty;
  assign res_pop_o = wr_req && p1_rsp_i.gnt;

  // ---------------- read bookkeeping ----------------
  logic [2:0] infl0_q, infl1_q;
  logic       rd0, rd1, g0, g1, d0_q, d1_q;
  logic       credit0, credit1;
  assign credit0 = (32'(infl0_q) + 32'(op1_cnt_i)) < OPF_DEPTH;
  assign credit1 = (32'(infl1_q) + 32'(op2_cnt_i)) < OPF_DEPTH;
  assign g0 = rd0 && p0_rsp_i.gnt;
  assign g1 = rd1 && !wr_req && p1_rsp_i.gnt;
  assign op1_push_o = p0_rsp_i.rvalid;
  assign op1_o      = p0_rsp_i.rdata;
  assign op2_push_o = p1_rsp_i.rvalid;
  assign op2_o      = p1_rsp_i.rdata;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      infl0_q <= '0;
      infl1_q <= '0;
    end else begin
      infl0_q <= infl0_q + 3'(g0) - 3'(p0_rsp_i.rvalid);
      infl1_q <= infl1_q + 3'(g1) - 3'(p1_rsp_i.rvalid);
    end
  end

  // ---------------- command FSM ----------------
  logic is_mac, is_red, is_elem;
  fpu_op_e stream_fop;
  always_comb begin
    is_mac  = (cur_q.op == STREAM_MAC);
    is_red  = cur_q.op inside {STREAM_MAC, STREAM_SUM, STREAM_MAXPL};
    is_elem = cur_q.op inside {STREAM_MAX, STREAM_MIN, STREAM_SCALE, STREAM_SHIFT};
    unique case (cur_q.op)
      STREAM_MAC:   stream_fop = F_MAC;
      STREAM_SUM:   stream_fop = F_ACCADD;
      STREAM_MAXPL: stream_fop = F_ACCMAX;
      STREAM_MAX:   stream_fop = F_MAX;
      STREAM_MIN:   stream_fop = F_MIN;
      STREAM_SCALE: stream_fop = F_MUL;
      default:      stream_fop = F_ADD;
    endcase
  end

  logic iter_ok;
  always_comb begin
    state_d     = state_q;
    cmd_pop     = 1'b0;
    hwl_start_o = 1'b0;
    hwl_step_o  = 1'b0;
    agu_ld_a_o  = '0;
    agu_ld_s_o[0] = '0;
    agu_ld_s_o[1] = '0;
    agu_val_o   = cur_q.arg1;
    tok_push_o  = 1'b0;
    tok_o       = '{op: F_SETACC, imm: 32'd0};
    wa_push     = 1'b0;
    wa_in       = agu1_addr_i;
    rd0         = 1'b0;
    rd1         = 1'b0;
    iter_ok     = 1'b0;
    p0_req_o    = '{req: 1'b0, we: 1'b0, be: 4'hF, addr: SPM_BASE + {agu0_addr_i[29:0], 2'b00}, wdata: 32'd0};

    unique case (state_q)
      S_IDLE: if (!cmd_empty) begin
        cmd_pop = 1'b1;
        state_d = S_START;
      end
      S_START: begin
        unique case (cur_q.op)
          MEM_LDC: begin
            unique case (cur_q.arg0[3:0])
              AGU0_A:  agu_ld_a_o[0] = 1'b1;
              AGU0_S0: agu_ld_s_o[0] = 3'b001;
              AGU0_S1: agu_ld_s_o[0] = 3'b010;
              AGU0_S2: agu_ld_s_o[0] = 3'b100;
              AGU1_A:  agu_ld_a_o[1] = 1'b1;
              AGU1_S0: agu_ld_s_o[1] = 3'b001;
              AGU1_S1: agu_ld_s_o[1] = 3'b010;
              AGU1_S2: agu_ld_s_o[1] = 3'b100;
              default: ;
            endcase
            state_d = S_IDLE;
          end
          MEM_LDA: state_d = S_LDA;
          MEM_STA: if (!tok_full_i && !wa_full) begin
            tok_push_o = 1'b1;
            tok_o      = '{op: F_OUTACC, imm: 32'd0};
            wa_push    = 1'b1;
            wa_in      = cur_q.arg1;
            state_d    = S_DRAIN;
          end
          SINGLE_ADD, SINGLE_MUL: if (!tok_full_i) begin
            tok_push_o = 1'b1;
            tok_o      = '{op: (cur_q.op == SINGLE_ADD) ? F_SADD : F_SMUL, imm: cur_q.arg1};
            state_d    = S_DRAIN;
          end
          STREAM_MAC, STREAM_SUM, STREAM_MAXPL, STREAM_MAX, STREAM_MIN, STREAM_SCALE, STREAM_SHIFT:
            if (!tok_full_i) begin
              hwl_start_o = 1'b1;
              if (is_red && !cur_q.arg0[ARG0_KEEP]) begin
                tok_push_o = 1'b1;
                tok_o      = '{op: F_SETACC, imm: (cur_q.op == STREAM_MAXPL) ? FP32_NEG_INF : 32'd0};
              end
              state_d = S_STREAM;
            end
          default: state_d = S_IDLE;   // unknown opcode: dropped
        endcase
      end
      S_LDA: begin
        rd0 = !tok_full_i && credit0;
        p0_req_o.addr = SPM_BASE + {cur_q.arg1[29:0], 2'b00};
        if (g0) begin
          tok_push_o = 1'b1;
          tok_o      = '{op: F_LDACC, imm: 32'd0};
          state_d    = S_DRAIN;
        end
      end
      S_STREAM: begin
        if (!hwl_active_i) state_d = S_TAIL;
        else if (!tok_full_i && !(is_elem && wa_full)) begin
          rd0 = !d0_q && credit0;
          rd1 = is_mac && !d1_q && credit1;
          iter_ok = (d0_q || g0) && (!is_mac || d1_q || g1);
          if (iter_ok) begin
            hwl_step_o = 1'b1;
            tok_push_o = 1'b1;
            tok_o      = '{op: stream_fop, imm: cur_q.arg1};
            wa_push    = is_elem;
          end
        end
      end
      S_TAIL: begin
        if (is_red && cur_q.arg0[ARG0_WB]) begin
          if (!tok_full_i && !wa_full) begin
            tok_push_o = 1'b1;
            tok_o      = '{op: F_OUTACC, imm: 32'd0};
            wa_push    = 1'b1;
            wa_in      = cur_q.arg1;
            state_d    = S_DRAIN;
          end
        end else state_d = S_DRAIN;
      end
      S_DRAIN: if (fpu_idle_i && wa_empty && infl0_q == 0 && infl1_q == 0 && !res_valid_i)
        state_d = S_IDLE;
      default: state_d = S_IDLE;
    endcase
    p0_req_o.req = rd0;
  end

  // port 1: result writes have priority over MAC operand reads
  always_comb begin
    if (wr_req) p1_req_o = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: SPM_BASE + {wa_head[29:0], 2'b00}, wdata: res_i};
    else        p1_req_o = '{req: rd1, we: 1'b0, be: 4'hF, addr: SPM_BASE + {agu1_addr_i[29:0], 2'b00}, wdata: 32'd0};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      cur_q   <= '0;
      d0_q    <= 1'b0;
      d1_q    <= 1'b0;
      for (int n = 0; n < 3; n++) e_q[n] <= '0;
    end else begin
      state_q <= state_d;
      if (cmd_pop) cur_q <= cmd_head;
      if (state_q == S_START && cur_q.op == MEM_LDC && cur_q.arg0[3:0] >= 4'(HWL_E0) && cur_q.arg0[3:0] <= 4'(HWL_E2))
        e_q[2'(cur_q.arg0[3:0] - 4'(HWL_E0))] <= cur_q.arg1[CNT_W-1:0];
      if (iter_ok) begin
        d0_q <= 1'b0;
        d1_q <= 1'b0;
      end else begin
        if (g0 && state_q == S_STREAM) d0_q <= 1'b1;
        if (g1) d1_q <= 1'b1;
      end
    end
  end

  assign hwl_e0_o = e_q[0];
  assign hwl_e1_o = e_q[1];
  assign hwl_e2_o = e_q[2];
  assign busy_o   = (state_q != S_IDLE) || !cmd_empty;

  a_no_read_overrun: assert property (@(posedge clk_i) disable iff (!rst_ni)
    p0_rsp_i.rvalid |-> infl0_q != 0) else $error("nst_ctrl: unexpected read response");
endmodule
