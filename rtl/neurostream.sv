// neurostream -- NeuroStream (NST) streaming FP32 coprocessor.
//
// A scalar coprocessor that computes directly on the cluster SPM: it has no
// register file, only one accumulator. A RISC-V PE programs the two address
// generators and the hardware loops through MEM_LDC commands and then issues
// a STREAM command; the three hardware-loop levels and the AGUs replace the
// three inner loops of a convolution, and the two master ports fetch one
// coefficient and one data word per cycle, so a STREAM_MAC runs at close to
// one MAC per cycle. Block structure as in the paper: main controller
// (nst_ctrl), hardware loops (nst_hwl), AGU0/AGU1 (nst_agu), streaming FPU
// with operand FIFOs and data-flow controller (nst_fpu).
// AGU0 drives port 0, AGU1 drives port 1; both step together on each HWL
// iteration. Element-wise streams read through port 0 and write through
// port 1 at the AGU1 addresses.
// Interface: cfg_req_i/cfg_rsp_o is the memory-mapped control slave (CMD,
// CFG, ACC, Status); p0/p1 are masters of the cluster interconnect using
// nc_pkg::mem_req_t (grant in the request cycle, read data one cycle later);
// busy_o is high while a command is queued or running.
module neurostream
  import nc_pkg::*;
#(
  parameter int unsigned CMD_FIFO_DEPTH = 4,
  parameter int unsigned OPF_DEPTH      = 4
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  mem_req_t cfg_req_i,
  output mem_rsp_t cfg_rsp_o,
  output mem_req_t p0_req_o,
  input  mem_rsp_t p0_rsp_i,
  output mem_req_t p1_req_o,
  input  mem_rsp_t p1_rsp_i,
  output logic     busy_o
);
  localparam int unsigned CNT_W = 16;
  logic             hwl_start, hwl_step, hwl_active, en1, en2, en3;
  logic [CNT_W-1:0] e0, e1, e2;
  logic [1:0]       ld_a;
  logic [2:0]       ld_s [2];
  logic [31:0]      agu_val, a0, a1;
  logic             tok_push, tok_full, op1_push, op2_push, res_valid, res_pop, fpu_idle;
  fpu_tok_t         tok;
  logic [31:0]      op1, op2, res, acc;
  logic [$clog2(OPF_DEPTH+1)-1:0] op1_cnt, op2_cnt;

  nst_ctrl #(.CMD_FIFO_DEPTH(CMD_FIFO_DEPTH), .OPF_DEPTH(OPF_DEPTH), .CNT_W(CNT_W)) u_ctrl (
    .clk_i, .rst_ni, .cfg_req_i, .cfg_rsp_o, .p0_req_o, .p0_rsp_i, .p1_req_o, .p1_rsp_i,
    .hwl_start_o(hwl_start), .hwl_step_o(hwl_step), .hwl_e0_o(e0), .hwl_e1_o(e1), .hwl_e2_o(e2),
    .hwl_active_i(hwl_active), .agu_ld_a_o(ld_a), .agu_ld_s_o(ld_s), .agu_val_o(agu_val),
    .agu0_addr_i(a0), .agu1_addr_i(a1),
    .tok_push_o(tok_push), .tok_o(tok), .tok_full_i(tok_full),
    .op1_push_o(op1_push), .op1_o(op1), .op2_push_o(op2_push), .op2_o(op2),
    .op1_cnt_i(op1_cnt), .op2_cnt_i(op2_cnt), .res_valid_i(res_valid), .res_i(res),
    .res_pop_o(res_pop), .acc_i(acc), .fpu_idle_i(fpu_idle), .busy_o);

  nst_hwl #(.CNT_W(CNT_W)) u_hwl (
    .clk_i, .rst_ni, .start_i(hwl_start), .step_i(hwl_step), .e0_i(e0), .e1_i(e1), .e2_i(e2),
    .active_o(hwl_active), .last_o(), .en1_o(en1), .en2_o(en2), .en3_o(en3), .i_o(), .j_o(), .k_o());

  nst_agu u_agu0 (.clk_i, .rst_ni, .ld_a_i(ld_a[0]), .ld_s_i(ld_s[0]), .val_i(agu_val),
    .en1_i(en1), .en2_i(en2), .en3_i(en3), .addr_o(a0));
  nst_agu u_agu1 (.clk_i, .rst_ni, .ld_a_i(ld_a[1]), .ld_s_i(ld_s[1]), .val_i(agu_val),
    .en1_i(en1), .en2_i(en2), .en3_i(en3), .addr_o(a1));

  nst_fpu #(.FIFO_DEPTH(OPF_DEPTH)) u_fpu (
    .clk_i, .rst_ni, .tok_push_i(tok_push), .tok_i(tok), .tok_full_o(tok_full),
    .op1_push_i(op1_push), .op1_i(op1), .op2_push_i(op2_push), .op2_i(op2),
    .op1_cnt_o(op1_cnt), .op2_cnt_o(op2_cnt), .res_valid_o(res_valid), .res_o(res),
    .res_pop_i(res_pop), .acc_o(acc), .idle_o(fpu_idle), .fire_o());
endmodule
