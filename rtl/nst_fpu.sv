// nst_fpu -- NeuroStream streaming FPU with its data-flow controller.
//
// The NeuroStream works as a data-flow machine: the main controller pushes
// one command token per operation into the Cmd FIFO and the read data coming
// back from the SPM is pushed into the OP1 and OP2 operand FIFOs. The
// data-flow controller fires a token as soon as the operands it needs are at
// the heads of the operand FIFOs (and, for tokens that produce an element,
// the result FIFO has room). One FP32 multiplier, one adder and one comparator
// are shared by all tokens; the single accumulator ACC is the only data
// register. A MAC (ACC <= ACC + op1*op2, rounded after the multiply and after
// the add, as with two discrete IEEE units) completes in the cycle it fires,
// so back-to-back MACs run at one per cycle, as the paper reports for its
// non-pipelined MAC loop. The result FIFO plays the role of the output stage
// (the figure's MUX and output queue toward the cluster interconnect).
// Token set and FIFO depths are this design's choice (see nc_pkg::fpu_op_e).
// Interface: tok_push_i/tok_i, op1_push_i/op1_i, op2_push_i/op2_i feed the
// FIFOs (the producer respects tok_full_o and the operand counts);
// res_valid_o/res_o/res_pop_i drain results; acc_o is the accumulator;
// idle_o is high when no token is queued.
module nst_fpu
  import nc_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        tok_push_i,
  input  fpu_tok_t    tok_i,
  output logic        tok_full_o,
  input  logic        op1_push_i,
  input  logic [31:0] op1_i,
  input  logic        op2_push_i,
  input  logic [31:0] op2_i,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] op1_cnt_o,
  output logic [$clog2(FIFO_DEPTH+1)-1:0] op2_cnt_o,
  output logic        res_valid_o,
  output logic [31:0] res_o,
  input  logic        res_pop_i,
  output logic [31:0] acc_o,
  output logic        idle_o,
  output logic        fire_o
);
  fpu_tok_t    tok;
  logic        tok_empty;
  logic [31:0] op1, op2;
  logic        op1_empty, op2_empty, res_full, res_empty;
  logic        need1, need2, needo, fire;
  logic [31:0] acc_q;
  logic [31:0] mul_a, mul_b, mul_y, add_a, add_b, add_y, cmp_a, cmp_b, cmp_max, cmp_min;
  logic        cmp_gt;
  logic [31:0] acc_d, out_d;
  logic        acc_we;

  nst_fifo #(.WIDTH($bits(fpu_tok_t)), .DEPTH(FIFO_DEPTH)) u_cmd (
    .clk_i, .rst_ni, .push_i(tok_push_i), .wdata_i(tok_i), .pop_i(fire), .rdata_o(tok),
    .full_o(tok_full_o), .empty_o(tok_empty), .count_o());
  nst_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_op1 (
    .clk_i, .rst_ni, .push_i(op1_push_i), .wdata_i(op1_i), .pop_i(fire && need1), .rdata_o(op1),
    .full_o(), .empty_o(op1_empty), .count_o(op1_cnt_o));
  nst_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_op2 (
    .clk_i, .rst_ni, .push_i(op2_push_i), .wdata_i(op2_i), .pop_i(fire && need2), .rdata_o(op2),
    .full_o(), .empty_o(op2_empty), .count_o(op2_cnt_o));
  nst_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_res (
    .clk_i, .rst_ni, .push_i(fire && needo), .wdata_i(out_d), .pop_i(res_pop_i), .rdata_o(res_o),
    .full_o(res_full), .empty_o(res_empty), .count_o());

  fp32_mul u_mul (.a_i(mul_a), .b_i(mul_b), .y_o(mul_y));
  fp32_add u_add (.a_i(add_a), .b_i(add_b), .y_o(add_y));
  fp32_cmp u_cmp (.a_i(cmp_a), .b_i(cmp_b), .gt_o(cmp_gt), .max_o(cmp_max), .min_o(cmp_min));

  always_comb begin
    need1 = tok.op inside {F_MAC, F_ACCADD, F_ACCMAX, F_MAX, F_MIN, F_MUL, F_ADD, F_LDACC};
    need2 = (tok.op == F_MAC);
    needo = tok.op inside {F_MAX, F_MIN, F_MUL, F_ADD, F_OUTACC};
    fire  = !tok_empty && !(need1 && op1_empty) && !(need2 && op2_empty) && !(needo && res_full);

    // operand routing to the shared units
    mul_a = op1;   mul_b = tok.imm;
    add_a = acc_q; add_b = tok.imm;
    cmp_a = op1;   cmp_b = tok.imm;
    unique case (tok.op)
      F_MAC:    begin mul_b = op2; add_b = mul_y; end
      F_ACCADD: add_b = op1;
      F_ACCMAX: cmp_b = acc_q;
      F_ADD:    add_a = op1;
      F_SMUL:   mul_a = acc_q;
      default:  ;
    endcase

    acc_we = 1'b1;
    acc_d  = acc_q;
    out_d  = acc_q;
    unique case (tok.op)
      F_SETACC: acc_d = tok.imm;
      F_MAC, F_ACCADD, F_SADD: acc_d = add_y;
      F_ACCMAX: acc_d = cmp_max;
      F_SMUL:   acc_d = mul_y;
      F_LDACC:  acc_d = op1;
      F_MAX:    begin acc_we = 1'b0; out_d = cmp_max; end
      F_MIN:    begin acc_we = 1'b0; out_d = cmp_min; end
      F_MUL:    begin acc_we = 1'b0; out_d = mul_y; end
      F_ADD:    begin acc_we = 1'b0; out_d = add_y; end
      default:  acc_we = 1'b0;   // F_OUTACC
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) acc_q <= '0;
    else if (fire && acc_we) acc_q <= acc_d;
  end

  assign acc_o       = acc_q;
  assign res_valid_o = !res_empty;
  assign idle_o      = tok_empty;
  assign fire_o      = fire;
endmodule
