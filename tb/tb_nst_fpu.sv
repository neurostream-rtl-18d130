// tb_nst_fpu -- self-checking test of the streaming FPU (nst_fpu).
//
// Part 1: a random program of 3000 tokens of every kind, with operands
// delivered in order but with random gaps and results drained with random
// back-pressure. A reference model executes the tokens one after another
// (MAC rounded after the multiply and after the add) and checks every
// element result and the final accumulator.
// Part 2: 64 back-to-back MAC tokens with operands supplied every cycle must
// fire at one per cycle (the paper's 2 FLOP/cycle per NeuroStream).
module tb_nst_fpu;
  import nc_pkg::*;
  import fp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic tok_push, tok_full, op1_push, op2_push, res_valid, res_pop, idle, fire;
  fpu_tok_t tok;
  logic [31:0] op1, op2, res, acc;
  logic [2:0] op1_cnt, op2_cnt;
  int checks = 0, failures = 0;

  nst_fpu dut (.clk_i(clk), .rst_ni(rst_n), .tok_push_i(tok_push), .tok_i(tok), .tok_full_o(tok_full),
    .op1_push_i(op1_push), .op1_i(op1), .op2_push_i(op2_push), .op2_i(op2), .op1_cnt_o(op1_cnt), .op2_cnt_o(op2_cnt),
    .res_valid_o(res_valid), .res_o(res), .res_pop_i(res_pop), .acc_o(acc), .idle_o(idle), .fire_o(fire));

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  fpu_tok_t    toks [$];
  logic [31:0] o1 [$], o2 [$], expq [$];
  logic [31:0] macc;

  function automatic bit needs1(fpu_op_e o);
    return o inside {F_MAC, F_ACCADD, F_ACCMAX, F_MAX, F_MIN, F_MUL, F_ADD, F_LDACC};
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int ti, i1, i2, nfire, t0;
    tok_push = 0; op1_push = 0; op2_push = 0; res_pop = 0; tok = '0; op1 = 0; op2 = 0;
    // build the program and the expected results
    macc = 0;
    for (int n = 0; n < 3000; n++) begin
      fpu_tok_t t;
      logic [31:0] a, b;
      t.op = fpu_op_e'($urandom_range(0, 11));
      t.imm = frand(120, 132);
      a = frand(120, 132); b = frand(120, 132);
      if (needs1(t.op)) o1.push_back(a);
      if (t.op == F_MAC) o2.push_back(b);
      case (t.op)
        F_SETACC: macc = t.imm;
        F_MAC:    macc = fadd(macc, fmul(a, b));
        F_ACCADD: macc = fadd(macc, a);
        F_ACCMAX: macc = fmax(macc, a);
        F_MAX:    expq.push_back(fmax(a, t.imm));
        F_MIN:    expq.push_back(fmin(a, t.imm));
        F_MUL:    expq.push_back(fmul(a, t.imm));
        F_ADD:    expq.push_back(fadd(a, t.imm));
        F_SADD:   macc = fadd(macc, t.imm);
        F_SMUL:   macc = fmul(macc, t.imm);
        F_LDACC:  macc = a;
        F_OUTACC: expq.push_back(macc);
        default: ;
      endcase
      toks.push_back(t);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    ti = 0; i1 = 0; i2 = 0;
    while (ti < toks.size() || expq.size() > 0 || !idle) begin
      #1;
      res_pop = res_valid && ($urandom_range(0, 3) != 0);
      if (res_pop) begin
        chk(res == expq[0], $sformatf("result %h expected %h", res, expq[0]));
        void'(expq.pop_front());
      end
      tok_push = !tok_full && ti < toks.size() && ($urandom_range(0, 3) != 0);
      if (tok_push) begin tok = toks[ti]; ti++; end
      op1_push = op1_cnt < 3'd4 && i1 < o1.size() && ($urandom_range(0, 3) != 0);
      if (op1_push) begin op1 = o1[i1]; i1++; end
      op2_push = op2_cnt < 3'd4 && i2 < o2.size() && ($urandom_range(0, 3) != 0);
      if (op2_push) begin op2 = o2[i2]; i2++; end
      @(negedge clk);
      tok_push = 0; op1_push = 0; op2_push = 0;
    end
    res_pop = 0;
    chk(acc == macc, $sformatf("final ACC %h expected %h", acc, macc));

    // part 2: MAC rate
    tok = '{op: F_SETACC, imm: 32'h0}; tok_push = 1;
    @(negedge clk);
    tok_push = 0;
    macc = 0; nfire = 0; ti = 0; i1 = 0; t0 = 0;
    for (int c = 0; c < 80 && nfire < 65; c++) begin
      logic [31:0] a, b;
      #1;
      tok_push = !tok_full && ti < 64;
      tok = '{op: F_MAC, imm: 32'h0};
      if (tok_push) ti++;
      op1_push = op1_cnt < 3'd4 && i1 < 64;
      op2_push = op1_push;
      a = frand(120, 132); b = frand(120, 132);
      op1 = a; op2 = b;
      if (op1_push) begin i1++; macc = fadd(macc, fmul(a, b)); end
      @(posedge clk);
      if (fire) nfire++;
      @(negedge clk);
      t0++;
      tok_push = 0; op1_push = 0; op2_push = 0;
    end
    chk(nfire >= 64, $sformatf("%0d MAC fires", nfire));
    chk(t0 <= 64 + 3, $sformatf("64 MACs took %0d cycles", t0));
    $display("64 back-to-back MACs in %0d cycles", t0);
    repeat (3) @(negedge clk);
    chk(acc == macc, $sformatf("MAC chain ACC %h expected %h", acc, macc));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
