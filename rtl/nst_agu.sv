// nst_agu -- NeuroStream address generation unit (AGU0 / AGU1).
//
// Holds the address register A and the three step registers S0, S1, S2.
// On each loop step the HWL enables are applied cumulatively:
//   A <= A + (EN1 ? S0 : 0) + (EN2 ? S1 : 0) + (EN3 ? S2 : 0)
// The cumulative form follows the paper's pseudo-code of STREAM_MAC (S0 is
// added after every innermost iteration, S1 in addition after loop 0 ends,
// S2 in addition after loop 1 ends) and its example step S1 = TCI*(Sx-1).
// With this reading the step to the next input row is TCI*(TXI*Sy - Sx*KX);
// the paper's example prints TCI*(TXI*Sy - Sx*KX + 1). Steps are two's
// complement, so negative strides work.
// Interface and timing: ld_a_i / ld_s_i[n] load A / Sn from val_i at the clock
// edge (a load of A wins over a step); addr_o is A (a word index in the SPM).
module nst_agu (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        ld_a_i,
  input  logic [2:0]  ld_s_i,
  input  logic [31:0] val_i,
  input  logic        en1_i,
  input  logic        en2_i,
  input  logic        en3_i,
  output logic [31:0] addr_o
);
  logic [31:0] a_q, s_q [3];
  logic [31:0] inc;

  always_comb begin
    inc = (en1_i ? s_q[0] : 32'd0) + (en2_i ? s_q[1] : 32'd0) + (en3_i ? s_q[2] : 32'd0);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_q <= '0;
      for (int n = 0; n < 3; n++) s_q[n] <= '0;
    end else begin
      if (ld_a_i) a_q <= val_i;
      else if (en1_i) a_q <= a_q + inc;
      for (int n = 0; n < 3; n++)
        if (ld_s_i[n]) s_q[n] <= val_i;
    end
  end

  assign addr_o = a_q;
endmodule
