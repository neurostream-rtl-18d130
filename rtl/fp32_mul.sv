// fp32_mul -- combinational IEEE-754 single-precision multiplier (FP32-MUL of
// the NeuroStream streaming FPU).
//
// The 24x24-bit significand product is normalised by at most one position and
// rounded to nearest, ties to even. The paper asks for IEEE-754 compatible
// FP32 arithmetic and a MAC that completes in one cycle, so the unit is purely
// combinational. Choices of this design: subnormal inputs are read as zero and
// results below the normal range are flushed to a signed zero; any NaN input
// gives the quiet NaN 0x7FC00000; infinity times zero gives that NaN too.
// Interface: a_i, b_i -> y_o, no clock, no latency.
module fp32_mul (
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic [31:0] y_o
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic [47:0] prod;
  logic [22:0] mant;
  logic        guard, sticky, rnd;
  logic [23:0] mant_r;
  logic signed [10:0] e;

  always_comb begin
    sa = a_i[31]; ea = a_i[30:23]; fa = a_i[22:0];
    sb = b_i[31]; eb = b_i[30:23]; fb = b_i[22:0];
    sy = sa ^ sb;
    prod   = {1'b1, fa} * {1'b1, fb};
    e      = 11'(signed'({3'b0, ea})) + 11'(signed'({3'b0, eb})) - 11'sd127;
    if (prod[47]) begin
      mant   = prod[46:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      e      = e + 11'sd1;
    end else begin
      mant   = prod[45:23];
      guard  = prod[22];
      sticky = |prod[21:0];
    end
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + {23'd0, rnd};
    if (mant_r[23]) e = e + 11'sd1;       // mantissa overflowed to 2.0

    if ((ea == 8'hFF && fa != 0) || (eb == 8'hFF && fb != 0))
      y_o = nc_pkg::FP32_QNAN;
    else if ((ea == 8'hFF && eb == 8'h00) || (eb == 8'hFF && ea == 8'h00))
      y_o = nc_pkg::FP32_QNAN;
    else if (ea == 8'hFF || eb == 8'hFF)
      y_o = {sy, 8'hFF, 23'd0};
    else if (ea == 8'h00 || eb == 8'h00)
      y_o = {sy, 31'd0};
    else if (e >= 11'sd255)
      y_o = {sy, 8'hFF, 23'd0};
    else if (e <= 11'sd0)
      y_o = {sy, 31'd0};
    else
      y_o = {sy, e[7:0], mant_r[22:0]};
  end
endmodule
