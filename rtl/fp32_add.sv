// fp32_add -- combinational IEEE-754 single-precision adder (FP32-ADD of the
// NeuroStream streaming FPU).
//
// The operand with the larger magnitude is kept, the other significand is
// aligned to it on a 50-bit field (bits shifted beyond the field are folded
// into a sticky bit), the two are added or subtracted, the result is
// normalised with a leading-zero count and rounded to nearest, ties to even.
// The paper asks for IEEE-754 compatible FP32 arithmetic in a one-cycle MAC
// loop, so the unit is combinational. Choices of this design: subnormals read
// as zero and underflowing results flush to zero; an exact cancellation gives
// +0; NaN inputs or inf-inf give the quiet NaN 0x7FC00000.
// Interface: a_i, b_i -> y_o, no clock, no latency.
module fp32_add (
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic [31:0] y_o
);
  logic        sa, sb, sx, sy_s;
  logic [7:0]  ea, eb, ex, ey;
  logic [22:0] fa, fb;
  logic        a_zero, b_zero, swap;
  logic [30:0] mag_a, mag_b;
  logic [7:0]  d;
  logic [49:0] mx, my, my_sh;
  logic        sticky;
  logic [50:0] sum;
  logic [5:0]  lz;
  logic [50:0] norm;
  logic signed [10:0] e;
  logic [22:0] mant;
  logic        guard, rest, rnd;
  logic [23:0] mant_r;

  always_comb begin
    sa = a_i[31]; ea = a_i[30:23]; fa = a_i[22:0];
    sb = b_i[31]; eb = b_i[30:23]; fb = b_i[22:0];
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);
    mag_a  = a_zero ? 31'd0 : a_i[30:0];
    mag_b  = b_zero ? 31'd0 : b_i[30:0];
    swap   = mag_b > mag_a;
    // x: larger magnitude, y: smaller
    sx   = swap ? sb : sa;
    ex   = swap ? eb : ea;
    sy_s = swap ? sa : sb;
    ey   = swap ? ea : eb;
    mx   = {1'b1, (swap ? fb : fa), 26'd0};
    my   = {1'b1, (swap ? fa : fb), 26'd0};
    if ((swap ? a_zero : b_zero)) my = '0;
    d      = ex - ey;
    sticky = 1'b0;
    if (d >= 8'd50) begin
      my_sh  = '0;
      sticky = |my;
    end else begin
      my_sh = my >> d;
      for (int k = 0; k < 50; k++)
        if (k < int'(d) && my[k]) sticky = 1'b1;
    end
    my_sh[0] = my_sh[0] | sticky;

    if (sx == sy_s) sum = {1'b0, mx} + {1'b0, my_sh};
    else            sum = {1'b0, mx} - {1'b0, my_sh};

    // leading zeros of sum (bit 50 is the carry position)
    lz = 6'd51;
    for (int k = 0; k <= 50; k++)
      if (sum[k]) lz = 6'(50 - k);

    e = 11'(signed'({3'b0, ex})) + 11'sd1 - 11'(signed'({5'b0, lz}));
    norm = sum << lz;                      // leading one now at bit 50
    mant   = norm[49:27];
    guard  = norm[26];
    rest   = |norm[25:0];
    rnd    = guard & (rest | mant[0]);
    mant_r = {1'b0, mant} + {23'd0, rnd};
    if (mant_r[23]) e = e + 11'sd1;

    if ((ea == 8'hFF && fa != 0) || (eb == 8'hFF && fb != 0))
      y_o = nc_pkg::FP32_QNAN;
    else if (ea == 8'hFF && eb == 8'hFF)
      y_o = (sa == sb) ? a_i : nc_pkg::FP32_QNAN;
    else if (ea == 8'hFF)
      y_o = a_i;
    else if (eb == 8'hFF)
      y_o = b_i;
    else if (a_zero && b_zero)
      y_o = {sa & sb, 31'd0};
    else if (b_zero)
      y_o = a_i;
    else if (a_zero)
      y_o = b_i;
    else if (sum == '0)
      y_o = 32'd0;
    else if (e >= 11'sd255)
      y_o = {sx, 8'hFF, 23'd0};
    else if (e <= 11'sd0)
      y_o = {sx, 31'd0};
    else
      y_o = {sx, e[7:0], mant_r[22:0]};
  end
endmodule
