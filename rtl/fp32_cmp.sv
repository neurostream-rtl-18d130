// fp32_cmp -- combinational FP32 comparator (FP32-CMP of the NeuroStream
// streaming FPU), used by STREAM_MAX / STREAM_MIN (ReLU, clipping) and by
// STREAM_MAXPL (max pooling).
//
// Both operands are mapped to an order-preserving unsigned key (sign bit
// flipped for positives, all bits inverted for negatives) and compared as
// integers, so -0 orders just below +0. This design's choice for NaN: if
// either input is a NaN, both outputs are the quiet NaN 0x7FC00000.
// Interface: a_i, b_i -> gt_o (a > b), max_o, min_o; no clock.
module fp32_cmp (
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic        gt_o,
  output logic [31:0] max_o,
  output logic [31:0] min_o
);
  logic [31:0] ka, kb;
  logic        nan;
  always_comb begin
    ka   = a_i[31] ? ~a_i : {1'b1, a_i[30:0]};
    kb   = b_i[31] ? ~b_i : {1'b1, b_i[30:0]};
    nan  = (a_i[30:23] == 8'hFF && a_i[22:0] != 0) || (b_i[30:23] == 8'hFF && b_i[22:0] != 0);
    gt_o = !nan && (ka > kb);
    max_o = nan ? nc_pkg::FP32_QNAN : ((ka > kb) ? a_i : b_i);
    min_o = nan ? nc_pkg::FP32_QNAN : ((ka > kb) ? b_i : a_i);
  end
endmodule
