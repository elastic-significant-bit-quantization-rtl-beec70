// esb_bn_dn -- fused Scale, BN, DN and division by alpha: y = a*x + b.
//
// The paper folds the scale stage (alpha_w*alpha_a), batch normalisation, data
// normalisation and the division by the next layer's alpha into one affine
// map whose coefficients a and b are computed offline per output channel.
// The paper evaluates it in floating point after an IntToFloat conversion;
// this design keeps the accumulator integer and uses signed fixed-point
// coefficients with CF fraction bits, so y carries CF fraction bits and feeds
// esb_quant directly. The product and sum are exact (full width), so the only
// rounding happens in the ESB projection. The 2^-2k unit of the accumulator is
// to be folded into a.
//
// Purely combinational.
// CF is not used by the arithmetic (a*x + b is exact at any binary point);
// it names the fraction width of a, b and y for the modules around it, so the
// linter's unused-parameter note stands.
module esb_bn_dn #(
  parameter int AW = 24,    // accumulator (x) width
  parameter int CW = 18,    // coefficient width
  parameter int CF = 14,    // coefficient fraction bits
  localparam int YW = AW + CW + 1
) (
  input  logic signed [AW-1:0] x,
  input  logic signed [CW-1:0] a,
  input  logic signed [CW-1:0] b,
  output logic signed [YW-1:0] y    // CF fraction bits
);
  always_comb y = YW'(x) * YW'(a) + YW'(b);
endmodule
