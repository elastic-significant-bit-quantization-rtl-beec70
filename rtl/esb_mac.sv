// esb_mac -- one MAC unit of the convolution module: Tn ESB multipliers and an
// adder tree.
//
// The Tn weight codes and Tn activation codes of one phase are multiplied
// pairwise (esb_mul) and the Tn products are summed by a balanced binary adder
// tree, as drawn in the paper's MAC ("ESB multiplicator" x Tn feeding an
// "accumulation" tree). The running accumulation across phases is done at the
// output buffer (see esb_conv), not here.
//
// Purely combinational; the enclosing module registers around it.
// Parameters: B, K (ESB format), TN (number of input channels per phase).
// Output width is the product width plus ceil(log2(TN)) growth bits.
module esb_mac #(
  parameter int B  = 4,
  parameter int K  = 1,
  parameter int TN = 32,
  localparam int PW = esb_pkg::esb_prod_w(B, K),
  localparam int SW = PW + $clog2(TN)
) (
  input  logic [TN-1:0][B-1:0] w,     // weight codes of channel 0..TN-1
  input  logic [TN-1:0][B-1:0] a,     // activation codes of channel 0..TN-1
  output logic signed [SW-1:0] sum    // sum of the TN products, units of 2^-2k
);
  // tree levels: level 0 holds the products padded to a power of two
  localparam int LV = $clog2(TN);
  localparam int NP = 1 << LV;

  logic signed [PW-1:0] prod [TN];
  logic signed [SW-1:0] node [LV+1][NP];

  for (genvar i = 0; i < TN; i++) begin : g_mul
    esb_mul #(.B(B), .K(K)) u_mul (.w(w[i]), .a(a[i]), .p(prod[i]));
  end

  always_comb begin
    for (int l = 0; l <= LV; l++)
      for (int i = 0; i < NP; i++)
        node[l][i] = '0;
    for (int i = 0; i < TN; i++)
      node[0][i] = SW'(prod[i]);
    for (int l = 1; l <= LV; l++)
      for (int i = 0; i < (NP >> l); i++)
        node[l][i] = node[l-1][2*i] + node[l-1][2*i+1];
    sum = node[LV][0];
  end

endmodule
