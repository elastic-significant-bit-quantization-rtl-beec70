// esb_mul -- multiplier for two ESB(b,k) float codes.
//
// Each operand is {sign, exponent[b-k-2:0], fraction[k-1:0]}. The operand's
// significand is zeta.f, where zeta is 1 unless the exponent is the all-ones
// subnormal code. The product is
//     (-1)^(s_w ^ s_a) * ((zeta_w.f_w) * (zeta_a.f_a)) << (e_w*zeta_w + e_a*zeta_a)
// so the only multiplier is (k+1) x (k+1) bits, followed by an exponent adder and
// a barrel shift; this follows the paper's multiplication formula and its
// "ESB multiplicator" (adder for e, multiplier for f, shifter).
// The result is a two's-complement integer in units of 2^-2k (times
// alpha_w*alpha_a), so it is exact for every pair of codes.
//
// Purely combinational. Parameters: B (given bits b), K (fraction bits k),
// 0 <= K <= B-2. K = 0 is supported (no fraction field).
module esb_mul #(
  parameter int B = 4,
  parameter int K = 1,
  localparam int PW = esb_pkg::esb_prod_w(B, K)
) (
  input  logic [B-1:0]         w,    // weight code
  input  logic [B-1:0]         a,    // activation code
  output logic signed [PW-1:0] p     // product, units of 2^-2k
);
  localparam int EW   = B - K - 1;
  localparam int ESUB = (1 << EW) - 1;   // subnormal exponent code
  localparam int MW   = K + 1;           // significand width

  logic [EW-1:0] e_w, e_a;
  logic          z_w, z_a;               // zeta: 1 for normal values
  logic [MW-1:0] m_w, m_a;               // significands zeta.f as integers
  logic [2*MW-1:0] prod;
  logic [EW:0]     sh;
  logic [PW-2:0]   mag;

  always_comb begin
    e_w  = w[B-2 -: EW];
    e_a  = a[B-2 -: EW];
    z_w  = (e_w != EW'(ESUB));
    z_a  = (e_a != EW'(ESUB));
    // {zeta, f}: build from the whole code so that K = 0 needs no empty slice
    m_w  = MW'((32'(z_w) << K) | (32'(w) & ((32'd1 << K) - 32'd1)));
    m_a  = MW'((32'(z_a) << K) | (32'(a) & ((32'd1 << K) - 32'd1)));
    prod = m_w * m_a;
    sh   = (z_w ? {1'b0, e_w} : '0) + (z_a ? {1'b0, e_a} : '0);
    mag  = (PW-1)'(prod) << sh;
    p    = (w[B-1] ^ a[B-1]) ? -$signed({1'b0, mag}) : $signed({1'b0, mag});
  end

endmodule
