// esb_quant -- ESB projection: fixed-point value -> ESB(b,k) float code.
//
// The input v is a signed fixed-point number with FRAC fraction bits, already
// divided by the next layer's scaling factor alpha (the division is folded into
// the BN/DN coefficients). The projection follows the paper's cheap operator:
//   1. truncate |v| to C = max representable value = (2 - 2^-k) * 2^emax;
//   2. find the most significant 1 bit n of |v|;
//   3. keep k+1 significant bits and round the rest:
//        P(v) = R(|v| >> (n-k)) << (n-k)
//      rounding half away from zero (R is unspecified in the paper);
//   4. pack sign, exponent and fraction into the ESB float code.
// For |v| < 1 the shift is clamped to n = 0, i.e. the grid is 2^-k, because
// the subnormal slice of the ESB set has step 2^-k; the paper's formula with an
// unclamped n would keep bits that the set cannot hold. A rounding carry into
// the next binade is handled by re-normalising. Zero is always coded with sign 0.
//
// Purely combinational. 'clipped' flags inputs that were truncated to +-C.
module esb_quant #(
  parameter int B    = 4,
  parameter int K    = 1,
  parameter int IW   = 43,   // input width
  parameter int FRAC = 14    // input fraction bits, FRAC >= K
) (
  input  logic signed [IW-1:0] v,
  output logic [B-1:0]         code,
  output logic                 clipped
);
  localparam int EW   = B - K - 1;
  localparam int ESUB = (1 << EW) - 1;
  localparam int EMAX = esb_pkg::esb_emax(B, K);
  // C in input units: (2^(k+1)-1) * 2^(emax - k + FRAC)
  localparam int CW   = K + 1 + EMAX - K + FRAC + 1;    // bits needed to hold C
  localparam longint CFX = longint'((1 << (K + 1)) - 1) << (EMAX - K + FRAC);
  localparam int UW   = (IW > CW) ? IW : CW;

  logic            sgn;
  logic [UW-1:0]   u;        // |v|, truncated to C
  int              n;        // index of leading one in u
  int              sh;       // bits dropped by rounding
  logic [UW:0]     r;        // rounded significand (k+1 or k+2 bits)
  int              e;

  always_comb begin
    sgn = v[IW-1];
    u   = UW'(sgn ? -v : v);
    clipped = (u > UW'(CFX));
    if (clipped) u = UW'(CFX);
    n = 0;
    for (int i = 0; i < UW; i++)
      if (u[i]) n = i;
    // binade exponent n - FRAC, clamped at 0
    sh = ((n > FRAC) ? n : FRAC) - K;
    r  = ({1'b0, u} + ((UW+1)'(1) << sh >> 1)) >> sh;
    e  = ((n > FRAC) ? n : FRAC) - FRAC;
    if (r < (UW+1)'(1 << K)) begin
      // subnormal slice 0.f (only reachable when e == 0)
      code = (B'(ESUB) << K) | B'(r);
      code[B-1] = sgn && (r != '0);
    end else begin
      if (r == (UW+1)'(1 << (K + 1))) begin
        e = e + 1;                           // rounding carried into next binade
        r = r >> 1;
      end
      code = (B'(e) << K) | B'(r & (UW+1)'((1 << K) - 1));
      code[B-1] = sgn;
    end
  end

endmodule
