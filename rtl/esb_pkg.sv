// esb_pkg -- shared constants, types and width helpers of the ESB accelerator.
//
// An ESB (elastic significant bit) value of b bits is stored in a small float
// format: 1 sign bit, b-k-1 exponent bits and k fraction bits, sign in the MSB,
// fraction in the LSBs. The largest exponent code (all ones) marks the
// "subnormal" binade 0.f that holds zero and the small values around it; every
// other exponent e stands for 2^e * 1.f. All values are in units of the layer's
// scaling factor alpha. The format and its decoding follow the paper; the bit
// order inside the word and the helper functions below are this design's own.
//
// The layer configuration is a runtime struct: kernel size, convolution
// stride, output tile size, number of Tn-channel input slices per output tile
// and the pooling window/stride. Field widths are this design's choice.
package esb_pkg;

  // Number of exponent bits of ESB(b,k).
  function automatic int esb_ew(input int b, input int k);
    return b - k - 1;
  endfunction

  // Largest exponent of a normal value, 2^(b-k-1)-2; the code 2^(b-k-1)-1 is subnormal.
  function automatic int esb_emax(input int b, input int k);
    return (1 << (b - k - 1)) - 2;
  endfunction

  // Signed width of one product of two ESB values, in units of 2^-2k:
  // (k+1)x(k+1)-bit fraction product shifted left by up to 2*emax, plus sign.
  function automatic int esb_prod_w(input int b, input int k);
    return 2 * (k + 1) + 2 * esb_emax(b, k) + 1;
  endfunction

  // Runtime configuration of one layer (all values are plain integers).
  typedef struct packed {
    logic [3:0] k_size;       // convolution kernel K, 1..K_MAX
    logic [2:0] conv_stride;  // convolution stride, 1..S_MAX
    logic [5:0] out_h;        // output tile rows actually used, 1..TH
    logic [5:0] out_w;        // output tile columns actually used, 1..TW
    logic [9:0] n_cin_tiles;  // ceil(c_in / Tn): input slices accumulated per output tile
    logic [1:0] pool_p;       // max-pooling window p, 1..3 (1 = no pooling)
    logic [1:0] pool_s;       // max-pooling stride s, 1..3
  } layer_cfg_t;

endpackage
