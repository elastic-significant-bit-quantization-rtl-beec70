// esb_mp_relu -- fused max-pooling and ReLU step of the post-processing module.
//
// Takes the accumulator values of one output channel inside one p x p pooling
// window (NW = P_MAX*P_MAX candidates) with a mask of which candidates lie
// inside both the window and the output tile. The result is the largest valid
// candidate, and 0 if that is negative (ReLU after MP, in the paper's order).
// A window that overhangs the tile keeps only its intersection with the tile,
// as the paper does at the feature-map border. With p = 1 it is a ReLU alone.
//
// Purely combinational; the post-processing pipeline registers its output.
module esb_mp_relu #(
  parameter int AW = 24,    // accumulator width
  parameter int NW = 9      // window candidates, P_MAX*P_MAX
) (
  input  logic signed [AW-1:0] win  [NW],
  input  logic [NW-1:0]        vmask,
  output logic signed [AW-1:0] y
);
  logic signed [AW-1:0] mx;

  always_comb begin
    mx = '0;                              // ReLU floor; also the result of an empty mask
    for (int i = 0; i < NW; i++)
      if (vmask[i] && win[i] > mx) mx = win[i];
    y = mx;
  end

endmodule
