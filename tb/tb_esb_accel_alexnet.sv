// tb_esb_accel_alexnet -- AlexNet-shaped layers on the accelerator at its
// default size (ESB(4,1), Tn = 32, Tm = 96, Th = Tw = 13, K_MAX = 11,
// S_MAX = 4, P_MAX = 3), two output tiles per layer:
//   * conv1 shape: 11x11 kernel, stride 4, one input slice (the 3 RGB
//     channels padded to Tn with random data), 11x11 output tiles (a 55x55
//     map is 5x5 such tiles), 3x3/2 max pooling;
//   * conv3 shape: 3x3 kernel, stride 1, 8 input slices (256 channels),
//     one 13x13 output tile (the whole map), no pooling.
// The layer shapes are the usual AlexNet ones; only two output tiles of each
// are simulated, with random data. See esb_accel_tb_body.svh for what is
// driven and checked.
module tb_esb_accel_alexnet;
  localparam int B = 4, K = 1, TN = 32, TM = 96, TH = 13, TW = 13, KM = 11, SM = 4, PM = 3;
  localparam int AW = 24, CW = 18, CF = 14;
  localparam int MAXT = 2, NSMAX = 8, NL = 2;
  localparam longint WATCHDOG_NS = 64'd50_000_000;
  localparam bit CHECK_OB_FULL = 1'b0;   // loads dominate at this size: banks never both full
  // {k_size, conv_stride, out_h, out_w, n_cin_tiles, pool_p, pool_s}
  localparam esb_pkg::layer_cfg_t LAYERS [NL] = '{
    '{4'd11, 3'd4, 6'd11, 6'd11, 10'd1, 2'd3, 2'd2},
    '{4'd3,  3'd1, 6'd13, 6'd13, 10'd8, 2'd1, 2'd1}};
  localparam int GAPS [NL] = '{20, 20};

  `include "esb_accel_tb_body.svh"

  esb_accel dut (.*);
  // watchdog
  initial begin
    #(WATCHDOG_NS);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
