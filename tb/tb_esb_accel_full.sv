// tb_esb_accel_full -- end-to-end test of the accelerator at its default size
// (ESB(4,1), Tn = 32, Tm = 96, Th = Tw = 13, K_MAX = 11, S_MAX = 4, P_MAX = 3).
// One layer shaped like AlexNet's fifth convolution on a 13x13 output tile:
// 3x3 kernel, stride 1, two 32-channel input slices per tile, 3x3/2 max
// pooling (7x7 pooled outputs, the last row and column of windows cut by the
// tile edge), two output tiles of 96 channels so that post-processing of the
// first overlaps the convolution of the second.
// See esb_accel_tb_body.svh for what is driven and checked.
module tb_esb_accel_full;
  localparam int B = 4, K = 1, TN = 32, TM = 96, TH = 13, TW = 13, KM = 11, SM = 4, PM = 3;
  localparam int AW = 24, CW = 18, CF = 14;
  localparam int MAXT = 2, NSMAX = 2, NL = 1;
  localparam longint WATCHDOG_NS = 64'd50_000_000;
  localparam bit CHECK_OB_FULL = 1'b0;   // loads dominate at this size: banks never both full
  localparam esb_pkg::layer_cfg_t LAYERS [NL] = '{'{4'd3, 3'd1, 6'd13, 6'd13, 10'd2, 2'd3, 2'd2}};
  localparam int GAPS [NL] = '{20};

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
