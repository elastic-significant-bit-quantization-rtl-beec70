// tb_esb_accel -- end-to-end test of the accelerator at reduced size
// (ESB(4,1), Tn = 4, Tm = 8, Th = Tw = 4, K_MAX = 3, S_MAX = 2).
// Four layers: 3x3 stride-1 convolution over two input slices without
// pooling; 3x3 stride-2 convolution with 3x3/2 max pooling (windows cut by the
// tile edge); 1x1 convolution over three slices with 2x2/2 pooling; a 1x1
// single-slice layer without pooling, where post-processing is the slower
// module and new tiles wait for a free output bank.
// See esb_accel_tb_body.svh for what is driven and checked.
module tb_esb_accel;
  localparam int B = 4, K = 1, TN = 4, TM = 8, TH = 4, TW = 4, KM = 3, SM = 2, PM = 3;
  localparam int AW = 24, CW = 18, CF = 14;
  localparam int MAXT = 4, NSMAX = 3, NL = 4;
  localparam longint WATCHDOG_NS = 64'd20_000_000;
  localparam bit CHECK_OB_FULL = 1'b1;
  // {k_size, conv_stride, out_h, out_w, n_cin_tiles, pool_p, pool_s}
  localparam esb_pkg::layer_cfg_t LAYERS [NL] = '{
    '{4'd3, 3'd1, 6'd4, 6'd4, 10'd2, 2'd1, 2'd1},
    '{4'd3, 3'd2, 6'd4, 6'd3, 10'd1, 2'd3, 2'd2},
    '{4'd1, 3'd1, 6'd4, 6'd4, 10'd3, 2'd2, 2'd2},
    '{4'd1, 3'd1, 6'd4, 6'd4, 10'd1, 2'd1, 2'd1}};
  localparam int GAPS [NL] = '{40, 1, 60, 1};

  `include "esb_accel_tb_body.svh"

  esb_accel #(.B(B), .K(K), .TN(TN), .TM(TM), .TH(TH), .TW(TW), .K_MAX(KM), .S_MAX(SM),
              .P_MAX(PM), .AW(AW), .CW(CW), .CF(CF)) dut (.*);
  // watchdog
  initial begin
    #(WATCHDOG_NS);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
