// esb_conv -- convolution module: Tm MAC units of Tn ESB multipliers each.
//
// One start runs one "trip": the K*K*oh*ow phases that one input-buffer slice
// (Tn input channels) contributes to an output tile (oh x ow pixels, Tm output
// channels). A full output tile takes ceil(c_in/Tn) trips, so the paper's
// ceil(c_in/Tn)*K*K*Th*Tw phases per tile. In each phase all Tm x Tn
// multipliers work in parallel: the Tn-channel word of one input pixel is
// broadcast to the Tm MACs, MAC m receives the Tn weights of output channel m,
// and each MAC's adder-tree sum is added to the accumulator of its output
// channel in the output buffer (the "+" on top of the output buffer in the
// paper's figure). With 'clear' set (first trip of a tile) the kernel's first
// tap (ky = kx = 0) writes instead of adding.
//
// Phase order (this design's choice): ky, kx outer, output row y, column x
// inner, so a weight set stays the same for oh*ow consecutive phases. Input
// pixel of phase (ky,kx,y,x) is (y*S + ky, x*S + kx) inside the bank.
//
// Timing: phase addresses are issued one per cycle from the cycle after
// 'start'; input and weight data return one cycle later (synchronous
// memories); the accumulation read-modify-write happens in that cycle.
// 'done' pulses two cycles after the last phase was issued, so a trip takes
// K*K*oh*ow + 2 cycles from start to done. No stall inside a trip.
// Lint notes: only the kernel, stride and tile-size fields of cfg are used
// here (the rest belongs to post-processing), and the assertion's reset
// disable makes the linter see rst_n used both asynchronously and in a
// clocked expression; neither is a circuit problem.
module esb_conv #(
  parameter int B     = 4,
  parameter int K     = 1,
  parameter int TN    = 32,
  parameter int TM    = 96,
  parameter int TH    = 13,
  parameter int TW    = 13,
  parameter int K_MAX = 11,
  parameter int S_MAX = 4,
  parameter int AW    = 24,
  localparam int TIH  = (TH - 1) * S_MAX + K_MAX,
  localparam int TIW  = (TW - 1) * S_MAX + K_MAX,
  localparam int IA   = $clog2(TIH * TIW),
  localparam int PA   = $clog2(TH * TW),
  localparam int KA   = $clog2(K_MAX + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic                  clear,
  input  esb_pkg::layer_cfg_t   cfg,
  output logic                  busy,
  output logic                  done,
  // input buffer read port (data one cycle after in_rd_en)
  output logic                  in_rd_en,
  output logic [IA-1:0]         in_rd_addr,
  input  logic [TN-1:0][B-1:0]  in_rd_data,
  // weight read port (data one cycle after wt_rd_en)
  output logic                  wt_rd_en,
  output logic [KA-1:0]         wt_ky,
  output logic [KA-1:0]         wt_kx,
  input  logic [TN-1:0][B-1:0]  wt_data [TM],
  // output buffer accumulation port
  output logic [PA-1:0]         ob_addr,
  input  logic signed [AW-1:0]  ob_rd_data [TM],
  output logic                  ob_wr_en,
  output logic signed [AW-1:0]  ob_wr_data [TM]
);
  localparam int SW = esb_pkg::esb_prod_w(B, K) + $clog2(TN);

  logic          run, clr_trip;
  logic [KA-1:0] ky, kx;
  logic [5:0]    y, x;
  logic          last;
  // stage 1: data returning from the memories
  logic          v1, clr1, last1;
  logic [PA-1:0] pix1;
  logic signed [SW-1:0] sum [TM];

  always_comb begin
    last = (int'(ky) == int'(cfg.k_size) - 1) && (int'(kx) == int'(cfg.k_size) - 1) &&
           (int'(y) == int'(cfg.out_h) - 1) && (int'(x) == int'(cfg.out_w) - 1);
    in_rd_en   = run;
    in_rd_addr = IA'((int'(y) * int'(cfg.conv_stride) + int'(ky)) * TIW +
                      int'(x) * int'(cfg.conv_stride) + int'(kx));
    wt_rd_en   = run;
    wt_ky      = ky;
    wt_kx      = kx;
    busy       = run || v1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; clr_trip <= 1'b0;
      ky <= '0; kx <= '0; y <= '0; x <= '0;
      v1 <= 1'b0; clr1 <= 1'b0; last1 <= 1'b0; pix1 <= '0;
      done <= 1'b0;
    end else begin
      done  <= v1 && last1;
      v1    <= run;
      last1 <= run && last;
      clr1  <= clr_trip && (ky == '0) && (kx == '0);
      pix1  <= PA'(int'(y) * TW + int'(x));
      if (start && !busy) begin
        run <= 1'b1; clr_trip <= clear;
        ky <= '0; kx <= '0; y <= '0; x <= '0;
      end else if (run) begin
        if (last) run <= 1'b0;
        if (int'(x) == int'(cfg.out_w) - 1) begin
          x <= '0;
          if (int'(y) == int'(cfg.out_h) - 1) begin
            y <= '0;
            if (int'(kx) == int'(cfg.k_size) - 1) begin
              kx <= '0;
              ky <= ky + 1'b1;
            end else kx <= kx + 1'b1;
          end else y <= y + 1'b1;
        end else x <= x + 1'b1;
      end
    end
  end

  // Tm MAC units; the input word is broadcast to all of them
  for (genvar m = 0; m < TM; m++) begin : g_mac
    esb_mac #(.B(B), .K(K), .TN(TN)) u_mac (.w(wt_data[m]), .a(in_rd_data), .sum(sum[m]));
  end

  always_comb begin
    ob_addr  = pix1;
    ob_wr_en = v1;
    for (int m = 0; m < TM; m++)
      ob_wr_data[m] = (clr1 ? AW'(0) : ob_rd_data[m]) + AW'(sum[m]);
  end

  a_cfg_ok: assert property (@(posedge clk) disable iff (!rst_n)
      start |-> (cfg.k_size >= 1 && int'(cfg.k_size) <= K_MAX &&
                 cfg.conv_stride >= 1 && int'(cfg.conv_stride) <= S_MAX &&
                 cfg.out_h >= 1 && int'(cfg.out_h) <= TH &&
                 cfg.out_w >= 1 && int'(cfg.out_w) <= TW))
    else $error("unsupported layer configuration");

endmodule
