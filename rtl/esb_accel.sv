// esb_accel -- ESB convolution-layer accelerator (top level).
//
// Computes one quantised convolution layer tile by tile: the convolution
// module (Tm x Tn ESB MACs, esb_conv) fills a bank of the output buffers while
// the post-processing module (esb_post) turns the other, finished bank into
// ESB codes, and off-chip memory refills one input-buffer bank while the MACs
// read the other -- the dual ping-pong scheme of the paper's timing graph.
//
// Operation, for a layer described by the static 'cfg':
//   * load: the host writes an input slice (Tn channels of the input window of
//     one output tile) into the free input bank with ld_valid/ld_addr/ld_data
//     while ld_ready is high, and marks its last word with ld_last. Slices of
//     an output tile are loaded in input-channel order, n_cin_tiles per tile.
//   * tile: the host starts an output tile (Tm output channels) with
//     tile_valid/tile_ready, presenting that tile's BN/DN coefficients on
//     coef_a/coef_b in the accepting cycle (they are stored with the output
//     bank). Then each loaded slice is consumed by one convolution trip.
//   * weights: during a trip the accelerator asks for the Tm x Tn weights of
//     kernel tap (wt_ky, wt_kx) of slice wt_slice with wt_rd_en and expects
//     them on wt_data one cycle later (a synchronous weight memory outside).
//   * store: codes of the pooled output tile stream out on st_* (tile sequence
//     number, pooled row/column, channel, ESB code), one per cycle.
// A trip waits (stalls) when its input slice has not been loaded yet; a tile
// waits when both output banks are full; the post-processing waits for a
// finished bank. The controller and its handshakes are this design's own; the
// paper gives the buffering scheme and the two modules.
// Lint notes: the busy outputs of the two modules are left open because the
// controller tracks them with its own trip and bank flags; rst_n is also used
// in the assertions' reset disable, which the linter reports as a
// synchronous use of an asynchronous reset.
module esb_accel #(
  parameter int B     = 4,     // given bits b of ESB(b,k)
  parameter int K     = 1,     // fraction bits k
  parameter int TN    = 32,    // input channels per phase
  parameter int TM    = 96,    // output channels (MAC units)
  parameter int TH    = 13,    // output tile rows
  parameter int TW    = 13,    // output tile columns
  parameter int K_MAX = 11,    // largest kernel
  parameter int S_MAX = 4,     // largest convolution stride
  parameter int P_MAX = 3,     // largest pooling window
  parameter int AW    = 24,    // accumulator width
  parameter int CW    = 18,    // BN/DN coefficient width
  parameter int CF    = 14,    // BN/DN coefficient fraction bits
  localparam int TIH  = (TH - 1) * S_MAX + K_MAX,
  localparam int TIW  = (TW - 1) * S_MAX + K_MAX,
  localparam int IA   = $clog2(TIH * TIW),
  localparam int PA   = $clog2(TH * TW),
  localparam int KA   = $clog2(K_MAX + 1),
  localparam int MA   = (TM > 1) ? $clog2(TM) : 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  esb_pkg::layer_cfg_t   cfg,
  // input slice load
  input  logic                  ld_valid,
  input  logic [IA-1:0]         ld_addr,
  input  logic [TN-1:0][B-1:0]  ld_data,
  input  logic                  ld_last,
  output logic                  ld_ready,
  // output tile start
  input  logic                  tile_valid,
  output logic                  tile_ready,
  input  logic signed [CW-1:0]  coef_a [TM],
  input  logic signed [CW-1:0]  coef_b [TM],
  // weight fetch
  output logic                  wt_rd_en,
  output logic [KA-1:0]         wt_ky,
  output logic [KA-1:0]         wt_kx,
  output logic [9:0]            wt_slice,
  input  logic [TN-1:0][B-1:0]  wt_data [TM],
  // store stream
  output logic                  st_valid,
  output logic [7:0]            st_tile,
  output logic [5:0]            st_oy,
  output logic [5:0]            st_ox,
  output logic [MA-1:0]         st_m,
  output logic [B-1:0]          st_code,
  output logic                  idle,
  output logic                  ev_partial,   // a pooling window was cut by the tile edge
  output logic                  ev_clip       // a value was truncated to +-C by the quantiser
);
  localparam int NW = P_MAX * P_MAX;

  // ---------------- control state ----------------
  logic [1:0] in_full;              // input bank holds a loaded slice
  logic       ld_bank, cv_ibank;    // bank being loaded / being convolved
  logic [1:0] ob_full;              // output bank holds a finished tile
  logic       cv_obank, pp_obank;   // bank being accumulated / post-processed
  logic       tile_act;             // a tile is being convolved
  logic [9:0] trip;                 // slice index within the tile
  logic       conv_started;         // a trip is in flight
  logic       pp_act;               // post-processing of pp_obank in flight
  logic [7:0] tile_seq;             // tiles accepted so far
  logic [7:0] tile_id [2];          // tile number held by each output bank
  logic signed [CW-1:0] ca [2][TM];
  logic signed [CW-1:0] cb [2][TM];

  logic conv_start, conv_done;
  logic pp_start, pp_done;
  logic tile_acc;

  // ---------------- datapath wiring ----------------
  logic                  in_rd_en;
  logic [IA-1:0]         in_rd_addr;
  logic [TN-1:0][B-1:0]  in_rd_data;
  logic [PA-1:0]         cv_addr;
  logic signed [AW-1:0]  cv_rd_data [TM], cv_wr_data [TM];
  logic                  cv_wr_en;
  logic                  pp_en;
  logic [PA-1:0]         pp_addr [NW];
  logic [MA-1:0]         pp_m;
  logic signed [AW-1:0]  pp_rd_data [NW];
  logic signed [CW-1:0]  pp_a [TM], pp_b [TM];

  always_comb begin
    ld_ready   = !in_full[ld_bank];
    tile_ready = !tile_act && !ob_full[cv_obank];
    tile_acc   = tile_valid && tile_ready;
    conv_start = tile_act && !conv_started && in_full[cv_ibank];
    pp_start   = !pp_act && ob_full[pp_obank];
    wt_slice   = trip;
    for (int m = 0; m < TM; m++) begin
      pp_a[m] = ca[pp_obank][m];
      pp_b[m] = cb[pp_obank][m];
    end
    st_tile = tile_id[pp_obank];
    idle    = !tile_act && !pp_act && (ob_full == 2'b00);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_full <= '0; ld_bank <= 1'b0; cv_ibank <= 1'b0;
      ob_full <= '0; cv_obank <= 1'b0; pp_obank <= 1'b0;
      tile_act <= 1'b0; trip <= '0; conv_started <= 1'b0; pp_act <= 1'b0;
      tile_seq <= '0; tile_id[0] <= '0; tile_id[1] <= '0;
    end else begin
      // input slice loading
      if (ld_valid && ld_ready && ld_last) begin
        in_full[ld_bank] <= 1'b1;
        ld_bank <= !ld_bank;
      end
      // output tile acceptance
      if (tile_acc) begin
        tile_act <= 1'b1;
        trip <= '0;
        tile_id[cv_obank] <= tile_seq;
        tile_seq <= tile_seq + 1'b1;
      end
      // convolution trips
      if (conv_start) conv_started <= 1'b1;
      if (conv_done) begin
        conv_started <= 1'b0;
        in_full[cv_ibank] <= 1'b0;
        cv_ibank <= !cv_ibank;
        if (int'(trip) == int'(cfg.n_cin_tiles) - 1) begin
          tile_act <= 1'b0;
          ob_full[cv_obank] <= 1'b1;
          cv_obank <= !cv_obank;
        end else trip <= trip + 1'b1;
      end
      // post-processing
      if (pp_start) pp_act <= 1'b1;
      if (pp_done) begin
        pp_act <= 1'b0;
        ob_full[pp_obank] <= 1'b0;
        pp_obank <= !pp_obank;
      end
    end
  end

  // coefficients are stored with the output bank the tile will fill
  always_ff @(posedge clk) begin
    if (tile_acc)
      for (int m = 0; m < TM; m++) begin
        ca[cv_obank][m] <= coef_a[m];
        cb[cv_obank][m] <= coef_b[m];
      end
  end

  // ---------------- blocks ----------------
  esb_in_buf #(.B(B), .TN(TN), .DEPTH(TIH * TIW)) u_in_buf (
    .clk, .wr_en(ld_valid && ld_ready), .wr_bank(ld_bank), .wr_addr(ld_addr), .wr_data(ld_data),
    .rd_en(in_rd_en), .rd_bank(cv_ibank), .rd_addr(in_rd_addr), .rd_data(in_rd_data));

  esb_conv #(.B(B), .K(K), .TN(TN), .TM(TM), .TH(TH), .TW(TW), .K_MAX(K_MAX), .S_MAX(S_MAX),
             .AW(AW)) u_conv (
    .clk, .rst_n, .start(conv_start), .clear(trip == '0), .cfg, .busy(), .done(conv_done),
    .in_rd_en, .in_rd_addr, .in_rd_data,
    .wt_rd_en, .wt_ky, .wt_kx, .wt_data,
    .ob_addr(cv_addr), .ob_rd_data(cv_rd_data), .ob_wr_en(cv_wr_en), .ob_wr_data(cv_wr_data));

  esb_out_buf #(.TM(TM), .AW(AW), .DEPTH(TH * TW), .NR(NW)) u_out_buf (
    .clk, .cv_bank(cv_obank), .cv_addr, .cv_rd_data, .cv_wr_en, .cv_wr_data,
    .pp_en, .pp_bank(pp_obank), .pp_addr, .pp_m, .pp_rd_data);

  esb_post #(.B(B), .K(K), .TM(TM), .TH(TH), .TW(TW), .AW(AW), .CW(CW), .CF(CF),
             .P_MAX(P_MAX)) u_post (
    .clk, .rst_n, .start(pp_start), .cfg, .busy(), .done(pp_done),
    .coef_a(pp_a), .coef_b(pp_b),
    .ob_en(pp_en), .ob_addr(pp_addr), .ob_m(pp_m), .ob_rd_data(pp_rd_data),
    .st_valid, .st_oy, .st_ox, .st_m, .st_code, .ev_partial, .ev_clip);

  a_ld_only_when_ready: assert property (@(posedge clk) disable iff (!rst_n) ld_valid |-> ld_ready)
    else $error("input slice written while both input banks are full");
  a_cfg_slices: assert property (@(posedge clk) disable iff (!rst_n) tile_acc |-> cfg.n_cin_tiles != 0)
    else $error("n_cin_tiles must be at least 1");

endmodule
