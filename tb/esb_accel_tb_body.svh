// esb_accel_tb_body.svh -- shared body of the end-to-end testbenches of esb_accel.
// The including module defines the localparams B, K, TN, TM, TH, TW, KM (K_MAX),
// SM (S_MAX), PM (P_MAX), AW, CW, CF, the layer list NL/LAYERS/GAPS, MAXT (tiles
// per layer), NSMAX (largest n_cin_tiles) and CHECK_OB_FULL, instantiates
// esb_accel as 'dut' on the signals declared below and holds the watchdog.
//
// For every layer the host side of this testbench loads random input slices
// (with random gaps, so the convolution sometimes waits), starts output tiles
// with random BN/DN coefficients and serves weights from a random weight
// memory. Every stored code is compared with a reference computed here from
// the decoded ESB values: direct convolution, max pooling over the window
// clipped to the tile, ReLU, a*x+b in 64-bit integers, then the nearest
// element of the ESB value set. The mechanisms of the design are counted and
// each must occur at least once.

  localparam int TIH = (TH - 1) * SM + KM, TIW = (TW - 1) * SM + KM;
  localparam int NPIX = TIH * TIW;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  esb_pkg::layer_cfg_t cfg;
  logic ld_valid = 0, ld_last = 0, ld_ready;
  logic [$clog2(NPIX)-1:0] ld_addr;
  logic [TN-1:0][B-1:0] ld_data;
  logic tile_valid = 0, tile_ready;
  logic signed [CW-1:0] coef_a [TM], coef_b [TM];
  logic wt_rd_en;
  logic [$clog2(KM+1)-1:0] wt_ky, wt_kx;
  logic [9:0] wt_slice;
  logic [TN-1:0][B-1:0] wt_data [TM];
  logic st_valid, idle, ev_partial, ev_clip;
  logic [7:0] st_tile;
  logic [5:0] st_oy, st_ox;
  logic [(TM > 1 ? $clog2(TM) : 1)-1:0] st_m;
  logic [B-1:0] st_code;

  always #5 clk = ~clk;

  // test data of the current layer, per tile (index = tile sequence number mod 2*MAXT)
  logic [TN-1:0][B-1:0] imem [MAXT][NSMAX][NPIX];          // [tile][slice][pixel]
  logic [TN-1:0][B-1:0] wmem [MAXT][NSMAX][KM][KM][TM];    // [tile][slice][ky][kx][m], Tn codes
  logic signed [CW-1:0] ta [MAXT][TM], tb_ [MAXT][TM];
  longint               expq [MAXT][TH][TW][TM];      // expected value, units of 2^-k
  int                   seq_base, conv_tile, n_stored;
  int                   n_ch = TN;   // loop bound kept in a variable so the reference loops stay loops

  // event counters
  int n_in_stall = 0, n_ld_overlap = 0, n_pp_overlap = 0, n_ob_full = 0, n_partial = 0, n_clip = 0, n_relu = 0;

  function automatic longint ref_val(input int code);
    int ew, sgn, e, j;
    longint v;
    ew  = B - K - 1;
    sgn = (code >> (B - 1)) & 1;
    e   = (code >> K) & ((1 << ew) - 1);
    j   = code & ((1 << K) - 1);
    if (e == (1 << ew) - 1) v = j;
    else                    v = longint'((1 << K) + j) << e;
    return (sgn != 0) ? -v : v;
  endfunction

  function automatic longint nearest(input longint vfx);
    longint best, bestd, d, q, a;
    a = (vfx < 0) ? -vfx : vfx;
    best = 0; bestd = a;
    for (int c = 0; c < (1 << (B - 1)); c++) begin
      q = ref_val(c);
      d = (q << (CF - K)) - a;
      if (d < 0) d = -d;
      if (d < bestd || (d == bestd && q > best)) begin best = q; bestd = d; end
    end
    return (vfx < 0) ? -best : best;
  endfunction

  // synchronous weight memory outside the accelerator
  always_ff @(posedge clk)
    if (wt_rd_en) wt_data <= wmem[conv_tile][wt_slice][wt_ky][wt_kx];

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (dut.tile_act && !dut.conv_started && !dut.in_full[dut.cv_ibank]) n_in_stall++;
    if (ld_valid && dut.u_conv.run) n_ld_overlap++;
    if (dut.u_conv.busy && dut.u_post.busy) n_pp_overlap++;
    if (tile_valid && !tile_ready && dut.ob_full[dut.cv_obank]) n_ob_full++;
    if (ev_partial) n_partial++;
    if (ev_clip) n_clip++;
    if (dut.u_post.tag1.v && dut.u_post.x1 == 0) n_relu++;
  end

  // store monitor
  always @(posedge clk) if (rst_n && st_valid) begin
    int t;
    t = int'(st_tile) % MAXT;
    checks++;
    if (ref_val(st_code) != expq[t][st_oy][st_ox][st_m]) begin
      failures++;
      if (failures < 10)
        $display("FAIL tile %0d oy %0d ox %0d m %0d code %0h (%0d) exp %0d", st_tile, st_oy, st_ox, st_m,
                 st_code, ref_val(st_code), expq[t][st_oy][st_ox][st_m]);
    end
    n_stored++;
  end

  // reference for one tile of the current layer
  task automatic make_ref(input int t);
    int ks, st, oh, ow, p, s, ns;
    longint acc [TH][TW][TM];
    longint mx;
    ks = cfg.k_size; st = cfg.conv_stride; oh = cfg.out_h; ow = cfg.out_w;
    p = cfg.pool_p; s = cfg.pool_s; ns = cfg.n_cin_tiles;
    for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) for (int m = 0; m < TM; m++) begin
      acc[y][x][m] = 0;
      for (int sl = 0; sl < ns; sl++)
        for (int a = 0; a < ks; a++) for (int b = 0; b < ks; b++)
          for (int n = 0; n < n_ch; n++)
            acc[y][x][m] += ref_val(wmem[t][sl][a][b][m][n]) * ref_val(imem[t][sl][(y*st+a)*TIW + x*st+b][n]);
    end
    for (int oy = 0; oy < (oh + s - 1) / s; oy++) for (int ox = 0; ox < (ow + s - 1) / s; ox++)
      for (int m = 0; m < TM; m++) begin
        mx = 0;
        for (int i = 0; i < p; i++) for (int j = 0; j < p; j++)
          if (oy*s + i < oh && ox*s + j < ow && acc[oy*s+i][ox*s+j][m] > mx) mx = acc[oy*s+i][ox*s+j][m];
        expq[t][oy][ox][m] = nearest(mx * longint'(ta[t][m]) + longint'(tb_[t][m]));
      end
  endtask

  task automatic run_layer(input esb_pkg::layer_cfg_t lc, input int ntiles, input int gap);
    int ns, nexp;
    cfg = lc;
    ns = lc.n_cin_tiles;
    // generate data
    for (int t = 0; t < ntiles; t++) begin
      for (int sl = 0; sl < ns; sl++) begin
        for (int i = 0; i < NPIX; i++)
          for (int n = 0; n < n_ch; n++) imem[t][sl][i][n] = B'($urandom);
        for (int a = 0; a < KM; a++) for (int b = 0; b < KM; b++)
          for (int m = 0; m < TM; m++) for (int n = 0; n < n_ch; n++) wmem[t][sl][a][b][m][n] = B'($urandom);
      end
      for (int m = 0; m < TM; m++) begin
        ta[t][m]  = CW'($urandom_range(1, 1 << (CF - 2)) / (lc.k_size * lc.k_size * ns * TN / 16 + 1));
        tb_[t][m] = CW'(int'($urandom_range(0, 4 << CF)) - (2 << CF));
      end
      make_ref(t);
    end
    nexp = 0;
    for (int t = 0; t < ntiles; t++)
      nexp += ((lc.out_h + lc.pool_s - 1) / lc.pool_s) * ((lc.out_w + lc.pool_s - 1) / lc.pool_s) * TM;
    n_stored = 0;
    seq_base = int'(dut.tile_seq);
    fork
      // loader: slices of each tile in order, with gaps
      begin
        for (int t = 0; t < ntiles; t++)
          for (int sl = 0; sl < ns; sl++) begin
            repeat ((t + sl) % 2 == 0 ? gap : 1) @(negedge clk);
            while (!ld_ready) @(negedge clk);
            for (int i = 0; i < NPIX; i++) begin
              ld_valid = 1; ld_addr = $bits(ld_addr)'(i); ld_data = imem[t][sl][i]; ld_last = (i == NPIX - 1);
              @(negedge clk);
            end
            ld_valid = 0; ld_last = 0;
          end
      end
      // tile starter (tile numbers of this layer start at seq_base, which is a multiple of MAXT)
      begin
        for (int t = 0; t < ntiles; t++) begin
          for (int m = 0; m < TM; m++) begin coef_a[m] = ta[t][m]; coef_b[m] = tb_[t][m]; end
          tile_valid = 1;
          @(posedge clk);
          while (!tile_ready) @(posedge clk);
          conv_tile = t;
          @(negedge clk);
          tile_valid = 0;
        end
      end
    join
    while (!idle) @(negedge clk);
    checks++;
    if (n_stored != nexp) begin failures++; $display("FAIL stored %0d codes, expected %0d", n_stored, nexp); end
  endtask

  initial begin
    cfg = '0;
    conv_tile = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int l = 0; l < NL; l++) begin
      // keep tile numbers aligned so that st_tile % MAXT is the tile index in the layer
      run_layer(LAYERS[l], MAXT, GAPS[l]);
    end
    $display("input stalls %0d, load/MAC overlap %0d, MAC/post overlap %0d, output-bank-full waits %0d",
             n_in_stall, n_ld_overlap, n_pp_overlap, n_ob_full);
    $display("cut pooling windows %0d, truncated values %0d, ReLU zeros %0d", n_partial, n_clip, n_relu);
    checks += 7;
    if (n_in_stall == 0)   begin failures++; $display("FAIL no input stall"); end
    if (n_ld_overlap == 0) begin failures++; $display("FAIL no load during MAC"); end
    if (n_pp_overlap == 0) begin failures++; $display("FAIL no MAC/post overlap"); end
    if (n_ob_full == 0 && CHECK_OB_FULL) begin failures++; $display("FAIL no output-bank-full wait"); end
    if (n_partial == 0)    begin failures++; $display("FAIL no cut pooling window"); end
    if (n_clip == 0)       begin failures++; $display("FAIL no truncation"); end
    if (n_relu == 0)       begin failures++; $display("FAIL no ReLU zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
