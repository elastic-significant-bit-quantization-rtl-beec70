// tb_esb_post -- self-check of the post-processing pipeline at reduced size
// (Tm = 3, Th = 5, Tw = 4, ESB(4,1)). A behavioural output-buffer bank is
// filled with random accumulators; random coefficients, tile sizes and pooling
// settings (p,s) in {(1,1),(2,2),(3,2),(3,3),(2,1)} are applied. The reference
// does max-pooling over the window clipped to the tile, ReLU, the affine map
// in 64-bit integers and a nearest-value search over the ESB set. Every code,
// its position, the output count and the cycle count
// ceil(oh/s)*ceil(ow/s)*Tm + 3 are checked.
module tb_esb_post;
  localparam int B = 4, K = 1, TM = 3, TH = 5, TW = 4, AW = 24, CW = 18, CF = 14, PM = 3;
  int checks = 0, failures = 0, n_partial = 0, n_clip = 0;

  logic clk = 0, rst_n = 0, start = 0;
  esb_pkg::layer_cfg_t cfg;
  logic busy, done, ob_en, st_valid, ev_partial, ev_clip;
  logic signed [CW-1:0] coef_a [TM], coef_b [TM];
  logic [$clog2(TH*TW)-1:0] ob_addr [PM*PM];
  logic [1:0] ob_m, st_m;
  logic signed [AW-1:0] ob_rd_data [PM*PM];
  logic [5:0] st_oy, st_ox;
  logic [B-1:0] st_code;
  logic signed [AW-1:0] omem [TH*TW][TM];

  esb_post #(.B(B), .K(K), .TM(TM), .TH(TH), .TW(TW), .AW(AW), .CW(CW), .CF(CF), .P_MAX(PM)) dut (.*);

  always #5 clk = ~clk;
  always_comb for (int i = 0; i < PM*PM; i++) ob_rd_data[i] = omem[ob_addr[i]][ob_m];
  always @(posedge clk) begin
    if (ev_partial) n_partial++;
    if (ev_clip) n_clip++;
  end

  function automatic longint ref_val(input int code);
    int sgn, e, j;
    longint v;
    sgn = (code >> 3) & 1; e = (code >> 1) & 3; j = code & 1;
    v = (e == 3) ? j : (longint'(2 + j) << e);
    return (sgn != 0) ? -v : v;
  endfunction

  function automatic longint nearest(input longint vfx);
    longint best, bestd, d, q, a;
    a = (vfx < 0) ? -vfx : vfx;
    best = 0; bestd = a;
    for (int c = 0; c < 8; c++) begin
      q = ref_val(c);
      d = (q << (CF - K)) - a;
      if (d < 0) d = -d;
      if (d < bestd || (d == bestd && q > best)) begin best = q; bestd = d; end
    end
    return (vfx < 0) ? -best : best;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pp [5] = '{1, 2, 3, 3, 2};
    int ss [5] = '{1, 2, 2, 3, 1};
    int oh, ow, p, s, ph, pw, cyc, nout;
    longint mx, yv;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      p = pp[t % 5]; s = ss[t % 5];
      oh = $urandom_range(1, TH); ow = $urandom_range(1, TW);
      if (t < 5) begin oh = TH; ow = TW; end
      cfg.out_h = 6'(oh); cfg.out_w = 6'(ow); cfg.pool_p = 2'(p); cfg.pool_s = 2'(s);
      cfg.k_size = 4'd1; cfg.conv_stride = 3'd1; cfg.n_cin_tiles = 10'd1;
      for (int i = 0; i < TH*TW; i++) for (int m = 0; m < TM; m++)
        omem[i][m] = AW'($signed(24'($urandom)) >>> $urandom_range(4, 14));
      for (int m = 0; m < TM; m++) begin
        coef_a[m] = CW'($signed(18'($urandom)) >>> $urandom_range(2, 12));
        coef_b[m] = CW'($signed(18'($urandom)) >>> $urandom_range(0, 6));
      end
      ph = (oh + s - 1) / s; pw = (ow + s - 1) / s;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0; cyc = 1; nout = 0;
      forever begin
        if (st_valid) begin
          // reference for the reported position
          mx = 0;
          for (int i = 0; i < p; i++) for (int j = 0; j < p; j++)
            if (st_oy*s + i < oh && st_ox*s + j < ow && omem[(st_oy*s+i)*TW + st_ox*s+j][st_m] > mx)
              mx = omem[(st_oy*s+i)*TW + st_ox*s+j][st_m];
          yv = mx * longint'(coef_a[st_m]) + longint'(coef_b[st_m]);
          checks++;
          if (ref_val(st_code) != nearest(yv) ||
              int'(st_oy) != nout / (pw*TM) || int'(st_ox) != (nout / TM) % pw || int'(st_m) != nout % TM) begin
            failures++;
            if (failures < 10) $display("FAIL t%0d n%0d oy%0d ox%0d m%0d code %0h exp %0d", t, nout, st_oy, st_ox, st_m, st_code, nearest(yv));
          end
          nout++;
        end
        if (done) break;
        @(negedge clk); cyc++;
      end
      checks += 2;
      if (nout != ph*pw*TM) begin failures++; $display("FAIL count %0d exp %0d", nout, ph*pw*TM); end
      if (cyc != ph*pw*TM + 3) begin failures++; $display("FAIL cycles %0d exp %0d", cyc, ph*pw*TM + 3); end
    end
    checks += 2;
    if (n_partial == 0) failures++;
    if (n_clip == 0) failures++;
    $display("partial windows %0d, truncated values %0d", n_partial, n_clip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
