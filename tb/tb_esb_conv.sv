// tb_esb_conv -- self-check of the convolution module at reduced size
// (Tn = 4, Tm = 3, Th = 4, Tw = 3, K_MAX = 3, S_MAX = 2, ESB(4,1)).
// The testbench models the input buffer, the weight memory (both one-cycle
// read latency) and the output buffer, runs output tiles of 1..3 trips with
// random kernel sizes, strides and tile sizes, and compares every accumulator
// with a direct convolution of the decoded values. It also checks that every
// trip takes K*K*oh*ow + 2 cycles from start to done.
module tb_esb_conv;
  localparam int B = 4, K = 1, TN = 4, TM = 3, TH = 4, TW = 3, KM = 3, SM = 2, AW = 24;
  localparam int TIH = (TH - 1) * SM + KM, TIW = (TW - 1) * SM + KM;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0, start = 0, clear = 0;
  esb_pkg::layer_cfg_t cfg;
  logic busy, done, in_rd_en, wt_rd_en, ob_wr_en;
  logic [$clog2(TIH*TIW)-1:0] in_rd_addr;
  logic [TN-1:0][B-1:0] in_rd_data;
  logic [1:0] wt_ky, wt_kx;
  logic [TN-1:0][B-1:0] wt_data [TM];
  logic [$clog2(TH*TW)-1:0] ob_addr;
  logic signed [AW-1:0] ob_rd_data [TM], ob_wr_data [TM];

  // behavioural memories
  logic [TN-1:0][B-1:0] imem [TIH*TIW];
  logic [B-1:0] wmem [KM][KM][TM][TN];
  logic signed [AW-1:0] omem [TH*TW][TM];
  longint expv [TH*TW][TM];

  esb_conv #(.B(B), .K(K), .TN(TN), .TM(TM), .TH(TH), .TW(TW), .K_MAX(KM), .S_MAX(SM), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  always_ff @(posedge clk) begin
    if (in_rd_en) in_rd_data <= imem[in_rd_addr];
    if (wt_rd_en) for (int m = 0; m < TM; m++) for (int n = 0; n < TN; n++) wt_data[m][n] <= wmem[wt_ky][wt_kx][m][n];
    if (ob_wr_en) for (int m = 0; m < TM; m++) omem[ob_addr][m] <= ob_wr_data[m];
  end
  always_comb for (int m = 0; m < TM; m++) ob_rd_data[m] = omem[ob_addr][m];

  function automatic longint ref_val(input int code);
    int sgn, e, j;
    longint v;
    sgn = (code >> 3) & 1; e = (code >> 1) & 3; j = code & 1;
    v = (e == 3) ? j : (longint'(2 + j) << e);
    return (sgn != 0) ? -v : v;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ks, st, oh, ow, ntrips, cyc;
    cfg = '0;
    for (int p = 0; p < TH*TW; p++) for (int m = 0; m < TM; m++) omem[p][m] = 24'hdead;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 30; tile++) begin
      ks = $urandom_range(1, KM); st = $urandom_range(1, SM);
      oh = $urandom_range(1, TH); ow = $urandom_range(1, TW);
      if (tile == 0) begin ks = KM; st = SM; oh = TH; ow = TW; end
      ntrips = $urandom_range(1, 3);
      cfg.k_size = 4'(ks); cfg.conv_stride = 3'(st); cfg.out_h = 6'(oh); cfg.out_w = 6'(ow);
      cfg.n_cin_tiles = 10'(ntrips); cfg.pool_p = 2'd1; cfg.pool_s = 2'd1;
      for (int p = 0; p < TH*TW; p++) for (int m = 0; m < TM; m++) expv[p][m] = 0;
      for (int t = 0; t < ntrips; t++) begin
        for (int i = 0; i < TIH*TIW; i++) imem[i] = {TN{4'(0)}} | TN*B'({$urandom, $urandom});
        for (int a = 0; a < KM; a++) for (int b = 0; b < KM; b++)
          for (int m = 0; m < TM; m++) for (int n = 0; n < TN; n++) wmem[a][b][m][n] = 4'($urandom);
        // reference accumulation
        for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++)
          for (int m = 0; m < TM; m++)
            for (int a = 0; a < ks; a++) for (int b = 0; b < ks; b++) for (int n = 0; n < TN; n++)
              expv[y*TW+x][m] += ref_val(wmem[a][b][m][n]) * ref_val(imem[(y*st+a)*TIW + x*st+b][n]);
        @(negedge clk); start = 1; clear = (t == 0);
        @(negedge clk); start = 0; cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks++;
        if (cyc != ks*ks*oh*ow + 2) begin
          failures++; $display("FAIL trip cycles %0d exp %0d", cyc, ks*ks*oh*ow + 2);
        end
      end
      for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) for (int m = 0; m < TM; m++) begin
        checks++;
        if (longint'(omem[y*TW+x][m]) != expv[y*TW+x][m]) begin
          failures++;
          if (failures < 10) $display("FAIL tile %0d y%0d x%0d m%0d got %0d exp %0d", tile, y, x, m, omem[y*TW+x][m], expv[y*TW+x][m]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
