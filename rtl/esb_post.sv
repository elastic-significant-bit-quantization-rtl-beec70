// esb_post -- post-processing module: MP&ReLU -> BN and DN -> ESB quant -> Store.
//
// Runs over one finished output buffer bank (an oh x ow x Tm tile of integer
// accumulators) and produces ceil(oh/s) x ceil(ow/s) x Tm ESB codes, one per
// cycle, through a four-step pipeline that follows the paper's fused steps:
//   step 1 MP&ReLU : reads the p x p pooling window of channel m (all window
//                    pixels at once) and takes max(...,0); windows that
//                    overhang the tile keep their intersection with it;
//   step 2 BN and DN: y = a[m]*x + b[m] (fixed point, see esb_bn_dn);
//   step 3 ESB quant: truncation and projection to an ESB code (esb_quant);
//   step 4 Store    : the code leaves on st_* towards off-chip memory.
// Iteration order (this design's choice): pooled row oy, pooled column ox,
// channel m innermost. Pooled output (oy,ox) covers tile rows oy*s..oy*s+p-1
// and columns ox*s..ox*s+p-1. p = s = 1 bypasses pooling (layers without MP).
//
// Timing: one output is issued per cycle from the cycle after 'start'; its
// code appears on st_* three cycles after issue; 'done' pulses together with
// the last st_valid. A tile therefore takes ceil(oh/s)*ceil(ow/s)*Tm + 3 cycles.
// The coefficient arrays must stay stable while 'busy'. ev_partial and
// ev_clip pulse for each window cut by the tile edge and each truncated value.
// Lint note: only the tile-size and pooling fields of cfg are used here; the
// kernel, stride and slice-count fields belong to the convolution module.
module esb_post #(
  parameter int B     = 4,
  parameter int K     = 1,
  parameter int TM    = 96,
  parameter int TH    = 13,
  parameter int TW    = 13,
  parameter int AW    = 24,
  parameter int CW    = 18,
  parameter int CF    = 14,
  parameter int P_MAX = 3,
  localparam int NW   = P_MAX * P_MAX,
  localparam int PA   = $clog2(TH * TW),
  localparam int MA   = (TM > 1) ? $clog2(TM) : 1,
  localparam int YW   = AW + CW + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  esb_pkg::layer_cfg_t   cfg,
  output logic                  busy,
  output logic                  done,
  // BN/DN coefficients of the Tm channels of this tile
  input  logic signed [CW-1:0]  coef_a [TM],
  input  logic signed [CW-1:0]  coef_b [TM],
  // output buffer read port (one channel of a whole window)
  output logic                  ob_en,
  output logic [PA-1:0]         ob_addr [NW],
  output logic [MA-1:0]         ob_m,
  input  logic signed [AW-1:0]  ob_rd_data [NW],
  // store stream
  output logic                  st_valid,
  output logic [5:0]            st_oy,
  output logic [5:0]            st_ox,
  output logic [MA-1:0]         st_m,
  output logic [B-1:0]          st_code,
  output logic                  ev_partial,
  output logic                  ev_clip
);
  logic          run;
  logic [5:0]    oy, ox;
  logic [MA-1:0] m;
  logic          last;
  int            ph, pw;           // pooled rows and columns
  logic [NW-1:0] vmask;

  // pipeline registers, tag = (oy, ox, m, last)
  typedef struct packed {
    logic          v;
    logic          last;
    logic [5:0]    oy, ox;
    logic [MA-1:0] m;
  } tag_t;
  tag_t tag1, tag2, tag3;
  logic signed [AW-1:0] x1, mp_y;
  logic signed [YW-1:0] y2, bn_y;
  logic [B-1:0]         q_code;
  logic                 q_clip;

  always_comb begin
    ph   = (int'(cfg.out_h) + int'(cfg.pool_s) - 1) / int'(cfg.pool_s);
    pw   = (int'(cfg.out_w) + int'(cfg.pool_s) - 1) / int'(cfg.pool_s);
    last = (int'(oy) == ph - 1) && (int'(ox) == pw - 1) && (int'(m) == TM - 1);
    ob_en = run;
    ob_m  = m;
    for (int i = 0; i < P_MAX; i++)
      for (int j = 0; j < P_MAX; j++) begin
        int r, c;
        r = int'(oy) * int'(cfg.pool_s) + i;
        c = int'(ox) * int'(cfg.pool_s) + j;
        vmask[i*P_MAX+j] = (i < int'(cfg.pool_p)) && (j < int'(cfg.pool_p)) &&
                           (r < int'(cfg.out_h)) && (c < int'(cfg.out_w));
        ob_addr[i*P_MAX+j] = vmask[i*P_MAX+j] ? PA'(r * TW + c) : '0;
      end
    ev_partial = run && (m == '0) &&
                 (int'(oy) * int'(cfg.pool_s) + int'(cfg.pool_p) > int'(cfg.out_h) ||
                  int'(ox) * int'(cfg.pool_s) + int'(cfg.pool_p) > int'(cfg.out_w));
    busy = run || tag1.v || tag2.v || tag3.v;
  end

  esb_mp_relu #(.AW(AW), .NW(NW)) u_mp (.win(ob_rd_data), .vmask(vmask), .y(mp_y));
  esb_bn_dn   #(.AW(AW), .CW(CW), .CF(CF)) u_bn (.x(x1), .a(coef_a[tag1.m]), .b(coef_b[tag1.m]), .y(bn_y));
  esb_quant   #(.B(B), .K(K), .IW(YW), .FRAC(CF)) u_q (.v(y2), .code(q_code), .clipped(q_clip));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; oy <= '0; ox <= '0; m <= '0;
      tag1 <= '0; tag2 <= '0; tag3 <= '0;
      x1 <= '0; y2 <= '0; st_code <= '0; ev_clip <= 1'b0;
    end else begin
      // step 1: MP&ReLU
      tag1 <= '{v: run, last: run && last, oy: oy, ox: ox, m: m};
      x1   <= mp_y;
      // step 2: BN and DN
      tag2 <= tag1;
      y2   <= bn_y;
      // step 3: ESB quantisation, result held for the store step
      tag3    <= tag2;
      st_code <= q_code;
      ev_clip <= tag2.v && q_clip;
      // output counters
      if (start && !busy) begin
        run <= 1'b1; oy <= '0; ox <= '0; m <= '0;
      end else if (run) begin
        if (last) run <= 1'b0;
        if (int'(m) == TM - 1) begin
          m <= '0;
          if (int'(ox) == pw - 1) begin
            ox <= '0;
            oy <= oy + 1'b1;
          end else ox <= ox + 1'b1;
        end else m <= m + 1'b1;
      end
    end
  end

  always_comb begin
    st_valid = tag3.v;
    st_oy    = tag3.oy;
    st_ox    = tag3.ox;
    st_m     = tag3.m;
    done     = tag3.v && tag3.last;
  end

  a_pool_ok: assert property (@(posedge clk) disable iff (!rst_n)
      start |-> (cfg.pool_p >= 1 && int'(cfg.pool_p) <= P_MAX && cfg.pool_s >= 1))
    else $error("unsupported pooling configuration");

endmodule
