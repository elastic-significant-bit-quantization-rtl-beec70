// esb_out_buf -- ping-pong output (partial-sum) buffers 0/1.
//
// Two banks of DEPTH = Th*Tw pixel entries, each entry holding TM signed
// accumulators (one per MAC unit / output channel). The convolution side has a
// combinational read and a synchronous write of all TM lanes of one pixel, used
// as read-modify-write by the accumulation adder that the paper draws on top
// of the output buffer. The post-processing side reads NR pixels of one
// channel at once (a whole pooling window) from the other bank. Bank
// selection is external; the controller guarantees the two sides never use
// the same bank (assertion below).
module esb_out_buf #(
  parameter int TM    = 96,
  parameter int AW    = 24,
  parameter int DEPTH = 169,
  parameter int NR    = 9,
  localparam int PA   = $clog2(DEPTH),
  localparam int MA   = (TM > 1) ? $clog2(TM) : 1
) (
  input  logic                 clk,
  // convolution side
  input  logic                 cv_bank,
  input  logic [PA-1:0]        cv_addr,
  output logic signed [AW-1:0] cv_rd_data [TM],
  input  logic                 cv_wr_en,
  input  logic signed [AW-1:0] cv_wr_data [TM],
  // post-processing side
  input  logic                 pp_en,
  input  logic                 pp_bank,
  input  logic [PA-1:0]        pp_addr [NR],
  input  logic [MA-1:0]        pp_m,
  output logic signed [AW-1:0] pp_rd_data [NR]
);
  logic signed [AW-1:0] mem0 [DEPTH][TM];
  logic signed [AW-1:0] mem1 [DEPTH][TM];

  always_ff @(posedge clk) begin
    if (cv_wr_en) begin
      for (int m = 0; m < TM; m++) begin
        if (!cv_bank) mem0[cv_addr][m] <= cv_wr_data[m];
        else          mem1[cv_addr][m] <= cv_wr_data[m];
      end
    end
  end

  always_comb begin
    for (int m = 0; m < TM; m++)
      cv_rd_data[m] = cv_bank ? mem1[cv_addr][m] : mem0[cv_addr][m];
    for (int r = 0; r < NR; r++)
      pp_rd_data[r] = pp_bank ? mem1[pp_addr[r]][pp_m] : mem0[pp_addr[r]][pp_m];
  end

  a_no_bank_clash: assert property (@(posedge clk) !(cv_wr_en && pp_en && (cv_bank == pp_bank)))
    else $error("output buffer bank %0d accumulated while it is post-processed", cv_bank);

endmodule
