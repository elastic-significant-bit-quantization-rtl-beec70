// esb_in_buf -- ping-pong input feature buffers 0/1 of the convolution module.
//
// Two banks, each holding one input slice of Tn channels: DEPTH pixel words of
// TN ESB codes (one word = all Tn channels of one input pixel, so one read
// feeds every MAC of a phase). While the convolution module reads one bank,
// the other is refilled from off-chip memory, hiding the transfer time as in
// the paper's timing graph. The paper sizes a bank Th x Tw x Tn; here a bank
// holds the input window an output tile needs, DEPTH = TIH*TIW pixels with
// TIH = (TH-1)*S_MAX + K_MAX (this design's choice, so that K x K kernels
// and strides up to S_MAX can be computed from one bank).
//
// Write: synchronous, one word per cycle. Read: synchronous, data one cycle
// after rd_en (block-RAM style). Reading and writing the same bank in one cycle
// is a protocol error and is flagged by an assertion.
module esb_in_buf #(
  parameter int B     = 4,
  parameter int TN    = 32,
  parameter int DEPTH = 3481,
  localparam int AW_  = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic                 wr_bank,
  input  logic [AW_-1:0]       wr_addr,
  input  logic [TN-1:0][B-1:0] wr_data,
  input  logic                 rd_en,
  input  logic                 rd_bank,
  input  logic [AW_-1:0]       rd_addr,
  output logic [TN-1:0][B-1:0] rd_data
);
  logic [TN*B-1:0] mem0 [DEPTH];
  logic [TN*B-1:0] mem1 [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_bank) mem0[wr_addr] <= wr_data;
    if (wr_en &&  wr_bank) mem1[wr_addr] <= wr_data;
    if (rd_en) rd_data <= rd_bank ? mem1[rd_addr] : mem0[rd_addr];
  end

  a_no_bank_clash: assert property (@(posedge clk) !(wr_en && rd_en && (wr_bank == rd_bank)))
    else $error("input buffer bank %0d written while it is read", wr_bank);

endmodule
