// tb_esb_in_buf -- self-check of the ping-pong input buffers.
// Fills both banks with different random words, then reads random addresses
// of either bank while the other bank is being rewritten, checking the data
// one cycle after rd_en against a shadow copy and that rd_data holds when
// rd_en is low.
module tb_esb_in_buf;
  localparam int B = 4, TN = 8, DEPTH = 50;
  int checks = 0, failures = 0;
  logic clk = 0, wr_en = 0, wr_bank = 0, rd_en = 0, rd_bank = 0;
  logic [$clog2(DEPTH)-1:0] wr_addr = '0, rd_addr = '0;
  logic [TN-1:0][B-1:0] wr_data = '0, rd_data;
  logic [TN*B-1:0] shadow [2][DEPTH];

  esb_in_buf #(.B(B), .TN(TN), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [TN*B-1:0] expd, held;
    logic eb;
    for (int bk = 0; bk < 2; bk++)
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = bk[0]; wr_addr = 6'(i); wr_data = {$urandom};
        shadow[bk][i] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      rd_en = ($urandom_range(0, 3) != 0); rd_bank = 1'($urandom); rd_addr = 6'($urandom_range(0, DEPTH-1));
      expd = shadow[rd_bank][rd_addr];
      held = rd_data;
      eb = rd_en;
      // write the other bank in the same cycle
      wr_en = 1'($urandom); wr_bank = !rd_bank; wr_addr = 6'($urandom_range(0, DEPTH-1)); wr_data = {$urandom};
      @(posedge clk); #1;
      if (wr_en) shadow[wr_bank][wr_addr] = wr_data;
      checks++;
      if (eb ? (rd_data !== expd) : (rd_data !== held)) begin
        failures++;
        if (failures < 10) $display("FAIL t%0d rd_en %0b bank %0d addr %0d got %h exp %h", t, eb, rd_bank, rd_addr, rd_data, eb ? expd : held);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
