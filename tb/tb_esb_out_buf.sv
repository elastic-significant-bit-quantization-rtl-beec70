// tb_esb_out_buf -- self-check of the ping-pong output (accumulator) buffers.
// Random read-modify-write accumulation on one bank through the convolution
// port while the post-processing port reads random windows of one channel from
// the other bank; both are compared with a shadow model.
module tb_esb_out_buf;
  localparam int TM = 5, AW = 16, DEPTH = 20, NR = 4;
  int checks = 0, failures = 0;
  logic clk = 0, cv_bank = 0, cv_wr_en = 0, pp_en = 0, pp_bank = 1;
  logic [$clog2(DEPTH)-1:0] cv_addr = '0;
  logic signed [AW-1:0] cv_rd_data [TM], cv_wr_data [TM];
  logic [$clog2(DEPTH)-1:0] pp_addr [NR];
  logic [$clog2(TM)-1:0] pp_m = '0;
  logic signed [AW-1:0] pp_rd_data [NR];
  logic signed [AW-1:0] shadow [2][DEPTH][TM];

  esb_out_buf #(.TM(TM), .AW(AW), .DEPTH(DEPTH), .NR(NR)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < NR; r++) pp_addr[r] = '0;
    for (int m = 0; m < TM; m++) cv_wr_data[m] = '0;
    // initialise both banks through the convolution port
    for (int bk = 0; bk < 2; bk++)
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        cv_bank = bk[0]; cv_addr = 5'(i); cv_wr_en = 1;
        for (int m = 0; m < TM; m++) begin cv_wr_data[m] = AW'($urandom); shadow[bk][i][m] = cv_wr_data[m]; end
      end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      cv_bank = 1'($urandom); pp_bank = !cv_bank; pp_en = 1;
      cv_addr = 5'($urandom_range(0, DEPTH-1));
      pp_m = 3'($urandom_range(0, TM-1));
      for (int r = 0; r < NR; r++) pp_addr[r] = 5'($urandom_range(0, DEPTH-1));
      cv_wr_en = 1'($urandom);
      #1;
      for (int m = 0; m < TM; m++) begin
        checks++;
        if (cv_rd_data[m] !== shadow[cv_bank][cv_addr][m]) failures++;
        cv_wr_data[m] = cv_rd_data[m] + AW'($urandom_range(0, 255));
      end
      for (int r = 0; r < NR; r++) begin
        checks++;
        if (pp_rd_data[r] !== shadow[pp_bank][pp_addr[r]][pp_m]) begin
          failures++;
          if (failures < 10) $display("FAIL pp r%0d got %0d exp %0d", r, pp_rd_data[r], shadow[pp_bank][pp_addr[r]][pp_m]);
        end
      end
      @(posedge clk); #1;
      if (cv_wr_en) for (int m = 0; m < TM; m++) shadow[cv_bank][cv_addr][m] = cv_wr_data[m];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
