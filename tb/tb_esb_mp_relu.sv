// tb_esb_mp_relu -- random self-check of the fused max-pool + ReLU step,
// including masked (intersection) windows, all-negative windows and p = 1.
module tb_esb_mp_relu;
  int checks = 0, failures = 0;
  logic signed [23:0] win [9];
  logic [8:0] vmask;
  logic signed [23:0] y;

  esb_mp_relu #(.AW(24), .NW(9)) dut (.win(win), .vmask(vmask), .y(y));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int expv, n_neg;
    bit any;
    n_neg = 0;
    for (int t = 0; t < 5000; t++) begin
      for (int i = 0; i < 9; i++)
        win[i] = (t % 3 == 0) ? -24'($urandom_range(1, 100000)) : 24'($signed(24'($urandom)));
      vmask = (t % 5 == 0) ? 9'b000000001 : 9'($urandom);
      #1;
      // reference: largest valid value, or 0
      any = 0; expv = 0;
      for (int i = 0; i < 9; i++)
        if (vmask[i] && (!any || int'(win[i]) > expv)) begin expv = int'(win[i]); any = 1; end
      if (!any || expv < 0) begin expv = 0; n_neg++; end
      checks++;
      if (int'(y) != expv) begin
        failures++;
        if (failures < 10) $display("FAIL got %0d exp %0d", y, expv);
      end
    end
    checks++; if (n_neg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
