// tb_esb_bn_dn -- self-check of the fused affine step y = a*x + b in fixed point.
// The reference computes a*x + b with real numbers and compares with the RTL
// output scaled by 2^-14 (both are exact, so they must agree to the last bit).
module tb_esb_bn_dn;
  int checks = 0, failures = 0;
  logic signed [23:0] x;
  logic signed [17:0] a, b;
  logic signed [42:0] y;

  esb_bn_dn #(.AW(24), .CW(18), .CF(14)) dut (.x(x), .a(a), .b(b), .y(y));

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ar, br, yr;
    for (int t = 0; t < 5000; t++) begin
      x = 24'($urandom);
      a = 18'($urandom);
      b = 18'($urandom);
      if (t == 0) begin x = 24'h7fffff; a = 18'h1ffff; b = 18'h1ffff; end
      if (t == 1) begin x = 24'h800000; a = 18'h20000; b = 18'h20000; end
      #1;
      ar = real'(a) / 16384.0;
      br = real'(b) / 16384.0;
      yr = real'(x) * ar + br;
      checks++;
      if (real'(y) / 16384.0 != yr) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d a=%0d b=%0d y=%0d", x, a, b, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
