// tb_esb_mac -- random self-check of one MAC unit (Tn multipliers + adder tree).
// Runs the default Tn = 32 with ESB(4,1) and a Tn = 5 (non power of two) ESB(6,3)
// instance; the reference sums the products of the decoded values.
module tb_esb_mac;
  int checks = 0, failures = 0;

  function automatic longint ref_val(input int code, input int b, input int k);
    int ew, sgn, e, j;
    longint v;
    ew  = b - k - 1;
    sgn = (code >> (b - 1)) & 1;
    e   = (code >> k) & ((1 << ew) - 1);
    j   = code & ((1 << k) - 1);
    if (e == (1 << ew) - 1) v = j;
    else                    v = longint'((1 << k) + j) << e;
    return sgn ? -v : v;
  endfunction

  logic [31:0][3:0] w0, a0;
  logic signed [esb_pkg::esb_prod_w(4,1)+5-1:0] s0;
  logic [4:0][5:0] w1, a1;
  logic signed [esb_pkg::esb_prod_w(6,3)+3-1:0] s1;

  esb_mac #(.B(4), .K(1), .TN(32)) u0 (.w(w0), .a(a0), .sum(s0));
  esb_mac #(.B(6), .K(3), .TN(5))  u1 (.w(w1), .a(a1), .sum(s1));

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e0, e1;
    for (int t = 0; t < 2000; t++) begin
      e0 = 0; e1 = 0;
      for (int i = 0; i < 32; i++) begin
        // the last iterations use all-maximum codes to reach the sum range limits
        w0[i] = (t >= 1998) ? 4'b0111 : 4'($urandom);
        a0[i] = (t == 1998) ? 4'b0111 : (t == 1999) ? 4'b1111 : 4'($urandom);
        e0 += ref_val(w0[i], 4, 1) * ref_val(a0[i], 4, 1);
      end
      for (int i = 0; i < 5; i++) begin
        w1[i] = 6'($urandom); a1[i] = 6'($urandom);
        e1 += ref_val(w1[i], 6, 3) * ref_val(a1[i], 6, 3);
      end
      #1;
      checks += 2;
      if (s0 != e0) begin failures++; if (failures < 10) $display("FAIL tn32 %0d exp %0d", s0, e0); end
      if (s1 != e1) begin failures++; if (failures < 10) $display("FAIL tn5 %0d exp %0d", s1, e1); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
