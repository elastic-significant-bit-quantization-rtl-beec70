// tb_esb_mul -- exhaustive self-check of the ESB multiplier.
// Every pair of codes is multiplied for ESB(4,1), ESB(2,0), ESB(5,2) and
// ESB(8,5); the reference decodes each code to an integer in units of 2^-k
// from the value-set definition (subnormal slice j*2^-k, slice i>0 as
// (2^k + j) * 2^(i-1-k)) and multiplies the integers.
module tb_esb_mul;
  int checks = 0, failures = 0;

  // value of a code in units of 2^-k
  function automatic longint ref_val(input int code, input int b, input int k);
    int ew, sgn, e, j;
    longint v;
    ew  = b - k - 1;
    sgn = (code >> (b - 1)) & 1;
    e   = (code >> k) & ((1 << ew) - 1);
    j   = code & ((1 << k) - 1);
    if (e == (1 << ew) - 1) v = j;                          // slice i = 0
    else                    v = longint'((1 << k) + j) << e; // slice i = e+1
    return sgn ? -v : v;
  endfunction

  logic [3:0] w41, a41;  logic signed [esb_pkg::esb_prod_w(4,1)-1:0] p41;
  logic [1:0] w20, a20;  logic signed [esb_pkg::esb_prod_w(2,0)-1:0] p20;
  logic [4:0] w52, a52;  logic signed [esb_pkg::esb_prod_w(5,2)-1:0] p52;
  logic [7:0] w85, a85;  logic signed [esb_pkg::esb_prod_w(8,5)-1:0] p85;

  esb_mul #(.B(4), .K(1)) u41 (.w(w41), .a(a41), .p(p41));
  esb_mul #(.B(2), .K(0)) u20 (.w(w20), .a(a20), .p(p20));
  esb_mul #(.B(5), .K(2)) u52 (.w(w52), .a(a52), .p(p52));
  esb_mul #(.B(8), .K(5)) u85 (.w(w85), .a(a85), .p(p85));

  task automatic chk(input string tag, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", tag, got, exp);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // spot value from the paper's Fig. 11: ESB(4,1) codes represent 0,0.5,...,6
    w41 = 4'b0011; a41 = 4'b0011; #1;                 // 3 * 3 = 9 -> 36 in units 1/4
    chk("3*3", p41, 36);
    for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) begin
      w41 = 4'(i); a41 = 4'(j); #1;
      chk("b4k1", p41, ref_val(i,4,1) * ref_val(j,4,1));
    end
    for (int i = 0; i < 4; i++) for (int j = 0; j < 4; j++) begin
      w20 = 2'(i); a20 = 2'(j); #1;
      chk("b2k0", p20, ref_val(i,2,0) * ref_val(j,2,0));
    end
    for (int i = 0; i < 32; i++) for (int j = 0; j < 32; j++) begin
      w52 = 5'(i); a52 = 5'(j); #1;
      chk("b5k2", p52, ref_val(i,5,2) * ref_val(j,5,2));
    end
    for (int i = 0; i < 256; i++) for (int j = 0; j < 256; j++) begin
      w85 = 8'(i); a85 = 8'(j); #1;
      chk("b8k5", p85, ref_val(i,8,5) * ref_val(j,8,5));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
