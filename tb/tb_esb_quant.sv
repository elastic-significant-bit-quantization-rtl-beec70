// tb_esb_quant -- self-check of the ESB projection.
// The reference does not use shifts: it enumerates the whole value set of
// ESB(b,k) (in units of 2^-k), picks the nearest element to |v| (ties towards
// the larger magnitude) after truncating to +-C, and compares the decoded RTL
// code with it. Covers ESB(4,1) (the default), ESB(2,0) and ESB(6,3).
module tb_esb_quant;
  int checks = 0, failures = 0, n_clip = 0;

  function automatic longint ref_val(input int code, input int b, input int k);
    int ew, sgn, e, j;
    longint v;
    ew  = b - k - 1;
    sgn = (code >> (b - 1)) & 1;
    e   = (code >> k) & ((1 << ew) - 1);
    j   = code & ((1 << k) - 1);
    if (e == (1 << ew) - 1) v = j;
    else                    v = longint'((1 << k) + j) << e;
    return (sgn != 0) ? -v : v;
  endfunction

  // nearest set element, in units of 2^-FRAC, returned in units of 2^-k
  function automatic longint nearest(input longint vfx, input int b, input int k, input int frac);
    longint best, bestd, d, q, a;
    a = (vfx < 0) ? -vfx : vfx;
    best = 0; bestd = a;
    for (int c = 0; c < (1 << (b - 1)); c++) begin
      q = ref_val(c, b, k);                           // non-negative codes
      d = (q << (frac - k)) - a;
      if (d < 0) d = -d;
      if (d < bestd || (d == bestd && q > best)) begin best = q; bestd = d; end
    end
    return (vfx < 0) ? -best : best;
  endfunction

  localparam int FR = 14;
  logic signed [42:0] v;
  logic [3:0] c41; logic [1:0] c20; logic [5:0] c63;
  logic cl41, cl20, cl63;
  esb_quant #(.B(4), .K(1), .IW(43), .FRAC(FR)) u41 (.v(v), .code(c41), .clipped(cl41));
  esb_quant #(.B(2), .K(0), .IW(43), .FRAC(FR)) u20 (.v(v), .code(c20), .clipped(cl20));
  esb_quant #(.B(6), .K(3), .IW(43), .FRAC(FR)) u63 (.v(v), .code(c63), .clipped(cl63));

  task automatic chk(input string tag, input longint got, input longint exp, input longint vv);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s v=%0d got %0d exp %0d", tag, vv, got, exp);
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
    longint vv;
    // paper example (Fig. 7): 4.77 / alpha -> 5 for ESB(5,2); here ESB(6,3) grid at 4..8 is 0.5
    for (int t = 0; t < 20000; t++) begin
      case (t % 4)
        0: vv = longint'($urandom_range(0, 8 << FR)) - (4 << FR);      // around zero
        1: vv = longint'($urandom_range(0, 40 << FR)) - (20 << FR);    // whole range
        2: vv = longint'($urandom_range(0, 1000)) * (1 << (FR - 4)) - (500 << (FR - 4)); // exact grid / ties
        default: vv = longint'($signed({$urandom, $urandom})) >>> 24;  // large, clipped
      endcase
      v = 43'(vv); #1;
      chk("b4k1", ref_val(c41, 4, 1), nearest(vv, 4, 1, FR), vv);
      chk("b2k0", ref_val(c20, 2, 0), nearest(vv, 2, 0, FR), vv);
      chk("b6k3", ref_val(c63, 6, 3), nearest(vv, 6, 3, FR), vv);
      if (cl41) n_clip++;
      // zero must never carry a sign bit
      checks++;
      if (c41 == 4'b1110) failures++;
    end
    // explicit values for ESB(4,1): 0.74 -> 0.5, 0.75 -> 1.0, 2.5 -> 3, 5 -> 6 (tie up), 100 -> 6
    v = 43'(longint'(0.74 * (1 << FR))); #1; chk("0.74", ref_val(c41,4,1), 1, 0);
    v = 43'(longint'(0.75 * (1 << FR))); #1; chk("0.75", ref_val(c41,4,1), 2, 0);
    v = 43'(longint'(2.5 * (1 << FR)));  #1; chk("2.5",  ref_val(c41,4,1), 6, 0);
    v = 43'(longint'(5.0 * (1 << FR)));  #1; chk("5",    ref_val(c41,4,1), 12, 0);
    v = -43'(longint'(100 * (1 << FR))); #1; chk("-100", ref_val(c41,4,1), -12, 0);
    checks++; if (!cl41) failures++;
    checks++; if (n_clip == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
