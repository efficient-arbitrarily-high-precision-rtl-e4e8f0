// tb_flma_fadd: checks the floating-point adder (EXW = 10, MW = 24).
// Random operand pairs with exponent differences up to 26 are added in
// double precision, where their sum is exact, and the exact sum is rounded
// to 24 fraction bits (nearest, ties to even) as the reference.  Pairs far
// apart must return the larger operand; zeros, exact cancellation, carry
// out, massive cancellation and exponent overflow/underflow are covered.
module tb_flma_fadd;
  import flma_ref_pkg::*;
  localparam int EXW = 10, MW = 24;
  localparam int EMAX = 511, EMIN = -512;
  logic a_zero, a_sign, b_zero, b_sign, s_zero, s_sign;
  logic signed [EXW-1:0] a_exp, b_exp, s_exp;
  logic [MW-1:0] a_frac, b_frac, s_frac;
  int checks = 0, failures = 0;

  flma_fadd dut (.*);

  // reference: exact real sum rounded to MW bits, result split in fields
  task automatic check(input string what);
    real ra, rb, sum, mag, sc, fl, expv;
    int e;
    bit exp_zero;
    longint unsigned f;
    #1;
    ra  = flt_real(a_zero, a_sign, int'(a_exp), a_frac, MW);
    rb  = flt_real(b_zero, b_sign, int'(b_exp), b_frac, MW);
    sum = ra + rb;
    checks++;
    if (sum == 0.0) begin
      if (!s_zero) begin failures++; $display("FAIL %s: expected zero", what); end
      return;
    end
    mag = fabs(sum);
    e   = int'($floor($ln(mag) / $ln(2.0)));
    if (2.0 ** e > mag) e--;
    if (2.0 ** (e + 1) <= mag) e++;
    sc  = mag / (2.0 ** (e - MW));            // in [2^MW, 2^(MW+1)), exact
    fl  = $floor(sc);
    if (sc - fl > 0.5 || (sc - fl == 0.5 && longint'(fl) % 2 == 1)) fl = fl + 1.0;
    if (fl >= 2.0 ** (MW + 1)) begin fl = fl / 2.0; e++; end
    f   = longint'(fl) - (longint'(1) << MW);
    exp_zero = (e < EMIN);
    if (e > EMAX) begin e = EMAX; f = (longint'(1) << MW) - 1; end
    expv = 0.0;
    if (exp_zero) begin
      if (!s_zero) begin failures++; $display("FAIL %s: expected flush to zero", what); end
    end else if (s_zero || s_sign != (sum < 0.0) || int'(s_exp) != e || s_frac != MW'(f)) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s: got z%0d s%0d e%0d f%0d, want s%0d e%0d f%0d", what, s_zero,
                 s_sign, s_exp, s_frac, sum < 0.0, e, f);
    end
  endtask

  initial begin
    // watchdog: the test has no clock, so bound simulated time
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ea;
    // zeros
    a_zero = 1; a_sign = 0; a_exp = 0; a_frac = 0;
    b_zero = 1; b_sign = 0; b_exp = 0; b_frac = 0;
    check("0+0");
    a_zero = 0; a_exp = 3; a_frac = 24'h123456;
    check("x+0");
    // exact cancellation
    b_zero = 0; b_sign = 1; b_exp = 3; b_frac = 24'h123456;
    check("x-x");
    // massive cancellation: 1 ulp apart
    b_frac = 24'h123455;
    check("cancel");
    // carry out of the significand
    b_sign = 0; b_frac = 24'hffffff; a_frac = 24'hffffff;
    check("carry");
    // overflow and underflow of the exponent range
    a_exp = EXW'(EMAX); b_exp = EXW'(EMAX);
    check("overflow");
    a_exp = EXW'(EMIN); b_exp = EXW'(EMIN); b_sign = 1; a_frac = 24'h000002; b_frac = 24'h000001;
    check("underflow");
    // random, near exponents
    for (int i = 0; i < 100000; i++) begin
      ea     = $urandom_range(100, 0) - 50;
      a_zero = 0; b_zero = 0;
      a_sign = 1'($urandom); b_sign = 1'($urandom);
      a_exp  = EXW'(ea);
      b_exp  = EXW'(ea - $urandom_range(26, 0) + (i % 2) * 13);
      a_frac = MW'($urandom); b_frac = MW'($urandom);
      if (i % 7 == 0) b_frac = a_frac ^ MW'($urandom_range(3, 0));
      check("random");
    end
    // far apart: the larger operand comes back unchanged
    for (int i = 0; i < 2000; i++) begin
      a_sign = 1'($urandom); b_sign = 1'($urandom);
      a_exp = EXW'(100); b_exp = EXW'(100 - 27 - $urandom_range(200, 0));
      a_frac = MW'($urandom); b_frac = MW'($urandom);
      #1;
      checks++;
      if (s_zero || s_sign != a_sign || s_exp != a_exp || s_frac != a_frac) begin
        failures++;
        $display("FAIL far apart: exp diff %0d", a_exp - b_exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
