// tb_flma_powroot: self-checking test of the log-domain power/root unit at
// its default (log32) parameters.  Random operands, random n and random
// power/root selection, one per clock; each result is compared in double
// precision with n * ln|x| (power) or ln|x| / n (root).  Error bounds, in log
// ulps (2^-23 of the natural-log magnitude): 0.25 for a power (the only error
// is the rounding of ln 2, at most k * 0.016 ulp) and 0.55 for a root (0.5
// for the rounding of b plus the ln 2 term).  Signs, zeros, x^0 = 1,
// saturation, underflow, invalid roots and the 1-clock latency are checked,
// and the testbench fails if any of these cases never occurred.
module tb_flma_powroot;
  import flma_ref_pkg::*;
  localparam int EB = 8, FB = 23, NB = 4;
  localparam int AMAX = 127, AMIN = -128;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0;
  flma_pkg::powroot_op_e op = flma_pkg::OP_POW;
  logic [NB-1:0] n = '0;
  logic x_zero = 1'b0, x_sign = 1'b0;
  logic signed [EB-1:0] x_a = '0;
  logic [FB-1:0] x_b = '0;
  logic out_valid, out_invalid, out_zero, out_sign;
  logic signed [EB-1:0] out_a;
  logic [FB-1:0] out_b;
  int checks = 0, failures = 0, cycle = 0;
  int n_pow = 0, n_root = 0, n_sat = 0, n_under = 0, n_inv = 0, n_one = 0, n_renorm = 0;
  real worst_pow = 0.0, worst_root = 0.0;

  typedef struct {
    int  t;
    flma_pkg::powroot_op_e op;
    int  n;
    bit  zero, sign;
    int  a;
    longint unsigned b;
  } req_t;
  req_t q [$];

  flma_powroot dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (in_valid) begin
    req_t r;
    r.t = cycle; r.op = op; r.n = int'(n); r.zero = x_zero; r.sign = x_sign;
    r.a = int'(x_a); r.b = longint'(x_b);
    q.push_back(r);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void fail(input string what, input req_t r);
    failures++;
    if (failures < 10)
      $display("FAIL %s: op=%0d n=%0d x=(%0d,%0d,%0d,%0d) -> inv=%0d z=%0d s=%0d a=%0d b=%0d",
               what, r.op, r.n, r.zero, r.sign, r.a, r.b, out_invalid, out_zero, out_sign, out_a, out_b);
  endfunction

  always @(posedge clk) begin
    if (out_valid) begin
      req_t r;
      real  lx, want, got, err;
      r = q.pop_front();
      checks++;
      if (cycle - r.t != 1) fail("latency", r);
      checks++;
      if (out_b >= FB'(bmax(FB) + 1)) fail("b not normalised", r);
      lx = lns_lnmag(r.a, r.b, FB);
      if (r.op == flma_pkg::OP_POW) begin
        n_pow++;
        want = real'(r.n) * lx;
        checks++;
        if (r.n == 0) begin
          n_one++;
          if (out_invalid || out_zero || out_sign || out_a != 0 || out_b != 0) fail("x^0", r);
        end else if (r.zero) begin
          if (!out_zero || out_invalid) fail("0^n", r);
        end else if (want > lns_lnmag(AMAX, bmax(FB), FB) + 1.0) begin
          n_sat++;
          if (out_zero || out_a != AMAX || out_b != FB'(bmax(FB))) fail("saturation", r);
        end else if (want < real'(AMIN) * LN2 * 2.0 ** FB - 1.0) begin
          n_under++;
          if (!out_zero) fail("underflow", r);
        end else if (want < real'(AMIN) * LN2 * 2.0 ** FB + 1.0 ||
                     want > lns_lnmag(AMAX, bmax(FB), FB) - 1.0) begin
          checks--;                 // too close to the range limit to judge
        end else begin
          got = lns_lnmag(int'(out_a), longint'(out_b), FB);
          err = fabs(got - want);
          if (err > worst_pow) worst_pow = err;
          if (real'(r.b) * r.n >= real'(bmax(FB) + 1)) n_renorm++;
          if (out_zero || out_invalid || err > 0.25 || out_sign != (r.sign & r.n[0]))
            fail("power value", r);
        end
      end else begin
        n_root++;
        checks++;
        if (r.n == 0 || (r.sign && !r.zero && r.n % 2 == 0)) begin
          n_inv++;
          if (!out_invalid || !out_zero) fail("invalid root", r);
        end else if (r.zero) begin
          if (!out_zero || out_invalid) fail("root of 0", r);
        end else begin
          want = lx / real'(r.n);
          got  = lns_lnmag(int'(out_a), longint'(out_b), FB);
          err  = fabs(got - want);
          if (err > worst_root) worst_root = err;
          if (out_zero || out_invalid || err > 0.55 || out_sign != r.sign) fail("root value", r);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 40000; i++) begin
      in_valid <= 1'b1;
      op       <= flma_pkg::powroot_op_e'($urandom_range(1, 0));
      n        <= NB'($urandom);
      x_zero   <= ($urandom_range(31, 0) == 0);
      x_sign   <= 1'(($urandom));
      // mostly small exponents, sometimes the full range
      x_a      <= ($urandom_range(3, 0) == 0) ? EB'($urandom) : EB'($signed($urandom_range(16, 0)) - 8);
      x_b      <= FB'($urandom_range(int'(bmax(FB)), 0));
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (3) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    checks++;
    if (n_pow == 0 || n_root == 0 || n_sat == 0 || n_under == 0 || n_inv == 0 || n_one == 0 || n_renorm == 0) begin
      failures++;
      $display("FAIL a case never occurred");
    end
    $display("powers %0d (x^0 %0d, renormalised %0d, saturated %0d, underflow %0d), roots %0d (invalid %0d)",
             n_pow, n_one, n_renorm, n_sat, n_under, n_root, n_inv);
    $display("worst error: power %f, root %f log ulp", worst_pow, worst_root);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
