// tb_flma_f2q: checks the linear-to-log converter q(.) at log32 defaults
// (pipelined, A = 24) and in a second instance with a wider 30-bit
// accumulator fraction, which exercises the input rounding and its carry.
// Random floating-point values are streamed one per clock; each result must
// be within 1.5 log ulp (1.75 with input rounding) of the natural log of the
// input computed in double precision, have a normalised b < round(ln 2),
// saturate above the exponent range and flush to zero below it, and arrive
// exactly 4 clocks after its input.
module tb_flma_f2q;
  import flma_ref_pkg::*;
  localparam int EB = 8, FB = 23, EXW = 10;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0, in_zero = 1'b0, in_sign = 1'b0;
  logic signed [EXW-1:0] in_exp = '0;
  logic [29:0] in_frac30 = '0;
  logic v1, z1, s1, v2, z2, s2;
  logic signed [EB-1:0] a1, a2;
  logic [FB-1:0] b1, b2;
  int checks = 0, failures = 0, cycle = 0, n_norm = 0, n_sat = 0, n_flush = 0, n_carry = 0;
  typedef struct { bit zero; bit sign; int e; longint unsigned f; int t; } item_t;
  item_t q1 [$], q2 [$];

  flma_f2q dut (.clk, .rst_n, .in_valid, .in_zero, .in_sign, .in_exp,
                .in_frac(in_frac30[29:6]), .out_valid(v1), .out_zero(z1),
                .out_sign(s1), .out_a(a1), .out_b(b1));
  flma_f2q #(.AB(30)) dut30 (.clk, .rst_n, .in_valid, .in_zero, .in_sign, .in_exp,
                .in_frac(in_frac30), .out_valid(v2), .out_zero(z2),
                .out_sign(s2), .out_a(a2), .out_b(b2));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (in_valid) begin
    q1.push_back('{in_zero, in_sign, int'(in_exp), longint'(in_frac30[29:6]), cycle});
    q2.push_back('{in_zero, in_sign, int'(in_exp), longint'(in_frac30), cycle});
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic judge(input item_t it, input int mw, input real tol, input bit z, input bit s,
                       input int a, input longint unsigned b);
    real v, lm, err;
    checks++;
    if (cycle - it.t != 4) begin failures++; $display("FAIL latency %0d", cycle - it.t); end
    v = flt_real(it.zero, it.sign, it.e, it.f, mw);
    checks++;
    if (it.zero) begin
      if (!z) begin failures++; $display("FAIL zero lost"); end
      return;
    end
    lm = real_lnmag(v, FB);
    if (lm >= 128.0 * LN2 * 2.0**FB) begin
      n_sat++;
      if (z || a != 127 || b != bmax(FB) || s != it.sign) begin
        failures++; $display("FAIL saturation: a=%0d b=%0d", a, b);
      end
    end else if (lm < -128.0 * LN2 * 2.0**FB - 2.0) begin
      n_flush++;
      if (!z) begin failures++; $display("FAIL flush: a=%0d", a); end
    end else if (lm > -128.0 * LN2 * 2.0**FB + 2.0) begin
      if (a != it.e) n_norm++;
      err = fabs(lns_lnmag(a, b, FB) - lm);
      if (z || s != it.sign || b > bmax(FB) || err > tol) begin
        failures++;
        if (failures < 10) $display("FAIL e=%0d f=%0h -> z%0d a=%0d b=%0d err=%f", it.e, it.f, z, a, b, err);
      end
    end
  endtask

  always @(posedge clk) begin
    if (v1) judge(q1.pop_front(), 24, 1.5, z1, s1, int'(a1), b1);
    if (v2) begin
      item_t it;
      it = q2.pop_front();
      if (it.f >= 30'h3fffffe0) n_carry++;
      judge(it, 30, 1.75, z2, s2, int'(a2), b2);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 30000; i++) begin
      in_valid  <= 1'b1;
      in_zero   <= ($urandom_range(31, 0) == 0);
      in_sign   <= 1'($urandom);
      in_exp    <= EXW'($urandom_range(280, 0) - 140);
      in_frac30 <= 30'($urandom);
      if (i % 50 == 1) in_frac30 <= 30'h3fffffff - 30'($urandom_range(40, 0));
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (6) @(posedge clk);
    checks++;
    if (q1.size() != 0 || q2.size() != 0) begin failures++; $display("FAIL results missing"); end
    $display("normalised %0d, saturated %0d, flushed %0d, rounding carries %0d",
             n_norm, n_sat, n_flush, n_carry);
    checks++;
    if (n_norm == 0 || n_sat == 0 || n_flush == 0 || n_carry == 0) begin
      failures++; $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
