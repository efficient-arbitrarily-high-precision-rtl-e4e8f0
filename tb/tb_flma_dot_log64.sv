// tb_flma_dot_log64: the paper's second inner-product configuration,
// "log64 FLMA" (E = 11, F = 52, alpha = beta = 1, p = l = 59, I = 29,
// exp r = 2, log r = 3, s = 9, accumulator A = 53), N = 128, run on the
// inner-product unit with those parameters.  Four back-to-back vectors of
// random operands are checked against a double-precision inner product
// (whose own rounding error is included in the bound
// sum|x_i y_i| * 2^-53 * (2N + 4) + |result| * 2^-34).  The published
// throughput for this configuration is 144 clocks per vector, 9 more than
// log32; the wider combinational q(.) is taken to need those 9 clocks, so the
// multicycle allowance is Q_MCP = 13 here (an assumption: where the extra
// clocks go is not given), and 128 + 2 + 1 + 13 = 144 clocks per vector are
// checked.  The final q(.) limits the
// result: with the stated divisor width s = 9, the truncated Euler-step
// division is good to about 2^-36 (the quotient is below 2^-26 and the
// divisor carries 9 fraction bits), far from the 52-bit log fraction.  The
// bound above reflects that; the measured relative error is printed.
module tb_flma_dot_log64;
  import flma_ref_pkg::*;
  localparam int EB = 11, FB = 52, N = 128, NV = 4, Q64 = 13;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0, in_ready;
  logic x_zero = 0, x_sign = 0, y_zero = 0, y_sign = 0;
  logic signed [EB-1:0] x_a = '0, y_a = '0;
  logic [FB-1:0] x_b = '0, y_b = '0;
  logic out_valid, out_zero, out_sign;
  logic signed [EB-1:0] out_a;
  logic [FB-1:0] out_b;
  int checks = 0, failures = 0, cycle = 0, idx = 0, n_results = 0;
  real sum, abssum;
  int  first_cycle [$];
  real want [$], wabs [$];
  longint unsigned BLIM;

  flma_dot #(.N(N), .EB(EB), .FB(FB), .ALPHA(1), .BETA(1), .AB(53),
             .EXP_P(59), .EXP_I(29), .EXP_R(2), .LOG_P(59), .LOG_I(29), .LOG_R(3), .LOG_S(9), .Q_MCP(Q64)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (in_valid && in_ready) begin
      real p;
      p = lns_real(x_zero, x_sign, int'(x_a), x_b, FB) * lns_real(y_zero, y_sign, int'(y_a), y_b, FB);
      if (idx == 0) begin sum = 0.0; abssum = 0.0; first_cycle.push_back(cycle); end
      sum += p;
      abssum += fabs(p);
      idx++;
      if (idx == N) begin idx = 0; want.push_back(sum); wabs.push_back(abssum); end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (out_valid) begin
      real got, w, wa;
      int t0;
      t0 = first_cycle.pop_front();
      w  = want.pop_front();
      wa = wabs.pop_front();
      n_results++;
      got = lns_real(out_zero, out_sign, int'(out_a), out_b, FB);
      $display("log64 vector %0d: %0d clocks (paper: 144), relative error 2^%0.1f", n_results,
               cycle - t0, $ln(fabs(got - w) / fabs(w) + 1e-300) / $ln(2.0));
      checks++;
      if (cycle - t0 != N + 3 + Q64) begin failures++; $display("FAIL clock count"); end
      checks++;
      if (fabs(got - w) > wa * 2.0**(-53) * (2 * N + 4) + fabs(w) * 2.0**(-34)) begin
        failures++;
        $display("FAIL error %g", fabs(got - w));
      end
    end
  end

  function automatic logic [FB-1:0] rand_b();
    longint unsigned r;
    r = {$urandom, $urandom};
    return FB'(r % BLIM);
  endfunction

  initial begin
    BLIM = bmax(FB) - 2;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < N; i++) begin
        in_valid <= 1'b1;
        x_sign <= 1'($urandom); y_sign <= (v == 0) ? 1'b0 : 1'($urandom);
        x_a <= EB'($urandom_range(16, 0) - 8); y_a <= EB'($urandom_range(16, 0) - 8);
        x_b <= rand_b(); y_b <= rand_b();
        do @(posedge clk); while (!in_ready);
      end
    end
    in_valid <= 1'b0;
    repeat (200) @(posedge clk);
    checks++;
    if (n_results != NV) begin failures++; $display("FAIL %0d results", n_results); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
