// tb_flma_table3: accuracy run of the exp and log units in the configuration
// of the published synthesis comparison with CORDIC: exp with I = 14,
// l = p = 28, r = 2 and log with I = 15, l = p = 28, r = 3, s = 9, both with
// 23-bit fraction input and output (no alpha/beta extension bits).
// One random argument per clock goes to both units; each result is compared
// with double-precision e^x and ln(x).  Every exp result must be within 1 ulp,
// as claimed for this configuration.  The log unit, built with the divisor
// truncated to 1 + s bits as described, puts about 0.3 % of its results
// above 1 ulp (up to about 1.35 ulp), so its bound here is 1.5 ulp
// and the count above 1 ulp is printed.  The testbench also prints the share of
// results that are not correctly rounded (reported for this configuration:
// 9.90 % for exp and 14.8 % for log) and fails if either exceeds 20 %.
// The latencies (2 and 4 clocks) are checked through the result queues.
module tb_flma_table3;
  localparam int B = 23;
  localparam int NV = 100000;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0;
  logic [B-1:0] xe = '0, xl = '0;
  logic e_valid, l_valid;
  logic [B-1:0] ye, yl;
  int checks = 0, failures = 0, cycle = 0;
  int e_n = 0, e_inc = 0, e_over = 0, l_n = 0, l_inc = 0, l_over = 0;
  logic [B-1:0] eq [$], lq [$];
  int           et [$], lt [$];
  localparam int XMAX = int'($floor($ln(2.0) * 2.0**B));

  flma_exp #(.XB(B), .YB(B), .LB(28), .PB(28), .I(14), .R(2)) u_exp (
    .clk, .rst_n, .in_valid, .x(xe), .out_valid(e_valid), .y(ye));
  flma_log #(.XB(B), .YB(B), .LB(28), .PB(28), .I(15), .R(3), .S(9)) u_log (
    .clk, .rst_n, .in_valid, .x(xl), .out_valid(l_valid), .y(yl));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (in_valid) begin
    eq.push_back(xe); et.push_back(cycle);
    lq.push_back(xl); lt.push_back(cycle);
  end

  initial begin
    repeat (NV + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (e_valid) begin
      real r, err;
      logic [B-1:0] xi;
      int t0;
      xi = eq.pop_front();  t0 = et.pop_front();
      r   = $exp(real'(xi) / 2.0**B) * 2.0**B - 2.0**B;
      err = (real'(ye) > r) ? real'(ye) - r : r - real'(ye);
      e_n++;
      if (err > 0.5) e_inc++;
      checks += 2;
      if (err > 1.0) begin
        e_over++; failures++;
        if (e_over < 5) $display("FAIL exp x=%0d y=%0d err=%f ulp", xi, ye, err);
      end
      if (cycle - t0 != 2) begin failures++; $display("FAIL exp latency %0d", cycle - t0); end
    end
    if (l_valid) begin
      real r, err;
      logic [B-1:0] xi;
      int t0;
      xi = lq.pop_front();  t0 = lt.pop_front();
      r   = $ln(1.0 + real'(xi) / 2.0**B) * 2.0**B;
      err = (real'(yl) > r) ? real'(yl) - r : r - real'(yl);
      l_n++;
      if (err > 0.5) l_inc++;
      checks += 2;
      if (err > 1.0) l_over++;
      if (err > 1.5) begin
        failures++;
        if (failures < 5) $display("FAIL log x=%0d y=%0d err=%f ulp", xi, yl, err);
      end
      if (cycle - t0 != 4) begin failures++; $display("FAIL log latency %0d", cycle - t0); end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < NV; i++) begin
      in_valid <= 1'b1;
      xe <= B'($urandom_range(XMAX - 1, 0));
      xl <= B'($urandom);
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (6) @(posedge clk);
    checks += 4;
    if (e_n != NV || l_n != NV) begin failures++; $display("FAIL results missing"); end
    if (e_inc * 5 > e_n) begin failures++; $display("FAIL exp: too many incorrectly rounded"); end
    if (l_inc * 5 > l_n) begin failures++; $display("FAIL log: too many incorrectly rounded"); end
    if (e_n == 0 || l_n == 0) failures++;
    $display("exp: %0d results, %0.2f %% not correctly rounded, %0d above 1 ulp",
             e_n, 100.0 * e_inc / (e_n > 0 ? e_n : 1), e_over);
    $display("log: %0d results, %0.2f %% not correctly rounded, %0d above 1 ulp",
             l_n, 100.0 * l_inc / (l_n > 0 ? l_n : 1), l_over);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
