// tb_flma_log: self-checking test of the ln(x) unit at its default (log32)
// parameters, pipelined.  Streams one random x in [1, 2) per clock plus the
// end points, and compares y with ln(x) in double precision: the error must
// be at most 1.5 ulp of y (2^-23), y must be monotonic over a sorted sweep, and
// the latency must be 4 clocks at T = 1.  Reports the fraction of results not
// correctly rounded.
module tb_flma_log;
  localparam int XB = 24, YB = 23;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0;
  logic [XB-1:0] x = '0;
  logic out_valid;
  logic [YB-1:0] y;
  int checks = 0, failures = 0, incorrect = 0, over1 = 0, cycle = 0;
  // The truncated divisor (S = 9 bits) lets a few results reach about
  // 1.35 ulp; the bound checked is 1.5 ulp and the count above 1 ulp is shown.
  localparam real TOL = 1.5;
  logic [XB-1:0] xq [$];
  int            tq [$];
  logic [YB-1:0] prev_y;
  logic          have_prev = 1'b0;
  logic          sweep = 1'b0;

  flma_log dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (in_valid) begin xq.push_back(x); tq.push_back(cycle); end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (out_valid) begin
      real xr, ref_y, err;
      logic [XB-1:0] xi;
      int t0;
      xi = xq.pop_front();
      t0 = tq.pop_front();
      xr    = 1.0 + real'(xi) / 2.0**XB;
      ref_y = $ln(xr) * 2.0**YB;
      err   = (real'(y) > ref_y) ? real'(y) - ref_y : ref_y - real'(y);
      checks++;
      if (err > 1.0) over1++;
      if (err > TOL) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d y=%0d ref=%f err=%f ulp", xi, y, ref_y, err);
      end
      if (err > 0.5) incorrect++;
      checks++;
      if (cycle - t0 != 4) begin
        failures++;
        $display("FAIL latency %0d", cycle - t0);
      end
      if (sweep) begin
        if (have_prev) begin
          checks++;
          if (y < prev_y) begin failures++; if (failures < 20) $display("FAIL non-monotonic at x=%0d y=%0d prev=%0d", xi, y, prev_y); end
        end
        prev_y    = y;
        have_prev = 1'b1;
      end
    end
  end

  task automatic drive(input logic [XB-1:0] v);
    in_valid <= 1'b1;
    x        <= v;
    @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    drive('0);
    drive('1);
    for (int i = 0; i < 60000; i++) drive(XB'($urandom));
    in_valid <= 1'b0;
    repeat (6) @(posedge clk);
    sweep = 1'b1;
    for (int i = 0; i < 60000; i++) drive(XB'(i * 277));
    in_valid <= 1'b0;
    repeat (7) @(posedge clk);
    checks++;
    if (xq.size() != 0) begin failures++; $display("FAIL %0d results missing", xq.size()); end
    $display("not correctly rounded: %0d of %0d, above 1 ulp: %0d", incorrect, 120002, over1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
