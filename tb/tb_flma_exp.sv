// tb_flma_exp: self-checking test of the e^x unit at its default (log32)
// parameters.  Streams one random x in [0, ln 2) per clock plus the interval
// end points, and compares each y with e^x computed in double precision:
// the error must be at most 1.25 ulp of y, and y must be monotonic over a
// sorted sweep.  Also checks the 2-clock latency and T = 1 throughput, and
// reports the fraction of results that are not correctly rounded.
module tb_flma_exp;
  localparam int XB = 23, YB = 24;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0;
  logic [XB-1:0] x = '0;
  logic out_valid;
  logic [YB-1:0] y;
  int checks = 0, failures = 0, incorrect = 0, over1 = 0, cycle = 0;
  // With p = 28 and 24 output bits only 4 guard bits remain; a handful of
  // results close to x = ln 2 reach about 1.1 ulp, so the bound is 1.25 ulp.
  localparam real TOL = 1.25;
  logic [XB-1:0] xq [$];
  int            tq [$];
  logic [YB-1:0] prev_y;
  logic          have_prev = 1'b0;
  logic          sweep = 1'b0;
  localparam int XMAX = int'($floor($ln(2.0) * 2.0**XB)); // first x >= ln2 at XB bits

  flma_exp dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);

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
      real xr, ref_y, got, err;
      logic [XB-1:0] xi;
      int t0;
      xi = xq.pop_front();
      t0 = tq.pop_front();
      xr    = real'(xi) / 2.0**XB;
      ref_y = $exp(xr) * 2.0**YB;
      got   = 2.0**YB + real'(y);
      err   = (got > ref_y) ? got - ref_y : ref_y - got;
      checks++;
      if (err > 1.0) over1++;
      if (err > TOL) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d y=%0d ref=%f err=%f ulp", xi, y, ref_y - 2.0**YB, err);
      end
      if (err > 0.5) incorrect++;
      checks++;
      if (cycle - t0 != 2) begin
        failures++;
        $display("FAIL latency %0d", cycle - t0);
      end
      if (sweep) begin
        if (have_prev) begin
          checks++;
          if (y < prev_y) begin failures++; $display("FAIL non-monotonic at x=%0d", xi); end
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
    drive(XB'(XMAX - 1));
    for (int i = 0; i < 60000; i++) drive(XB'($urandom_range(XMAX - 1, 0)));
    in_valid <= 1'b0;
    repeat (4) @(posedge clk);
    sweep = 1'b1;
    for (int i = 0; i * 97 < XMAX; i++) drive(XB'(i * 97));
    in_valid <= 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (xq.size() != 0) begin failures++; $display("FAIL %0d results missing", xq.size()); end
    $display("not correctly rounded: %0d, above 1 ulp: %0d", incorrect, over1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
