// tb_flma_dot: checks the N = 128 inner product unit at log32 defaults.
// Twelve vectors are sent: the first six back to back with in_valid held
// high (the unit must stall them with in_ready while it finishes a vector),
// the rest with random idle clocks, and one whose products cancel exactly.
// Each result must arrive 8 clocks after the vector's last operand and, for
// the back-to-back vectors, N + 7 = 135 clocks after its first operand was
// accepted (the paper's throughput for log32, N = 128).  It must match the
// double-precision inner product of the exact operands to within
// sum|x_i y_i| * 2^-24 * (N + 2) + |result| * 2^-21.
module tb_flma_dot;
  import flma_ref_pkg::*;
  localparam int EB = 8, FB = 23, N = 128, NV = 12;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0, in_ready;
  logic x_zero = 0, x_sign = 0, y_zero = 0, y_sign = 0;
  logic signed [EB-1:0] x_a = '0, y_a = '0;
  logic [FB-1:0] x_b = '0, y_b = '0;
  logic out_valid, out_zero, out_sign;
  logic signed [EB-1:0] out_a;
  logic [FB-1:0] out_b;
  int checks = 0, failures = 0, cycle = 0, n_stall = 0, n_results = 0, n_zero = 0, idx = 0;
  real sum, abssum;
  int  first_cycle [$], last_cycle [$];
  real want [$], wabs [$];

  flma_dot dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (in_valid && !in_ready) n_stall++;
    if (in_valid && in_ready) begin
      real p;
      p = lns_real(x_zero, x_sign, int'(x_a), x_b, FB) * lns_real(y_zero, y_sign, int'(y_a), y_b, FB);
      if (idx == 0) begin sum = 0.0; abssum = 0.0; first_cycle.push_back(cycle); end
      sum += p;
      abssum += fabs(p);
      idx++;
      if (idx == N) begin idx = 0; last_cycle.push_back(cycle); want.push_back(sum); wabs.push_back(abssum); end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (out_valid) begin
      real got, w, wa;
      int t0, t1;
      t0 = first_cycle.pop_front();
      t1 = last_cycle.pop_front();
      w  = want.pop_front();
      wa = wabs.pop_front();
      n_results++;
      checks++;
      if (cycle - t1 != 8) begin failures++; $display("FAIL result %0d clocks after last operand", cycle - t1); end
      if (n_results <= 6) begin
        checks++;
        if (cycle - t0 != N + 7) begin failures++; $display("FAIL vector took %0d clocks", cycle - t0); end
      end
      got = lns_real(out_zero, out_sign, int'(out_a), out_b, FB);
      if (out_zero) n_zero++;
      checks++;
      if (fabs(got - w) > wa * 2.0**(-24) * (N + 2) + fabs(w) * 2.0**(-21)) begin
        failures++;
        $display("FAIL dot: got %g want %g", got, w);
      end
    end
  end

  // drive one operand pair, holding it until accepted
  task automatic send(input bit xz, input bit xs, input int xa, input int xb,
                      input bit ys, input int ya, input int yb);
    in_valid <= 1'b1;
    x_zero <= xz; x_sign <= xs; x_a <= EB'(xa); x_b <= FB'(xb);
    y_zero <= 1'b0; y_sign <= ys; y_a <= EB'(ya); y_b <= FB'(yb);
    do @(posedge clk); while (!in_ready);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int v = 0; v < NV; v++) begin
      if (v == 7) begin
        // products cancel in pairs: exact zero sum
        for (int i = 0; i < N / 2; i++) begin
          int xa, xb, ya, yb;
          xa = $urandom_range(10, 0) - 5; xb = $urandom_range(int'(bmax(FB)), 0);
          ya = $urandom_range(10, 0) - 5; yb = $urandom_range(int'(bmax(FB)), 0);
          send(0, 0, xa, xb, 0, ya, yb);
          send(0, 1, xa, xb, 0, ya, yb);
        end
      end else begin
        for (int i = 0; i < N; i++) begin
          send($urandom_range(31, 0) == 0, 1'($urandom), $urandom_range(16, 0) - 8,
               $urandom_range(int'(bmax(FB)), 0), (v % 3 == 0) ? 1'b0 : 1'($urandom),
               $urandom_range(16, 0) - 8, $urandom_range(int'(bmax(FB)), 0));
          if (v >= 6 && $urandom_range(7, 0) == 0) begin
            in_valid <= 1'b0;
            @(posedge clk);
          end
        end
      end
      if (v >= 6) begin
        in_valid <= 1'b0;
        repeat ($urandom_range(150, 0)) @(posedge clk);
      end
    end
    in_valid <= 1'b0;
    repeat (150) @(posedge clk);
    $display("results %0d, zero results %0d, stalled clocks %0d", n_results, n_zero, n_stall);
    checks++;
    if (n_results != NV || n_zero == 0 || n_stall == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
