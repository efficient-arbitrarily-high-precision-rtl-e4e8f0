// tb_flma_mac: checks the multiply-add core acc <- acc + p(x' y') at log32
// defaults.  Sums of random length (1..16) are fed with random idle clocks
// between products; in_first starts each sum.  acc_valid must pulse exactly
// 3 clocks after every product, and after the last product of a sum the
// accumulator must match the double-precision sum of the exact products to
// within sum|x_i y_i| * 2^-24 * (2 + n), the conversion error plus one
// rounding per addition.
module tb_flma_mac;
  import flma_ref_pkg::*;
  localparam int EB = 8, FB = 23, AB = 24, EXW = 10;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0, in_first = 1'b0;
  logic x_zero = 0, x_sign = 0, y_zero = 0, y_sign = 0;
  logic signed [EB-1:0] x_a = '0, y_a = '0;
  logic [FB-1:0] x_b = '0, y_b = '0;
  logic acc_valid, acc_zero, acc_sign;
  logic signed [EXW-1:0] acc_exp;
  logic [AB-1:0] acc_frac;
  int checks = 0, failures = 0, cycle = 0, n_sums = 0;
  typedef struct { bit last; real sum; real abssum; int n; int t; } item_t;
  item_t q [$];
  real run_sum, run_abs;
  int  run_n;
  bit  cur_last;

  flma_mac dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (in_valid) begin
    real p;
    p = lns_real(x_zero, x_sign, int'(x_a), x_b, FB) * lns_real(y_zero, y_sign, int'(y_a), y_b, FB);
    if (in_first) begin run_sum = 0.0; run_abs = 0.0; run_n = 0; end
    run_sum += p;
    run_abs += fabs(p);
    run_n++;
    q.push_back('{cur_last, run_sum, run_abs, run_n, cycle});
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (acc_valid) begin
      item_t it;
      real got;
      it = q.pop_front();
      checks++;
      if (cycle - it.t != 3) begin failures++; $display("FAIL latency %0d", cycle - it.t); end
      if (it.last) begin
        n_sums++;
        got = flt_real(acc_zero, acc_sign, int'(acc_exp), acc_frac, AB);
        checks++;
        if (fabs(got - it.sum) > it.abssum * 2.0**(-24) * (2.0 + it.n)) begin
          failures++;
          if (failures < 10) $display("FAIL sum of %0d: got %g want %g", it.n, got, it.sum);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int s = 0; s < 3000; s++) begin
      int n;
      n = $urandom_range(16, 1);
      for (int i = 0; i < n; i++) begin
        in_valid <= 1'b1;
        in_first <= (i == 0);
        cur_last <= (i == n - 1);
        x_zero   <= ($urandom_range(31, 0) == 0);
        y_zero   <= 1'b0;
        x_sign   <= 1'($urandom);
        y_sign   <= 1'($urandom);
        x_a      <= EB'($urandom_range(20, 0) - 10);
        y_a      <= EB'($urandom_range(20, 0) - 10);
        x_b      <= FB'($urandom_range(int'(bmax(FB)), 0));
        y_b      <= FB'($urandom_range(int'(bmax(FB)), 0));
        @(posedge clk);
        if ($urandom_range(3, 0) == 0) begin
          in_valid <= 1'b0;
          @(posedge clk);
        end
      end
    end
    in_valid <= 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0 || n_sums != 3000) begin failures++; $display("FAIL results missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
