// tb_flma_addsub: checks FLMA add/sub q(p(x') +- p(y')) at log32 defaults.
// Random pairs are streamed one per clock with random add/sub.  Against the
// double-precision sum or difference: when the linear magnitudes add (no
// cancellation) the result must be within 2 log ulp (the paper's bound for alpha = beta = 1); in every case the
// absolute error must be below 2^-20 (|x| + |y|), which bounds what the two
// conversions and the adder can lose in cancellation.  x - x must give an
// exact zero.  Latency must be 7 clocks at one operation per clock.
module tb_flma_addsub;
  import flma_ref_pkg::*;
  localparam int EB = 8, FB = 23;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0;
  flma_pkg::addsub_op_e op = flma_pkg::OP_ADD;
  logic x_zero = 0, x_sign = 0, y_zero = 0, y_sign = 0;
  logic signed [EB-1:0] x_a = '0, y_a = '0;
  logic [FB-1:0] x_b = '0, y_b = '0;
  logic out_valid, out_zero, out_sign;
  logic signed [EB-1:0] out_a;
  logic [FB-1:0] out_b;
  int checks = 0, failures = 0, cycle = 0, n_add = 0, n_sub = 0, n_cancel = 0;
  real worst = 0.0;
  typedef struct { real x; real y; bit sub; int t; } item_t;
  item_t q [$];

  flma_addsub dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (in_valid)
    q.push_back('{lns_real(x_zero, x_sign, int'(x_a), x_b, FB),
                  lns_real(y_zero, y_sign, int'(y_a), y_b, FB), op == flma_pkg::OP_SUB, cycle});

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (out_valid) begin
      item_t it;
      real yy, want, got, err;
      it   = q.pop_front();
      yy   = it.sub ? -it.y : it.y;
      want = it.x + yy;
      got  = lns_real(out_zero, out_sign, int'(out_a), out_b, FB);
      checks++;
      if (cycle - it.t != 7) begin failures++; $display("FAIL latency %0d", cycle - it.t); end
      checks++;
      if (it.x == -yy) begin
        n_cancel++;
        if (!out_zero) begin failures++; $display("FAIL x - x not zero"); end
      end else begin
        if ((it.x >= 0.0) == (yy >= 0.0)) begin
          n_add++;
          err = fabs(real_lnmag(got, FB) - real_lnmag(want, FB));
          if (err > worst) worst = err;
          if (err > 2.0) begin
            failures++;
            if (failures < 10) $display("FAIL add %g + %g = %g err %f log ulp", it.x, yy, got, err);
          end
        end else begin
          n_sub++;
        end
        if (fabs(got - want) > (fabs(it.x) + fabs(yy)) * 2.0**(-20)) begin
          failures++;
          if (failures < 10) $display("FAIL %g + %g = %g want %g", it.x, yy, got, want);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 30000; i++) begin
      in_valid <= 1'b1;
      op       <= flma_pkg::addsub_op_e'($urandom_range(1, 0));
      x_zero   <= 1'b0;
      y_zero   <= ($urandom_range(63, 0) == 0);
      x_sign   <= 1'($urandom);
      y_sign   <= 1'($urandom);
      x_a      <= EB'($urandom_range(40, 0) - 20);
      y_a      <= EB'($urandom_range(40, 0) - 20);
      x_b      <= FB'($urandom_range(int'(bmax(FB)), 0));
      y_b      <= FB'($urandom_range(int'(bmax(FB)), 0));
      if (i % 10 == 0) begin            // equal or nearly equal operands
        int a, b;
        a = $urandom_range(40, 0) - 20;
        b = $urandom_range(int'(bmax(FB)) - 4, 4);
        x_a <= EB'(a); y_a <= EB'(a); x_b <= FB'(b);
        y_b <= FB'(b + $urandom_range(2, 0) - 1);
      end
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (9) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL results missing"); end
    $display("same-sign %0d (worst %f log ulp), opposite-sign %0d, exact cancellations %0d",
             n_add, worst, n_sub, n_cancel);
    checks++;
    if (n_add == 0 || n_sub == 0 || n_cancel == 0) begin failures++; $display("FAIL case missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
