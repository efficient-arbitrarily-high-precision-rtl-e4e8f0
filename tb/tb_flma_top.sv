// tb_flma_top: end-to-end test of the whole arithmetic unit at its default
// parameters (log32, N = 128).  The four pipes run at the same time:
//   - inner product: 8 vectors, the first four back to back so the unit must
//     hold them off with in_ready, one whose products cancel to zero; each
//     result is checked against the double-precision inner product and must
//     come 135 clocks after its vector started (back-to-back case);
//   - add/sub: 3000 random operations (same-sign adds, subtractions, exact
//     cancellations), checked against double precision, latency 7;
//   - mul/div: 3000 random operations including renormalisation in both
//     directions, exponent saturation and division by zero, latency 1;
//   - power/root: 3000 random operations including renormalised powers,
//     power saturation and invalid roots, latency 1.
// Every mechanism is counted and a failure is recorded for any that never
// happened.
module tb_flma_top;
  import flma_ref_pkg::*;
  localparam int EB = 8, FB = 23, N = 128, NV = 8;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  // dot
  logic dot_in_valid = 0, dot_in_ready, dot_x_zero = 0, dot_x_sign = 0, dot_y_zero = 0, dot_y_sign = 0;
  logic signed [EB-1:0] dot_x_a = '0, dot_y_a = '0;
  logic [FB-1:0] dot_x_b = '0, dot_y_b = '0;
  logic dot_out_valid, dot_out_zero, dot_out_sign;
  logic signed [EB-1:0] dot_out_a;
  logic [FB-1:0] dot_out_b;
  // add/sub
  logic as_in_valid = 0, as_sub = 0, as_x_zero = 0, as_x_sign = 0, as_y_zero = 0, as_y_sign = 0;
  logic signed [EB-1:0] as_x_a = '0, as_y_a = '0;
  logic [FB-1:0] as_x_b = '0, as_y_b = '0;
  logic as_out_valid, as_out_zero, as_out_sign;
  logic signed [EB-1:0] as_out_a;
  logic [FB-1:0] as_out_b;
  // mul/div
  logic md_in_valid = 0, md_div = 0, md_x_zero = 0, md_x_sign = 0, md_y_zero = 0, md_y_sign = 0;
  logic signed [EB-1:0] md_x_a = '0, md_y_a = '0;
  logic [FB-1:0] md_x_b = '0, md_y_b = '0;
  logic md_out_valid, md_out_zero, md_out_sign;
  logic signed [EB-1:0] md_out_a;
  logic [FB-1:0] md_out_b;
  // power / root
  logic pr_in_valid = 0, pr_root = 0, pr_x_zero = 0, pr_x_sign = 0;
  logic [3:0] pr_n = '0;
  logic signed [EB-1:0] pr_x_a = '0;
  logic [FB-1:0] pr_x_b = '0;
  logic pr_out_valid, pr_out_invalid, pr_out_zero, pr_out_sign;
  logic signed [EB-1:0] pr_out_a;
  logic [FB-1:0] pr_out_b;

  int checks = 0, failures = 0, cycle = 0;
  // mechanism counters
  int n_stall = 0, n_dot = 0, n_dot_zero = 0, n_add = 0, n_sub = 0, n_cancel = 0;
  int n_mul_renorm = 0, n_div_renorm = 0, n_sat = 0, n_dz = 0;
  int n_pow_renorm = 0, n_pow_sat = 0, n_root = 0, n_root_inv = 0;

  flma_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  // ------------------------------------------------------------ inner product
  int  idx = 0;
  real dsum, dabs;
  int  d_first [$];
  real d_want [$], d_abs [$];

  always @(posedge clk) begin
    if (dot_in_valid && !dot_in_ready) n_stall++;
    if (dot_in_valid && dot_in_ready) begin
      real p;
      p = lns_real(dot_x_zero, dot_x_sign, int'(dot_x_a), dot_x_b, FB) *
          lns_real(dot_y_zero, dot_y_sign, int'(dot_y_a), dot_y_b, FB);
      if (idx == 0) begin dsum = 0.0; dabs = 0.0; d_first.push_back(cycle); end
      dsum += p;
      dabs += fabs(p);
      idx++;
      if (idx == N) begin idx = 0; d_want.push_back(dsum); d_abs.push_back(dabs); end
    end
    if (dot_out_valid) begin
      real got, w, wa;
      int t0;
      t0 = d_first.pop_front();
      w  = d_want.pop_front();
      wa = d_abs.pop_front();
      n_dot++;
      if (dot_out_zero) n_dot_zero++;
      if (n_dot <= 4) begin
        checks++;
        if (cycle - t0 != N + 7) fail($sformatf("dot took %0d clocks", cycle - t0));
      end
      got = lns_real(dot_out_zero, dot_out_sign, int'(dot_out_a), dot_out_b, FB);
      checks++;
      if (fabs(got - w) > wa * 2.0**(-24) * (N + 2) + fabs(w) * 2.0**(-21))
        fail($sformatf("dot got %g want %g", got, w));
    end
  end

  task automatic dot_send(input bit xs, input int xa, input int xb, input int ya, input int yb);
    dot_in_valid <= 1'b1;
    dot_x_zero <= 1'b0; dot_x_sign <= xs; dot_x_a <= EB'(xa); dot_x_b <= FB'(xb);
    dot_y_zero <= 1'b0; dot_y_sign <= 1'b0; dot_y_a <= EB'(ya); dot_y_b <= FB'(yb);
    do @(posedge clk); while (!dot_in_ready);
  endtask

  task automatic run_dot();
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < N; i++) begin
        int xa, xb, ya, yb;
        xa = $urandom_range(12, 0) - 6; xb = $urandom_range(int'(bmax(FB)), 0);
        ya = $urandom_range(12, 0) - 6; yb = $urandom_range(int'(bmax(FB)), 0);
        if (v == 5) begin
          dot_send(1'b0, xa, xb, ya, yb);
          dot_send(1'b1, xa, xb, ya, yb);
          i++;
        end else begin
          dot_send(1'($urandom), xa, xb, ya, yb);
        end
      end
      if (v >= 4) begin
        dot_in_valid <= 1'b0;
        repeat ($urandom_range(50, 0)) @(posedge clk);
      end
    end
    dot_in_valid <= 1'b0;
  endtask

  // ------------------------------------------------------------ add / sub
  typedef struct { real x; real y; int t; } as_item_t;
  as_item_t as_q [$];

  always @(posedge clk) begin
    if (as_in_valid) begin
      real yy;
      yy = lns_real(as_y_zero, as_y_sign, int'(as_y_a), as_y_b, FB);
      as_q.push_back('{lns_real(as_x_zero, as_x_sign, int'(as_x_a), as_x_b, FB),
                       as_sub ? -yy : yy, cycle});
    end
    if (as_out_valid) begin
      as_item_t it;
      real got, want;
      it   = as_q.pop_front();
      want = it.x + it.y;
      got  = lns_real(as_out_zero, as_out_sign, int'(as_out_a), as_out_b, FB);
      checks++;
      if (cycle - it.t != 7) fail($sformatf("add/sub latency %0d", cycle - it.t));
      checks++;
      if (want == 0.0) begin
        n_cancel++;
        if (!as_out_zero) fail("cancellation not zero");
      end else begin
        if ((it.x >= 0.0) == (it.y >= 0.0)) begin
          n_add++;
          if (fabs(real_lnmag(got, FB) - real_lnmag(want, FB)) > 2.0)
            fail($sformatf("add %g + %g = %g", it.x, it.y, got));
        end else begin
          n_sub++;
        end
        if (fabs(got - want) > (fabs(it.x) + fabs(it.y)) * 2.0**(-20))
          fail($sformatf("add/sub %g + %g = %g", it.x, it.y, got));
      end
    end
  end

  task automatic run_addsub();
    for (int i = 0; i < 3000; i++) begin
      int a, b;
      a = $urandom_range(40, 0) - 20;
      b = $urandom_range(int'(bmax(FB)), 0);
      as_in_valid <= 1'b1;
      as_sub      <= 1'($urandom);
      as_x_zero   <= 1'b0;
      as_x_sign   <= 1'($urandom);
      as_x_a      <= EB'(a);
      as_x_b      <= FB'(b);
      as_y_zero   <= 1'b0;
      as_y_sign   <= 1'($urandom);
      as_y_a      <= (i % 8 == 0) ? EB'(a) : EB'($urandom_range(40, 0) - 20);
      as_y_b      <= (i % 8 == 0) ? FB'(b) : FB'($urandom_range(int'(bmax(FB)), 0));
      @(posedge clk);
    end
    as_in_valid <= 1'b0;
  endtask

  // ------------------------------------------------------------ mul / div
  typedef struct { bit div; bit xs; int xa; longint unsigned xb; bit yz; bit ys; int ya;
                   longint unsigned yb; int t; } md_item_t;
  md_item_t md_q [$];

  always @(posedge clk) begin
    if (md_in_valid)
      md_q.push_back('{md_div, md_x_sign, int'(md_x_a), md_x_b, md_y_zero, md_y_sign,
                       int'(md_y_a), md_y_b, cycle});
    if (md_out_valid) begin
      md_item_t it;
      real want, top;
      it   = md_q.pop_front();
      want = it.div ? lns_lnmag(it.xa, it.xb, FB) - lns_lnmag(it.ya, it.yb, FB)
                    : lns_lnmag(it.xa, it.xb, FB) + lns_lnmag(it.ya, it.yb, FB);
      top  = lns_lnmag(127, bmax(FB), FB);
      checks++;
      if (cycle - it.t != 1) fail($sformatf("mul/div latency %0d", cycle - it.t));
      checks++;
      if (it.yz && !it.div) begin
        if (!md_out_zero) fail("product with zero");
      end else if (it.yz && it.div) begin
        n_dz++;
        if (md_out_zero || md_out_a != 127) fail("division by zero");
      end else if (want > top + 0.5) begin
        n_sat++;
        if (md_out_zero || md_out_a != 127 || md_out_b != bmax(FB)) fail("saturation");
      end else if (want < top - 0.5 && want > lns_lnmag(-128, 0, FB) + 0.5) begin
        if (it.div && it.xb < it.yb) n_div_renorm++;
        if (!it.div && it.xb + it.yb > bmax(FB)) n_mul_renorm++;
        if (md_out_zero || md_out_sign != (it.xs ^ it.ys) ||
            fabs(lns_lnmag(int'(md_out_a), md_out_b, FB) - want) > 0.05)
          fail("mul/div value");
      end
    end
  end

  task automatic run_muldiv();
    for (int i = 0; i < 3000; i++) begin
      md_in_valid <= 1'b1;
      md_div      <= 1'($urandom);
      md_x_zero   <= 1'b0;
      md_x_sign   <= 1'($urandom);
      md_x_a      <= (i % 5 == 0) ? EB'($urandom_range(127, 100)) : EB'($urandom_range(40, 0) - 20);
      md_x_b      <= FB'($urandom_range(int'(bmax(FB)), 0));
      md_y_zero   <= ($urandom_range(63, 0) == 0);
      md_y_sign   <= 1'($urandom);
      md_y_a      <= (i % 5 == 0) ? EB'($urandom_range(127, 60)) : EB'($urandom_range(40, 0) - 20);
      md_y_b      <= FB'($urandom_range(int'(bmax(FB)), 0));
      @(posedge clk);
    end
    md_in_valid <= 1'b0;
  endtask

  // ------------------------------------------------------------ power / root
  typedef struct { bit root; int n; bit xs; int xa; longint unsigned xb; int t; } pr_item_t;
  pr_item_t pr_q [$];

  always @(posedge clk) begin
    if (pr_in_valid)
      pr_q.push_back('{pr_root, int'(pr_n), pr_x_sign, int'(pr_x_a), pr_x_b, cycle});
    if (pr_out_valid) begin
      pr_item_t it;
      real want, top, lx;
      it  = pr_q.pop_front();
      lx  = lns_lnmag(it.xa, it.xb, FB);
      top = lns_lnmag(127, bmax(FB), FB);
      checks++;
      if (cycle - it.t != 1) fail($sformatf("power/root latency %0d", cycle - it.t));
      checks++;
      if (!it.root) begin
        want = real'(it.n) * lx;
        if (want > top + 1.0) begin
          n_pow_sat++;
          if (pr_out_zero || pr_out_a != 127 || pr_out_b != bmax(FB)) fail("power saturation");
        end else if (want < top - 1.0 && want > lns_lnmag(-128, 0, FB) + 1.0) begin
          if (real'(it.xb) * it.n > real'(bmax(FB))) n_pow_renorm++;
          if (pr_out_zero || pr_out_invalid || pr_out_sign != (it.xs & it.n[0]) ||
              fabs(lns_lnmag(int'(pr_out_a), pr_out_b, FB) - want) > 0.25)
            fail("power value");
        end
      end else if (it.xs && it.n % 2 == 0) begin
        n_root_inv++;
        if (!pr_out_invalid || !pr_out_zero) fail("invalid root");
      end else begin
        n_root++;
        want = lx / real'(it.n);
        if (pr_out_zero || pr_out_invalid || pr_out_sign != it.xs ||
            fabs(lns_lnmag(int'(pr_out_a), pr_out_b, FB) - want) > 0.55)
          fail("root value");
      end
    end
  end

  task automatic run_powroot();
    for (int i = 0; i < 3000; i++) begin
      pr_in_valid <= 1'b1;
      pr_root     <= 1'($urandom);
      pr_n        <= 4'($urandom_range(15, 1));
      pr_x_zero   <= 1'b0;
      pr_x_sign   <= 1'($urandom);
      pr_x_a      <= (i % 4 == 0) ? EB'($urandom_range(127, 20)) : EB'($urandom_range(16, 0) - 8);
      pr_x_b      <= FB'($urandom_range(int'(bmax(FB)), 0));
      @(posedge clk);
    end
    pr_in_valid <= 1'b0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    fork
      run_dot();
      run_addsub();
      run_muldiv();
      run_powroot();
    join
    repeat (200) @(posedge clk);
    $display("dot results %0d (zero %0d), stalled clocks %0d", n_dot, n_dot_zero, n_stall);
    $display("add %0d, sub %0d, cancellations %0d", n_add, n_sub, n_cancel);
    $display("mul renorm %0d, div renorm %0d, saturations %0d, div by zero %0d",
             n_mul_renorm, n_div_renorm, n_sat, n_dz);
    $display("power renorm %0d, power saturations %0d, roots %0d, invalid roots %0d",
             n_pow_renorm, n_pow_sat, n_root, n_root_inv);
    checks++;
    if (n_dot != NV || n_dot_zero == 0 || n_stall == 0 || n_add == 0 || n_sub == 0 ||
        n_cancel == 0 || n_mul_renorm == 0 || n_div_renorm == 0 || n_sat == 0 || n_dz == 0 ||
        n_pow_renorm == 0 || n_pow_sat == 0 || n_root == 0 || n_root_inv == 0)
      fail("a mechanism never happened");
    checks++;
    if (as_q.size() != 0 || md_q.size() != 0 || pr_q.size() != 0) fail("results missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
