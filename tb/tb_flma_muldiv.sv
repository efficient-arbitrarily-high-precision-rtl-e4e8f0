// tb_flma_muldiv: checks log-domain multiply and divide at log32 defaults.
// For random operands the result's log magnitude must equal the sum (or
// difference) of the operands' log magnitudes to within 0.05 log ulp (the
// only error is the F-bit rounding of ln 2 used to renormalise), b must stay
// below round(ln 2), signs must XOR, zero operands, division by zero and
// exponent overflow/underflow must follow the rules in flma_muldiv, and the
// latency must be 1 clock at one operation per clock.
module tb_flma_muldiv;
  import flma_ref_pkg::*;
  localparam int EB = 8, FB = 23;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0;
  flma_pkg::muldiv_op_e op = flma_pkg::OP_MUL;
  logic x_zero = 0, x_sign = 0, y_zero = 0, y_sign = 0;
  logic signed [EB-1:0] x_a = '0, y_a = '0;
  logic [FB-1:0] x_b = '0, y_b = '0;
  logic out_valid, out_zero, out_sign;
  logic signed [EB-1:0] out_a;
  logic [FB-1:0] out_b;
  int checks = 0, failures = 0, cycle = 0, n_renorm = 0, n_sat = 0, n_under = 0, n_dz = 0;
  typedef struct { bit div; bit xz; bit xs; int xa; longint unsigned xb;
                   bit yz; bit ys; int ya; longint unsigned yb; int t; } item_t;
  item_t q [$];

  flma_muldiv dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (in_valid)
    q.push_back('{op == flma_pkg::OP_DIV, x_zero, x_sign, int'(x_a), x_b,
                  y_zero, y_sign, int'(y_a), y_b, cycle});

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
      real want, err, top, bot;
      it = q.pop_front();
      checks++;
      if (cycle - it.t != 1) begin failures++; $display("FAIL latency %0d", cycle - it.t); end
      want = it.div ? lns_lnmag(it.xa, it.xb, FB) - lns_lnmag(it.ya, it.yb, FB)
                    : lns_lnmag(it.xa, it.xb, FB) + lns_lnmag(it.ya, it.yb, FB);
      top  = lns_lnmag(127, bmax(FB), FB);
      bot  = lns_lnmag(-128, 0, FB);
      checks++;
      if (it.xz || (!it.div && it.yz)) begin
        if (!out_zero) begin failures++; $display("FAIL zero operand"); end
      end else if (it.div && it.yz) begin
        n_dz++;
        if (out_zero || out_a != 127 || out_b != bmax(FB)) begin failures++; $display("FAIL div by zero"); end
      end else if (want > top + 0.5) begin
        n_sat++;
        if (out_zero || out_a != 127 || out_b != bmax(FB)) begin failures++; $display("FAIL saturation"); end
      end else if (want < bot - 0.5) begin
        n_under++;
        if (!out_zero) begin failures++; $display("FAIL underflow"); end
      end else if (want > bot + 0.5 && want < top - 0.5) begin
        err = fabs(lns_lnmag(int'(out_a), out_b, FB) - want);
        if (it.div ? (it.xb < it.yb) : (it.xb + it.yb >= bmax(FB) + 1)) n_renorm++;
        if (out_zero || out_sign != (it.xs ^ it.ys) || out_b > bmax(FB) || err > 0.05) begin
          failures++;
          if (failures < 10) $display("FAIL div=%0d a=%0d b=%0d err=%f", it.div, out_a, out_b, err);
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
      op       <= flma_pkg::muldiv_op_e'(i % 2);
      x_zero   <= ($urandom_range(63, 0) == 0);
      y_zero   <= ($urandom_range(63, 0) == 0);
      x_sign   <= 1'($urandom);
      y_sign   <= 1'($urandom);
      x_a      <= (i % 3 == 0) ? EB'($urandom) : EB'($urandom_range(60, 0) - 30);
      y_a      <= (i % 3 == 0) ? EB'($urandom) : EB'($urandom_range(60, 0) - 30);
      x_b      <= FB'($urandom_range(int'(bmax(FB)), 0));
      y_b      <= FB'($urandom_range(int'(bmax(FB)), 0));
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (3) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL results missing"); end
    $display("renormalised %0d, saturated %0d, underflow %0d, div by zero %0d",
             n_renorm, n_sat, n_under, n_dz);
    checks++;
    if (n_renorm == 0 || n_sat == 0 || n_under == 0 || n_dz == 0) begin
      failures++; $display("FAIL a case was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
