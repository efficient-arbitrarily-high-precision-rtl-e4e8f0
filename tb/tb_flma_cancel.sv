// tb_flma_cancel: the catastrophic-cancellation example worked through in
// the paper's add/subtract accuracy section, run on the add/sub unit at
// log32 defaults (alpha = beta = 1).  x' = +2^0 e^0 (the value 1) and
// y' = +2^-1 e^b with b one ulp below the 23-bit rounding of ln 2 (the next
// value below 1).  p(x') - p(y') is exactly 2^-23 in floating point, and the
// paper gives the FLMA result q(.) = +2^-23 e^0.  The difference is also
// checked in the other order (negative result) and with equal operands
// (exact zero).  The same difference 1 - (1 - eps) is then run through add/sub
// units with alpha = 2, 4, 8 and 14 (beta = 1, exp widths from the log32
// formulas), as in the published sweep of this example: the relative error
// (in log ulps) must not grow with alpha, and the absolute error must stay
// below 1e-8 at alpha = 1 and 1e-10 at alpha = 14, the published bounds.
module tb_flma_cancel;
  import flma_ref_pkg::*;
  localparam int EB = 8, FB = 23;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0;
  flma_pkg::addsub_op_e op = flma_pkg::OP_SUB;
  logic x_zero = 0, x_sign = 0, y_zero = 0, y_sign = 0;
  logic signed [EB-1:0] x_a = '0, y_a = '0;
  logic [FB-1:0] x_b = '0, y_b = '0;
  logic out_valid, out_zero, out_sign;
  logic signed [EB-1:0] out_a;
  logic [FB-1:0] out_b;
  int checks = 0, failures = 0, nres = 0;

  flma_addsub dut (.*);

  // alpha sweep of the same example
  localparam int NA = 4;
  localparam int AL [NA] = '{2, 4, 8, 14};
  logic [FB-1:0] bm = FB'(bmax(FB));
  logic sweep_valid = 1'b0;
  for (genvar i = 0; i < NA; i++) begin : g_alpha
    logic v, z, sg;
    logic signed [EB-1:0] a;
    logic [FB-1:0] b;
    flma_addsub #(.ALPHA(AL[i]), .BETA(1), .EXP_P(27 + AL[i]), .EXP_I(13 + AL[i]), .EXP_R(2),
                  .LOG_P(28), .LOG_I(15), .LOG_R(3), .LOG_S(9)) u_as (
      .clk, .rst_n, .in_valid(sweep_valid), .op(flma_pkg::OP_SUB),
      .x_zero(1'b0), .x_sign(1'b0), .x_a('0), .x_b('0),
      .y_zero(1'b0), .y_sign(1'b0), .y_a(EB'(-1)), .y_b(bm),
      .out_valid(v), .out_zero(z), .out_sign(sg), .out_a(a), .out_b(b));
  end

  // exact 1 - (1 - eps) for the example's operands, and its log magnitude
  function automatic real exact_diff();
    return 1.0 - lns_real(0, 0, -1, bmax(FB), FB);
  endfunction

  real rel_err [NA + 1];
  real abs_err [NA + 1];
  int  sweep_seen = 0;

  always @(posedge clk) begin
    if (g_alpha[0].v) begin
      sweep_seen++;
      `define SWEEP_POINT(I) \
        abs_err[I + 1] = fabs(lns_real(g_alpha[I].z, g_alpha[I].sg, int'(g_alpha[I].a), \
                                       longint'(g_alpha[I].b), FB) - exact_diff()); \
        rel_err[I + 1] = fabs(lns_lnmag(int'(g_alpha[I].a), longint'(g_alpha[I].b), FB) - \
                              real_lnmag(exact_diff(), FB));
      `SWEEP_POINT(0)
      `SWEEP_POINT(1)
      `SWEEP_POINT(2)
      `SWEEP_POINT(3)
    end
  end

  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (out_valid) begin
      nres++;
      checks++;
      case (nres)
        1: if (out_zero || out_sign != 0 || out_a != -23 || out_b != 0) begin
             failures++; $display("FAIL 1 - (1 - eps): z%0d s%0d a=%0d b=%0d", out_zero, out_sign, out_a, out_b);
           end else begin
             $display("1 - (1 - eps) = +2^%0d e^%0d (%g)", out_a, out_b, lns_real(0, 0, -23, 0, FB));
             abs_err[0] = fabs(lns_real(0, 0, int'(out_a), longint'(out_b), FB) - exact_diff());
             rel_err[0] = fabs(lns_lnmag(int'(out_a), longint'(out_b), FB) - real_lnmag(exact_diff(), FB));
           end
        2: if (out_zero || out_sign != 1 || out_a != -23 || out_b != 0) begin
             failures++; $display("FAIL (1 - eps) - 1: z%0d s%0d a=%0d b=%0d", out_zero, out_sign, out_a, out_b);
           end
        3: if (!out_zero) begin failures++; $display("FAIL 1 - 1 not zero"); end
        default: ;
      endcase
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    in_valid <= 1'b1;
    // the paper's y' fraction b0.10110001011100100001011
    x_a <= 0;  x_b <= '0;  y_a <= -1;  y_b <= 23'b10110001011100100001011;
    @(posedge clk);
    x_a <= -1; x_b <= 23'b10110001011100100001011;  y_a <= 0;  y_b <= '0;
    @(posedge clk);
    x_a <= 0;  x_b <= '0;  y_a <= 0;  y_b <= '0;
    @(posedge clk);
    in_valid <= 1'b0;
    sweep_valid <= 1'b1;
    @(posedge clk);
    sweep_valid <= 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (nres != 3) begin failures++; $display("FAIL %0d results", nres); end
    checks++;
    if (23'b10110001011100100001011 != 23'(bmax(FB))) begin
      failures++; $display("FAIL the example's b is not one below round(ln 2)");
    end
    checks++;
    if (sweep_seen != 1) begin failures++; $display("FAIL alpha sweep results %0d", sweep_seen); end
    $display("alpha=1: relative error %0.1f log ulp, absolute %g", rel_err[0], abs_err[0]);
    for (int i = 0; i < NA; i++)
      $display("alpha=%0d: relative error %0.1f log ulp, absolute %g", AL[i], rel_err[i + 1], abs_err[i + 1]);
    for (int i = 0; i < NA; i++) begin
      checks++;
      if (rel_err[i + 1] > rel_err[i] + 0.5) begin
        failures++; $display("FAIL relative error grows at alpha=%0d", AL[i]);
      end
    end
    checks += 2;
    if (abs_err[0] >= 1e-8)  begin failures++; $display("FAIL absolute error at alpha=1"); end
    if (abs_err[NA] >= 1e-10) begin failures++; $display("FAIL absolute error at alpha=14"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
