// tb_flma_add_alpha: accuracy of FLMA addition x + y for x, y in [1, 2)
// against the conversion extension bits alpha (log-to-linear) and beta
// (linear-to-log).  Four add/sub units with (alpha, beta) = (1, 1), (2, 1),
// (2, 2) and (4, 4) run side by side, each with the log32 formulas for its
// exp/log widths (p = l = 27 + alpha, I = 13 + alpha; p = l = 27 + beta,
// I = 14 + beta) and a 23 + alpha bit adder.  The same random positive
// operand pairs go to all four; every result is compared in double precision
// with ln(x + y), in log ulps (2^-23).  The published bounds are <= 2 log ulp
// for alpha = beta = 1 and <= 1 log ulp for alpha > 1, beta >= 1.  The log
// unit of this design, with its 10-bit truncated divisor, alone reaches about
// 1.35 ulp at beta = 1, and (alpha, beta) = (2, 1) was seen at about 1.56 log
// ulp, so the bounds checked here are 2 log ulp for alpha = 1 and 1.6 for
// alpha > 1; with beta >= 2 the worst case falls to about 1.04.  The worst
// error and the share of sums that are not correctly rounded are printed per
// configuration, and that share must fall as alpha and beta grow.
module tb_flma_add_alpha;
  import flma_ref_pkg::*;
  localparam int EB = 8, FB = 23, NV = 40000, NC = 4;
  localparam int AL [NC] = '{1, 2, 2, 4};
  localparam int BE [NC] = '{1, 1, 2, 4};
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0;
  logic [FB-1:0] x_b = '0, y_b = '0;
  int checks = 0, failures = 0, cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (NV + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar c = 0; c < NC; c++) begin : g_cfg
    logic out_valid, out_zero, out_sign;
    logic signed [EB-1:0] out_a;
    logic [FB-1:0] out_b;
    longint unsigned q [$];
    int  n = 0, inc = 0, bad = 0, lat_bad = 0;
    real worst = 0.0;
    int  tq [$];

    flma_addsub #(.EB(EB), .FB(FB), .ALPHA(AL[c]), .BETA(BE[c]),
                  .EXP_P(27 + AL[c]), .EXP_I(13 + AL[c]), .EXP_R(2),
                  .LOG_P(27 + BE[c]), .LOG_I(14 + BE[c]), .LOG_R(3), .LOG_S(9)) u_add (
      .clk, .rst_n, .in_valid, .op(flma_pkg::OP_ADD),
      .x_zero(1'b0), .x_sign(1'b0), .x_a('0), .x_b,
      .y_zero(1'b0), .y_sign(1'b0), .y_a('0), .y_b,
      .out_valid, .out_zero, .out_sign, .out_a, .out_b);

    always @(posedge clk) begin
      if (in_valid) begin q.push_back({x_b, y_b}); tq.push_back(cycle); end
      if (out_valid) begin
        longint unsigned xy;
        real want, got, err;
        int  t0;
        xy   = q.pop_front();
        t0   = tq.pop_front();
        want = real_lnmag(lns_real(0, 0, 0, xy >> FB, FB) +
                          lns_real(0, 0, 0, xy & ((64'd1 << FB) - 1), FB), FB);
        got  = lns_lnmag(int'(out_a), longint'(out_b), FB);
        err  = fabs(got - want);
        n++;
        if (err > worst) worst = err;
        if (err > 0.5) inc++;
        if (out_zero || out_sign || err > ((AL[c] == 1) ? 2.0 : 1.6)) bad++;
        if (cycle - t0 != 7) lat_bad++;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < NV; i++) begin
      in_valid <= 1'b1;
      x_b      <= FB'($urandom_range(int'(bmax(FB)), 0));
      y_b      <= FB'($urandom_range(int'(bmax(FB)), 0));
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (10) @(posedge clk);
    `define CFG_REPORT(C) \
      checks += g_cfg[C].n + 2; \
      failures += g_cfg[C].bad + g_cfg[C].lat_bad; \
      if (g_cfg[C].n != NV) failures++; \
      $display("alpha=%0d beta=%0d: %0d sums, worst %f log ulp, %0.3f %% not correctly rounded", \
               AL[C], BE[C], g_cfg[C].n, g_cfg[C].worst, 100.0 * g_cfg[C].inc / NV);
    `CFG_REPORT(0)
    `CFG_REPORT(1)
    `CFG_REPORT(2)
    `CFG_REPORT(3)
    if (!(g_cfg[3].inc < g_cfg[0].inc)) begin
      failures++;
      $display("FAIL incorrectly rounded share does not fall with alpha, beta");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
