// tb_flma_exp_sweep: accuracy of the e^x unit over a grid of its internal
// sizes at 23-bit input and output, the setting of the published accuracy
// sweep: iterations I = 14, 15, 16, extra truncated bits r = 1, 2 and
// l = p = 27, 30, 33.  All 18 units take the same random x in [0, ln 2)
// every clock; each result is compared with double-precision e^x.  Every
// configuration must stay within 1 ulp (the published claim for this
// sweep), the share of results that are not correctly rounded must fall
// from l = p = 27 to 33 for every (I, r), and at l = p = 33 it must be
// lower for I = 16 than for I = 14, as the published curves show; the
// shares are printed as a table.
module tb_flma_exp_sweep;
  localparam int B = 23, NV = 30000;
  localparam int NI = 3, NR = 2, NL = 3;
  localparam int IV [NI] = '{14, 15, 16};
  localparam int RV [NR] = '{1, 2};
  localparam int LV [NL] = '{27, 30, 33};
  localparam int XMAX = int'($floor($ln(2.0) * 2.0**B));
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0;
  logic [B-1:0] x = '0;
  int checks = 0, failures = 0;
  logic [B-1:0] xq [$];

  always #5 clk = ~clk;
  always @(posedge clk) if (in_valid) xq.push_back(x);

  initial begin
    repeat (NV + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // all units have latency 2, so the x of a result is two entries back
  logic [B-1:0] x_d1 = '0, x_d2 = '0;
  always @(posedge clk) begin
    x_d1 <= x;
    x_d2 <= x_d1;
  end

  for (genvar i = 0; i < NI; i++) begin : g_i
    for (genvar r = 0; r < NR; r++) begin : g_r
      for (genvar l = 0; l < NL; l++) begin : g_l
        logic v;
        logic [B-1:0] y;
        int n = 0, inc = 0, over = 0;
        flma_exp #(.XB(B), .YB(B), .LB(LV[l]), .PB(LV[l]), .I(IV[i]), .R(RV[r])) u_exp (
          .clk, .rst_n, .in_valid, .x, .out_valid(v), .y);
        always @(posedge clk) begin
          if (v) begin
            real want, err;
            want = $exp(real'(x_d2) / 2.0**B) * 2.0**B - 2.0**B;
            err  = (real'(y) > want) ? real'(y) - want : want - real'(y);
            n++;
            if (err > 0.5) inc++;
            if (err > 1.0) over++;
          end
        end
      end
    end
  end

  int n_all [NI][NR][NL];
  int inc_all [NI][NR][NL];
  int over_all [NI][NR][NL];

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int k = 0; k < NV; k++) begin
      in_valid <= 1'b1;
      x        <= B'($urandom_range(XMAX - 1, 0));
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (5) @(posedge clk);
    `define SWEEP_COLLECT(I, R, L) \
      n_all[I][R][L] = g_i[I].g_r[R].g_l[L].n; \
      inc_all[I][R][L] = g_i[I].g_r[R].g_l[L].inc; \
      over_all[I][R][L] = g_i[I].g_r[R].g_l[L].over;
    `SWEEP_COLLECT(0, 0, 0) `SWEEP_COLLECT(0, 0, 1) `SWEEP_COLLECT(0, 0, 2)
    `SWEEP_COLLECT(0, 1, 0) `SWEEP_COLLECT(0, 1, 1) `SWEEP_COLLECT(0, 1, 2)
    `SWEEP_COLLECT(1, 0, 0) `SWEEP_COLLECT(1, 0, 1) `SWEEP_COLLECT(1, 0, 2)
    `SWEEP_COLLECT(1, 1, 0) `SWEEP_COLLECT(1, 1, 1) `SWEEP_COLLECT(1, 1, 2)
    `SWEEP_COLLECT(2, 0, 0) `SWEEP_COLLECT(2, 0, 1) `SWEEP_COLLECT(2, 0, 2)
    `SWEEP_COLLECT(2, 1, 0) `SWEEP_COLLECT(2, 1, 1) `SWEEP_COLLECT(2, 1, 2)
    $display("share not correctly rounded     l=p=27    l=p=30    l=p=33");
    for (int i = 0; i < NI; i++)
      for (int r = 0; r < NR; r++) begin
        $display("I=%0d r=%0d                       %7.3f %%  %7.3f %%  %7.3f %%", IV[i], RV[r],
                 100.0 * inc_all[i][r][0] / NV, 100.0 * inc_all[i][r][1] / NV,
                 100.0 * inc_all[i][r][2] / NV);
        for (int l = 0; l < NL; l++) begin
          checks += 2;
          if (n_all[i][r][l] != NV) begin failures++; $display("FAIL results missing"); end
          if (over_all[i][r][l] != 0) begin
            failures++;
            $display("FAIL I=%0d r=%0d l=p=%0d: %0d results above 1 ulp", IV[i], RV[r], LV[l], over_all[i][r][l]);
          end
        end
        checks++;
        if (!(inc_all[i][r][NL-1] < inc_all[i][r][0])) begin
          failures++; $display("FAIL I=%0d r=%0d: share does not fall with l, p", IV[i], RV[r]);
        end
      end
    for (int r = 0; r < NR; r++) begin
      checks++;
      if (!(inc_all[NI-1][r][NL-1] < inc_all[0][r][NL-1])) begin
        failures++; $display("FAIL r=%0d: I=16 not better than I=14 at l=p=33", RV[r]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
