// tb_flma_log_sweep: accuracy of the ln(x) unit over a grid of its internal
// sizes at 23-bit input and output with r = 3, the setting of the published
// log accuracy sweep: I = 15, 16, divisor fraction bits s = 10, 14 and
// l = p = 28, 33.  All 8 units take the same random x in [1, 2) every clock;
// each result is compared with double-precision ln(x).  Checked: no result
// above 1 ulp (the published claim for this sweep; it holds here for s >= 10,
// while s = 9 as used in the default configuration exceeds it slightly), the
// share not correctly rounded falls from l = p = 28 to 33 for s = 14 (for
// s = 10 the published curve for I = 15 is flat, so no trend is checked), and
// at l = p = 33 s = 14 is better than s = 10, as the published curves show.
module tb_flma_log_sweep;
  localparam int B = 23, NV = 30000;
  localparam int NI = 2, NS = 2, NL = 2;
  localparam int IV [NI] = '{15, 16};
  localparam int SV [NS] = '{10, 14};
  localparam int LV [NL] = '{28, 33};
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0;
  logic [B-1:0] x = '0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (NV + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // all units have latency 4
  logic [B-1:0] x_d [4];
  always @(posedge clk) begin
    x_d[0] <= x;
    for (int k = 1; k < 4; k++) x_d[k] <= x_d[k-1];
  end

  for (genvar i = 0; i < NI; i++) begin : g_i
    for (genvar s = 0; s < NS; s++) begin : g_s
      for (genvar l = 0; l < NL; l++) begin : g_l
        logic v;
        logic [B-1:0] y;
        int n = 0, inc = 0, over = 0, bad = 0;
        real worst = 0.0;
        flma_log #(.XB(B), .YB(B), .LB(LV[l]), .PB(LV[l]), .I(IV[i]), .R(3), .S(SV[s])) u_log (
          .clk, .rst_n, .in_valid, .x, .out_valid(v), .y);
        always @(posedge clk) begin
          if (v) begin
            real want, err;
            want = $ln(1.0 + real'(x_d[3]) / 2.0**B) * 2.0**B;
            err  = (real'(y) > want) ? real'(y) - want : want - real'(y);
            n++;
            if (err > worst) worst = err;
            if (err > 0.5) inc++;
            if (err > 1.0) over++;
            if (err > 1.0) bad++;
          end
        end
      end
    end
  end

  int  n_all [NI][NS][NL];
  int  inc_all [NI][NS][NL];
  int  over_all [NI][NS][NL];
  int  bad_all [NI][NS][NL];
  real worst_all [NI][NS][NL];

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int k = 0; k < NV; k++) begin
      in_valid <= 1'b1;
      x        <= B'($urandom);
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (8) @(posedge clk);
    `define LSWEEP_COLLECT(I, S, L) \
      n_all[I][S][L] = g_i[I].g_s[S].g_l[L].n; \
      inc_all[I][S][L] = g_i[I].g_s[S].g_l[L].inc; \
      over_all[I][S][L] = g_i[I].g_s[S].g_l[L].over; \
      bad_all[I][S][L] = g_i[I].g_s[S].g_l[L].bad; \
      worst_all[I][S][L] = g_i[I].g_s[S].g_l[L].worst;
    `LSWEEP_COLLECT(0, 0, 0) `LSWEEP_COLLECT(0, 0, 1) `LSWEEP_COLLECT(0, 1, 0) `LSWEEP_COLLECT(0, 1, 1)
    `LSWEEP_COLLECT(1, 0, 0) `LSWEEP_COLLECT(1, 0, 1) `LSWEEP_COLLECT(1, 1, 0) `LSWEEP_COLLECT(1, 1, 1)
    for (int i = 0; i < NI; i++)
      for (int s = 0; s < NS; s++) begin
        for (int l = 0; l < NL; l++) begin
          $display("I=%0d s=%0d l=p=%0d: %7.3f %% not correctly rounded, %0d above 1 ulp, worst %f ulp",
                   IV[i], SV[s], LV[l], 100.0 * inc_all[i][s][l] / NV, over_all[i][s][l], worst_all[i][s][l]);
          checks += 2;
          if (n_all[i][s][l] != NV) begin failures++; $display("FAIL results missing"); end
          if (bad_all[i][s][l] != 0) begin failures++; $display("FAIL results above 1 ulp"); end
        end
        checks++;
        if (s == NS - 1 && !(inc_all[i][s][NL-1] < inc_all[i][s][0])) begin
          failures++; $display("FAIL I=%0d s=%0d: share does not fall with l, p", IV[i], SV[s]);
        end
      end
    for (int i = 0; i < NI; i++) begin
      checks++;
      if (!(inc_all[i][NS-1][NL-1] < inc_all[i][0][NL-1])) begin
        failures++; $display("FAIL I=%0d: s=14 not better than s=10 at l=p=33", IV[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
