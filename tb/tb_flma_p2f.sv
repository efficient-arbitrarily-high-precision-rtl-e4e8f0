// tb_flma_p2f: checks the log-to-linear converter p(.) at log32 defaults.
// Random log-domain values (including zero and the ends of the b range) are
// streamed one per clock; each output must carry the same sign, zero flag and
// base-2 exponent, and a significand within 1.25 ulp (2^-24) of e^b computed
// in double precision, exactly 2 clocks after its input.
module tb_flma_p2f;
  import flma_ref_pkg::*;
  localparam int EB = 8, FB = 23, MW = 24, EXW = 10;
  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge, so the asynchronous reset acts
  logic in_valid = 1'b0, in_zero = 1'b0, in_sign = 1'b0;
  logic signed [EB-1:0] in_a = '0;
  logic [FB-1:0] in_b = '0;
  logic out_valid, out_zero, out_sign;
  logic signed [EXW-1:0] out_exp;
  logic [MW-1:0] out_frac;
  int checks = 0, failures = 0, cycle = 0;
  typedef struct { bit zero; bit sign; int a; longint unsigned b; int t; } item_t;
  item_t q [$];

  flma_p2f dut (.clk, .rst_n, .in_valid, .in_zero, .in_sign, .in_a, .in_b,
                .out_valid, .out_zero, .out_sign, .out_exp, .out_frac);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  always @(posedge clk) if (in_valid) q.push_back('{in_zero, in_sign, int'(in_a), in_b, cycle});

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
      real err;
      it = q.pop_front();
      checks++;
      if (cycle - it.t != 2) begin failures++; $display("FAIL latency %0d", cycle - it.t); end
      checks++;
      if (out_zero != it.zero || (!it.zero && (out_sign != it.sign || int'(out_exp) != it.a))) begin
        failures++;
        $display("FAIL fields: zero %0d/%0d sign %0d/%0d exp %0d/%0d", out_zero, it.zero,
                 out_sign, it.sign, out_exp, it.a);
      end
      if (!it.zero) begin
        err = fabs((1.0 + real'(out_frac) / 2.0**MW) - $exp(real'(it.b) / 2.0**FB)) * 2.0**MW;
        checks++;
        if (err > 1.25) begin
          failures++;
          if (failures < 10) $display("FAIL b=%0d frac=%0d err=%f ulp", it.b, out_frac, err);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int i = 0; i < 20000; i++) begin
      in_valid <= 1'b1;
      in_zero  <= ($urandom_range(15, 0) == 0);
      in_sign  <= 1'($urandom);
      in_a     <= EB'($urandom);
      case (i)
        0:       in_b <= '0;
        1:       in_b <= FB'(bmax(FB));
        default: in_b <= FB'($urandom_range(int'(bmax(FB)), 0));
      endcase
      @(posedge clk);
    end
    in_valid <= 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
