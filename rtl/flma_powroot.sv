// flma_powroot: integer power x^n and integer root x^(1/n) of a dual-base
// log-domain value +-2^a e^b (FLMA power/root).
//
// As in any logarithmic number system, a power multiplies the logarithm by n
// and a root divides it by n, with sign and zero handled separately; this is
// what the paper gives ("n-th power of x is nx' and n-th root of x is x'/n").
// The paper does not give the insides for the dual base, so this is the
// simplest circuit that does it, with the same renormalisation as mul/div
// (LN2F = F-bit rounding of ln 2, b kept in [0, LN2F)):
//   power: n*b is formed exactly, k = floor(n*b / LN2F) < n, and the result
//          is a' = n*a + k, b' = n*b - k*LN2F (exact apart from LN2F).
//   root:  a = n*a' + rem with a' = floor(a / n) and 0 <= rem < n; then
//          b' = (rem*LN2F + b) / n rounded to nearest, and a b' that rounds
//          up to LN2F is renormalised to 0 with a' + 1.
// Own choices: n has NB bits (n <= 15 by default); x^0 = +1, also for x = 0;
// an odd power or root keeps the sign, an even power is positive; the root
// of a negative value with even n, and any root with n = 0, raise
// out_invalid and return zero; a power that overflows saturates to the
// largest magnitude and one that underflows gives zero, as in mul/div.
//
// Interface: one operation per clock (T = 1); OUT_REG = 1 registers the
// result (latency 1), OUT_REG = 0 leaves it combinational.
module flma_powroot #(
  parameter int unsigned EB      = flma_pkg::E_BITS,
  parameter int unsigned FB      = flma_pkg::F_BITS,
  parameter int unsigned NB      = 4,
  parameter bit          OUT_REG = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  flma_pkg::powroot_op_e op,
  input  logic [NB-1:0]         n,
  input  logic                  x_zero,
  input  logic                  x_sign,
  input  logic signed [EB-1:0]  x_a,
  input  logic [FB-1:0]         x_b,
  output logic                  out_valid,
  output logic                  out_invalid,
  output logic                  out_zero,
  output logic                  out_sign,
  output logic signed [EB-1:0]  out_a,
  output logic [FB-1:0]         out_b
);

  localparam logic [FB-1:0] LN2F = FB'(flma_pkg::ln2_fixed(FB));
  localparam int            AMAX = (1 <<< (EB - 1)) - 1;
  localparam int            AMIN = -(1 <<< (EB - 1));
  localparam int unsigned   AW   = EB + NB + 2;   // signed width of n*a + k
  localparam int unsigned   PW   = FB + NB;       // width of n*b
  localparam int unsigned   RW   = FB + NB + 2;   // width of 2*(rem*LN2F + b) + n

  typedef struct packed {
    logic                 valid;
    logic                 invalid;
    logic                 zero;
    logic                 sign;
    logic signed [EB-1:0] a;
    logic [FB-1:0]        b;
  } res_t;

  res_t r_d;

  always_comb begin
    logic [PW-1:0]        prod;
    logic [NB-1:0]        k;
    logic signed [AW-1:0] a_w;
    logic signed [AW-1:0] n_s;
    logic signed [AW-1:0] a_q;
    logic signed [AW-1:0] a_r;
    logic [RW-1:0]        num;
    logic [RW-1:0]        bq;
    logic                 sat;

    r_d.valid   = in_valid;
    r_d.invalid = 1'b0;
    r_d.zero    = x_zero;
    r_d.sign    = x_sign;
    sat         = 1'b0;
    n_s         = AW'($signed({1'b0, n}));
    prod        = PW'(n) * PW'(x_b);
    k           = NB'(prod / PW'(LN2F));
    a_w         = '0;
    bq          = '0;
    a_q         = '0;
    a_r         = '0;
    num         = '0;

    if (op == flma_pkg::OP_POW) begin
      r_d.sign = x_sign & n[0];
      a_w      = AW'(x_a) * n_s + AW'($signed({1'b0, k}));
      bq       = RW'(prod - PW'(k) * PW'(LN2F));
      if (n == '0) begin
        r_d.zero = 1'b0;            // x^0 = +1
        r_d.sign = 1'b0;
        a_w      = '0;
        bq       = '0;
      end
    end else begin
      if (n == '0 || (x_sign && !x_zero && !n[0])) begin
        r_d.invalid = 1'b1;
        r_d.zero    = 1'b1;
      end else begin
        a_q = AW'(x_a) / n_s;       // truncates toward zero
        a_r = AW'(x_a) - a_q * n_s;
        if (a_r < 0) begin          // make it a floor division
          a_q = a_q - 1'b1;
          a_r = a_r + n_s;
        end
        num = RW'(a_r) * RW'(LN2F) + RW'(x_b);
        bq  = (2 * num + RW'(n)) / (2 * RW'(n));
        a_w = a_q;
        if (bq >= RW'(LN2F)) begin
          bq  = bq - RW'(LN2F);
          a_w = a_w + 1'b1;
        end
      end
    end

    if (a_w > AW'(AMAX)) sat = 1'b1;
    r_d.a = EB'(a_w);
    r_d.b = FB'(bq);
    if (!r_d.zero && sat) begin
      r_d.a = EB'(AMAX);
      r_d.b = LN2F - 1'b1;
    end else if (!r_d.zero && a_w < AW'(AMIN)) begin
      r_d.zero = 1'b1;
    end
    if (r_d.zero) begin
      r_d.sign = 1'b0;
      r_d.a    = '0;
      r_d.b    = '0;
    end
  end

  res_t r_q;

  if (OUT_REG) begin : g_reg
    logic v_q;
    res_t r_r;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) v_q <= 1'b0;
      else        v_q <= r_d.valid;
    end
    always_ff @(posedge clk) r_r <= r_d;
    always_comb begin
      r_q       = r_r;
      r_q.valid = v_q;
    end
  end else begin : g_comb
    assign r_q = r_d;
  end

  assign out_valid   = r_q.valid;
  assign out_invalid = r_q.invalid;
  assign out_zero    = r_q.zero;
  assign out_sign    = r_q.sign;
  assign out_a       = r_q.a;
  assign out_b       = r_q.b;

endmodule
