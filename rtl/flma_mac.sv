// flma_mac: the FLMA multiply-add core, acc <- acc + p(x' * y').
//
// Following the paper, the product of two dual-base log-domain values is
// formed in the log domain (an exponent add, see flma_muldiv), converted to
// linear floating point by p(.) and added into a floating-point accumulator
// of A fraction bits, one new product per clock.  There is no q(.) here: the
// accumulator stays in the linear domain and q(.) is applied once at the end
// of a sum (see flma_dot).  Own choices for the 3-clock latency the paper
// reports: the log-domain multiply is combinational in front of the first
// exp stage, p(.) takes 2 clocks, the accumulate 1 clock.  in_first marks the
// first product of a new sum: it replaces the accumulator instead of adding.
//
// Interface: in_valid/in_first/x/y sampled each clock; acc_* holds the
// running sum; acc_valid pulses 3 clocks after each accepted product, when
// that product has been added.
module flma_mac #(
  parameter int unsigned EB    = flma_pkg::E_BITS,
  parameter int unsigned FB    = flma_pkg::F_BITS,
  parameter int unsigned ALPHA = flma_pkg::ALPHA,
  parameter int unsigned AB    = flma_pkg::A_BITS,
  parameter int unsigned EXP_P = flma_pkg::EXP_P,
  parameter int unsigned EXP_I = flma_pkg::EXP_I,
  parameter int unsigned EXP_R = flma_pkg::EXP_R,
  localparam int unsigned EXW  = EB + 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  in_first,
  input  logic                  x_zero,
  input  logic                  x_sign,
  input  logic signed [EB-1:0]  x_a,
  input  logic [FB-1:0]         x_b,
  input  logic                  y_zero,
  input  logic                  y_sign,
  input  logic signed [EB-1:0]  y_a,
  input  logic [FB-1:0]         y_b,
  output logic                  acc_valid,
  output logic                  acc_zero,
  output logic                  acc_sign,
  output logic signed [EXW-1:0] acc_exp,
  output logic [AB-1:0]         acc_frac
);

  localparam int unsigned MW = FB + ALPHA;

  initial assert (AB >= MW) else $fatal(1, "flma_mac: accumulator narrower than p(.) output");

  // ---- log-domain multiply (combinational) --------------------------------
  logic                 m_valid, m_zero, m_sign;
  logic signed [EB-1:0] m_a;
  logic [FB-1:0]        m_b;

  flma_muldiv #(.EB(EB), .FB(FB), .OUT_REG(1'b0)) u_mul (
    .clk, .rst_n, .in_valid, .op(flma_pkg::OP_MUL),
    .x_zero, .x_sign, .x_a, .x_b, .y_zero, .y_sign, .y_a, .y_b,
    .out_valid(m_valid), .out_zero(m_zero), .out_sign(m_sign), .out_a(m_a), .out_b(m_b)
  );

  // ---- p(.) -------------------------------------------------------------
  logic                  p_valid, p_zero, p_sign;
  logic signed [EXW-1:0] p_exp;
  logic [MW-1:0]         p_frac;

  flma_p2f #(.EB(EB), .FB(FB), .ALPHA(ALPHA), .EXW(EXW), .EXP_P(EXP_P),
             .EXP_I(EXP_I), .EXP_R(EXP_R)) u_p (
    .clk, .rst_n, .in_valid(m_valid), .in_zero(m_zero), .in_sign(m_sign),
    .in_a(m_a), .in_b(m_b), .out_valid(p_valid), .out_zero(p_zero),
    .out_sign(p_sign), .out_exp(p_exp), .out_frac(p_frac)
  );

  logic [1:0] first_pipe;
  always_ff @(posedge clk) first_pipe <= {first_pipe[0], in_first};

  // ---- accumulate ---------------------------------------------------------
  logic                  s_zero, s_sign;
  logic signed [EXW-1:0] s_exp;
  logic [AB-1:0]         s_frac;

  flma_fadd #(.EXW(EXW), .MW(AB)) u_add (
    .a_zero(acc_zero | first_pipe[1]), .a_sign(acc_sign), .a_exp(acc_exp), .a_frac(acc_frac),
    .b_zero(p_zero), .b_sign(p_sign), .b_exp(p_exp), .b_frac(AB'(p_frac) << (AB - MW)),
    .s_zero, .s_sign, .s_exp, .s_frac
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_valid <= 1'b0;
      acc_zero  <= 1'b1;
      acc_sign  <= 1'b0;
      acc_exp   <= '0;
      acc_frac  <= '0;
    end else begin
      acc_valid <= p_valid;
      if (p_valid) begin
        acc_zero <= s_zero;
        acc_sign <= s_sign;
        acc_exp  <= s_exp;
        acc_frac <= s_frac;
      end
    end
  end

endmodule
