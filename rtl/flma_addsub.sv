// flma_addsub: FLMA addition/subtraction of two dual-base log-domain values,
// computed as q(p(x') +- p(y')).
//
// Following the paper, both operands are converted to linear floating point
// by two p(.) converters (shift-and-add e^x), added or subtracted in a
// floating-point adder at A = F + ALPHA fraction bits, and converted back by
// one q(.) converter (shift-and-add ln x).  Nothing is shared or gated, so
// all three converters switch every cycle when the pipe is full.  Stage
// split (own choice, matching the paper's total latency of 7):
// p(.) 2 clocks, adder 1 clock, q(.) 4 clocks.
//
// Interface: one operation per clock (T = 1); op selects x + y or x - y;
// the result appears with out_valid 7 clocks after in_valid.
// The assertion at the end reads rst_n through "disable iff", so a linter
// may report rst_n as used both synchronously and asynchronously; the
// registers themselves use it only as an asynchronous reset.
module flma_addsub #(
  parameter int unsigned EB    = flma_pkg::E_BITS,
  parameter int unsigned FB    = flma_pkg::F_BITS,
  parameter int unsigned ALPHA = flma_pkg::ALPHA,
  parameter int unsigned BETA  = flma_pkg::BETA,
  parameter int unsigned EXP_P = flma_pkg::EXP_P,
  parameter int unsigned EXP_I = flma_pkg::EXP_I,
  parameter int unsigned EXP_R = flma_pkg::EXP_R,
  parameter int unsigned LOG_P = flma_pkg::LOG_P,
  parameter int unsigned LOG_I = flma_pkg::LOG_I,
  parameter int unsigned LOG_R = flma_pkg::LOG_R,
  parameter int unsigned LOG_S = flma_pkg::LOG_S
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  flma_pkg::addsub_op_e op,
  input  logic                 x_zero,
  input  logic                 x_sign,
  input  logic signed [EB-1:0] x_a,
  input  logic [FB-1:0]        x_b,
  input  logic                 y_zero,
  input  logic                 y_sign,
  input  logic signed [EB-1:0] y_a,
  input  logic [FB-1:0]        y_b,
  output logic                 out_valid,
  output logic                 out_zero,
  output logic                 out_sign,
  output logic signed [EB-1:0] out_a,
  output logic [FB-1:0]        out_b
);

  localparam int unsigned EXW = EB + 2;
  localparam int unsigned MW  = FB + ALPHA;

  logic                  px_valid, py_valid;
  logic                  px_zero, px_sign, py_zero, py_sign;
  logic signed [EXW-1:0] px_exp, py_exp;
  logic [MW-1:0]         px_frac, py_frac;

  flma_p2f #(.EB(EB), .FB(FB), .ALPHA(ALPHA), .EXW(EXW), .EXP_P(EXP_P),
             .EXP_I(EXP_I), .EXP_R(EXP_R)) u_px (
    .clk, .rst_n, .in_valid, .in_zero(x_zero), .in_sign(x_sign), .in_a(x_a),
    .in_b(x_b), .out_valid(px_valid), .out_zero(px_zero), .out_sign(px_sign),
    .out_exp(px_exp), .out_frac(px_frac)
  );

  // subtraction flips the sign of y on its way into the converter
  flma_p2f #(.EB(EB), .FB(FB), .ALPHA(ALPHA), .EXW(EXW), .EXP_P(EXP_P),
             .EXP_I(EXP_I), .EXP_R(EXP_R)) u_py (
    .clk, .rst_n, .in_valid, .in_zero(y_zero),
    .in_sign(y_sign ^ (op == flma_pkg::OP_SUB)), .in_a(y_a), .in_b(y_b),
    .out_valid(py_valid), .out_zero(py_zero), .out_sign(py_sign),
    .out_exp(py_exp), .out_frac(py_frac)
  );

  logic                  s_zero, s_sign;
  logic signed [EXW-1:0] s_exp;
  logic [MW-1:0]         s_frac;

  flma_fadd #(.EXW(EXW), .MW(MW)) u_add (
    .a_zero(px_zero), .a_sign(px_sign), .a_exp(px_exp), .a_frac(px_frac),
    .b_zero(py_zero), .b_sign(py_sign), .b_exp(py_exp), .b_frac(py_frac),
    .s_zero, .s_sign, .s_exp, .s_frac
  );

  logic                  r_valid, r_zero, r_sign;
  logic signed [EXW-1:0] r_exp;
  logic [MW-1:0]         r_frac;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) r_valid <= 1'b0;
    else        r_valid <= px_valid;
  end

  always_ff @(posedge clk) begin
    r_zero <= s_zero;
    r_sign <= s_sign;
    r_exp  <= s_exp;
    r_frac <= s_frac;
  end

  flma_f2q #(.EB(EB), .FB(FB), .BETA(BETA), .AB(MW), .EXW(EXW), .LOG_P(LOG_P),
             .LOG_I(LOG_I), .LOG_R(LOG_R), .LOG_S(LOG_S), .PIPE(1'b1)) u_q (
    .clk, .rst_n, .in_valid(r_valid), .in_zero(r_zero), .in_sign(r_sign),
    .in_exp(r_exp), .in_frac(r_frac), .out_valid, .out_zero, .out_sign,
    .out_a, .out_b
  );

  // both converters run in lock step
  assert property (@(posedge clk) disable iff (!rst_n) px_valid == py_valid);

endmodule
