// flma_top: a dual-base logarithmic (FLMA) arithmetic unit with four
// independent pipes that share the number format +-2^a e^b (or zero):
//
//   dot_*  N-element inner product q(sum p(x'_i y'_i)), one operand pair per
//          clock, one result every N + 7 clocks (flma_dot)
//   as_*   add/sub q(p(x') +- p(y')), one per clock, latency 7 (flma_addsub)
//   md_*   multiply/divide in the log domain, one per clock, latency 1
//          (flma_muldiv)
//   pr_*   integer power x^n / root x^(1/n), n < 2^PR_NB, one per clock,
//          latency 1 (flma_powroot)
//
// The paper evaluates these operators as separate units; grouping them
// under one top with separate ports is this design's own choice, so that all
// of them can be built and simulated together.  All pipes use the log32
// parameters by default (E = 8, F = 23, alpha = beta = 1, A = 24).
module flma_top #(
  parameter int unsigned EB    = flma_pkg::E_BITS,
  parameter int unsigned FB    = flma_pkg::F_BITS,
  parameter int unsigned ALPHA = flma_pkg::ALPHA,
  parameter int unsigned BETA  = flma_pkg::BETA,
  parameter int unsigned AB    = flma_pkg::A_BITS,
  parameter int unsigned N     = flma_pkg::DOT_N,
  parameter int unsigned Q_MCP = 4,
  parameter int unsigned PR_NB = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // inner product
  input  logic                 dot_in_valid,
  output logic                 dot_in_ready,
  input  logic                 dot_x_zero,
  input  logic                 dot_x_sign,
  input  logic signed [EB-1:0] dot_x_a,
  input  logic [FB-1:0]        dot_x_b,
  input  logic                 dot_y_zero,
  input  logic                 dot_y_sign,
  input  logic signed [EB-1:0] dot_y_a,
  input  logic [FB-1:0]        dot_y_b,
  output logic                 dot_out_valid,
  output logic                 dot_out_zero,
  output logic                 dot_out_sign,
  output logic signed [EB-1:0] dot_out_a,
  output logic [FB-1:0]        dot_out_b,
  // add / subtract
  input  logic                 as_in_valid,
  input  logic                 as_sub,
  input  logic                 as_x_zero,
  input  logic                 as_x_sign,
  input  logic signed [EB-1:0] as_x_a,
  input  logic [FB-1:0]        as_x_b,
  input  logic                 as_y_zero,
  input  logic                 as_y_sign,
  input  logic signed [EB-1:0] as_y_a,
  input  logic [FB-1:0]        as_y_b,
  output logic                 as_out_valid,
  output logic                 as_out_zero,
  output logic                 as_out_sign,
  output logic signed [EB-1:0] as_out_a,
  output logic [FB-1:0]        as_out_b,
  // multiply / divide
  input  logic                 md_in_valid,
  input  logic                 md_div,
  input  logic                 md_x_zero,
  input  logic                 md_x_sign,
  input  logic signed [EB-1:0] md_x_a,
  input  logic [FB-1:0]        md_x_b,
  input  logic                 md_y_zero,
  input  logic                 md_y_sign,
  input  logic signed [EB-1:0] md_y_a,
  input  logic [FB-1:0]        md_y_b,
  output logic                 md_out_valid,
  output logic                 md_out_zero,
  output logic                 md_out_sign,
  output logic signed [EB-1:0] md_out_a,
  output logic [FB-1:0]        md_out_b,
  // integer power / root
  input  logic                 pr_in_valid,
  input  logic                 pr_root,
  input  logic [PR_NB-1:0]     pr_n,
  input  logic                 pr_x_zero,
  input  logic                 pr_x_sign,
  input  logic signed [EB-1:0] pr_x_a,
  input  logic [FB-1:0]        pr_x_b,
  output logic                 pr_out_valid,
  output logic                 pr_out_invalid,
  output logic                 pr_out_zero,
  output logic                 pr_out_sign,
  output logic signed [EB-1:0] pr_out_a,
  output logic [FB-1:0]        pr_out_b
);

  flma_dot #(.N(N), .EB(EB), .FB(FB), .ALPHA(ALPHA), .BETA(BETA), .AB(AB),
             .EXP_P(27 + ALPHA), .EXP_I(13 + ALPHA), .EXP_R(2),
             .LOG_P(27 + BETA), .LOG_I(14 + BETA), .LOG_R(3), .LOG_S(9),
             .Q_MCP(Q_MCP)) u_dot (
    .clk, .rst_n, .in_valid(dot_in_valid), .in_ready(dot_in_ready),
    .x_zero(dot_x_zero), .x_sign(dot_x_sign), .x_a(dot_x_a), .x_b(dot_x_b),
    .y_zero(dot_y_zero), .y_sign(dot_y_sign), .y_a(dot_y_a), .y_b(dot_y_b),
    .out_valid(dot_out_valid), .out_zero(dot_out_zero), .out_sign(dot_out_sign),
    .out_a(dot_out_a), .out_b(dot_out_b)
  );

  flma_addsub #(.EB(EB), .FB(FB), .ALPHA(ALPHA), .BETA(BETA),
                .EXP_P(27 + ALPHA), .EXP_I(13 + ALPHA), .EXP_R(2),
                .LOG_P(27 + BETA), .LOG_I(14 + BETA), .LOG_R(3), .LOG_S(9)) u_addsub (
    .clk, .rst_n, .in_valid(as_in_valid),
    .op(as_sub ? flma_pkg::OP_SUB : flma_pkg::OP_ADD),
    .x_zero(as_x_zero), .x_sign(as_x_sign), .x_a(as_x_a), .x_b(as_x_b),
    .y_zero(as_y_zero), .y_sign(as_y_sign), .y_a(as_y_a), .y_b(as_y_b),
    .out_valid(as_out_valid), .out_zero(as_out_zero), .out_sign(as_out_sign),
    .out_a(as_out_a), .out_b(as_out_b)
  );

  flma_muldiv #(.EB(EB), .FB(FB), .OUT_REG(1'b1)) u_muldiv (
    .clk, .rst_n, .in_valid(md_in_valid),
    .op(md_div ? flma_pkg::OP_DIV : flma_pkg::OP_MUL),
    .x_zero(md_x_zero), .x_sign(md_x_sign), .x_a(md_x_a), .x_b(md_x_b),
    .y_zero(md_y_zero), .y_sign(md_y_sign), .y_a(md_y_a), .y_b(md_y_b),
    .out_valid(md_out_valid), .out_zero(md_out_zero), .out_sign(md_out_sign),
    .out_a(md_out_a), .out_b(md_out_b)
  );

  flma_powroot #(.EB(EB), .FB(FB), .NB(PR_NB), .OUT_REG(1'b1)) u_powroot (
    .clk, .rst_n, .in_valid(pr_in_valid),
    .op(pr_root ? flma_pkg::OP_ROOT : flma_pkg::OP_POW), .n(pr_n),
    .x_zero(pr_x_zero), .x_sign(pr_x_sign), .x_a(pr_x_a), .x_b(pr_x_b),
    .out_valid(pr_out_valid), .out_invalid(pr_out_invalid), .out_zero(pr_out_zero),
    .out_sign(pr_out_sign), .out_a(pr_out_a), .out_b(pr_out_b)
  );

endmodule
