// flma_p2f: the p(.) conversion from the dual-base log domain to linear
// floating point.
//
// A log-domain value is {zero, sign, a, b} and stands for +-2^a * e^b (or 0),
// with a a two's-complement integer of EB bits and b an FB-bit fraction in
// [0, ln 2) (normalised Euler significand).  Because e^b is in [1, 2), the
// base-2 exponent a carries over directly as the floating-point exponent and
// e^b, evaluated by the shift-and-add exp unit to FB + ALPHA fraction bits,
// is the significand.  This follows the paper; the exponent is widened to
// EXW bits (own choice) so that accumulators built from the result have room
// to grow before any overflow.
//
// Interface: one conversion per clock, result 2 clocks later (the exp unit's
// latency); sign, zero and exponent ride along in matching registers.
module flma_p2f #(
  parameter int unsigned EB     = flma_pkg::E_BITS,
  parameter int unsigned FB     = flma_pkg::F_BITS,
  parameter int unsigned ALPHA  = flma_pkg::ALPHA,
  parameter int unsigned EXW    = flma_pkg::E_BITS + 2,
  parameter int unsigned EXP_P  = flma_pkg::EXP_P,
  parameter int unsigned EXP_I  = flma_pkg::EXP_I,
  parameter int unsigned EXP_R  = flma_pkg::EXP_R,
  localparam int unsigned MW    = FB + ALPHA
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  in_zero,
  input  logic                  in_sign,
  input  logic signed [EB-1:0]  in_a,
  input  logic [FB-1:0]         in_b,
  output logic                  out_valid,
  output logic                  out_zero,
  output logic                  out_sign,
  output logic signed [EXW-1:0] out_exp,
  output logic [MW-1:0]         out_frac
);

  logic [MW-1:0] sig;

  flma_exp #(.XB(FB), .YB(MW), .LB(EXP_P), .PB(EXP_P), .I(EXP_I), .R(EXP_R)) u_exp (
    .clk, .rst_n, .in_valid, .x(in_b), .out_valid, .y(sig)
  );

  typedef struct packed {
    logic                  zero;
    logic                  sign;
    logic signed [EXW-1:0] exp;
  } side_t;

  side_t side_d, side_1, side_2;

  assign side_d = '{zero: in_zero, sign: in_sign, exp: EXW'(in_a)};

  always_ff @(posedge clk) begin
    side_1 <= side_d;
    side_2 <= side_1;
  end

  assign out_zero = side_2.zero;
  assign out_sign = side_2.sign;
  assign out_exp  = side_2.exp;
  assign out_frac = side_2.zero ? '0 : sig;

endmodule
