// flma_f2q: the q(.) conversion from linear floating point back to the
// dual-base log domain +-2^a e^b.
//
// Following the paper, the floating-point exponent becomes the base-2
// exponent a, and b = ln(significand) is evaluated by the shift-and-add log
// unit.  The accumulator fraction (AB bits) is first rounded to nearest to
// the F + BETA bits the log unit takes; if that rounding carries into 2.0 the
// exponent is incremented.  ln of a significand in [1, 2) lies in [0, ln 2];
// a result that rounds to ln 2 (at F bits) or above is renormalised by
// subtracting the F-bit rounding of ln 2 and incrementing a, so b is always a
// normalised Euler significand.  Own choices: an exponent above the EB-bit
// range saturates to the largest log-domain magnitude, one below it gives
// zero; round-to-nearest uses ties-away (add half) as the paper only says
// "rounding".
//
// PIPE = 1: fully pipelined, one conversion per clock, 4 clocks latency.
// PIPE = 0: purely combinational, for use as a data-gated multicycle path.
module flma_f2q #(
  parameter int unsigned EB     = flma_pkg::E_BITS,
  parameter int unsigned FB     = flma_pkg::F_BITS,
  parameter int unsigned BETA   = flma_pkg::BETA,
  parameter int unsigned AB     = flma_pkg::A_BITS,
  parameter int unsigned EXW    = flma_pkg::E_BITS + 2,
  parameter int unsigned LOG_P  = flma_pkg::LOG_P,
  parameter int unsigned LOG_I  = flma_pkg::LOG_I,
  parameter int unsigned LOG_R  = flma_pkg::LOG_R,
  parameter int unsigned LOG_S  = flma_pkg::LOG_S,
  parameter bit          PIPE   = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic                  in_zero,
  input  logic                  in_sign,
  input  logic signed [EXW-1:0] in_exp,
  input  logic [AB-1:0]         in_frac,
  output logic                  out_valid,
  output logic                  out_zero,
  output logic                  out_sign,
  output logic signed [EB-1:0]  out_a,
  output logic [FB-1:0]         out_b
);

  localparam int unsigned XB   = FB + BETA;
  localparam int unsigned LAT  = PIPE ? 4 : 0;
  localparam logic [FB-1:0] LN2F = FB'(flma_pkg::ln2_fixed(FB));
  localparam int          AMAX = (1 <<< (EB - 1)) - 1;
  localparam int          AMIN = -(1 <<< (EB - 1));

  typedef struct packed {
    logic                  zero;
    logic                  sign;
    logic signed [EXW:0]   exp;
  } side_t;

  // ---- round the accumulator fraction to XB bits --------------------------
  logic [XB-1:0] x_frac;
  side_t         side_in;

  localparam int unsigned RSH = (AB > XB) ? AB - XB : 0;
  localparam int unsigned LSH = (AB < XB) ? XB - AB : 0;
  localparam int unsigned TW  = AB + LSH + 2;
  localparam logic [TW-1:0] HALF = (RSH > 0) ? TW'(1) << (RSH - 1) : '0;

  always_comb begin
    logic [TW-1:0] t;
    t            = (({2'b01, in_frac} << LSH) + HALF) >> RSH;
    side_in.zero = in_zero;
    side_in.sign = in_sign;
    side_in.exp  = (EXW+1)'(in_exp) + (EXW+1)'(t[XB+1]);
    x_frac       = t[XB+1] ? '0 : t[XB-1:0];
  end

  // ---- ln of the significand --------------------------------------------
  logic          ln_valid;
  logic [FB-1:0] ln_y;

  flma_log #(.XB(XB), .YB(FB), .LB(LOG_P), .PB(LOG_P), .I(LOG_I), .R(LOG_R),
             .S(LOG_S), .PIPE(PIPE)) u_log (
    .clk, .rst_n, .in_valid, .x(x_frac), .out_valid(ln_valid), .y(ln_y)
  );

  // ---- sideband delay matching the log unit -----------------------------
  side_t side_out;

  if (LAT > 0) begin : g_delay
    side_t pipe [LAT];
    always_ff @(posedge clk) begin
      pipe[0] <= side_in;
      for (int i = 1; i < int'(LAT); i++) pipe[i] <= pipe[i-1];
    end
    assign side_out = pipe[LAT-1];
  end else begin : g_nodelay
    assign side_out = side_in;
  end

  // ---- normalise b into [0, ln 2), range-check a --------------------------
  always_comb begin
    int            a;
    logic [FB-1:0] b;
    a = int'(side_out.exp);
    b = ln_y;
    if (ln_y >= LN2F) begin
      a = a + 1;
      b = ln_y - LN2F;
    end
    out_valid = ln_valid;
    out_sign  = side_out.sign;
    out_zero  = side_out.zero;
    out_a     = EB'(a);
    out_b     = b;
    if (side_out.zero || a < AMIN) begin
      out_zero = 1'b1;
      out_a    = '0;
      out_b    = '0;
    end else if (a > AMAX) begin
      out_a    = EB'(AMAX);
      out_b    = LN2F - 1'b1;
    end
  end

endmodule
