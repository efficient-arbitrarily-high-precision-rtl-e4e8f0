// flma_pkg: constants and elaboration-time helper functions shared by the
// dual-base (+-2^a e^b) logarithmic arithmetic units.
//
// The default numbers are the "log32" configuration: E=8 integer (base-2)
// exponent bits, F=23 base-e fraction bits, alpha = beta = 1 extra bits in the
// log-to-linear and linear-to-log conversions, accumulator A = F + alpha.
// exp unit: p = l = 27 + alpha, r = 2, I = 13 + alpha.
// log unit: p = l = 27 + beta,  r = 3, s = 9, I = 14 + beta.
//
// The shift-and-add units need the constants ln(1 + 2^-k) correctly rounded
// to l fractional bits, and the normaliser needs ln(2) rounded to F bits.
// Rather than storing tables, they are computed while elaborating from the
// series ln(1+t) = sum_j (-1)^(j+1) t^j / j with t = 2^-k, and
// ln(2) = sum_j 2^-j / j, in fixed point with 24 guard bits, then rounded
// to nearest.  Each series term is truncated by at most one guard-ulp, so the
// result is correctly rounded unless the true value lies within about 2^-16
// of a rounding midpoint.
package flma_pkg;

  // log32 defaults
  localparam int unsigned E_BITS   = 8;
  localparam int unsigned F_BITS   = 23;
  localparam int unsigned ALPHA    = 1;
  localparam int unsigned BETA     = 1;
  localparam int unsigned A_BITS   = F_BITS + ALPHA;
  localparam int unsigned EXP_P    = 27 + ALPHA;
  localparam int unsigned EXP_I    = 13 + ALPHA;
  localparam int unsigned EXP_R    = 2;
  localparam int unsigned LOG_P    = 27 + BETA;
  localparam int unsigned LOG_I    = 14 + BETA;
  localparam int unsigned LOG_R    = 3;
  localparam int unsigned LOG_S    = 9;
  localparam int unsigned DOT_N    = 128;

  // Widest fixed-point constant the helpers can produce.
  localparam int unsigned CONST_W  = 128;
  localparam int unsigned GUARD    = 24;
  localparam int unsigned WORK_W   = 192;

  typedef logic [CONST_W-1:0] const_t;

  // round(ln(1 + 2^-k) * 2^bits), k >= 1, bits + GUARD < WORK_W
  function automatic const_t ln1p_pow2(input int k, input int bits);
    logic [WORK_W-1:0] acc;
    logic [WORK_W-1:0] term;
    int w;
    w   = bits + GUARD;
    acc = '0;
    for (int j = 1; j * k <= w; j++) begin
      term = (WORK_W'(1) << (w - j * k)) / WORK_W'(j);
      if (j % 2 == 1) acc = acc + term;
      else            acc = acc - term;
    end
    acc = (acc + (WORK_W'(1) << (GUARD - 1))) >> GUARD;
    return const_t'(acc);
  endfunction

  // round(ln(2) * 2^bits)
  function automatic const_t ln2_fixed(input int bits);
    logic [WORK_W-1:0] acc;
    int w;
    w   = bits + GUARD;
    acc = '0;
    for (int j = 1; j <= w; j++)
      acc = acc + (WORK_W'(1) << (w - j)) / WORK_W'(j);
    acc = (acc + (WORK_W'(1) << (GUARD - 1))) >> GUARD;
    return const_t'(acc);
  endfunction

  // Operation select of the log-domain multiply/divide unit.
  typedef enum logic {OP_MUL = 1'b0, OP_DIV = 1'b1} muldiv_op_e;

  // Operation select of the add/sub unit.
  typedef enum logic {OP_ADD = 1'b0, OP_SUB = 1'b1} addsub_op_e;

  // Operation select of the log-domain integer power/root unit.
  typedef enum logic {OP_POW = 1'b0, OP_ROOT = 1'b1} powroot_op_e;

endpackage
