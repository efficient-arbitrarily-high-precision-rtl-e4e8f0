// flma_fadd: linear-domain floating-point adder used by the FLMA add/sub unit
// and by the inner-product accumulator.
//
// The paper uses an ordinary floating-point adder here without describing
// it, and compares against IEEE 754 arithmetic without subnormals; this is
// the simplest adder that does the job.  Operands and result are
// {zero, sign, exp, frac}: value = (-1)^sign * 1.frac * 2^exp, exp a signed
// EXW-bit integer, frac MW bits.  The smaller magnitude is aligned to the
// larger one keeping guard, round and sticky bits, the significands are added
// or subtracted, the result is normalised (leading-zero count) and rounded to
// nearest, ties to even.  Own choices: exact cancellation gives +0; a result
// whose exponent falls below the EXW range is flushed to zero and one above
// it saturates to the largest magnitude (there is no infinity).
//
// Interface: purely combinational; callers register the result.
module flma_fadd #(
  parameter int unsigned EXW = flma_pkg::E_BITS + 2,
  parameter int unsigned MW  = flma_pkg::A_BITS
) (
  input  logic                  a_zero,
  input  logic                  a_sign,
  input  logic signed [EXW-1:0] a_exp,
  input  logic [MW-1:0]         a_frac,
  input  logic                  b_zero,
  input  logic                  b_sign,
  input  logic signed [EXW-1:0] b_exp,
  input  logic [MW-1:0]         b_frac,
  output logic                  s_zero,
  output logic                  s_sign,
  output logic signed [EXW-1:0] s_exp,
  output logic [MW-1:0]         s_frac
);

  localparam int unsigned G  = 3;            // guard, round, sticky
  localparam int unsigned SW = MW + 2 + G;   // carry bit + hidden 1 + frac + grs
  localparam int          EMAX = (1 <<< (EXW - 1)) - 1;
  localparam int          EMIN = -(1 <<< (EXW - 1));

  always_comb begin
    logic                big_sign;
    int                  e_big, e_small, d, lz, e_res;
    logic [MW:0]         m_big, m_small;
    logic [SW-1:0]       x_big, x_small, sum, shifted;
    logic                sticky, swap, lsb, rnd_up, found;
    logic [MW+1:0]       rounded;

    lz    = 0;
    found = 1'b0;
    // larger magnitude first (signed exponent, then fraction)
    if (a_exp != b_exp) swap = (a_exp < b_exp);
    else                swap = (a_frac < b_frac);

    big_sign = swap ? b_sign : a_sign;
    e_big    = swap ? int'(b_exp) : int'(a_exp);
    e_small  = swap ? int'(a_exp) : int'(b_exp);
    m_big    = {1'b1, swap ? b_frac : a_frac};
    m_small  = {1'b1, swap ? a_frac : b_frac};

    x_big   = {1'b0, m_big, {G{1'b0}}};
    x_small = {1'b0, m_small, {G{1'b0}}};
    d       = e_big - e_small;
    if (d > int'(SW)) d = int'(SW);
    shifted = x_small >> d;
    sticky  = 1'b0;
    for (int i = 0; i < int'(SW); i++)
      if (i < d && x_small[i]) sticky = 1'b1;
    shifted[0] = shifted[0] | sticky;

    if (a_sign == b_sign) sum = x_big + shifted;
    else                  sum = x_big - shifted;

    // normalise: leading one to position SW-2 (hidden bit)
    e_res = e_big;
    if (sum[SW-1]) begin
      sum   = {1'b0, sum[SW-1:2], sum[1] | sum[0]};
      e_res = e_res + 1;
    end else begin
      for (int i = int'(SW) - 2; i >= 0; i--) begin
        if (sum[i]) found = 1'b1;
        if (!found) lz++;
      end
      if (lz < int'(SW) - 1) begin
        sum   = sum << lz;
        e_res = e_res - lz;
      end
    end

    // round to nearest even at MW fraction bits
    lsb     = sum[G];
    rnd_up  = sum[G-1] && (sum[G-2] || sum[0] || lsb);
    rounded = {1'b0, sum[SW-2:G]} + (MW+2)'(rnd_up);
    if (rounded[MW+1]) begin
      rounded = rounded >> 1;
      e_res   = e_res + 1;
    end

    s_sign = big_sign;
    s_frac = rounded[MW-1:0];
    s_zero = 1'b0;
    s_exp  = EXW'(e_res);
    if (a_zero && b_zero) begin
      s_zero = 1'b1; s_sign = 1'b0; s_exp = '0; s_frac = '0;
    end else if (a_zero) begin
      s_sign = b_sign; s_exp = b_exp; s_frac = b_frac;
    end else if (b_zero) begin
      s_sign = a_sign; s_exp = a_exp; s_frac = a_frac;
    end else if (sum == '0) begin
      s_zero = 1'b1; s_sign = 1'b0; s_exp = '0; s_frac = '0;
    end else if (e_res < EMIN) begin
      s_zero = 1'b1; s_sign = 1'b0; s_exp = '0; s_frac = '0;
    end else if (e_res > EMAX) begin
      s_exp = EXW'(EMAX); s_frac = '1;
    end
  end

endmodule
