// flma_exp: e^x for a fixed-point fraction x in [0, ln 2), result in [1, 2).
//
// Method (follows the paper): restoring shift-and-add in De Lugish style,
// fully unrolled.  L starts at x, E at 1.  For shift k = 1 .. I-1 (the
// paper's iterations n = 2 .. I; iteration n = 1, shift 0, can never fire for
// x < ln 2), if L >= ln(1+2^-k) then L -= ln(1+2^-k) and E += E * 2^-k.
// L carries LB fractional bits with hard-wired, correctly rounded constants;
// E carries PB fractional bits plus the implicit leading 1, and bits shifted
// below 2^-PB are dropped (truncation, PB includes guard bits).
// One explicit Euler step follows:  y = E + L*E = E + Lf + Lf*Ef, where the
// product Lf*Ef is formed by a truncated MW x MW multiplier with
// MW = LB - (I-2) - R: the I-2 known-zero MSBs of Lf and R further LSBs are
// skipped, and the same number of MSBs is taken from Ef.  The product is
// aligned to 2^-PB (its low bits are truncated or zeros appended).  Finally
// E is rounded to nearest at YB fractional bits.
//
// Own choices: a result that rounds up to 2.0 saturates to the largest value
// below 2; the pipeline is cut in two register stages (iterations | Euler
// step and rounding) to match the paper's 2-cycle latency, the paper does not
// say where its cut is.
//
// Interface: in_valid/x are sampled every clock (T = 1).  out_valid/y appear
// 2 clocks later; y holds the YB fraction bits of the result 1.y.
module flma_exp #(
  parameter int unsigned XB = flma_pkg::F_BITS,              // x fraction bits
  parameter int unsigned YB = flma_pkg::F_BITS + flma_pkg::ALPHA, // y fraction bits
  parameter int unsigned LB = flma_pkg::EXP_P,               // l: L fraction bits
  parameter int unsigned PB = flma_pkg::EXP_P,               // p: E fraction bits
  parameter int unsigned I  = flma_pkg::EXP_I,               // iterations
  parameter int unsigned R  = flma_pkg::EXP_R                // extra truncated bits
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [XB-1:0] x,
  output logic          out_valid,
  output logic [YB-1:0] y
);

  localparam int unsigned K       = I - 1;                    // number of shifts
  localparam int unsigned ZL      = (I > 2) ? I - 2 : 0;      // zero MSBs of Lf
  localparam int unsigned MW      = LB - ZL - R;              // multiplier width
  localparam int          PROD_SH = int'(LB - R + MW) - int'(PB); // product -> 2^-PB

  initial begin
    assert (XB <= LB && YB < PB && MW <= PB && MW >= 1 && I >= 2)
      else $fatal(1, "flma_exp: unsupported parameter set");
  end

  // Hard-wired constants ln(1 + 2^-k), k = 1..K, rounded to LB bits.
  logic [LB-1:0] c [1:K];
  for (genvar k = 1; k <= int'(K); k++) begin : g_const
    localparam logic [LB-1:0] CK = LB'(flma_pkg::ln1p_pow2(k, LB));
    assign c[k] = CK;
  end

  // ---------------- stage 1: unrolled shift-and-add iterations ------------
  logic [LB-1:0] l_d;
  logic [PB:0]   e_d;      // 1 integer bit + PB fraction bits

  always_comb begin
    logic [LB-1:0] l;
    logic [PB:0]   e;
    l = LB'(x) << (LB - XB);
    e = {1'b1, {PB{1'b0}}};
    for (int k = 1; k <= int'(K); k++) begin
      if (l >= c[k]) begin
        l = l - c[k];
        e = e + (e >> k);
      end
    end
    l_d = l;
    e_d = e;
  end

  logic          s1_valid;
  logic [LB-1:0] s1_l;
  logic [PB-1:0] s1_ef;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    s1_l  <= l_d;
    s1_ef <= e_d[PB-1:0];
  end

  // ---------------- stage 2: truncated-multiply Euler step, rounding ------
  logic [MW-1:0]   l_tr, e_tr;
  logic [2*MW-1:0] prod;
  logic [PB+1:0]   prod_al, l_al, sum;
  logic [PB+1:0]   rounded;
  logic [YB-1:0]   y_d;

  assign l_tr = s1_l[LB-1-ZL -: MW];
  assign e_tr = s1_ef[PB-1 -: MW];
  assign prod = l_tr * e_tr;

  always_comb begin
    if (PROD_SH >= 0) prod_al = (PB+2)'(prod >> PROD_SH);
    else              prod_al = (PB+2)'(prod) << (-PROD_SH);
    if (LB >= PB)     l_al    = (PB+2)'(s1_l >> (LB - PB));
    else              l_al    = (PB+2)'(s1_l) << (PB - LB);
    sum     = {2'b01, s1_ef} + l_al + prod_al;
    rounded = (sum + ((PB+2)'(1) << (PB - YB - 1))) >> (PB - YB);
    if (rounded[YB+1:YB] != 2'b01) y_d = '1;   // reached 2.0: saturate
    else                           y_d = rounded[YB-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s1_valid;
  end

  always_ff @(posedge clk) y <= y_d;

endmodule
