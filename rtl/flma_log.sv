// flma_log: ln(x) for x = 1.xf in [1, 2), result a fraction in [0, ln 2].
//
// Method (follows the paper): the roles of E and L of the exp unit swap.
// E starts at 1, L at 0.  For shift k = 1 .. I-1 (paper iterations
// n = 2 .. I), if E*(1+2^-k) <= x then E *= (1+2^-k) and L += ln(1+2^-k).
// E keeps PB fractional bits (shifted-out bits truncated), L keeps LB
// fractional bits with correctly rounded hard-wired constants.  The Euler
// step y = L + (x - E)/E uses a truncated divider: the dividend x - E has at
// least I-3 zero fraction MSBs, which are skipped, and its R LSBs are dropped
// (DW = PB - (I-3) - R bits); the divisor is E cut to 1 + S bits.  The
// quotient is produced by restoring digit recurrence directly at the
// alignment of L (QW = LB - (I-3) bits) and added to L, and the sum is
// rounded to nearest at YB bits.
//
// Own choices: the paper gives 4 cycles of latency but not the cut points;
// here stage 1 and 2 each run half of the iterations, stage 3 forms the
// dividend and the first half of the quotient bits, stage 4 the rest, the
// final add and rounding.  With PIPE = 0 the four stage registers become
// wires and the whole unit is combinational (used as a multicycle path).
//
// Interface: in_valid/x sampled every clock (T = 1); out_valid/y follow
// 4 clocks later (PIPE = 1) or in the same cycle (PIPE = 0).
module flma_log #(
  parameter int unsigned XB   = flma_pkg::F_BITS + flma_pkg::BETA, // x fraction bits
  parameter int unsigned YB   = flma_pkg::F_BITS,                  // y fraction bits
  parameter int unsigned LB   = flma_pkg::LOG_P,                   // l
  parameter int unsigned PB   = flma_pkg::LOG_P,                   // p
  parameter int unsigned I    = flma_pkg::LOG_I,
  parameter int unsigned R    = flma_pkg::LOG_R,
  parameter int unsigned S    = flma_pkg::LOG_S,
  parameter bit          PIPE = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [XB-1:0] x,
  output logic          out_valid,
  output logic [YB-1:0] y
);

  localparam int unsigned K   = I - 1;                 // number of shifts
  localparam int unsigned KH  = K / 2;                 // shifts in stage 1
  localparam int unsigned ZD  = (I > 3) ? I - 3 : 0;   // zero MSBs of x - E
  localparam int unsigned DW  = PB - ZD - R;           // dividend bits
  localparam int unsigned VW  = 1 + S;                 // divisor bits
  localparam int unsigned NSH = LB - PB + R + S;       // numerator pre-shift
  localparam int unsigned NW  = DW + NSH;              // numerator bits
  localparam int unsigned NH  = NW / 2;                // quotient bits in stage 4
  localparam int unsigned QW  = LB - ZD;               // useful quotient bits

  initial begin
    assert (XB <= PB && YB < LB && S <= PB && DW >= 1 && I >= 3 && LB + R + S >= PB)
      else $fatal(1, "flma_log: unsupported parameter set");
  end

  logic [LB-1:0] c [1:K];
  for (genvar k = 1; k <= int'(K); k++) begin : g_const
    localparam logic [LB-1:0] CK = LB'(flma_pkg::ln1p_pow2(k, LB));
    assign c[k] = CK;
  end

  typedef struct packed {
    logic          valid;
    logic [PB:0]   x;   // 1.xf at PB fraction bits
    logic [PB:0]   e;   // 1.ef
    logic [LB-1:0] l;
  } iter_t;

  typedef struct packed {
    logic          valid;
    logic [LB-1:0] l;
    logic [NW-1:0] num;
    logic [VW-1:0] div;
    logic [VW:0]   rem;
    logic [NW-1:0] quo;
  } div_t;

  iter_t s0, s1_d, s1_q, s2_d, s2_q;
  div_t  s3_d, s3_q;
  logic          s4_valid_d;
  logic [YB-1:0] s4_y_d;

  // one shift-and-add step range [lo, hi]
  function automatic iter_t iterate(input iter_t st, input int lo, input int hi,
                                    input logic [LB-1:0] cc [1:K]);
    iter_t o;
    logic [PB+1:0] t;   // candidate may reach 2 or more: one extra integer bit
    o = st;
    for (int k = 1; k <= int'(K); k++) begin
      if (k >= lo && k <= hi) begin
        t = {1'b0, o.e} + {1'b0, o.e >> k};
        if (t <= {1'b0, o.x}) begin
          o.e = t[PB:0];
          o.l = o.l + cc[k];
        end
      end
    end
    return o;
  endfunction

  // restoring digit recurrence over numerator bits [hi : lo]
  function automatic div_t divide(input div_t st, input int lo, input int hi);
    div_t o;
    o = st;
    for (int i = int'(NW) - 1; i >= 0; i--) begin
      if (i >= lo && i <= hi) begin
        o.rem = {o.rem[VW-1:0], o.num[i]};
        if (o.rem >= {1'b0, o.div}) begin
          o.rem    = o.rem - {1'b0, o.div};
          o.quo[i] = 1'b1;
        end else begin
          o.quo[i] = 1'b0;
        end
      end
    end
    return o;
  endfunction

  // ---------------- stage 1 / stage 2: iterations --------------------------
  always_comb begin
    s0.valid = in_valid;
    s0.x     = {1'b1, PB'(x) << (PB - XB)};
    s0.e     = {1'b1, {PB{1'b0}}};
    s0.l     = '0;
    s1_d     = iterate(s0, 1, int'(KH), c);
  end

  assign s2_d = iterate(s1_q, int'(KH) + 1, int'(K), c);

  // ---------------- stage 3: dividend, divisor, first quotient bits -------
  always_comb begin
    div_t        st;
    logic [PB:0] diff;
    diff     = s2_q.x - s2_q.e;
    st.valid = s2_q.valid;
    st.l     = s2_q.l;
    st.num   = NW'(diff[PB-1-ZD -: DW]) << NSH;
    st.div   = {1'b1, s2_q.e[PB-1 -: S]};
    st.rem   = '0;
    st.quo   = '0;
    s3_d     = divide(st, int'(NH), int'(NW) - 1);
  end

  // ---------------- stage 4: last quotient bits, final add, rounding ------
  always_comb begin
    div_t          st;
    logic [LB:0]   sum;
    logic [LB:0]   rnd;
    st         = divide(s3_q, 0, int'(NH) - 1);
    sum        = {1'b0, st.l} + (LB+1)'(st.quo[QW-1:0]);
    rnd        = (sum + ((LB+1)'(1) << (LB - YB - 1))) >> (LB - YB);
    s4_valid_d = st.valid;
    s4_y_d     = (rnd[LB:YB] != '0) ? '1 : rnd[YB-1:0];
  end

  // ---------------- stage registers (or wires when PIPE = 0) --------------
  if (PIPE) begin : g_pipe
    logic  v1, v2, v3;
    iter_t s1_r, s2_r;
    div_t  s3_r;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        v1        <= 1'b0;
        v2        <= 1'b0;
        v3        <= 1'b0;
        out_valid <= 1'b0;
      end else begin
        v1        <= s1_d.valid;
        v2        <= s2_d.valid;
        v3        <= s3_d.valid;
        out_valid <= s4_valid_d;
      end
    end
    always_ff @(posedge clk) begin
      s1_r <= s1_d;
      s2_r <= s2_d;
      s3_r <= s3_d;
      y    <= s4_y_d;
    end
    always_comb begin
      s1_q = s1_r;  s1_q.valid = v1;
      s2_q = s2_r;  s2_q.valid = v2;
      s3_q = s3_r;  s3_q.valid = v3;
    end
  end else begin : g_comb
    assign s1_q      = s1_d;
    assign s2_q      = s2_d;
    assign s3_q      = s3_d;
    assign out_valid = s4_valid_d;
    assign y         = s4_y_d;
  end

endmodule
