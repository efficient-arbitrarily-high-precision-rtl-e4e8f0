// flma_muldiv: log-domain multiply and divide of dual-base values
// +-2^a e^b (FLMA mul/div).
//
// As in any logarithmic number system, a product adds the exponents and a
// quotient subtracts them; sign is the XOR of the signs.  With two bases the
// base-e parts add to b + d in [0, 2 ln 2) (or b - d in (-ln 2, ln 2)), so
// the result is renormalised, as the paper describes, by subtracting (or
// adding) the F-bit rounding of ln 2 and moving one unit into the base-2
// exponent.  Own choices (the paper says sign and zero are "handled in the
// obvious manner"): a zero operand gives zero for mul and a zero dividend
// gives zero for div; division by zero, and any exponent overflow, saturate
// to the largest magnitude; exponent underflow gives zero.
//
// Interface: OUT_REG = 1 registers the result (1 clock latency, T = 1, the
// paper's log32 mul); OUT_REG = 0 leaves it combinational so it can be
// merged into a following pipeline stage.
module flma_muldiv #(
  parameter int unsigned EB      = flma_pkg::E_BITS,
  parameter int unsigned FB      = flma_pkg::F_BITS,
  parameter bit          OUT_REG = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  flma_pkg::muldiv_op_e op,
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

  localparam logic [FB-1:0] LN2F = FB'(flma_pkg::ln2_fixed(FB));
  localparam int          AMAX = (1 <<< (EB - 1)) - 1;
  localparam int          AMIN = -(1 <<< (EB - 1));

  typedef struct packed {
    logic                 valid;
    logic                 zero;
    logic                 sign;
    logic signed [EB-1:0] a;
    logic [FB-1:0]        b;
  } res_t;

  res_t r_d;

  always_comb begin
    int           a;
    logic [FB:0]  s;
    logic         sat;
    r_d.valid = in_valid;
    r_d.sign  = x_sign ^ y_sign;
    r_d.zero  = 1'b0;
    sat       = 1'b0;
    if (op == flma_pkg::OP_MUL) begin
      a = int'(x_a) + int'(y_a);
      s = {1'b0, x_b} + {1'b0, y_b};
      if (s >= {1'b0, LN2F}) begin
        s = s - {1'b0, LN2F};
        a = a + 1;
      end
      if (x_zero || y_zero) r_d.zero = 1'b1;
    end else begin
      a = int'(x_a) - int'(y_a);
      s = {1'b0, x_b} - {1'b0, y_b};
      if (s[FB]) begin                 // negative: borrow one ln 2
        s = s + {1'b0, LN2F};
        a = a - 1;
      end
      if (x_zero)      r_d.zero = 1'b1;
      else if (y_zero) sat      = 1'b1;
    end
    r_d.a = EB'(a);
    r_d.b = s[FB-1:0];
    if (!r_d.zero && (sat || a > AMAX)) begin
      r_d.a = EB'(AMAX);
      r_d.b = LN2F - 1'b1;
    end else if (!r_d.zero && a < AMIN) begin
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

  assign out_valid = r_q.valid;
  assign out_zero  = r_q.zero;
  assign out_sign  = r_q.sign;
  assign out_a     = r_q.a;
  assign out_b     = r_q.b;

endmodule
