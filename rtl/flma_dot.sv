// flma_dot: N-element inner product in dual-base logarithmic arithmetic,
// result = q( sum_i p(x'_i * y'_i) ).
//
// The inner loop is the flma_mac core: one product per clock is formed in
// the log domain, converted to floating point and accumulated, so the cost of
// q(.) is paid once per vector rather than once per addition (the paper's
// main point for 1:1 multiply/add workloads).  Following the paper, the
// single q(.) is not pipelined: it is a purely combinational converter used
// as a multicycle path.  Its input register is loaded once per vector, which
// also gates the converter's data so it does not toggle while the vector is
// being accumulated, and its output is sampled Q_MCP clocks later.
//
// Timing (own choices, chosen to reproduce the paper's throughput of 135
// clocks for N = 128): operands are accepted on N consecutive clocks while
// in_ready is high; 2 more clocks drain the mac pipeline (its latency is 3),
// 1 clock loads the q(.) input register, Q_MCP = 4 clocks cover the
// multicycle path, and the result appears with out_valid, at which point
// in_ready rises again: one vector every N + 7 clocks.
// A synthesis flow must be given a multicycle constraint of Q_MCP cycles
// from q_in_* to out_zero, out_sign, out_a and out_b.
// The assertion at the end reads rst_n through "disable iff", so a linter
// may report rst_n as used both synchronously and asynchronously; the
// registers themselves use it only as an asynchronous reset.
module flma_dot #(
  parameter int unsigned N     = flma_pkg::DOT_N,
  parameter int unsigned EB    = flma_pkg::E_BITS,
  parameter int unsigned FB    = flma_pkg::F_BITS,
  parameter int unsigned ALPHA = flma_pkg::ALPHA,
  parameter int unsigned BETA  = flma_pkg::BETA,
  parameter int unsigned AB    = flma_pkg::A_BITS,
  parameter int unsigned EXP_P = flma_pkg::EXP_P,
  parameter int unsigned EXP_I = flma_pkg::EXP_I,
  parameter int unsigned EXP_R = flma_pkg::EXP_R,
  parameter int unsigned LOG_P = flma_pkg::LOG_P,
  parameter int unsigned LOG_I = flma_pkg::LOG_I,
  parameter int unsigned LOG_R = flma_pkg::LOG_R,
  parameter int unsigned LOG_S = flma_pkg::LOG_S,
  parameter int unsigned Q_MCP = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
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

  localparam int unsigned EXW   = EB + 2;
  localparam int unsigned DRAIN = 2;          // mac latency 3, minus the accept clock
  localparam int unsigned CW    = $clog2(N + 1) + 1;

  typedef enum logic [1:0] {S_ACC, S_DRAIN, S_LOAD, S_MCP} state_e;

  state_e        state;
  logic [CW-1:0] cnt;
  logic          accept, first;

  assign in_ready = (state == S_ACC);
  assign accept   = in_valid && in_ready;
  assign first    = accept && (cnt == '0);

  // ---- multiply-accumulate core ---------------------------------------------
  logic                  acc_valid, acc_zero, acc_sign;
  logic signed [EXW-1:0] acc_exp;
  logic [AB-1:0]         acc_frac;

  flma_mac #(.EB(EB), .FB(FB), .ALPHA(ALPHA), .AB(AB), .EXP_P(EXP_P),
             .EXP_I(EXP_I), .EXP_R(EXP_R)) u_mac (
    .clk, .rst_n, .in_valid(accept), .in_first(first),
    .x_zero, .x_sign, .x_a, .x_b, .y_zero, .y_sign, .y_a, .y_b,
    .acc_valid, .acc_zero, .acc_sign, .acc_exp, .acc_frac
  );

  // ---- q(.) as a data-gated multicycle path -------------------------------
  logic                  q_in_zero, q_in_sign;
  logic signed [EXW-1:0] q_in_exp;
  logic [AB-1:0]         q_in_frac;
  logic                  q_zero, q_sign, q_valid_unused;
  logic signed [EB-1:0]  q_a;
  logic [FB-1:0]         q_b;

  flma_f2q #(.EB(EB), .FB(FB), .BETA(BETA), .AB(AB), .EXW(EXW), .LOG_P(LOG_P),
             .LOG_I(LOG_I), .LOG_R(LOG_R), .LOG_S(LOG_S), .PIPE(1'b0)) u_q (
    .clk, .rst_n, .in_valid(1'b1), .in_zero(q_in_zero), .in_sign(q_in_sign),
    .in_exp(q_in_exp), .in_frac(q_in_frac), .out_valid(q_valid_unused),
    .out_zero(q_zero), .out_sign(q_sign), .out_a(q_a), .out_b(q_b)
  );

  // ---- control ----------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_ACC;
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      case (state)
        S_ACC: if (accept) begin
          if (cnt == CW'(N - 1)) begin
            state <= S_DRAIN;
            cnt   <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_DRAIN: begin
          if (cnt == CW'(DRAIN - 1)) begin
            state <= S_LOAD;
            cnt   <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_LOAD: state <= S_MCP;
        S_MCP: begin
          if (cnt == CW'(Q_MCP - 1)) begin
            state     <= S_ACC;
            cnt       <= '0;
            out_valid <= 1'b1;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_ACC;
      endcase
    end
  end

  // q(.) input register: loaded once per vector (data gating)
  always_ff @(posedge clk) begin
    if (state == S_LOAD) begin
      q_in_zero <= acc_zero;
      q_in_sign <= acc_sign;
      q_in_exp  <= acc_exp;
      q_in_frac <= acc_frac;
    end
  end

  // result register: samples the multicycle path at its last clock
  always_ff @(posedge clk) begin
    if (state == S_MCP && cnt == CW'(Q_MCP - 1)) begin
      out_zero <= q_zero;
      out_sign <= q_sign;
      out_a    <= q_a;
      out_b    <= q_b;
    end
  end

  // the last product has been accumulated by the time the q input is loaded
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_LOAD) |-> acc_valid);

endmodule
