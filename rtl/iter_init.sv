// iter_init: the "Iteration initialize" unit (the paper's Fig. 2a).
//
// From m = ||y||^2 it derives the constants of the update a <- omega*a +
// delta*a^3, which is the Euler step a + lambda*m*a*(1 - m*a^2):
//   E(m) convertor:  e = E(m) - bias,
//                    pw = 2^-e               (exponent field bias - e)
//                    a0 = 2^-floor((e+1)/2)  (initial guess, 0.7 < a0*sqrt(m) < 1.42)
//   lambda = 0.4 * pw,  lambda*m,  delta = (lambda*m) * (-m),
//   omega = 1 + lambda*m.
// The E(m) convertor, the constant 0.4 and the omega path follow the paper,
// which requires only lambda > 0.345 * 2^-(E(m)-bias).  The paper forms
// delta as lambda * (-m^2); here it is (lambda*m) * (-m), which is the same
// value but never holds m^2: in FP16, m^2 overflows once m >= 256 (already
// at d = 768 for inputs uniform in (-1, 1)), while lambda*m < 0.8 always.
// Each stage is registered:
//   cycle 0 (start): E(m) convertor     cycle 1: lambda
//   cycle 2: lambda*m                   cycle 3: delta, omega
// `done` is high in cycle 4, the first cycle a0, delta and omega are valid.  m must be a
// positive normal number.  The half exponent (e+1)/2 is truncated by the
// bit shift, so a0 lies within a factor sqrt(2) of 1/sqrt(m) on either side.
// a0 is a power of two, so its sign and fraction bits are constant zero.
module iter_init #(
  parameter int EXP_W = 8,
  parameter int MAN_W = 23,
  localparam int W    = EXP_W + MAN_W + 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] m,
  output logic         done,
  output logic [W-1:0] a0,
  output logic [W-1:0] delta,
  output logic [W-1:0] omega
);
  localparam int BIAS = (1 << (EXP_W - 1)) - 1;
  // 0.4 = 1.6 * 2^-2; fraction bits = round(0.6 * 2^MAN_W).
  localparam longint FRAC04 = (6 * (longint'(1) << MAN_W) + 5) / 10;
  localparam logic [W-1:0] C_0P4 = {1'b0, EXP_W'(BIAS - 2), MAN_W'(FRAC04)};
  localparam logic [W-1:0] C_ONE = {1'b0, EXP_W'(BIAS), {MAN_W{1'b0}}};

  logic [2:0]   stage;
  logic [W-1:0] m_q, pw, lambda, lam_m;
  logic [W-1:0] neg_m, lambda_c, delta_c, lam_m_c, omega_c;
  int           e, a0_exp;

  // E(m) convertor.
  always_comb begin
    e      = int'(m[W-2:MAN_W]) - BIAS;
    // a0 = 2^-((e+1) >> 1): add one, shift right, negate.
    a0_exp = -((e + 1) >>> 1);
  end

  assign neg_m = {~m_q[W-1], m_q[W-2:0]};
  fp_mul #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_lam  (.a(pw),     .b(C_0P4),  .y(lambda_c));
  fp_mul #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_lm   (.a(lambda), .b(m_q),    .y(lam_m_c));
  fp_mul #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_del  (.a(lam_m),  .b(neg_m),  .y(delta_c));
  fp_add #(.EXP_W(EXP_W), .MAN_W(MAN_W)) u_om   (.a(C_ONE),  .b(lam_m),  .y(omega_c));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      stage <= '0;
      done  <= 1'b0;
    end else begin
      stage <= {stage[1:0], start};
      done  <= stage[2];
    end
  end

  always_ff @(posedge clk) begin
    if (start) begin
      m_q    <= m;
      pw     <= {1'b0, EXP_W'(BIAS - e), {MAN_W{1'b0}}};
      a0     <= {1'b0, EXP_W'(BIAS + a0_exp), {MAN_W{1'b0}}};
    end
    if (stage[0]) lambda <= lambda_c;
    if (stage[1]) lam_m <= lam_m_c;
    if (stage[2]) begin
      delta <= delta_c;
      omega <= omega_c;
    end
  end
endmodule
