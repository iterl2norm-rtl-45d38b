// fp_add: combinational floating-point adder, y = a + b.
//
// Format: sign, EXP_W-bit biased exponent, MAN_W-bit fraction (FP32 by
// default; FP16 and BFloat16 are parameter settings).  The paper uses
// format-specific adders but does not describe them; this one is the usual
// align / add / normalise / round datapath: the smaller operand is shifted
// right keeping guard, round and sticky bits, the sum is normalised with a
// leading-zero count and rounded to nearest, ties to even.  Subnormal inputs
// and results are flushed to zero, an exponent overflow gives infinity, and
// NaN is not treated specially.  Purely combinational; pipelining is left to
// the Add block and the iteration controller.
module fp_add #(
  parameter int EXP_W = 8,
  parameter int MAN_W = 23
) (
  input  logic [EXP_W+MAN_W:0] a,
  input  logic [EXP_W+MAN_W:0] b,
  output logic [EXP_W+MAN_W:0] y
);
  localparam int MW   = MAN_W + 1;       // significand with hidden bit
  localparam int F    = MW + 3;          // plus guard, round, sticky
  localparam int EMAX = (1 << EXP_W) - 1;

  logic               sa, sb, sl, ss;
  logic [EXP_W-1:0]   ea, eb, el, es;
  logic [MW-1:0]      ma, mb, ml, ms;
  logic [F-1:0]       ml_x, ms_sh;
  logic [F:0]         sum;
  logic [F-1:0]       norm;
  logic [MW:0]        rnd;
  int                 diff, lz, ex;
  logic               rup;

  always_comb begin
    sa = a[EXP_W+MAN_W];
    sb = b[EXP_W+MAN_W];
    ea = a[EXP_W+MAN_W-1:MAN_W];
    eb = b[EXP_W+MAN_W-1:MAN_W];
    ma = (ea == '0) ? '0 : {1'b1, a[MAN_W-1:0]};
    mb = (eb == '0) ? '0 : {1'b1, b[MAN_W-1:0]};
    // Order the operands by magnitude.
    if ({ea, ma} >= {eb, mb}) begin
      sl = sa; el = ea; ml = ma; ss = sb; es = eb; ms = mb;
    end else begin
      sl = sb; el = eb; ml = mb; ss = sa; es = ea; ms = ma;
    end
    diff  = int'(el) - int'(es);
    ml_x  = {ml, 3'b000};
    ms_sh = {ms, 3'b000};
    if (ms == '0) begin
      ms_sh = '0;
    end else if (diff >= F) begin
      ms_sh = {{(F-1){1'b0}}, 1'b1};               // only the sticky bit remains
    end else if (diff > 0) begin
      ms_sh = ({ms, 3'b000} >> diff);
      if (|({ms, 3'b000} & ((F'(1) << diff) - F'(1)))) ms_sh[0] = 1'b1;
    end
    sum = (sl != ss) ? ({1'b0, ml_x} - {1'b0, ms_sh}) : ({1'b0, ml_x} + {1'b0, ms_sh});

    // Normalise.
    lz   = 0;
    norm = '0;
    ex   = int'(el);
    if (sum[F]) begin
      norm = sum[F:1];
      norm[0] = sum[1] | sum[0];
      ex = ex + 1;
    end else begin
      for (int i = F - 1; i >= 0; i--) begin
        if (sum[i]) begin
          lz = F - 1 - i;
          break;
        end
      end
      norm = sum[F-1:0] << lz;
      ex   = ex - lz;
    end

    // Round to nearest even on guard / round / sticky.
    rup = norm[2] & (norm[1] | norm[0] | norm[3]);
    rnd = {1'b0, norm[F-1:3]} + {{MW{1'b0}}, rup};
    if (rnd[MW]) begin
      rnd = rnd >> 1;
      ex  = ex + 1;
    end

    if (sum == '0 || ex <= 0) begin
      y = '0;                                     // zero, cancellation or underflow
    end else if (ex >= EMAX) begin
      y = {sl, {EXP_W{1'b1}}, {MAN_W{1'b0}}};     // overflow to infinity
    end else begin
      y = {sl, ex[EXP_W-1:0], rnd[MAN_W-1:0]};
    end
  end

endmodule
