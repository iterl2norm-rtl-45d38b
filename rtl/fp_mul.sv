// fp_mul: combinational floating-point multiplier, y = a * b.
//
// Same format and conventions as fp_add (this design's choices; the paper
// only says the multipliers are format specific): the significands are
// multiplied exactly, the product is normalised by at most one place and
// rounded to nearest, ties to even, with a sticky bit over the discarded
// bits.  Zero and subnormal operands give +0, underflow flushes to +0,
// overflow gives infinity.  Purely combinational.
module fp_mul #(
  parameter int EXP_W = 8,
  parameter int MAN_W = 23
) (
  input  logic [EXP_W+MAN_W:0] a,
  input  logic [EXP_W+MAN_W:0] b,
  output logic [EXP_W+MAN_W:0] y
);
  localparam int MW   = MAN_W + 1;
  localparam int EMAX = (1 << EXP_W) - 1;
  localparam int BIAS = (1 << (EXP_W - 1)) - 1;

  logic [EXP_W-1:0] ea, eb;
  logic [MW-1:0]    ma, mb;
  logic [2*MW-1:0]  p;
  logic [MAN_W-1:0] frac;
  logic             g, st, s, rup;
  logic [MAN_W:0]   rnd;
  int               ex;

  always_comb begin
    s  = a[EXP_W+MAN_W] ^ b[EXP_W+MAN_W];
    ea = a[EXP_W+MAN_W-1:MAN_W];
    eb = b[EXP_W+MAN_W-1:MAN_W];
    ma = {1'b1, a[MAN_W-1:0]};
    mb = {1'b1, b[MAN_W-1:0]};
    p  = ma * mb;
    ex = int'(ea) + int'(eb) - BIAS;
    if (p[2*MW-1]) begin
      ex   = ex + 1;
      frac = p[2*MW-2 -: MAN_W];
      g    = p[MW-1];
      st   = |p[MW-2:0];
    end else begin
      frac = p[2*MW-3 -: MAN_W];
      g    = p[MW-2];
      st   = |p[MW-3:0];
    end
    rup = g & (st | frac[0]);
    rnd = {1'b0, frac} + {{MAN_W{1'b0}}, rup};
    if (rnd[MAN_W]) ex = ex + 1;                 // fraction wrapped to zero

    if (ea == '0 || eb == '0 || ex <= 0) begin
      y = '0;                                    // zero result is +0
    end else if (ex >= EMAX) begin
      y = {s, {EXP_W{1'b1}}, {MAN_W{1'b0}}};
    end else begin
      y = {s, ex[EXP_W-1:0], rnd[MAN_W-1:0]};
    end
  end

endmodule
