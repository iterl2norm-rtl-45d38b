// fp_tb_pkg: reference floating-point helpers for the testbenches.
//
// Values are converted between the macro's formats (EXP_W/MAN_W, up to 32
// bits) and the simulator's double-precision `real`.  r2f rounds a real to
// the format with round-to-nearest-even and flushes results below the
// smallest normal number to zero, which is the behaviour the RTL adder and
// multiplier implement.  A sum or product of two FP32 numbers is exact (or
// harmlessly rounded) in double precision, so r2f(f2r(a) op f2r(b)) is the
// correctly rounded result the RTL must reproduce bit for bit.
package fp_tb_pkg;

  function automatic logic [31:0] r2f(real r, int ew, int mw);
    logic [63:0] bits;
    logic        s, g, st;
    int          e, bias, emax;
    longint      m52, keep, rest_mask;
    logic [31:0] res;
    if (r == 0.0) return 32'd0;
    bits = $realtobits(r);
    s    = bits[63];
    bias = (1 << (ew - 1)) - 1;
    emax = (1 << ew) - 1;
    e    = int'(bits[62:52]) - 1023 + bias;
    m52  = longint'(bits[51:0]);
    keep = m52 >> (52 - mw);
    g    = m52[51 - mw];
    rest_mask = (longint'(1) << (51 - mw)) - 1;
    st   = (m52 & rest_mask) != 0;
    if (e <= 0) return 32'd0;
    if (g && (st || keep[0])) begin
      keep = keep + 1;
      if (keep == (longint'(1) << mw)) begin
        keep = 0;
        e = e + 1;
      end
    end
    if (e >= emax) begin
      res = (32'(s) << (ew + mw)) | (32'(emax) << mw);
      return res;
    end
    res = (32'(s) << (ew + mw)) | (32'(e) << mw) | 32'(keep);
    return res;
  endfunction

  function automatic real f2r(logic [31:0] x, int ew, int mw);
    logic        s;
    int          e, bias;
    longint      m;
    logic [31:0] mb;
    logic [63:0] bits;
    bias = (1 << (ew - 1)) - 1;
    s    = x[ew + mw];
    e    = int'((x >> mw) & ((32'd1 << ew) - 1));
    mb   = x & ((32'd1 << mw) - 32'd1);
    m    = longint'(mb);
    if (e == 0) return 0.0;
    bits = {s, 11'(e - bias + 1023), 52'(m << (52 - mw))};
    return $bitstoreal(bits);
  endfunction

  // Random normal number with exponent (unbiased) in [emin, emax_u].
  function automatic logic [31:0] rand_fp(int ew, int mw, int emin, int emax_u);
    int bias = (1 << (ew - 1)) - 1;
    int e    = emin + int'($urandom % 32'(emax_u - emin + 1));
    logic [31:0] m = $urandom & ((32'd1 << mw) - 1);
    logic s = 1'($urandom);
    return (32'(s) << (ew + mw)) | (32'(e + bias) << mw) | m;
  endfunction

  function automatic real fabs(real v);
    return (v < 0.0) ? -v : v;
  endfunction

endpackage
