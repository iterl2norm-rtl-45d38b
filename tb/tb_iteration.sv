// tb_iteration: self-checking test of the iteration controller with its
// initialise (iter_init) and update (iter_update) units, FP32.
//
// For random m over a wide exponent range and n_iter from 0 to 10 the
// reference recomputes, operation by operation with FP32 rounding, the
// initialise dataflow (a0 = 2^-floor((e+1)/2), lambda = 0.4*2^-e,
// delta = (lambda*m)*(-m), omega = 1 + lambda*m) and the update
// a <- omega*a + (delta*a)*(a*a); a_inf and scale = a_inf*d^1/2 must match
// bit for bit and `done` must come 4*n_iter + 7 cycles after start.  It
// also checks 0.7 < a0*sqrt(m) < 1.42 and, for five or more steps, that
// a_inf is within 5% of 1/sqrt(m).
module tb_iteration;
  import fp_tb_pkg::*;

  localparam int W = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start = 1'b0, done;
  logic [W-1:0] m = '0, d_sqrt = '0, scale, a_inf;
  logic [3:0]   n_iter = '0;

  iteration_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real r32(real v);
    return f2r(r2f(v, 8, 23), 8, 23);
  endfunction

  initial begin
    real mr, pw, lam, delta, lm, omega, a, a0, wa, da, aa, daaa, ds, sc;
    int e, n, cyc;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 200; k++) begin
      n  = (k < 10) ? 5 : int'($urandom % 11);
      m  = rand_fp(8, 23, -30, 30);
      m[31] = 1'b0;
      d_sqrt = r2f($sqrt(real'(64 * (1 + $urandom % 16))), 8, 23);
      mr = f2r(m, 8, 23);
      ds = f2r(d_sqrt, 8, 23);
      e  = int'(m[30:23]) - 127;
      pw = 2.0 ** real'(-e);
      a0 = 2.0 ** real'(-$floor(real'(e + 1) / 2.0));
      check(a0 * $sqrt(mr) > 0.7 && a0 * $sqrt(mr) < 1.42, $sformatf("a0 range e=%0d", e));
      lam   = r32(pw * f2r(r2f(0.4, 8, 23), 8, 23));
      lm    = r32(lam * mr);
      delta = r32(lm * -mr);
      omega = r32(1.0 + lm);
      a = a0;
      for (int i = 0; i < n; i++) begin
        wa = r32(omega * a); da = r32(delta * a); aa = r32(a * a);
        daaa = r32(da * aa);
        a = r32(wa + daaa);
      end
      sc = r32(a * ds);
      @(negedge clk);
      n_iter = 4'(n);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      check(cyc == 4 * n + 7, $sformatf("latency %0d expected %0d", cyc, 4 * n + 7));
      check(a_inf == r2f(a, 8, 23), $sformatf("a_inf %g expected %g (m=%g n=%0d)", f2r(a_inf, 8, 23), a, mr, n));
      check(scale == r2f(sc, 8, 23), "scale = a_inf * d^1/2");
      if (n >= 5) check(fabs(a * $sqrt(mr) - 1.0) < 0.05, $sformatf("convergence m=%g", mr));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
