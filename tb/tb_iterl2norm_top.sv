// tb_iterl2norm_top: end-to-end test of the IterL2Norm macro at its default
// parameters (FP32, 8 banks x 16 rows x 8 elements, d up to 1024).
//
// Several configurations are run back to back: single and multiple vectors,
// lengths that fill whole 64-element chunks and lengths that end in a
// partial chunk, more than eight partial sums (d > 512), the full 1024
// elements, and a non-default iteration count.  Inputs are uniform in
// (-1, 1) as in the paper's precision study; gamma lies in (0.5, 1.5) and
// beta in (-0.5, 0.5).  For each vector the testbench checks, against
// double-precision arithmetic computed here:
//   * the mean and m = ||y||^2 (relative error below 1e-5),
//   * a_inf against the same iteration (a0, lambda = 0.4*2^-e) run in
//     double precision (relative error below 1e-5),
//   * every z element against gamma*(d^1/2 * a * y) + beta with that a
//     (absolute error below 1e-4), and, for n_iter >= 5, against exact layer
//     normalisation (absolute error below 0.5, the paper's FP32 maximum),
//   * the cycle count: the last z of the first vector comes 5C + 4n + 41
//     cycles after the last load beat and each further vector 5C + 4n + 40
//     cycles after the previous one (C = ceil(d/64), n = n_iter).
// It also counts how often each mechanism occurred (partial-chunk masking,
// reductions of more than eight partial sums, several vectors in the
// buffer, a non-default n_iter, write-back of the shifted vector) and fails
// if one never did.
module tb_iterl2norm_top;
  import fp_tb_pkg::*;

  localparam int EW = 8, MW = 23, W = 32, LANES = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               cfg_valid = 1'b0;
  logic [10:0]        cfg_d = '0;
  logic [W-1:0]       cfg_d_inv = '0, cfg_d_sqrt = '0;
  logic [4:0]         cfg_nvec = '0;
  logic [3:0]         cfg_n_iter = '0;
  logic               x_valid = 1'b0, g_valid = 1'b0, b_valid = 1'b0;
  logic               x_ready, g_ready, b_ready;
  logic [8*W-1:0]     x_data = '0, g_data = '0, b_data = '0;
  logic               z_valid, busy, done;
  logic [LANES*W-1:0] z_data;
  logic [4:0]         z_vec;
  logic [3:0]         z_chunk;
  logic [6:0]         z_nlanes;
  logic [W-1:0]       mean, m, a_inf;

  iterl2norm_top dut (.*);

  int checks = 0, failures = 0;
  int n_partial = 0, n_big_reduce = 0, n_multi = 0, n_iter_alt = 0, n_wb = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Write-backs of shifted chunks, seen on the Input buffer write port.
  always @(posedge clk) if (rst_n && dut.ib_wr_en && dut.ib_wr_full) n_wb++;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, msg);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stored test data (FP32 bit patterns) and double copies.
  logic [W-1:0] xb [1024];
  logic [W-1:0] gb [1024];
  logic [W-1:0] bb [1024];

  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction

  task automatic run(int d, int nvec, int niter);
    int  c = (d + 63) / 64;
    real xr, yr, mean_r, m_r, a_r, lam, err, max_ideal;
    int  e, got_vec, got_chunk;
    longint t_load, t_prev, lat, exp_lat;
    logic [W-1:0] zb;
    real zr, zref, zideal, sd;

    // configure
    @(negedge clk);
    cfg_valid  = 1'b1;
    cfg_d      = 11'(d);
    cfg_d_inv  = r2f(1.0 / d, EW, MW);
    cfg_d_sqrt = r2f($sqrt(real'(d)), EW, MW);
    cfg_nvec   = 5'(nvec);
    cfg_n_iter = 4'(niter);
    @(negedge clk);
    cfg_valid = 1'b0;

    // data: x for nvec vectors (chunk-aligned), gamma/beta for one
    for (int i = 0; i < nvec * c * 64; i++)
      xb[i] = ((i % (c * 64)) < d) ? r2f(urand(-1.0, 1.0), EW, MW) : 32'h0;
    for (int i = 0; i < c * 64; i++) begin
      gb[i] = r2f(urand(0.5, 1.5), EW, MW);
      bb[i] = r2f(urand(-0.5, 0.5), EW, MW);
    end

    // stream the three channels concurrently
    fork
      begin
        for (int k = 0; k < nvec * c * 8; k++) begin
          x_valid = 1'b1;
          for (int j = 0; j < 8; j++) x_data[j*W +: W] = xb[8*k + j];
          @(posedge clk);
          while (!x_ready) @(posedge clk);
          #1;
        end
        x_valid = 1'b0;
        t_load = cycle;
      end
      begin
        for (int k = 0; k < c * 8; k++) begin
          g_valid = 1'b1;
          for (int j = 0; j < 8; j++) g_data[j*W +: W] = gb[8*k + j];
          @(posedge clk);
          while (!g_ready) @(posedge clk);
          #1;
        end
        g_valid = 1'b0;
      end
      begin
        for (int k = 0; k < c * 8; k++) begin
          b_valid = 1'b1;
          for (int j = 0; j < 8; j++) b_data[j*W +: W] = bb[8*k + j];
          @(posedge clk);
          while (!b_ready) @(posedge clk);
          #1;
        end
        b_valid = 1'b0;
      end
    join

    if (d % 64 != 0) n_partial++;
    if (c > 8) n_big_reduce++;
    if (nvec > 1) n_multi++;
    if (niter != 5) n_iter_alt++;

    t_prev = t_load;
    for (int v = 0; v < nvec; v++) begin
      // double-precision reference for this vector
      mean_r = 0.0;
      for (int i = 0; i < d; i++) mean_r += f2r(xb[v*c*64 + i], EW, MW);
      mean_r = mean_r / d;
      m_r = 0.0;
      for (int i = 0; i < d; i++) begin
        yr = f2r(xb[v*c*64 + i], EW, MW) - mean_r;
        m_r += yr * yr;
      end
      max_ideal = 0.0;

      for (int ch = 0; ch < c; ch++) begin
        @(posedge clk);
        while (!z_valid) @(posedge clk);
        got_vec = int'(z_vec);
        got_chunk = int'(z_chunk);
        check(got_vec == v && got_chunk == ch,
              $sformatf("z order: got vec %0d chunk %0d, expected %0d/%0d", got_vec, got_chunk, v, ch));
        check(int'(z_nlanes) == ((d - 64*ch) >= 64 ? 64 : d - 64*ch), "z_nlanes");
        if (ch == 0) begin
          // mean and m are held while the vector is being output
          err = fabs(f2r(mean, EW, MW) - mean_r);
          check(err <= 1e-5 * (1.0 + fabs(mean_r)), $sformatf("mean %g vs %g", f2r(mean, EW, MW), mean_r));
          check(fabs(f2r(m, EW, MW) - m_r) <= 1e-5 * m_r, $sformatf("m %g vs %g", f2r(m, EW, MW), m_r));
          // iteration reference from the RTL's m
          e   = int'(m[30:23]) - 127;
          a_r = 2.0 ** real'(-((e + 1) >>> 1));
          lam = 0.4 * (2.0 ** real'(-e));
          for (int it = 0; it < niter; it++)
            a_r = a_r + lam * f2r(m, EW, MW) * a_r * (1.0 - f2r(m, EW, MW) * a_r * a_r);
          check(fabs(f2r(a_inf, EW, MW) - a_r) <= 1e-5 * a_r,
                $sformatf("a_inf %g vs %g", f2r(a_inf, EW, MW), a_r));
        end
        sd = $sqrt(real'(d));
        for (int l = 0; l < 64; l++) begin
          int idx = 64*ch + l;
          if (idx >= d) break;
          zb     = z_data[l*W +: W];
          zr     = f2r(zb, EW, MW);
          yr     = f2r(xb[v*c*64 + idx], EW, MW) - mean_r;
          zref   = f2r(gb[idx], EW, MW) * (sd * a_r * yr) + f2r(bb[idx], EW, MW);
          zideal = f2r(gb[idx], EW, MW) * (yr / $sqrt(m_r / d)) + f2r(bb[idx], EW, MW);
          check(fabs(zr - zref) <= 1e-4, $sformatf("z[%0d] %g vs %g", idx, zr, zref));
          if (fabs(zr - zideal) > max_ideal) max_ideal = fabs(zr - zideal);
        end
      end
      if (niter >= 5) check(max_ideal < 0.5, $sformatf("error vs exact layer norm %g", max_ideal));
      lat = cycle - t_prev;
      exp_lat = 5*c + 4*niter + ((v == 0) ? 41 : 40);
      check(lat == exp_lat, $sformatf("latency %0d, expected %0d", lat, exp_lat));
      if (v == 0)
        $display("d=%0d N=%0d n_iter=%0d: %0d cycles from last load beat to last z, max |z - exact LN| = %g",
                 d, nvec, niter, lat, max_ideal);
      t_prev = cycle;
    end
    @(posedge clk);
    #1;
    check(done == 1'b1 && busy == 1'b0, "done after the last vector");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(64, 1, 5);
    run(96, 3, 5);
    run(384, 2, 5);
    run(576, 1, 5);
    run(1024, 1, 5);
    run(768, 1, 3);
    run(200, 4, 10);
    check(n_partial > 0,    "partial last chunk never exercised");
    check(n_big_reduce > 0, "reduction of more than 8 partial sums never exercised");
    check(n_multi > 0,      "several vectors never exercised");
    check(n_iter_alt > 0,   "non-default n_iter never exercised");
    check(n_wb > 0,         "write-back of the shifted vector never seen");
    $display("events: partial-chunk %0d, >8 partial sums %0d, multi-vector %0d, n_iter!=5 %0d, write-backs %0d",
             n_partial, n_big_reduce, n_multi, n_iter_alt, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
