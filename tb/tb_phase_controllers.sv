// tb_phase_controllers: self-checking test of the mean, shift, m and output
// controllers.
//
// Each controller is started with random base rows, lengths d (and hence
// chunk counts C) and scalars.  Every cycle its datapath request is
// compared with the schedule written out in this testbench from the
// controllers' documented timing (which rows are read and written, when
// the Add and Mul blocks are issued and with which operands and lane
// counts, when partial sums are stored, when gamma and beta are read).  The
// Add and Mul results fed back to the mean and m controllers are tagged
// with the cycle number, so the captured mean and m show that the right
// cycle's result was taken; done and the z strobes are checked too.
module tb_phase_controllers;
  import iterl2norm_pkg::*;

  localparam int W = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start_mean = 0, start_shift = 0, start_m = 0, start_out = 0;
  logic [3:0]   base = '0;
  logic [4:0]   nchunks = '0;
  logic [10:0]  d = '0;
  logic [W-1:0] d_inv = '0, mean_in = '0, scale = '0, add_sum = '0, mul_p0 = '0;
  dp_req_t      req_mean, req_shift, req_m, req_out;
  logic         done_mean, done_shift, done_m, done_out;
  logic [W-1:0] mean_out, m_out;
  logic         z_valid;
  logic [3:0]   z_chunk;
  logic [6:0]   z_nlanes;

  mean_controller u_mean (.clk, .rst_n, .start(start_mean), .base, .nchunks, .d, .d_inv,
    .add_sum, .mul_p0, .req(req_mean), .done(done_mean), .mean(mean_out));
  shift_controller u_shift (.clk, .rst_n, .start(start_shift), .base, .nchunks,
    .mean(mean_in), .req(req_shift), .done(done_shift));
  m_controller u_m (.clk, .rst_n, .start(start_m), .base, .nchunks, .d, .add_sum,
    .req(req_m), .done(done_m), .m(m_out));
  output_controller u_out (.clk, .rst_n, .start(start_out), .base, .nchunks, .d, .scale,
    .req(req_out), .z_valid, .z_chunk, .z_nlanes, .done(done_out));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [6:0] lanes(int dd, int c);
    int r = dd - 64 * c;
    return 7'((r > 64) ? 64 : (r < 0 ? 0 : r));
  endfunction

  function automatic dp_req_t exp_mean(int t, int c, int bs, int dd, logic [W-1:0] sum, logic [W-1:0] dinv);
    dp_req_t r = '0;
    if (t == 0) r.psum_clr = 1;
    if (t < c) begin r.buf_rd = 1; r.buf_row = 4'(bs + t); end
    if (t >= 1 && t <= c) begin r.add_go = 1; r.add_mode = ADD_ACC; r.add_a = AA_BUF; r.add_nlanes = lanes(dd, t - 1); end
    if (t >= 3 && t <= c + 2) begin r.psum_wr = 1; r.psum_idx = 4'(t - 3); end
    if (t == c + 3) begin r.add_go = 1; r.add_mode = ADD_ACC; r.add_a = AA_PSUM; r.add_nlanes = 7'(c); end
    if (t == c + 5) begin r.mul_go = 1; r.mul_a = MA_SCALAR; r.mul_b = MB_SCALAR; r.mul_sa = sum; r.mul_sb = dinv; end
    return r;
  endfunction

  function automatic dp_req_t exp_shift(int t, int c, int bs, logic [W-1:0] mn);
    dp_req_t r = '0;
    if (t < c) begin r.buf_rd = 1; r.buf_row = 4'(bs + t); end
    if (t >= 1 && t <= c) begin r.add_go = 1; r.add_mode = ADD_EW; r.add_a = AA_BUF; r.add_b = AB_SCALAR; r.add_sb = mn ^ 32'h8000_0000; end
    if (t >= 3 && t <= c + 2) begin r.buf_wr = 1; r.wr_row = 4'(bs + t - 3); end
    return r;
  endfunction

  function automatic dp_req_t exp_m(int t, int c, int bs, int dd);
    dp_req_t r = '0;
    if (t == 0) r.psum_clr = 1;
    if (t < c) begin r.buf_rd = 1; r.buf_row = 4'(bs + t); end
    if (t >= 1 && t <= c) begin r.mul_go = 1; r.mul_a = MA_BUF; r.mul_b = MB_SAME; end
    if (t >= 3 && t <= c + 2) begin r.add_go = 1; r.add_mode = ADD_ACC; r.add_a = AA_MULOUT; r.add_nlanes = lanes(dd, t - 3); end
    if (t >= 5 && t <= c + 4) begin r.psum_wr = 1; r.psum_idx = 4'(t - 5); end
    if (t == c + 5) begin r.add_go = 1; r.add_mode = ADD_ACC; r.add_a = AA_PSUM; r.add_nlanes = 7'(c); end
    return r;
  endfunction

  function automatic dp_req_t exp_out(int t, int c, int bs, logic [W-1:0] sc);
    dp_req_t r = '0;
    for (int k = 0; k < c; k++) begin
      int t0 = 2 * k;
      if (t == t0)     begin r.buf_rd = 1; r.buf_row = 4'(bs + k); end
      if (t == t0 + 1) begin r.mul_go = 1; r.mul_a = MA_BUF; r.mul_b = MB_SCALAR; r.mul_sb = sc; end
      if (t == t0 + 3) begin r.g_rd = 1; r.g_row = 4'(k); end
      if (t == t0 + 4) begin r.mul_go = 1; r.mul_a = MA_MULOUT; r.mul_b = MB_GAMMA; end
      if (t == t0 + 5) begin r.b_rd = 1; r.b_row = 4'(k); end
      if (t == t0 + 6) begin r.add_go = 1; r.add_mode = ADD_EW; r.add_a = AA_MULOUT; r.add_b = AB_BETA; end
    end
    return r;
  endfunction

  initial begin
    int c, bs, dd, t, zc;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 60; k++) begin
      dd = (k == 0) ? 1024 : 1 + int'($urandom % 1024);
      c  = (dd + 63) / 64;
      bs = int'($urandom % 32'(17 - c));
      @(negedge clk);
      d = 11'(dd); nchunks = 5'(c); base = 4'(bs);
      d_inv = $urandom; mean_in = $urandom; scale = $urandom;
      // ---- mean controller ----
      start_mean = 1'b1;
      @(negedge clk);
      start_mean = 1'b0;
      for (t = 0; t < c + 12; t++) begin
        add_sum = 32'(5000 + t);
        mul_p0  = 32'(9000 + t);
        #1;
        check(req_mean == exp_mean(t, c, bs, dd, add_sum, d_inv), $sformatf("mean req t=%0d C=%0d", t, c));
        @(negedge clk);
        check(done_mean == (t == c + 7), $sformatf("mean done t=%0d", t));
        if (t == c + 7) check(mean_out == 32'(9000 + c + 7), "mean captured from the Mul result of t=C+7");
      end
      // ---- shift controller ----
      start_shift = 1'b1;
      @(negedge clk);
      start_shift = 1'b0;
      for (t = 0; t < c + 6; t++) begin
        #1;
        check(req_shift == exp_shift(t, c, bs, mean_in), $sformatf("shift req t=%0d", t));
        check(done_shift == (t == c + 2), $sformatf("shift done t=%0d", t));
        @(negedge clk);
      end
      // ---- m controller ----
      start_m = 1'b1;
      @(negedge clk);
      start_m = 1'b0;
      for (t = 0; t < c + 12; t++) begin
        add_sum = 32'(7000 + t);
        #1;
        check(req_m == exp_m(t, c, bs, dd), $sformatf("m req t=%0d", t));
        @(negedge clk);
        check(done_m == (t == c + 7), $sformatf("m done t=%0d", t));
        if (t == c + 7) check(m_out == 32'(7000 + c + 7), "m captured from the Add result of t=C+7");
      end
      // ---- output controller ----
      start_out = 1'b1;
      @(negedge clk);
      start_out = 1'b0;
      zc = 0;
      for (t = 0; t < 2 * c + 12; t++) begin
        #1;
        check(req_out == exp_out(t, c, bs, scale), $sformatf("out req t=%0d", t));
        check(z_valid == (t >= 8 && t % 2 == 0 && t <= 2 * c + 6), $sformatf("z_valid t=%0d", t));
        if (z_valid) begin
          check(int'(z_chunk) == zc && z_nlanes == lanes(dd, zc), "z chunk / lanes");
          zc++;
        end
        check(done_out == (t == 2 * c + 6), $sformatf("out done t=%0d", t));
        @(negedge clk);
      end
      check(zc == c, "one z strobe per chunk");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
