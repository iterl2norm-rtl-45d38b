// ln_harness: reusable driver around one iterl2norm_top instance for the
// workload testbenches (not a testbench by itself).
//
// run_batch configures the macro for length d, N vectors and n_iter steps,
// loads random inputs uniform in (-1, 1) (gamma = 1 and beta = 0, so z is
// the plain normalised vector, as in the paper's precision study), collects
// every z element and compares it with exact layer normalisation computed
// in double precision from the same (rounded) inputs.  It returns the sum
// and maximum of the absolute errors, the number of elements compared, the
// cycles from the last load beat to the last z of the first vector, and
// whether the z strobes arrived in order.
module ln_harness #(
  parameter int EXP_W = 8,
  parameter int MAN_W = 23
);
  import fp_tb_pkg::*;

  localparam int W = EXP_W + MAN_W + 1, LANES = 64;

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

  iterl2norm_top #(.EXP_W(EXP_W), .MAN_W(MAN_W)) dut (.*);

  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [31:0] xb [1024];

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
  end

  task automatic run_batch(input int d, input int nvec, input int niter,
                           output real err_sum, output real err_max, output int n_cmp,
                           output longint lat, output bit in_order);
    int  c = (d + 63) / 64;
    real mr, mm, yr, zr, zi, er;
    longint t_load;
    wait (rst_n);
    @(negedge clk);
    cfg_valid  = 1'b1;
    cfg_d      = 11'(d);
    cfg_d_inv  = W'(r2f(1.0 / d, EXP_W, MAN_W));
    cfg_d_sqrt = W'(r2f($sqrt(real'(d)), EXP_W, MAN_W));
    cfg_nvec   = 5'(nvec);
    cfg_n_iter = 4'(niter);
    @(negedge clk);
    cfg_valid = 1'b0;
    for (int i = 0; i < nvec * c * 64; i++)
      xb[i] = ((i % (c * 64)) < d) ?
              r2f(-1.0 + 2.0 * (real'($urandom) / 4294967296.0), EXP_W, MAN_W) : 32'h0;
    fork
      begin
        for (int k = 0; k < nvec * c * 8; k++) begin
          x_valid = 1'b1;
          for (int j = 0; j < 8; j++) x_data[j*W +: W] = W'(xb[8*k + j]);
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
          for (int j = 0; j < 8; j++) g_data[j*W +: W] = W'(r2f(1.0, EXP_W, MAN_W));
          @(posedge clk);
          while (!g_ready) @(posedge clk);
          #1;
        end
        g_valid = 1'b0;
      end
      begin
        for (int k = 0; k < c * 8; k++) begin
          b_valid = 1'b1;
          b_data  = '0;
          @(posedge clk);
          while (!b_ready) @(posedge clk);
          #1;
        end
        b_valid = 1'b0;
      end
    join
    err_sum = 0.0; err_max = 0.0; n_cmp = 0; in_order = 1'b1; lat = 0;
    for (int v = 0; v < nvec; v++) begin
      mr = 0.0;
      for (int i = 0; i < d; i++) mr += f2r(xb[v*c*64 + i], EXP_W, MAN_W);
      mr = mr / d;
      mm = 0.0;
      for (int i = 0; i < d; i++) begin
        yr = f2r(xb[v*c*64 + i], EXP_W, MAN_W) - mr;
        mm += yr * yr;
      end
      for (int ch = 0; ch < c; ch++) begin
        @(posedge clk);
        while (!z_valid) @(posedge clk);
        if (int'(z_vec) != v || int'(z_chunk) != ch) in_order = 1'b0;
        for (int l = 0; l < 64 && 64*ch + l < d; l++) begin
          zr = f2r(32'(z_data[l*W +: W]), EXP_W, MAN_W);
          yr = f2r(xb[v*c*64 + 64*ch + l], EXP_W, MAN_W) - mr;
          zi = yr / $sqrt(mm / d);
          er = fabs(zr - zi);
          err_sum += er;
          if (er > err_max) err_max = er;
          n_cmp++;
        end
      end
      if (v == 0) lat = cycle - t_load;
    end
    @(posedge clk);
  endtask
endmodule
