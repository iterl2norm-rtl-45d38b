// tb_input_controller: self-checking test of the input controller.
//
// For random d and N it configures the controller, then offers beats on the
// three channels with random valid patterns.  Accepted beats must be
// numbered 0, 1, 2, ... per channel; exactly N*C*8 x beats and C*8 gamma and
// beta beats may be accepted (C = ceil(d/64)); nothing is accepted while
// load_en is low; load_done must rise only after all three streams are
// complete; and the stored configuration must match what was sent.
module tb_input_controller;
  localparam int W = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         cfg_valid = 0;
  logic [10:0]  cfg_d = '0, d;
  logic [W-1:0] cfg_d_inv = '0, cfg_d_sqrt = '0, d_inv, d_sqrt;
  logic [4:0]   cfg_nvec = '0, nvec, nchunks;
  logic [3:0]   cfg_n_iter = '0, n_iter;
  logic         load_en = 0, x_valid = 0, g_valid = 0, b_valid = 0;
  logic         x_ready, g_ready, b_ready, x_wr, g_wr, b_wr, load_done;
  logic [7:0]   x_beat, g_beat, b_beat;

  input_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dd, n, c, nx, ng, nb, cyc;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 40; k++) begin
      dd = 1 + int'($urandom % 1024);
      c  = (dd + 63) / 64;
      n  = 1 + int'($urandom % (16 / c));
      @(negedge clk);
      cfg_valid = 1; cfg_d = 11'(dd); cfg_nvec = 5'(n); cfg_n_iter = 4'($urandom);
      cfg_d_inv = $urandom; cfg_d_sqrt = $urandom;
      @(negedge clk);
      cfg_valid = 0;
      check(d == cfg_d && nvec == cfg_nvec && n_iter == cfg_n_iter && d_inv == cfg_d_inv &&
            d_sqrt == cfg_d_sqrt, "configuration stored");
      check(int'(nchunks) == c, $sformatf("nchunks %0d expected %0d", nchunks, c));
      // nothing is accepted while load_en is low
      x_valid = 1; g_valid = 1; b_valid = 1;
      #1;
      check(!x_ready && !g_ready && !b_ready && !x_wr, "no ready without load_en");
      load_en = 1;
      nx = 0; ng = 0; nb = 0; cyc = 0;
      while (!load_done && cyc < 2000) begin
        x_valid = ($urandom % 3) != 0;
        g_valid = ($urandom % 3) != 0;
        b_valid = ($urandom % 3) != 0;
        #1;
        if (x_wr) begin check(int'(x_beat) == nx, "x beat number"); nx++; end
        if (g_wr) begin check(int'(g_beat) == ng, "gamma beat number"); ng++; end
        if (b_wr) begin check(int'(b_beat) == nb, "beta beat number"); nb++; end
        check(x_ready == (nx < n * c * 8 || x_wr && nx == n * c * 8), "x_ready only while beats are missing");
        @(negedge clk);
        cyc++;
        if (load_done) check(nx == n * c * 8 && ng == c * 8 && nb == c * 8, "load_done only when complete");
      end
      check(load_done, "load_done rose");
      check(nx == n * c * 8 && ng == c * 8 && nb == c * 8, $sformatf("beat counts %0d %0d %0d", nx, ng, nb));
      x_valid = 1; g_valid = 1; b_valid = 1;
      #1;
      check(!x_wr && !g_wr && !b_wr, "no beats accepted after completion");
      x_valid = 0; g_valid = 0; b_valid = 0;
      load_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
