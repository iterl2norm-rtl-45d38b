// tb_add_block: self-checking test of the Add block (64 lanes, FP32).
//
// Random operand sets are issued back to back, alternating between
// accumulate mode with a random number of active lanes and element-wise
// mode.  The expected accumulate result is the pairwise tree sum of the
// active lanes (adjacent lanes first, then adjacent pairs, and so on, each
// addition rounded to FP32 by the reference helpers); the expected
// element-wise result is the rounded lane sum.  Results must match bit for
// bit and appear exactly two cycles after in_valid.
module tb_add_block;
  import fp_tb_pkg::*;
  import iterl2norm_pkg::*;

  localparam int LANES = 64, W = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               in_valid = 1'b0, out_valid;
  add_mode_e          mode = ADD_ACC;
  logic [LANES*W-1:0] a = '0, b = '0, ew;
  logic [6:0]         nlanes = '0;
  logic [W-1:0]       sum;

  add_block dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [W-1:0] tree(logic [W-1:0] v [LANES], int n);
    logic [W-1:0] cur [LANES];
    int len = LANES;
    for (int i = 0; i < LANES; i++) cur[i] = (i < n) ? v[i] : 32'h0;
    while (len > 1) begin
      for (int i = 0; i < len / 2; i++)
        cur[i] = r2f(f2r(cur[2*i], 8, 23) + f2r(cur[2*i+1], 8, 23), 8, 23);
      len = len / 2;
    end
    return cur[0];
  endfunction

  // Expected results queued per issued operation.
  logic [W-1:0]       exp_sum [$];
  logic [LANES*W-1:0] exp_ew  [$];
  bit                 exp_acc [$];
  bit                 v_d1 = 0, v_d2 = 0;

  always @(posedge clk) begin
    v_d2 <= v_d1;
    v_d1 <= in_valid;
    if (rst_n) begin
      check(out_valid == v_d2, "out_valid two cycles after in_valid");
      if (out_valid) begin
        logic [W-1:0] s;
        logic [LANES*W-1:0] e;
        bit acc;
        s = exp_sum.pop_front();
        e = exp_ew.pop_front();
        acc = exp_acc.pop_front();
        if (acc) check(sum == s, $sformatf("sum %h expected %h", sum, s));
        else     check(ew == e, "element-wise result");
      end
    end
  end

  initial begin
    logic [W-1:0] va [LANES];
    logic [LANES*W-1:0] e;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      mode     = (k % 2) ? ADD_EW : ADD_ACC;
      nlanes   = 7'($urandom % 65);
      if (k < 4) nlanes = 7'd64;
      for (int i = 0; i < LANES; i++) begin
        va[i] = rand_fp(8, 23, -6, 6);
        a[i*W +: W] = va[i];
        b[i*W +: W] = rand_fp(8, 23, -6, 6);
        e[i*W +: W] = r2f(f2r(va[i], 8, 23) + f2r(b[i*W +: W], 8, 23), 8, 23);
      end
      if (in_valid) begin
        exp_acc.push_back(mode == ADD_ACC);
        exp_sum.push_back(tree(va, int'(nlanes)));
        exp_ew.push_back(e);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(posedge clk);
    check(exp_sum.size() == 0, "all results received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
