// tb_mul_block: self-checking test of the Mul block (64 lanes, FP32).
//
// Random operand sets, issued on random cycles, must give lane-by-lane
// products equal to the FP32-rounded double products, with out_valid and
// the data exactly two cycles after in_valid.
module tb_mul_block;
  import fp_tb_pkg::*;

  localparam int LANES = 64, W = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               in_valid = 1'b0, out_valid;
  logic [LANES*W-1:0] a = '0, b = '0, p;

  mul_block dut (.*);

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

  logic [LANES*W-1:0] exp_p [$];
  bit v_d1 = 0, v_d2 = 0;
  always @(posedge clk) begin
    v_d2 <= v_d1;
    v_d1 <= in_valid;
    if (rst_n) begin
      check(out_valid == v_d2, "out_valid two cycles after in_valid");
      if (out_valid) begin
        logic [LANES*W-1:0] e;
        e = exp_p.pop_front();
        for (int i = 0; i < LANES; i++)
          check(p[i*W +: W] == e[i*W +: W], $sformatf("lane %0d %h expected %h", i, p[i*W +: W], e[i*W +: W]));
      end
    end
  end

  initial begin
    logic [LANES*W-1:0] e;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 200; k++) begin
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      for (int i = 0; i < LANES; i++) begin
        a[i*W +: W] = rand_fp(8, 23, -20, 20);
        b[i*W +: W] = rand_fp(8, 23, -20, 20);
        e[i*W +: W] = r2f(f2r(a[i*W +: W], 8, 23) * f2r(b[i*W +: W], 8, 23), 8, 23);
      end
      if (in_valid) exp_p.push_back(e);
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(posedge clk);
    check(exp_p.size() == 0, "all results received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
