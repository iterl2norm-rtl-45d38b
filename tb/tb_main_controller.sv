// tb_main_controller: self-checking test of the main controller.
//
// The testbench plays the other controllers: after each start pulse it
// answers with the matching done after a random delay.  For random vector
// counts N and chunk counts C it checks that loading is enabled after
// cfg_valid and ends with load_done, that for every vector the phases run
// in the order MEAN, SHIFT, M, ITER, OUT with exactly one start pulse each
// while `phase` names the running phase, that vec and base (= vec*C) step
// through the vectors, and that all_done follows the last vector.
module tb_main_controller;
  import iterl2norm_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       cfg_valid = 0, load_done = 0;
  logic [4:0] nvec = '0, nchunks = '0, vec;
  logic       mean_done = 0, shift_done = 0, m_done = 0, iter_done = 0, out_done = 0;
  phase_e     phase;
  logic       load_en, start_mean, start_shift, start_m, start_iter, start_out, busy, all_done;
  logic [3:0] base;

  main_controller dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Wait for the start pulse of phase ph, check nothing else starts, then
  // answer with done after a random delay.
  task automatic do_phase(phase_e ph, int v, int c);
    logic [4:0] starts;
    int waited = 0;
    starts = {start_out, start_iter, start_m, start_shift, start_mean};
    while (starts == '0 && waited < 20) begin
      @(negedge clk);
      starts = {start_out, start_iter, start_m, start_shift, start_mean};
      waited++;
    end
    check(phase == ph, $sformatf("phase %s expected %s", phase.name(), ph.name()));
    check(starts == 5'(1 << (int'(ph) - int'(PH_MEAN))), $sformatf("start pulse of %s: %b", ph.name(), starts));
    check(int'(vec) == v && int'(base) == v * c, "vec / base");
    check(busy && !all_done, "busy while computing");
    repeat ($urandom % 6) begin
      @(negedge clk);
      check({start_out, start_iter, start_m, start_shift, start_mean} == '0, "single start pulse");
      check(phase == ph, "phase held until done");
    end
    unique case (ph)
      PH_MEAN:  mean_done = 1;
      PH_SHIFT: shift_done = 1;
      PH_M:     m_done = 1;
      PH_ITER:  iter_done = 1;
      default:  out_done = 1;
    endcase
    @(negedge clk);
    {mean_done, shift_done, m_done, iter_done, out_done} = '0;
  endtask

  initial begin
    int n, c;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(phase == PH_IDLE && !busy, "idle after reset");
    for (int k = 0; k < 30; k++) begin
      c = 1 + int'($urandom % 16);
      n = 1 + int'($urandom % (16 / c));
      @(negedge clk);
      nvec = 5'(n); nchunks = 5'(c);
      cfg_valid = 1;
      @(negedge clk);
      cfg_valid = 0;
      check(load_en && phase == PH_LOAD, "loading enabled after configuration");
      repeat ($urandom % 5) begin
        @(negedge clk);
        check(load_en && start_mean == 0, "waits for load_done");
      end
      load_done = 1;
      for (int v = 0; v < n; v++) begin
        do_phase(PH_MEAN, v, c);
        load_done = 0;
        do_phase(PH_SHIFT, v, c);
        do_phase(PH_M, v, c);
        do_phase(PH_ITER, v, c);
        do_phase(PH_OUT, v, c);
      end
      check(all_done && !busy && phase == PH_DONE, "all_done after the last vector");
      repeat (3) begin
        @(negedge clk);
        check({start_out, start_iter, start_m, start_shift, start_mean} == '0 && all_done, "stays done");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
