// tb_convergence: error against the number of iteration steps, d = 1024.
//
// Builds the macro in FP32, FP16 and BFloat16 and normalises 16 random
// vectors (uniform in (-1, 1), gamma = 1, beta = 0) of the maximum length
// d = 1024 for every step count n_iter = 1 .. 10.  It prints the average
// absolute error against exact layer normalisation for each format and step
// count, and checks, per format:
//   * that the latency is 5*16 + 4*n_iter + 41 cycles (four cycles per step),
//   * that five steps already bring the error to within a factor of two of
//     the ten-step error (or below 1e-5), i.e. that the iteration has
//     converged after five steps as the original design intends,
//   * that one step is worse than ten (the iteration does work).
// The step counts and the length follow the convergence study of the
// original work; the vector count (16 rather than 1,000) and the pass
// criteria are this testbench's.
module tb_convergence;
  int checks = 0, failures = 0;

  ln_harness #(.EXP_W(8), .MAN_W(23)) h32 ();
  ln_harness #(.EXP_W(5), .MAN_W(10)) h16 ();
  ln_harness #(.EXP_W(8), .MAN_W(7))  hbf ();

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real es, em, tot;
    real avg [3][11];
    int  nc, n;
    longint lat;
    bit ord;
    string fname [3];
    fname = '{"FP32", "FP16", "BFloat16"};
    for (int f = 0; f < 3; f++) begin
      for (int it = 1; it <= 10; it++) begin
        tot = 0.0; n = 0;
        for (int k = 0; k < 16; k++) begin
          case (f)
            0:       h32.run_batch(1024, 1, it, es, em, nc, lat, ord);
            1:       h16.run_batch(1024, 1, it, es, em, nc, lat, ord);
            default: hbf.run_batch(1024, 1, it, es, em, nc, lat, ord);
          endcase
          tot += es; n += nc;
          check(ord && lat == longint'(5 * 16 + 4 * it + 41),
                $sformatf("%s n_iter=%0d order/latency %0d", fname[f], it, lat));
        end
        avg[f][it] = tot / n;
      end
      $write("%-8s avg |err| for n_iter = 1..10:", fname[f]);
      for (int it = 1; it <= 10; it++) $write(" %8.2e", avg[f][it]);
      $write("\n");
      check(avg[f][5] < 2.0 * avg[f][10] || avg[f][5] < 1e-5,
            $sformatf("%s not converged after five steps", fname[f]));
      check(avg[f][1] > avg[f][10], $sformatf("%s one step no worse than ten", fname[f]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
