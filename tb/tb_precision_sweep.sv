// tb_precision_sweep: the paper's precision and latency sweep on the FP32
// macro at its default parameters.
//
// For every input length d = 64, 128, ..., 1024 it normalises at least 32
// random vectors (inputs uniform in (-1, 1), gamma = 1, beta = 0, five
// iteration steps), packing as many vectors into the buffer as fit
// (floor(16 / ceil(d/64))).  It reports the average and maximum absolute
// error against exact layer normalisation and the latency, and checks
//   * that the average absolute error at each d is below 1e-2 (the paper's
//     worst FP32 average in its length table is 6.2e-3, at d = 2048; five
//     steps leave up to about 2% error in a when m lies just below an even
//     power of two, where a0 starts 41% above 1/sqrt(m)),
//   * that the average over the whole sweep is below 1e-3 (the paper
//     reports an FP32 average of 2.23e-4),
//   * that the latency is 5*ceil(d/64) + 61 cycles from the last load beat
//     (5C + 4*n_iter + 41 with n_iter = 5),
//   * that the outputs arrive in vector and chunk order.
module tb_precision_sweep;
  int checks = 0, failures = 0;

  ln_harness #(.EXP_W(8), .MAN_W(23)) h ();

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
    real es, em, tot, mx, all_sum;
    int  nc, n, c, all_n;
    longint lat;
    bit ord;
    all_sum = 0.0; all_n = 0;
    $display("    d   vectors   avg |err|    max |err|   latency");
    for (int d = 64; d <= 1024; d += 64) begin
      c = (d + 63) / 64;
      tot = 0.0; mx = 0.0; n = 0;
      for (int done_v = 0; done_v < 32; done_v += 16 / c) begin
        h.run_batch(d, 16 / c, 5, es, em, nc, lat, ord);
        tot += es; n += nc;
        if (em > mx) mx = em;
        check(ord, "z order");
        check(lat == longint'(5 * c + 61), $sformatf("d=%0d latency %0d expected %0d", d, lat, 5 * c + 61));
      end
      all_sum += tot; all_n += n;
      $display("%5d %9d   %9.3e   %9.3e   %0d", d, n / d, tot / n, mx, lat);
      check(tot / n < 1e-2, $sformatf("d=%0d average error %g", d, tot / n));
    end
    $display("overall average |err| = %9.3e", all_sum / all_n);
    check(all_sum / all_n < 1e-3, "overall average error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
