// tb_formats: the macro built for FP16 (EXP_W=5, MAN_W=10) and BFloat16
// (EXP_W=8, MAN_W=7), the paper's other two number formats.
//
// Each variant normalises random vectors (uniform in (-1, 1), gamma = 1,
// beta = 0, five steps) at several input lengths: FP16 at d = 64, 256, ...,
// 1024 and BFloat16 at d = 128, 384, ..., 896, at least 16 vectors each.  It
// checks that the outputs arrive in order with the FP32 latency (5C + 61
// cycles; the format does not change the schedule), that the average
// absolute error against exact layer normalisation stays below 3e-2 at each
// length, and that the average over all lengths stays below 1e-2 (the paper
// reports averages of 5.26e-4 for FP16 and 3.07e-3 for BFloat16).  At
// d = 1024, m = ||y||^2 is about 340, so FP16 relies on the initialisation
// never forming m^2 (about 1.2e5, beyond the FP16 range).
module tb_formats;
  int checks = 0, failures = 0;

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
    real es, em, tot, mx, all_sum;
    int  nc, n, c, all_n;
    longint lat;
    bit ord;
    string fname [2];
    fname = '{"FP16", "BFloat16"};
    for (int f = 0; f < 2; f++) begin
      all_sum = 0.0; all_n = 0;
      for (int d = (f == 0) ? 64 : 128; d <= 1024; d += (f == 0) ? 192 : 256) begin
        c = (d + 63) / 64;
        tot = 0.0; mx = 0.0; n = 0;
        for (int done_v = 0; done_v < 16; done_v += 16 / c) begin
          if (f == 0) h16.run_batch(d, 16 / c, 5, es, em, nc, lat, ord);
          else        hbf.run_batch(d, 16 / c, 5, es, em, nc, lat, ord);
          tot += es; n += nc; if (em > mx) mx = em;
          check(ord && lat == longint'(5 * c + 61), $sformatf("%s d=%0d order/latency %0d", fname[f], d, lat));
        end
        all_sum += tot; all_n += n;
        $display("%-8s d=%4d: avg |err| %9.3e  max |err| %9.3e", fname[f], d, tot / n, mx);
        check(tot / n < 3e-2, $sformatf("%s d=%0d average error", fname[f], d));
      end
      $display("%-8s overall average |err| %9.3e", fname[f], all_sum / all_n);
      check(all_sum / all_n < 1e-2, $sformatf("%s overall average error", fname[f]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
