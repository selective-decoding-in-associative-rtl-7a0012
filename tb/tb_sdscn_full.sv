// tb_sdscn_full -- sdscn_top at its default size (C = 8 clusters of
// L = 400 neurons, BETA = 2, IT = 4) loaded with 39,754 uniformly random
// messages, a link density of about 0.22. As in the reported measurement
// of BETA, 1000 retrievals are made, each with half the clusters erased. The full 22,400-row link matrix
// is written twice (half the messages, then all), and retrievals of stored
// messages with clusters erased are checked against the reference model,
// including the 11-edge access delay. Mechanisms that must occur: matrix
// writes, re-entering write mode, erased-cluster bypass, serial passes of
// several neurons, clusters with more than BETA active neurons.
module tb_sdscn_full;
  int checks = 0, failures = 0;
  bit f;
  int c, x, b, s, o, e, k, h, hc, w, p, mx;

  tb_sdscn_run #(.C(8), .L(400), .BETA(2), .IT(4), .M(39754), .NQ(1000),
                 .DEFAULT_TOP(1'b1), .ALL_HALF(1'b1)) u_full (
    .finished(f), .checks(c), .failures(x), .n_bypass(b), .n_serial2(s),
    .n_overflow(o), .n_err(e), .n_correct(k), .n_half(h),
    .n_half_correct(hc), .n_write_rows(w), .n_write_phases(p), .max_act1(mx)
  );

  task automatic need(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    wait (f);
    checks   = checks + c;
    failures = failures + x;
    $display("n=3200: correct %0d, half-erased %0d/%0d, bypass %0d, serial2 %0d, over-beta %0d, err %0d, rows %0d, max active after it. 1: %0d",
             k, hc, h, b, s, o, e, w, mx);
    need(w == 2 * 56 * 400, "link matrix written twice");
    need(p == 2, "write mode entered again after read mode");
    need(b > 0, "erased-cluster bypass");
    need(s > 0, "serial pass of several neurons");
    need(o > 0, "more than BETA active neurons");
    // With BETA = 2 some half-erased retrievals lose the stored neuron
    // when more than two candidates survive iteration 1; require a majority.
    need(hc * 2 >= h, "half-erased retrieval rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
