// tb_sdscn_top -- end-to-end test of sdscn_top at two reduced sizes, both
// with C = 8 clusters, BETA = 2, IT = 4 and link density near 0.22:
// 128 neurons (L = 16) holding 64 messages, and 512 neurons (L = 64)
// holding 1018 messages, its rows written in three 24-bit parts. Both are run by tb_sdscn_run against a reference
// model. The test fails if any mechanism never occurred: loading the link
// matrix, returning from read to write mode, bypassing an erased cluster,
// passing 2+ active neurons serially, a cluster with more than BETA active
// neurons, and an error-flagged retrieval. It also requires at least 90 %
// of the retrievals with half the clusters erased to return the stored
// message exactly.
module tb_sdscn_top;
  int checks = 0, failures = 0;
  bit        f0, f1;
  int        c0, c1, x0, x1, b0, b1, s0, s1, o0, o1, e0, e1, k0, k1;
  int        h0, h1, hc0, hc1, w0, w1, p0, p1, m0, m1;

  tb_sdscn_run #(.C(8), .L(16), .M(64), .NQ(240)) u_n128 (
    .finished(f0), .checks(c0), .failures(x0), .n_bypass(b0), .n_serial2(s0),
    .n_overflow(o0), .n_err(e0), .n_correct(k0), .n_half(h0),
    .n_half_correct(hc0), .n_write_rows(w0), .n_write_phases(p0), .max_act1(m0)
  );
  tb_sdscn_run #(.C(8), .L(64), .M(1018), .NQ(120), .DW(24)) u_n512 (
    .finished(f1), .checks(c1), .failures(x1), .n_bypass(b1), .n_serial2(s1),
    .n_overflow(o1), .n_err(e1), .n_correct(k1), .n_half(h1),
    .n_half_correct(hc1), .n_write_rows(w1), .n_write_phases(p1), .max_act1(m1)
  );

  task automatic need(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    wait (f0 && f1);
    checks   = c0 + c1;
    failures = x0 + x1;
    $display("n=128: correct %0d, half-erased %0d/%0d, bypass %0d, serial2 %0d, over-beta %0d, err %0d, max active after it. 1: %0d",
             k0, hc0, h0, b0, s0, o0, e0, m0);
    $display("n=512: correct %0d, half-erased %0d/%0d, bypass %0d, serial2 %0d, over-beta %0d, err %0d, max active after it. 1: %0d",
             k1, hc1, h1, b1, s1, o1, e1, m1);
    need(w0 > 0 && w1 > 0, "link matrix written");
    need(p0 >= 2 && p1 >= 2, "write mode entered again after read mode");
    need(b0 > 0 && b1 > 0, "erased-cluster bypass");
    need(s0 > 0 && s1 > 0, "serial pass of several neurons");
    need(o0 + o1 > 0, "more than BETA active neurons");
    need(e0 + e1 > 0, "error-flagged retrieval");
    need(hc0 * 10 >= h0 * 9 && hc1 * 10 >= h1 * 9, "half-erased retrieval rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
