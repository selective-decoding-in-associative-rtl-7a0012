// tb_sdscn_ld -- checks the local decoder at L = 400: index passed through,
// one-hot activation when the cluster is known, all ones when erased.
module tb_sdscn_ld;
  localparam int unsigned L = 400, AW = $clog2(L);
  int checks = 0, failures = 0;
  logic [AW-1:0] din_r, idx;
  logic          e;
  logic [L-1:0]  ld_vec;

  sdscn_ld #(.L(L)) dut (.din_r(din_r), .e(e), .idx(idx), .ld_vec(ld_vec));

  initial begin
    for (int n = 0; n < 1000; n++) begin
      automatic int v = $urandom_range(0, L - 1);
      din_r = AW'(v);
      e     = ($urandom_range(0, 3) == 0);
      #1;
      checks++;
      if (idx != AW'(v)) failures++;
      checks++;
      if (e ? (ld_vec != '1) : (ld_vec != (L'(1) << v))) begin
        failures++;
        $display("FAIL e=%0d v=%0d", e, v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
