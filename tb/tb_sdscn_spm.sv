// tb_sdscn_spm -- checks the serial pass module at L = 400. For random
// activation vectors with 0 to 6 active neurons, after a clear, the module
// must present the active neurons one per cycle from the highest index
// down, then keep presenting the lowest one; `valid` must be low only for
// an empty vector. The expected sequence is the sorted list of set bits.
module tb_sdscn_spm;
  localparam int unsigned L = 400, AW = $clog2(L);
  int checks = 0, failures = 0;
  logic          clk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  logic [L-1:0]  gd_op = '0;
  logic [AW-1:0] idx;
  logic          valid;
  int            cycles = 0;

  sdscn_spm #(.L(L)) dut (.clk, .rst_n, .clr, .gd_op, .idx, .valid);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 300; n++) begin
      automatic int list [$];
      automatic int k = $urandom_range(0, 6);
      gd_op = '0;
      while ($countones(gd_op) < k) gd_op[$urandom_range(0, L - 1)] = 1'b1;
      for (int j = L - 1; j >= 0; j--) if (gd_op[j]) list.push_back(j);
      clr = 1'b1;
      @(negedge clk);
      clr = 1'b0;
      for (int t = 0; t < k + 2; t++) begin
        automatic int exp_i = (k == 0) ? 0 : list[(t < k) ? t : k - 1];
        checks++;
        if (valid != (k != 0) || (k != 0 && idx != AW'(exp_i))) begin
          failures++;
          $display("FAIL k=%0d step %0d: idx %0d valid %0d, expected %0d", k, t, idx, valid, exp_i);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles > 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
