// tb_sdscn_row_counter -- checks the RAM row counter at L = 400: counts
// steps in write mode, wraps from 399 to 0 with `wrap`, holds without a
// step and returns to 0 in read mode.
module tb_sdscn_row_counter;
  localparam int unsigned L = 400, AW = $clog2(L);
  int checks = 0, failures = 0;
  logic          clk = 1'b0, rst_n = 1'b0, rw = 1'b1, step = 1'b0;
  logic [AW-1:0] row;
  logic          wrap;
  int            exp_row = 0, cycles = 0;

  sdscn_row_counter #(.L(L)) dut (.clk, .rst_n, .rw, .step, .row, .wrap);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    rw = 1'b0;
    for (int n = 0; n < 3000; n++) begin
      step = ($urandom_range(0, 3) != 0);
      if (n == 1500) rw = 1'b1;
      if (n == 1510) rw = 1'b0;
      #1;
      checks++;
      if (wrap != (!rw && step && exp_row == L - 1)) begin failures++; $display("FAIL wrap at %0d", exp_row); end
      @(negedge clk);
      if (rw) exp_row = 0;
      else if (step) exp_row = (exp_row + 1) % L;
      checks++;
      if (row != AW'(exp_row)) begin failures++; $display("FAIL row %0d expected %0d", row, exp_row); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles > 10000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
