// tb_sdscn_block_counter -- checks the RAM block counter with 56 blocks
// (C = 8): a single select bit that starts at block 0, moves to the next
// block on each step in write mode, wraps after block 55, and returns to
// block 0 in read mode.
module tb_sdscn_block_counter;
  localparam int unsigned NB = 56;
  int checks = 0, failures = 0;
  logic          clk = 1'b0, rst_n = 1'b0, rw = 1'b1, step = 1'b0;
  logic [NB-1:0] sel;
  int            exp_b = 0, cycles = 0;

  sdscn_block_counter #(.NB(NB)) dut (.clk, .rst_n, .rw, .step, .sel);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    rw = 1'b0;
    for (int n = 0; n < 400; n++) begin
      step = ($urandom_range(0, 1) != 0);
      rw   = (n >= 300 && n < 305);
      @(negedge clk);
      if (rw) exp_b = 0;
      else if (step) exp_b = (exp_b + 1) % NB;
      checks++;
      if (sel != (NB'(1) << exp_b)) begin failures++; $display("FAIL block %0d", exp_b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles > 2000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
