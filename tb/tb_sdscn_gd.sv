// tb_sdscn_gd -- checks one global decoder (C = 8, L = 400) through a
// retrieval-shaped sequence of strobes: a first iteration (one word per
// input, memory effect from the LD vector) followed by iterations of two
// serial words each (memory effect from the previous output). Expected
// values are computed bit by bit from the decoding rule: a neuron stays
// active when every other cluster sent a 1 for it in at least one word of
// the iteration and it was active before.
module tb_sdscn_gd;
  localparam int unsigned C = 8, L = 400;
  int checks = 0, failures = 0;
  logic         clk = 1'b0, rst_n = 1'b0;
  logic [L-1:0] gd_in [C-1];
  logic [L-1:0] ld_vec;
  logic         it_ctrl = 1'b0, acc_clr = 1'b0, acc_en = 1'b0, op_en = 1'b0;
  logic [L-1:0] gd_op;
  int           cycles = 0;

  sdscn_gd #(.C(C), .L(L)) dut (.clk, .rst_n, .gd_in, .ld_vec, .it_ctrl,
                                .acc_clr, .acc_en, .op_en, .gd_op);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // Biased random word: each bit set with probability about 7/8.
  function automatic logic [L-1:0] dense();
    logic [L-1:0] v;
    for (int j = 0; j < L; j++) v[j] = ($urandom_range(0, 7) != 0);
    return v;
  endfunction

  initial begin
    logic [L-1:0] exp_v, seen [C-1];
    for (int k = 0; k < C - 1; k++) gd_in[k] = '0;
    ld_vec = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 40; n++) begin
      // start cycle: clear accumulators
      acc_clr = 1'b1; it_ctrl = 1'b0;
      @(negedge clk);
      acc_clr = 1'b0;
      // iteration 1
      ld_vec = dense();
      exp_v  = ld_vec;
      for (int k = 0; k < C - 1; k++) begin
        gd_in[k] = dense();
        exp_v &= gd_in[k];
      end
      op_en = 1'b1;
      @(negedge clk);
      op_en = 1'b0;
      checks++;
      if (gd_op != exp_v) begin failures++; $display("FAIL iteration 1"); end
      // three serial iterations of two words
      for (int it = 2; it <= 4; it++) begin
        it_ctrl = 1'b1;
        acc_clr = 1'b1;                         // beat 0: no data yet
        for (int k = 0; k < C - 1; k++) gd_in[k] = dense();
        @(negedge clk);
        acc_clr = 1'b0;
        acc_en  = 1'b1;                         // beat 1: first word
        for (int k = 0; k < C - 1; k++) begin
          gd_in[k] = dense() & dense();
          seen[k]  = gd_in[k];
        end
        @(negedge clk);
        acc_en = 1'b0;
        op_en  = 1'b1;                          // beat 2: second word
        for (int k = 0; k < C - 1; k++) begin
          gd_in[k] = dense() & dense();
          seen[k] |= gd_in[k];
          exp_v &= seen[k];
        end
        @(negedge clk);
        op_en = 1'b0;
        checks++;
        if (gd_op != exp_v) begin failures++; $display("FAIL iteration %0d", it); end
      end
      // output holds without op_en
      for (int k = 0; k < C - 1; k++) gd_in[k] = '0;
      @(negedge clk);
      checks++;
      if (gd_op != exp_v) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles > 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
