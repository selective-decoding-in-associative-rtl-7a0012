// tb_sdscn_ctrl -- checks the iteration controller's strobe schedule for
// BETA = 2, IT = 4 (the defaults) and for BETA = 3, IT = 2. For each
// retrieval the strobes of every cycle from the accepting cycle to the
// output load are compared with a schedule built from the rule: one
// first-iteration read, one update, then per later iteration BETA reads
// (accumulators cleared on the first, loaded on the others) and one
// update. The output load must come 2 + (BETA+1)(IT-1) edges after the
// accepting edge. A start in write mode or while busy must be ignored.
module tb_sdscn_ctrl;
  int checks = 0, failures = 0, cycles = 0;
  logic clk = 1'b0, rst_n = 1'b0;

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // strobe word: {busy, it_ctrl, rd_issue, first_rd, acc_clr, acc_en, op_en, spm_clr, out_en}
  typedef logic [8:0] strobes_t;

  logic     rw0 = 1'b1, st0 = 1'b0, rw1 = 1'b1, st1 = 1'b0;
  strobes_t s0, s1;

  sdscn_ctrl #(.BETA(2), .IT(4)) u0 (.clk, .rst_n, .rw(rw0), .start(st0),
    .busy(s0[8]), .it_ctrl(s0[7]), .rd_issue(s0[6]), .first_rd(s0[5]),
    .acc_clr(s0[4]), .acc_en(s0[3]), .op_en(s0[2]), .spm_clr(s0[1]), .out_en(s0[0]));
  sdscn_ctrl #(.BETA(3), .IT(2)) u1 (.clk, .rst_n, .rw(rw1), .start(st1),
    .busy(s1[8]), .it_ctrl(s1[7]), .rd_issue(s1[6]), .first_rd(s1[5]),
    .acc_clr(s1[4]), .acc_en(s1[3]), .op_en(s1[2]), .spm_clr(s1[1]), .out_en(s1[0]));

  function automatic void schedule(int beta, int it, ref strobes_t q [$]);
    q.delete();
    q.push_back(9'b0_0_1_1_1_0_0_0_0);  // accept: first read, clear accumulators
    q.push_back(9'b1_0_0_0_0_0_1_1_0);  // iteration 1 update
    for (int i = 2; i <= it; i++) begin
      for (int b = 0; b <= beta; b++) begin
        strobes_t s = 9'b1_1_0_0_0_0_0_0_0;
        if (b < beta) s[6] = 1'b1;
        if (b == 0) s[4] = 1'b1;
        if (b > 0 && b < beta) s[3] = 1'b1;
        if (b == beta) begin s[2] = 1'b1; s[1] = 1'b1; end
        q.push_back(s);
      end
    end
    q.push_back(9'b1_1_0_0_0_0_0_0_1);  // output load
  endfunction

  task automatic run(int which, int beta, int it);
    strobes_t q [$];
    strobes_t got;
    schedule(beta, it, q);
    checks++;
    if (q.size() - 1 != 2 + (beta + 1) * (it - 1)) failures++;
    @(negedge clk);
    if (which == 0) st0 = 1'b1; else st1 = 1'b1;
    for (int t = 0; t < q.size(); t++) begin
      #1;
      got = (which == 0) ? s0 : s1;
      checks++;
      if (got != q[t]) begin
        failures++;
        $display("FAIL ctrl%0d cycle %0d: %b expected %b", which, t, got, q[t]);
      end
      @(negedge clk);
      // a second start while busy must be ignored
      if (which == 0) st0 = (t == 3); else st1 = (t == 3);
    end
    st0 = 1'b0; st1 = 1'b0;
    #1;
    checks++;
    if (((which == 0) ? s0 : s1) != '0) failures++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // start in write mode: ignored
    rw0 = 1'b0; st0 = 1'b1;
    @(negedge clk);
    st0 = 1'b0; rw0 = 1'b1;
    #1;
    checks++;
    if (s0[8]) failures++;
    for (int n = 0; n < 5; n++) begin
      run(0, 2, 4);
      run(1, 3, 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles > 1000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
