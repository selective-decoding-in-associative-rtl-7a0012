// tb_sdscn_out_reg -- checks the output registers at C = 8, L = 400:
// indices and error flags (cluster with zero or several active neurons)
// loaded only on `load`, with `done` one cycle after.
module tb_sdscn_out_reg;
  localparam int unsigned C = 8, L = 400, AW = $clog2(L);
  int checks = 0, failures = 0, cycles = 0;
  logic          clk = 1'b0, rst_n = 1'b0, load = 1'b0;
  logic [AW-1:0] pe_idx [C];
  logic [L-1:0]  gd_op [C];
  logic [AW-1:0] dout_idx [C];
  logic [C-1:0]  dout_err;
  logic          done;

  sdscn_out_reg #(.C(C), .L(L)) dut (.clk, .rst_n, .load, .pe_idx, .gd_op,
                                     .dout_idx, .dout_err, .done);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    int          eidx [C];
    logic [C-1:0] eerr;
    for (int i = 0; i < C; i++) begin pe_idx[i] = '0; gd_op[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 200; n++) begin
      automatic bit ld = (n % 3 != 2);
      for (int i = 0; i < C; i++) begin
        automatic int nb = $urandom_range(0, 3);
        gd_op[i] = '0;
        while ($countones(gd_op[i]) < nb) gd_op[i][$urandom_range(0, L - 1)] = 1'b1;
        pe_idx[i] = AW'($urandom_range(0, L - 1));
        if (ld) begin
          eidx[i] = pe_idx[i];
          eerr[i] = (nb != 1);
        end
      end
      load = ld;
      @(negedge clk);
      load = 1'b0;
      checks++;
      if (done != ld) failures++;
      if (n > 0 || ld) begin
        checks++;
        if (dout_err != eerr) begin failures++; $display("FAIL err %b expected %b", dout_err, eerr); end
        for (int i = 0; i < C; i++) begin
          checks++;
          if (dout_idx[i] != AW'(eidx[i])) failures++;
        end
      end
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
