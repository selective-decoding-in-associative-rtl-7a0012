// tb_sdscn_ram -- checks one link RAM at L = 400: rows written with `wen`
// read back on the next cycle (synchronous read), unwritten rows keep
// their value, a write returns the old row in the same cycle.
module tb_sdscn_ram;
  localparam int unsigned L = 400, AW = $clog2(L);
  int checks = 0, failures = 0;
  logic          clk = 1'b0, wen = 1'b0;
  logic [AW-1:0] addr = '0;
  logic [L-1:0]  din = '0, dout;
  logic [L-1:0]  model [L];
  int            cycles = 0;

  sdscn_ram #(.L(L)) dut (.clk, .wen, .addr, .din, .dout);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  function automatic logic [L-1:0] rnd();
    logic [L-1:0] v;
    for (int j = 0; j < L; j += 32) v[j +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    for (int r = 0; r < L; r++) begin
      @(negedge clk);
      wen = 1'b1; addr = AW'(r); din = rnd(); model[r] = din;
    end
    @(negedge clk);
    wen = 1'b0;
    for (int n = 0; n < 2000; n++) begin
      automatic int r = $urandom_range(0, L - 1);
      automatic bit w = ($urandom_range(0, 3) == 0);
      addr = AW'(r); wen = w; din = rnd();
      @(negedge clk);
      checks++;
      if (dout != model[r]) begin failures++; $display("FAIL row %0d", r); end
      if (w) model[r] = din;
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
