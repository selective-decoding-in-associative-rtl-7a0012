// tb_sdscn_ohd -- checks the one-hot decoder at L = 400 for every 9-bit
// index: exactly bit idx set for idx < 400, all zero above.
module tb_sdscn_ohd;
  localparam int unsigned L = 400, AW = $clog2(L);
  int checks = 0, failures = 0;
  logic [AW-1:0] idx;
  logic [L-1:0]  onehot;

  sdscn_ohd #(.L(L)) dut (.idx(idx), .onehot(onehot));

  initial begin
    for (int i = 0; i < (1 << AW); i++) begin
      idx = AW'(i);
      #1;
      checks++;
      if (i < L) begin
        if (onehot != (L'(1) << i)) failures++;
      end else if (onehot != '0) failures++;
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
