// tb_sdscn_pe -- checks the priority encoder at L = 400: the index of the
// highest set bit (searched downward here) and `valid`, for single bits,
// sparse and dense random vectors and the empty vector.
module tb_sdscn_pe;
  localparam int unsigned L = 400, AW = $clog2(L);
  int checks = 0, failures = 0;
  logic [L-1:0]  vec;
  logic [AW-1:0] idx;
  logic          valid;

  sdscn_pe #(.L(L)) dut (.vec(vec), .idx(idx), .valid(valid));

  task automatic check_one();
    int exp_idx = -1;
    for (int j = L - 1; j >= 0; j--) if (vec[j]) begin exp_idx = j; break; end
    #1;
    checks++;
    if (exp_idx < 0) begin
      if (valid) failures++;
    end else if (!valid || idx != AW'(exp_idx)) begin
      failures++;
      $display("FAIL vec with top bit %0d gave %0d", exp_idx, idx);
    end
  endtask

  initial begin
    vec = '0;
    check_one();
    for (int j = 0; j < L; j++) begin
      vec = L'(1) << j;
      check_one();
    end
    for (int n = 0; n < 500; n++) begin
      vec = '0;
      repeat ($urandom_range(1, (n % 2) ? 4 : 200)) vec[$urandom_range(0, L - 1)] = 1'b1;
      check_one();
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
