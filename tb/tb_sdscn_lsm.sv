// tb_sdscn_lsm -- checks the link storage module at C = 8, L = 32. A random
// C(C-1)L x L link matrix is streamed in write mode (with idle cycles),
// then random reads are issued: per box an address, a valid flag and a
// bypass flag. One cycle later every destination input must carry the
// matrix row of the addressing cluster (valid), all ones (bypass) or zero.
// The expected routing is computed from the block order b = a*(C-1)+k.
// A second instance with a 12-bit write port receives every row as three
// parts (lowest first, with idle cycles) and must read back the same.
module tb_sdscn_lsm;
  localparam int unsigned C = 8, L = 32, AW = $clog2(L), NB = C * (C - 1);
  localparam int unsigned DW = 12, WP = (L + DW - 1) / DW;
  int checks = 0, failures = 0;
  logic          clk = 1'b0, rst_n = 1'b0, rw = 1'b1, din_w_valid = 1'b0;
  logic [L-1:0]  din_w = '0;
  logic [AW-1:0] ls [C];
  logic [C-1:0]  rd_valid = '0, bypass = '0;
  logic [L-1:0]  ld_vec [C];
  logic [L-1:0]  gd_in [C][C-1];
  logic [L-1:0]  gd_in_p [C][C-1];
  logic [DW-1:0] din_p = '0;
  logic          din_p_valid = 1'b0;
  logic [L-1:0]  mat [NB][L];
  int            cycles = 0;

  sdscn_lsm #(.C(C), .L(L)) dut (.clk, .rst_n, .rw, .din_w, .din_w_valid,
                                 .ls, .rd_valid, .bypass, .ld_vec, .gd_in);
  sdscn_lsm #(.C(C), .L(L), .DW(DW)) dut_p (.clk, .rst_n, .rw, .din_w(din_p),
                                 .din_w_valid(din_p_valid), .ls, .rd_valid,
                                 .bypass, .ld_vec, .gd_in(gd_in_p));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    for (int a = 0; a < C; a++) begin ls[a] = '0; ld_vec[a] = '1; end
    for (int b = 0; b < NB; b++) for (int r = 0; r < L; r++) mat[b][r] = L'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    rw = 1'b0;
    for (int b = 0; b < NB; b++) begin
      for (int r = 0; r < L; r++) begin
        if ($urandom_range(0, 5) == 0) begin
          din_w_valid = 1'b0; din_w = L'($urandom);
          @(negedge clk);
        end
        // parts for the narrow instance; the full row with the last part
        for (int p = 0; p < WP; p++) begin
          logic [WP*DW-1:0] wide;
          wide = (WP * DW)'(mat[b][r]);
          din_p = wide[p*DW +: DW]; din_p_valid = 1'b1;
          din_w_valid = (p == WP - 1); din_w = mat[b][r];
          @(negedge clk);
          din_p_valid = 1'b0; din_w_valid = 1'b0;
          if ($urandom_range(0, 3) == 0) @(negedge clk);
        end
      end
    end
    din_w_valid = 1'b0;
    rw = 1'b1;
    for (int n = 0; n < 500; n++) begin
      int          adr [C];
      logic [C-1:0] v, bp;
      for (int a = 0; a < C; a++) begin
        adr[a] = $urandom_range(0, L - 1);
        ls[a]  = AW'(adr[a]);
      end
      v  = C'($urandom);
      bp = C'($urandom) & C'($urandom);
      rd_valid = v; bypass = bp;
      @(negedge clk);
      rd_valid = '0; bypass = '0;
      for (int d = 0; d < C; d++) begin
        for (int a = 0; a < C; a++) begin
          int k, slot;
          logic [L-1:0] exp_w;
          if (a == d) continue;
          k    = (d < a) ? d : d - 1;
          slot = (a < d) ? a : a - 1;
          exp_w = bp[a] ? '1 : (v[a] ? mat[a * (C - 1) + k][adr[a]] : '0);
          checks++;
          if (gd_in[d][slot] != exp_w) begin
            failures++;
            if (failures < 10) $display("FAIL dst %0d src %0d", d, a);
          end
          checks++;
          if (gd_in_p[d][slot] != exp_w) begin
            failures++;
            if (failures < 10) $display("FAIL narrow port: dst %0d src %0d", d, a);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles > 60000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
