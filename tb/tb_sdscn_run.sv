// tb_sdscn_run -- end-to-end test bench body for sdscn_top, instantiated by
// tb_sdscn_top (reduced sizes) and tb_sdscn_full (default sizes).
//
// It draws M uniformly random messages, builds the link matrix the host
// would send, loads it, and runs NQ retrievals of stored messages with some
// clusters erased. Each result is compared with a behavioural reference
// written here from the decoding equations, not from the RTL structure:
// iteration 1 ANDs the link rows of the known neurons (erased clusters
// contribute all ones); each later iteration ORs, per other cluster, the
// rows of at most BETA of its active neurons taken from the highest index
// down, ANDs over clusters and with the previous activation. The retrieval
// latency is checked against 2 + (BETA+1)(IT-1) edges. The matrix is loaded
// twice, first with half the messages and then with all of them, so that
// the design goes from read mode back to write mode. Mechanism counters are
// reported to the parent: erased-cluster bypasses, clusters passed serially
// with 2+ active neurons, clusters with more than BETA active neurons,
// retrievals flagged as errors, write rows and write phases.
// `max_act1` is the largest number of neurons left active in one cluster
// after the first iteration, the quantity BETA must cover.
// DW < L sends each row in ceil(L/DW) parts with idle cycles between some.
// When DEFAULT_TOP is set the top is instantiated without a parameter list
// (C, L, BETA, IT must then equal the package defaults).
module tb_sdscn_run #(
  parameter int unsigned C    = 8,
  parameter int unsigned L    = 16,
  parameter int unsigned BETA = 2,
  parameter int unsigned IT   = 4,
  parameter int unsigned M    = 64,
  parameter int unsigned NQ   = 100,
  parameter int unsigned DW   = L,      // write-port width of the top
  parameter bit          DEFAULT_TOP = 1'b0,
  parameter bit          ALL_HALF    = 1'b0   // every query erases C/2 clusters
) (
  output bit finished,
  output int checks,
  output int failures,
  output int n_bypass,
  output int n_serial2,
  output int n_overflow,
  output int n_err,
  output int n_correct,
  output int n_half,
  output int n_half_correct,
  output int n_write_rows,
  output int n_write_phases,
  output int max_act1        // most active neurons in a cluster after iteration 1
);
  localparam int unsigned AW  = $clog2(L);
  localparam int unsigned LAT = 2 + (BETA + 1) * (IT - 1);

  logic          clk = 1'b0;
  logic          rst_n;
  logic          rw;
  logic [DW-1:0] din_w;
  localparam int unsigned WP = (L + DW - 1) / DW;
  logic          din_w_valid;
  logic          start;
  logic [AW-1:0] din_r [C];
  logic [C-1:0]  erase;
  logic          busy, done;
  logic [AW-1:0] dout_idx [C];
  logic [C-1:0]  dout_err;

  always #5 clk = ~clk;

  if (DEFAULT_TOP) begin : g_def
    sdscn_top dut (
      .clk, .rst_n, .rw, .din_w, .din_w_valid, .start, .din_r, .erase,
      .busy, .done, .dout_idx, .dout_err
    );
  end else begin : g_par
    sdscn_top #(.C(C), .L(L), .BETA(BETA), .IT(IT), .DW(DW)) dut (
      .clk, .rst_n, .rw, .din_w, .din_w_valid, .start, .din_r, .erase,
      .busy, .done, .dout_idx, .dout_err
    );
  end

  // Reference state.
  int unsigned  msg [M][C];
  bit [L-1:0]   w   [C][C][L];   // w[a][d][r]: links of neuron r of a into d

  function automatic int popcount(bit [L-1:0] v);
    int n = 0;
    for (int j = 0; j < L; j++) n += int'(v[j]);
    return n;
  endfunction

  task automatic build_links(int unsigned nmsg);
    for (int a = 0; a < C; a++)
      for (int d = 0; d < C; d++)
        for (int r = 0; r < L; r++) w[a][d][r] = '0;
    for (int m = 0; m < nmsg; m++)
      for (int a = 0; a < C; a++)
        for (int d = 0; d < C; d++)
          if (a != d) w[a][d][msg[m][a]][msg[m][d]] = 1'b1;
  endtask

  // Stream the link matrix: block b = a*(C-1)+k, rows 0..L-1 each.
  task automatic write_matrix();
    @(negedge clk);
    rw = 1'b0;
    for (int a = 0; a < C; a++) begin
      for (int k = 0; k < C - 1; k++) begin
        int d = (k < a) ? k : k + 1;
        for (int r = 0; r < L; r++) begin
          // occasional idle cycle between rows
          if ($urandom_range(0, 7) == 0) begin
            din_w_valid = 1'b0;
            din_w       = DW'($urandom);
            @(negedge clk);
          end
          // the row in WP parts of DW bits, lowest first
          for (int p = 0; p < WP; p++) begin
            bit [WP*DW-1:0] wide = (WP * DW)'(w[a][d][r]);
            din_w       = wide[p*DW +: DW];
            din_w_valid = 1'b1;
            @(negedge clk);
            if (p + 1 < WP && $urandom_range(0, 7) == 0) begin
              din_w_valid = 1'b0;
              @(negedge clk);
            end
          end
          n_write_rows++;
        end
      end
    end
    din_w_valid = 1'b0;
    rw = 1'b1;
    n_write_phases++;
    @(negedge clk);
  endtask

  // Reference decoder.
  task automatic ref_decode(input int unsigned q_in [C], input bit [C-1:0] er,
                            output int unsigned e_idx [C], output bit [C-1:0] e_err);
    bit [L-1:0] v [C];
    bit [L-1:0] nv [C];
    bit [L-1:0] orr;
    for (int d = 0; d < C; d++) begin
      nv[d] = er[d] ? '1 : (L'(1) << q_in[d]);
      for (int a = 0; a < C; a++)
        if (a != d && !er[a]) nv[d] &= w[a][d][q_in[a]];
    end
    v = nv;
    for (int a = 0; a < C; a++) if (popcount(v[a]) > max_act1) max_act1 = popcount(v[a]);
    for (int it = 2; it <= IT; it++) begin
      for (int a = 0; a < C; a++) begin
        int pc = popcount(v[a]);
        if (pc > 1)    n_serial2++;
        if (pc > BETA) n_overflow++;
      end
      for (int d = 0; d < C; d++) begin
        nv[d] = v[d];
        for (int a = 0; a < C; a++) begin
          if (a == d) continue;
          orr = '0;
          begin
            int taken = 0;
            for (int j = L - 1; j >= 0 && taken < BETA; j--) begin
              if (v[a][j]) begin
                orr |= w[a][d][j];
                taken++;
              end
            end
          end
          nv[d] &= orr;
        end
      end
      v = nv;
    end
    for (int d = 0; d < C; d++) begin
      e_idx[d] = 0;
      for (int j = 0; j < L; j++) if (v[d][j]) e_idx[d] = j;
      e_err[d] = (popcount(v[d]) != 1);
    end
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (C=%0d L=%0d)", what, C, L);
    end
  endtask

  task automatic query(int unsigned qn, bit half);
    int unsigned  q_in [C];
    bit [C-1:0]   er;
    int unsigned  e_idx [C];
    bit [C-1:0]   e_err;
    int           ne, lat;
    bit           ok_all;
    int unsigned  m = $urandom_range(0, qn - 1);
    // erase exactly C/2 clusters (half) or a random number 1..C-1
    ne = half ? C / 2 : $urandom_range(1, C - 1);
    er = '0;
    while (popcount(L'(er)) < ne) er[$urandom_range(0, C - 1)] = 1'b1;
    for (int i = 0; i < C; i++) begin
      q_in[i] = er[i] ? $urandom_range(0, L - 1) : msg[m][i];
      if (er[i]) n_bypass++;
    end
    ref_decode(q_in, er, e_idx, e_err);
    @(negedge clk);
    for (int i = 0; i < C; i++) din_r[i] = AW'(q_in[i]);
    erase = er;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    lat = 1;
    while (!done && lat < 4 * LAT) begin
      check(busy, "busy during retrieval");
      @(negedge clk);
      lat++;
    end
    // lat-1 edges after the accepting edge, the last one loading the outputs
    check(lat - 1 == LAT, $sformatf("latency %0d edges, expected %0d", lat - 1, LAT));
    ok_all = 1'b1;
    for (int i = 0; i < C; i++) begin
      check(dout_idx[i] == AW'(e_idx[i]),
            $sformatf("cluster %0d index %0d, expected %0d", i, dout_idx[i], e_idx[i]));
      if (dout_idx[i] != AW'(msg[m][i]) || e_err[i]) ok_all = 1'b0;
    end
    check(dout_err == e_err, $sformatf("error flags %b, expected %b", dout_err, e_err));
    if (e_err != '0) n_err++;
    if (ok_all) n_correct++;
    if (half) begin
      n_half++;
      if (ok_all) n_half_correct++;
    end
  endtask

  initial begin
    finished = 1'b0;
    checks = 0; failures = 0; n_bypass = 0; n_serial2 = 0; n_overflow = 0;
    n_err = 0; n_correct = 0; n_half = 0; n_half_correct = 0;
    n_write_rows = 0; n_write_phases = 0; max_act1 = 0;
    rst_n = 1'b0; rw = 1'b1; din_w = '0; din_w_valid = 1'b0; start = 1'b0;
    erase = '0;
    for (int i = 0; i < C; i++) din_r[i] = '0;
    for (int m = 0; m < M; m++)
      for (int i = 0; i < C; i++) msg[m][i] = $urandom_range(0, L - 1);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Phase 1: half of the messages.
    build_links(M / 2);
    write_matrix();
    for (int q = 0; q < NQ / 4; q++) query(M / 2, ALL_HALF || q % 4 != 3);
    // Phase 2: all messages, matrix written again after read mode.
    build_links(M);
    write_matrix();
    for (int q = NQ / 4; q < NQ; q++) query(M, ALL_HALF || q % 4 != 3);
    finished = 1'b1;
  end

endmodule
