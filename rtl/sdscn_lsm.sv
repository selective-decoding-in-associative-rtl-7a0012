// sdscn_lsm -- link storage module (LSM).
//
// Holds the network's links in C(C-1) L x L RAM blocks, one per ordered
// pair of distinct clusters. Blocks are grouped in C boxes. Box a holds the
// C-1 blocks addressed by cluster a's address LS[a]. Its block k holds the
// links from the neurons of cluster a to those of cluster d, where
// d = k if k < a, else k+1. Reading row r of that block returns, as L bits,
// the neurons of cluster d that share a clique with neuron r of cluster a.
// That word goes to cluster d's global decoder, on input a (a < d) or a-1
// (a > d).
//
// Write mode (`rw` = 0): the host streams the C(C-1)L x L link matrix, one
// L-bit row per `din_w_valid` cycle, or, when the write port is narrower
// (DW < L, for a host with fewer pins than L), one DW-bit part per cycle,
// WP = ceil(L/DW) parts per row, lowest bits first. The rows go in block order
// b = a*(C-1)+k, rows 0..L-1 within a block. The RAM row counter addresses
// the rows. The RAM block counter's one-hot output selects the write enable
// of one block. A multiplexer in each box, switched by r/w, gives the RAM
// address from the row counter (input 0, write) or from LS[a] (input 1, read).
//
// Read mode (`rw` = 1): every cycle each box reads the row LS[a]. The caller
// qualifies the read with `rd_valid[a]` (the address is a real active
// neuron) and `bypass[a]` (cluster a is erased and this is the first
// iteration). Both flags are delayed one cycle to line up with the
// synchronous RAM output. A bypassed cluster sends its local-decoder vector
// `ld_vec[a]` (all ones) in place of RAM data: the erased cluster is not
// read at all. An invalid read sends zeros, as the OR over no active neuron
// is empty.
//
// Following the paper: C(C-1) L x L blocks, row/block counters, r/w address
// multiplexer, L-bit write data optionally sent in parts, bypass of erased
// clusters. Own choices: the
// row/block order of the link matrix, the `din_w_valid` strobe, the part
// order, the grouping of blocks by address (see the README), and the qualify flags.
module sdscn_lsm #(
  parameter  int unsigned C  = sdscn_pkg::C_DEF,
  parameter  int unsigned L  = sdscn_pkg::L_DEF,
  parameter  int unsigned DW = L,                  // write-port width
  localparam int unsigned AW = $clog2(L),
  localparam int unsigned NB = C * (C - 1),
  localparam int unsigned WP = (L + DW - 1) / DW   // parts per row
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rw,             // 1: read mode, 0: write mode
  input  logic [DW-1:0] din_w,          // one row, or one part of a row
  input  logic          din_w_valid,    // din_w holds data to write
  input  logic [AW-1:0] ls [C],         // read address of each box
  input  logic [C-1:0]  rd_valid,       // LS[a] is an active neuron
  input  logic [C-1:0]  bypass,         // cluster a is skipped (erased)
  input  logic [L-1:0]  ld_vec [C],     // local-decoder vectors
  output logic [L-1:0]  gd_in [C][C-1]  // link words per destination cluster
);

  logic [AW-1:0] row;
  logic          row_wrap;
  logic [L-1:0]  row_data;    // assembled row
  logic          row_valid;   // row_data is complete this cycle
  logic [NB-1:0] blk_sel;
  logic [AW-1:0] addr [C];
  logic [L-1:0]  dout [C][C-1];
  logic [C-1:0]  rd_valid_q;
  logic [C-1:0]  bypass_q;

  // Row assembly. With DW = L every valid word is a row. With DW < L a row
  // arrives as WP parts, lowest bits first; the first WP-1 parts are
  // buffered and the row is written with the last part (whose bits above
  // L are dropped).
  if (WP == 1) begin : g_whole
    assign row_data  = din_w[L-1:0];
    assign row_valid = din_w_valid;
  end else begin : g_parts
    localparam int unsigned PW = $clog2(WP);
    logic [PW-1:0]          part;
    logic [(WP-1)*DW-1:0]   held;
    logic [WP*DW-1:0]       full;
    assign full      = {din_w, held};
    assign row_data  = full[L-1:0];
    assign row_valid = din_w_valid && (part == PW'(WP - 1));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)          part <= '0;
      else if (rw)         part <= '0;
      else if (row_valid)  part <= '0;
      else if (din_w_valid) begin
        held[part*DW +: DW] <= din_w;
        part <= part + 1'b1;
      end
    end
  end

  sdscn_row_counter #(.L(L)) u_row (
    .clk(clk), .rst_n(rst_n), .rw(rw), .step(row_valid),
    .row(row), .wrap(row_wrap)
  );

  sdscn_block_counter #(.NB(NB)) u_blk (
    .clk(clk), .rst_n(rst_n), .rw(rw), .step(row_wrap), .sel(blk_sel)
  );

  for (genvar a = 0; a < C; a++) begin : g_box
    assign addr[a] = rw ? ls[a] : row;
    for (genvar k = 0; k < C - 1; k++) begin : g_ram
      sdscn_ram #(.L(L)) u_ram (
        .clk (clk),
        .wen (!rw && row_valid && blk_sel[a*(C-1)+k]),
        .addr(addr[a]),
        .din (row_data),
        .dout(dout[a][k])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid_q <= '0;
      bypass_q   <= '0;
    end else begin
      rd_valid_q <= rw ? rd_valid : '0;
      bypass_q   <= rw ? bypass   : '0;
    end
  end

  // Route box a, block k to destination d and its input slot.
  for (genvar d = 0; d < C; d++) begin : g_dst
    for (genvar a = 0; a < C; a++) begin : g_src
      if (a != d) begin : g_link
        localparam int unsigned K    = (d < a) ? d : d - 1;  // block in box a
        localparam int unsigned SLOT = (a < d) ? a : a - 1;  // GD input of d
        assign gd_in[d][SLOT] = bypass_q[a]   ? ld_vec[a]  :
                                rd_valid_q[a] ? dout[a][K] : '0;
      end
    end
  end

endmodule
