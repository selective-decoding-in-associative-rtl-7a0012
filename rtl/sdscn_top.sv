// sdscn_top -- SD-SCN associative memory: a sparse-clustered network with
// selective decoding, its links stored in RAM blocks.
//
// A message is C sub-messages of log2(L) bits. Storing messages is done by
// the host, which turns them into a C(C-1)L x L link matrix and streams it
// in write mode (`rw` = 0, one L-bit row per `din_w_valid` cycle, or
// ceil(L/DW) parts of DW bits when DW < L; see sdscn_lsm for the order). Retrieval (`rw` = 1): the host presents the C
// sub-messages `din_r` with erase flags `erase` for the clusters it does
// not know, and pulses `start`. Then:
//   * the local decoders (LD) activate one neuron per known cluster and
//     all neurons of an erased one;
//   * iteration 1 reads, for each known cluster, the link row of its neuron
//     (the LD index, It_Ctrl = 0); erased clusters are not read but pass
//     all ones; each global decoder (GD) keeps the neurons linked to every
//     other cluster, ANDed with the LD vector;
//   * iterations 2..IT: each cluster's serial pass module (SPM) presents its
//     active neurons to the link RAMs one per cycle over BETA cycles
//     (It_Ctrl = 1); the GDs OR the rows of each cluster, AND across
//     clusters and AND with their previous output;
//   * after IT iterations the highest active neuron of each cluster is
//     registered on `dout_idx`, with `dout_err` flagging clusters left with
//     no or several active neurons, and `done` pulses.
// `done` comes 2 + (BETA+1)(IT-1) clock edges after the edge that accepts
// `start` (11 at the defaults). `din_r`/`erase` must stay stable while
// `busy` is high; assertions below check this and that `rw` stays in read
// mode during a retrieval. Reset is asynchronous, active low. The
// assertions are disabled while rst_n is low; linters may note rst_n as
// used both asynchronously (flops) and in this synchronous check, which is
// intended and has no hardware effect.
//
// The block structure (LD, LSM with counters and RAMs, GD, SPM, output
// registers, It_Ctrl multiplexers), the defaults C = 8, L = 400, BETA = 2,
// IT = 4 and the access delay follow the paper. The controller, the write
// strobe, the link-matrix order and the error flag are this design's own.
module sdscn_top #(
  parameter  int unsigned C    = sdscn_pkg::C_DEF,
  parameter  int unsigned L    = sdscn_pkg::L_DEF,
  parameter  int unsigned BETA = sdscn_pkg::BETA_DEF,
  parameter  int unsigned IT   = sdscn_pkg::IT_DEF,
  parameter  int unsigned DW   = L,        // write-port width (parts if < L)
  localparam int unsigned AW   = $clog2(L)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rw,            // 1: read (retrieve), 0: write links
  input  logic [DW-1:0] din_w,         // link-matrix row (or row part)
  input  logic          din_w_valid,
  input  logic          start,         // retrieval request
  input  logic [AW-1:0] din_r [C],     // sub-messages of the partial input
  input  logic [C-1:0]  erase,         // erased sub-messages
  output logic          busy,
  output logic          done,
  output logic [AW-1:0] dout_idx [C],  // retrieved sub-messages
  output logic [C-1:0]  dout_err       // cluster not uniquely decoded
);

  logic it_ctrl, rd_issue, first_rd, acc_clr, acc_en, op_en, spm_clr, out_en;

  logic [AW-1:0] ld_idx  [C];
  logic [L-1:0]  ld_vec  [C];
  logic [AW-1:0] spm_idx [C];
  logic [C-1:0]  spm_valid;
  logic [AW-1:0] ls      [C];
  logic [C-1:0]  rd_valid;
  logic [C-1:0]  bypass;
  logic [L-1:0]  gd_in   [C][C-1];
  logic [L-1:0]  gd_op   [C];

  sdscn_ctrl #(.BETA(BETA), .IT(IT)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .rw(rw), .start(start), .busy(busy),
    .it_ctrl(it_ctrl), .rd_issue(rd_issue), .first_rd(first_rd),
    .acc_clr(acc_clr), .acc_en(acc_en), .op_en(op_en), .spm_clr(spm_clr),
    .out_en(out_en)
  );

  for (genvar i = 0; i < C; i++) begin : g_cl
    sdscn_ld #(.L(L)) u_ld (
      .din_r(din_r[i]), .e(erase[i]), .idx(ld_idx[i]), .ld_vec(ld_vec[i])
    );

    sdscn_spm #(.L(L)) u_spm (
      .clk(clk), .rst_n(rst_n), .clr(spm_clr), .gd_op(gd_op[i]),
      .idx(spm_idx[i]), .valid(spm_valid[i])
    );

    // It_Ctrl multiplexer in front of the LSM: LD index (0) or SPM index (1).
    assign ls[i]       = it_ctrl ? spm_idx[i] : ld_idx[i];
    assign rd_valid[i] = rd_issue && (it_ctrl ? spm_valid[i] : !erase[i]);
    assign bypass[i]   = first_rd && erase[i];

    sdscn_gd #(.C(C), .L(L)) u_gd (
      .clk(clk), .rst_n(rst_n), .gd_in(gd_in[i]), .ld_vec(ld_vec[i]),
      .it_ctrl(it_ctrl), .acc_clr(acc_clr), .acc_en(acc_en), .op_en(op_en),
      .gd_op(gd_op[i])
    );
  end

  sdscn_lsm #(.C(C), .L(L), .DW(DW)) u_lsm (
    .clk(clk), .rst_n(rst_n), .rw(rw), .din_w(din_w),
    .din_w_valid(din_w_valid), .ls(ls), .rd_valid(rd_valid),
    .bypass(bypass), .ld_vec(ld_vec), .gd_in(gd_in)
  );

  sdscn_out_reg #(.C(C), .L(L)) u_out (
    .clk(clk), .rst_n(rst_n), .load(out_en), .pe_idx(spm_idx), .gd_op(gd_op),
    .dout_idx(dout_idx), .dout_err(dout_err), .done(done)
  );

  // Handshake rules of the retrieval interface, checked only out of reset
  // (registers hold arbitrary values until the reset has been applied).
  logic [C*AW-1:0] din_r_flat;
  always_comb for (int i = 0; i < C; i++) din_r_flat[i*AW +: AW] = din_r[i];

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> $stable(din_r_flat) && $stable(erase))
    else $error("din_r/erase changed during a retrieval");
  a_read_mode: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> rw)
    else $error("rw left read mode during a retrieval");
  a_done_once: assert property (@(posedge clk) disable iff (!rst_n)
    done |-> !busy)
    else $error("done while still busy");

endmodule
