// sdscn_ld -- local decoder (LD) of one cluster.
//
// In this design only whole clusters are erased, so local decoding needs no
// scores: a sub-message that is present activates exactly the neuron whose
// index is its binary value, and an erased sub-message (erase flag `e`
// high) activates every neuron of the cluster. The decoder has two outputs:
// the log2(L)-bit index itself (`idx`), which addresses the link RAMs in
// the first iteration, and the L-bit activation vector (`ld_vec`), the
// one-hot decoding of the index or all ones when erased, which the global
// decoder uses for its first iteration. Purely combinational.
module sdscn_ld #(
  parameter  int unsigned L  = sdscn_pkg::L_DEF,
  localparam int unsigned AW = $clog2(L)
) (
  input  logic [AW-1:0] din_r,   // sub-message of this cluster
  input  logic          e,       // erase flag: the sub-message is unknown
  output logic [AW-1:0] idx,     // neuron index for the first link read
  output logic [L-1:0]  ld_vec   // neurons activated by local decoding
);

  logic [L-1:0] onehot;

  sdscn_ohd #(.L(L)) u_ohd (.idx(din_r), .onehot(onehot));

  assign idx    = din_r;
  assign ld_vec = e ? '1 : onehot;

endmodule
