// sdscn_spm -- serial pass module (SPM) of one cluster.
//
// A link RAM has one address port, but after an iteration a cluster may
// still have several active neurons. The SPM hands them to the RAMs one per
// clock cycle, from the highest index down. It holds a register Q of the
// neurons already passed. The input vector XOR Q clears those neurons, and
// the priority encoder (PE) picks the highest neuron still left, which is
// the output address. The one-hot decoder (OHD) expands that address back to
// L bits, and an OR with Q gives D, the next value of Q. An equality
// comparator (EC) compares D with the input vector. The register is enabled
// only while they differ. Once every active neuron has been passed, Q stops
// and the PE keeps presenting the last one, so extra read cycles repeat an
// address that was already read, and the OR in the global decoder is not
// changed by them.
//
// Following the paper: XOR/PE/OHD/OR/EC structure, MSB-first order, the
// inverted EC output as register enable. Own choices: the synchronous clear
// `clr`, asserted by the controller between iterations, and the PE `valid`
// output used to mask reads when the cluster has no active neuron.
//
// Timing: `idx`/`valid` are combinational from `gd_op` and Q; Q updates on
// each rising edge that `clr` is low and the EC reports a difference.
module sdscn_spm #(
  parameter  int unsigned L  = sdscn_pkg::L_DEF,
  localparam int unsigned AW = $clog2(L)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,     // forget the neurons passed so far
  input  logic [L-1:0]  gd_op,   // active neurons of this cluster (GD output)
  output logic [AW-1:0] idx,     // neuron passed in this cycle (RAM address)
  output logic          valid    // at least one neuron is active
);

  logic [L-1:0] q;        // neurons already passed
  logic [L-1:0] remain;   // XOR stage: active neurons not yet passed
  logic [L-1:0] pe_hot;   // OHD of the PE output
  logic [L-1:0] d;        // OR stage: next value of q
  logic         en;       // register enable from the equality comparator
  logic         pe_valid;

  assign remain = gd_op ^ q;

  sdscn_pe  #(.L(L)) u_pe  (.vec(remain), .idx(idx), .valid(pe_valid));
  sdscn_ohd #(.L(L)) u_ohd (.idx(idx), .onehot(pe_hot));

  // An empty cluster has no neuron to mark: the PE's default index 0 is not
  // an active neuron and must not enter Q.
  assign d     = q | (pe_valid ? pe_hot : '0);
  assign en    = (d != gd_op);
  assign valid = pe_valid;  // some neuron is active (passed or being passed)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q <= '0;
    else if (clr)    q <= '0;
    else if (en)     q <= d;
  end

endmodule
