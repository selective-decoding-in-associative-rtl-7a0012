// sdscn_ohd -- one-hot decoder (OHD).
//
// Turns a log2(L)-bit neuron index into an L-bit vector with only that
// neuron's bit set. It is used by the local decoder, to form the activation
// vector of a cluster that is not erased, and by the serial pass module, to
// mark the neuron that has just been passed. An index of L or more (possible
// when L is not a power of two) gives the all-zero vector.
// Purely combinational.
module sdscn_ohd #(
  parameter  int unsigned L  = sdscn_pkg::L_DEF,
  localparam int unsigned AW = $clog2(L)
) (
  input  logic [AW-1:0] idx,
  output logic [L-1:0]  onehot
);

  always_comb begin
    onehot = '0;
    for (int unsigned j = 0; j < L; j++) begin
      if (idx == AW'(j)) onehot[j] = 1'b1;
    end
  end

endmodule
