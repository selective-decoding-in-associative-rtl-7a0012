// sdscn_pe -- priority encoder (PE) of the serial pass module.
//
// Returns the index of the most significant set bit of an L-bit activation
// vector, as the serial pass module visits the active neurons of a cluster
// from the highest index to the lowest. `valid` is low when no bit is set;
// the index is then 0. Purely combinational.
module sdscn_pe #(
  parameter  int unsigned L  = sdscn_pkg::L_DEF,
  localparam int unsigned AW = $clog2(L)
) (
  input  logic [L-1:0]  vec,
  output logic [AW-1:0] idx,
  output logic          valid
);

  always_comb begin
    idx   = '0;
    valid = 1'b0;
    // Ascending scan: the last set bit found is the most significant one.
    for (int unsigned j = 0; j < L; j++) begin
      if (vec[j]) begin
        idx   = AW'(j);
        valid = 1'b1;
      end
    end
  end

endmodule
