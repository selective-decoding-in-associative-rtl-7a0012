// sdscn_out_reg -- output registers of the retrieved message.
//
// When the iterations are over, the index given by each cluster's SPM
// priority encoder (its highest active neuron) is registered as the
// retrieved sub-message. Alongside, this design registers a per-cluster
// error flag. The flag is set when the cluster ended with no active
// neuron, or with more than one (v & (v-1) != 0): then no unique message
// was recovered. `done` is a one-cycle pulse that comes with the new
// values. The flag and the pulse are this design's own; the registers
// loaded from the priority encoders follow the paper.
module sdscn_out_reg #(
  parameter  int unsigned C  = sdscn_pkg::C_DEF,
  parameter  int unsigned L  = sdscn_pkg::L_DEF,
  localparam int unsigned AW = $clog2(L)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,          // iterations are complete
  input  logic [AW-1:0] pe_idx [C],    // SPM priority-encoder outputs
  input  logic [L-1:0]  gd_op  [C],    // final activations
  output logic [AW-1:0] dout_idx [C],  // retrieved sub-messages
  output logic [C-1:0]  dout_err,      // cluster not uniquely decoded
  output logic          done           // dout_idx/dout_err were just loaded
);

  logic [C-1:0] err;

  always_comb begin
    for (int unsigned i = 0; i < C; i++) begin
      err[i] = (gd_op[i] == '0) || ((gd_op[i] & (gd_op[i] - 1'b1)) != '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < C; i++) dout_idx[i] <= '0;
      dout_err <= '0;
      done     <= 1'b0;
    end else begin
      done <= load;
      if (load) begin
        for (int unsigned i = 0; i < C; i++) dout_idx[i] <= pe_idx[i];
        dout_err <= err;
      end
    end
  end

endmodule
