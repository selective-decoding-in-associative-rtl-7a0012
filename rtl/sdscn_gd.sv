// sdscn_gd -- global decoder (GD) of one cluster, selective-decoding form.
//
// Implements, for every neuron j of this cluster,
//   v(j) <= AND over the other C-1 clusters k of
//             ( OR over the active neurons a of cluster k of w(k,a)(this,j) )
//           AND v_prev(j)
// The inputs `gd_in[k]` are the L-bit link words read from the RAMs, one
// word per other cluster and clock cycle. Only rows of active neurons are
// read, so there is no AND of every link with every neuron value. Each input
// has an L-bit OR-accumulator: a two-input OR of the incoming word with a
// feedback register. The register collects the BETA serial words of one
// iteration. The OR outputs (register OR current word) feed, bit by bit, an
// AND over the C-1 inputs. A final two-input AND with the previous activation
// (the memory effect) is registered as the output `gd_op`. That previous
// activation is picked by a multiplexer on `it_ctrl`: the local decoder's
// vector in the first iteration (0) and the fed-back `gd_op` afterwards (1).
//
// Following the paper: OR/feedback accumulator, (C-1)-input AND, memory-
// effect AND, It_Ctrl multiplexer with LD on input 0. Own choices: the
// accumulator clear/enable strobes (`acc_clr`, `acc_en`) and the output
// enable `op_en`, all driven by the controller.
//
// Timing: `acc` and `gd_op` change on rising edges; the value written into
// `gd_op` uses the word present on `gd_in` in the same cycle.
module sdscn_gd #(
  parameter int unsigned C = sdscn_pkg::C_DEF,
  parameter int unsigned L = sdscn_pkg::L_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [L-1:0] gd_in [C-1],  // link words from the other clusters
  input  logic [L-1:0] ld_vec,       // local-decoder activation
  input  logic         it_ctrl,      // 0: first iteration (use ld_vec)
  input  logic         acc_clr,      // clear the OR accumulators
  input  logic         acc_en,       // load the OR accumulators
  input  logic         op_en,        // register the iteration result
  output logic [L-1:0] gd_op         // active neurons after the iteration
);

  logic [L-1:0] acc    [C-1];
  logic [L-1:0] or_out [C-1];
  logic [L-1:0] and_out;
  logic [L-1:0] prev;

  always_comb begin
    and_out = '1;
    for (int unsigned k = 0; k < C - 1; k++) begin
      or_out[k] = gd_in[k] | acc[k];
      and_out   = and_out & or_out[k];
    end
  end

  assign prev = it_ctrl ? gd_op : ld_vec;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned k = 0; k < C - 1; k++) acc[k] <= '0;
    end else if (acc_clr) begin
      for (int unsigned k = 0; k < C - 1; k++) acc[k] <= '0;
    end else if (acc_en) begin
      for (int unsigned k = 0; k < C - 1; k++) acc[k] <= or_out[k];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     gd_op <= '0;
    else if (op_en) gd_op <= and_out & prev;
  end

endmodule
