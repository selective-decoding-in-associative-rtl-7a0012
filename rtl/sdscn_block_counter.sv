// sdscn_block_counter -- RAM block counter of the link storage module.
//
// Selects which of the NB = C(C-1) link RAMs is being written. Its output is
// a one-hot vector of NB write-enable selects: block 0 first, then the next
// block each time the row counter wraps (`step`), back to block 0 after the
// last one. In read mode the selection returns to block 0.
module sdscn_block_counter #(
  parameter int unsigned NB = sdscn_pkg::C_DEF * (sdscn_pkg::C_DEF - 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rw,     // 1: read mode, 0: write mode
  input  logic          step,   // the current block is full
  output logic [NB-1:0] sel     // one-hot block select
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    sel <= NB'(1);
    else if (rw)   sel <= NB'(1);
    else if (step) sel <= {sel[NB-2:0], sel[NB-1]};
  end

endmodule
