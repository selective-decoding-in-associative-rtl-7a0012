// sdscn_row_counter -- RAM row counter of the link storage module.
//
// In write mode (`rw` low) it provides the row address of the link RAM
// being loaded: it starts at 0 and advances by one for every row word the
// host delivers (`step`), wrapping from L-1 back to 0. `wrap` is high in the
// cycle a step takes the counter from L-1 to 0, which moves the block
// counter on to the next RAM. In read mode the counter is held at 0, so
// every new write phase starts at row 0 of block 0.
module sdscn_row_counter #(
  parameter  int unsigned L  = sdscn_pkg::L_DEF,
  localparam int unsigned AW = $clog2(L)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          rw,     // 1: read mode, 0: write mode
  input  logic          step,   // one row is written in this cycle
  output logic [AW-1:0] row,
  output logic          wrap
);

  assign wrap = !rw && step && (row == AW'(L - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     row <= '0;
    else if (rw)    row <= '0;
    else if (wrap)  row <= '0;
    else if (step)  row <= row + 1'b1;
  end

endmodule
