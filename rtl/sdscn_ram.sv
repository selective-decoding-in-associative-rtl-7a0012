// sdscn_ram -- one L x L link RAM block of the link storage module.
//
// Row r holds the links from neuron r of the cluster that addresses this
// block to the L neurons of one other cluster (bit j set: a stored clique
// joins the two neurons). One address port serves both writing and reading,
// as in an FPGA block RAM: a row is written when `wen` is high, and every
// cycle the addressed row is read into the output register (the old content
// when the same row is written in that cycle). The read is synchronous:
// `dout` shows the row addressed one clock edge earlier. The array has no
// reset; the host loads every row before the first read.
module sdscn_ram #(
  parameter  int unsigned L  = sdscn_pkg::L_DEF,
  localparam int unsigned AW = $clog2(L)
) (
  input  logic          clk,
  input  logic          wen,
  input  logic [AW-1:0] addr,
  input  logic [L-1:0]  din,
  output logic [L-1:0]  dout
);

  logic [L-1:0] mem [L];

  always_ff @(posedge clk) begin
    if (wen) mem[addr] <= din;
    dout <= mem[addr];
  end

endmodule
