// natsa_scratchpad -- the 1 KB scratchpad memory of a NATSA PU.
//
// WORDS words of DW bits (256 x 32 bits = 1 KB by default). The control unit
// writes the operands it receives from HBM through the single write port; the
// vector lanes read them through NRD asynchronous read ports at once, so a
// whole row of operands is available to every lane in the same cycle.
// Only the size comes from the published design; the port arrangement
// (one synchronous write, NRD combinational reads) is this design's choice.
module natsa_scratchpad #(
  parameter int unsigned DW    = 32,
  parameter int unsigned WORDS = 256,
  parameter int unsigned NRD   = 2,
  localparam int unsigned SAW  = $clog2(WORDS)
) (
  input  logic           clk,
  input  logic           we,
  input  logic [SAW-1:0] waddr,
  input  logic [DW-1:0]  wdata,
  input  logic [SAW-1:0] raddr [NRD],
  output logic [DW-1:0]  rdata [NRD]
);

  logic [DW-1:0] mem [WORDS];

  always_ff @(posedge clk)
    if (we) mem[waddr] <= wdata;

  always_comb
    for (int p = 0; p < NRD; p++) rdata[p] = mem[raddr[p]];

endmodule
