// weight_sram: the 128x24 weight memory of one output neuron (Fig. 3 left of
// the paper shows "SRAM 128x24"; Fig. 7 places the SRAMs beside the output
// layer).
//
// Written as an array so that synthesis can map it to a macro. The port
// arrangement is this design's choice: one synchronous read port (data one
// cycle after the address) and one synchronous write port, so a weight can be
// read for the next activation while the updated weight of the previous one
// is written back. Contents are not reset; the core fills them from the
// readout LFSR before first use.
module weight_sram #(
  parameter int unsigned DEPTH = 128,
  parameter int unsigned WIDTH = 24
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
