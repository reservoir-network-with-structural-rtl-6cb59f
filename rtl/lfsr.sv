// lfsr: Galois linear-feedback shift register used for every random
// sequence of the core (the reservoir's LFSR-FF, LFSR-FB and LFSR-S, the
// readout weight-initialisation LFSR and the readout sparsity LFSR).
//
// The paper names the LFSRs and says they are reseeded to reproduce the same
// weights; the polynomial is this design's choice. The default TAPS is the
// maximal-length x^16+x^14+x^13+x^11+1; the 24-bit instances use
// x^24+x^23+x^22+x^17+1. A zero seed would lock the register, so a zero seed
// is replaced by 1.
//
// Interface: `load` copies `seed` into the register, otherwise `step`
// advances it by one position. Both take effect at the rising clock edge;
// `q` is the register itself. Reset loads the seed too.
module lfsr #(
  parameter int unsigned W = 16,
  parameter logic [W-1:0] TAPS = W'(16'hB400)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] seed,
  input  logic         step,
  output logic [W-1:0] q
);
  logic [W-1:0] seed_nz;
  assign seed_nz = (seed == '0) ? W'(1) : seed;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       q <= seed_nz;
    else if (load)    q <= seed_nz;
    else if (step)    q <= q[0] ? ((q >> 1) ^ TAPS) : (q >> 1);
  end
endmodule
