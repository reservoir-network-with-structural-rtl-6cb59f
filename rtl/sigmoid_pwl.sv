// sigmoid_pwl: piece-wise linear sigmoid of the readout neurons (eq. 5 of
// the paper): 1 for z > 2, 0 for z < -2, z/4 + 0.5 otherwise.
//
// Input: the 32-bit readout accumulator in SQ10.21. Output: 16-bit SQ1.14
// (+1 = 16'h4000). The formats are this design's choice; the 32-bit input
// and 16-bit output widths are printed in Fig. 3. Combinational.
module sigmoid_pwl
  import esn_pkg::*;
(
  input  oacc_t z,
  output data_t f
);
  localparam oacc_t TWO  = oacc_t'(2) <<< OACC_FRAC;
  localparam oacc_t MTWO = -TWO;
  oacc_t lin;  // z/4 + 0.5 in SQ10.21
  assign lin = (z >>> 2) + (oacc_t'(1) <<< (OACC_FRAC - 1));

  always_comb begin
    if (z > TWO)        f = X_ONE;
    else if (z < MTWO)  f = '0;
    else                f = data_t'(lin >>> (OACC_FRAC - X_FRAC));
  end
endmodule
