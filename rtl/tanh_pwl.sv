// tanh_pwl: piece-wise linear hyperbolic tangent of the reservoir neurons.
//
// Follows the bit slicing printed in Fig. 4 of the paper: the 24-bit
// accumulator z is split into the sign bit 23, the range bits 22..15 and the
// low bits 14..0. A positive z with any range bit set saturates to +1, a
// negative z whose range bits are not all ones saturates to -1, and
// otherwise the output is {z[23], z[15:1]}. With 15 fraction bits in z this
// is tanh(z) = 1 for z >= 1, -1 for z < -1, z otherwise (eq. 4), and the
// output is SQ1.14 (+1 = 16'h4000). The fraction format is this design's
// choice; the mux codes 01 -> +1 and 10 -> -1 are the figure's.
//
// Purely combinational.
module tanh_pwl
  import esn_pkg::*;
(
  input  racc_t z,
  output data_t f
);
  logic       s;
  logic [7:0] rng;
  logic       pos_sat, neg_sat;
  logic [1:0] sel;

  assign s       = z[23];
  assign rng     = z[22:15];
  assign pos_sat = ~s & (|rng);
  assign neg_sat =  s & ~(&rng);
  assign sel     = {neg_sat, pos_sat};

  always_comb begin
    unique case (sel)
      2'b01:   f = X_ONE;
      2'b10:   f = X_MONE;
      default: f = data_t'({z[23], z[15:1]});
    endcase
  end
endmodule
