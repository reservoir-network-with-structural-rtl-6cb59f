// sgd_update: the training block of an output neuron (Fig. 3 left, eq. 7).
//
// new_w = w - (((yhat - y) * x) >> lr_shift), where the learning rate is a
// power of two applied as an arithmetic right shift, as the paper does to
// save a multiplier. Error and activation are SQ1.14, the weight SQ3.21;
// the product (28 fraction bits) is brought to 21 fraction bits before the
// learning-rate shift. The result saturates to the 24-bit weight range
// (saturation is this design's choice). Combinational.
module sgd_update
  import esn_pkg::*;
(
  input  weight_t     w,
  input  data_t       yhat,
  input  data_t       y,
  input  data_t       x,
  input  logic [4:0]  lr_shift,
  output weight_t     new_w
);
  logic signed [DW:0]     err;    // SQ2.14
  logic signed [2*DW:0]   prod;   // 28 fraction bits
  logic signed [2*DW:0]   grad;   // 21 fraction bits
  logic signed [2*DW+1:0] diff;

  localparam logic signed [2*DW+1:0] WMAX = (2*DW+2)'( (1 <<< (WW-1)) - 1);
  localparam logic signed [2*DW+1:0] WMIN = -(2*DW+2)'(1 <<< (WW-1));

  assign err  = (DW+1)'(yhat) - (DW+1)'(y);
  assign prod = err * x;
  assign grad = (prod >>> (2*X_FRAC - W_FRAC)) >>> lr_shift;
  assign diff = (2*DW+2)'(w) - (2*DW+2)'(grad);

  always_comb begin
    if (diff > WMAX)      new_w = weight_t'(WMAX);
    else if (diff < WMIN) new_w = weight_t'(WMIN);
    else                  new_w = weight_t'(diff);
  end
endmodule
