// shifter: selects which group of reservoir neurons drives the dedicated
// reservoir-to-readout links (Fig. 2 of the paper, "Shifter").
//
// The reservoir is a 2D array of N_GRP groups of N_COL neurons; neuron
// (g, c) has index g*N_COL + c. Link c carries the activation of neuron
// (g, c) of the selected group g. A one-hot register, loaded with group 0 by
// `first` and rotated by `shift`, plays the role of the transmission-gate
// enables; the selected group stays on the links until the next shift, as
// the paper describes. The paper calls the unit a "column" of the array; in
// this description it is called a group.
//
// Timing: `sel` and the links change one cycle after `first`/`shift`.
module shifter
  import esn_pkg::*;
#(
  parameter int unsigned N_GRP = 32,
  parameter int unsigned N_COL = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        first,
  input  logic        shift,
  input  data_t       x_array [N_GRP*N_COL],
  output logic [N_GRP-1:0] sel,
  output data_t       link [N_COL]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      sel <= '0;
    else if (first)  sel <= N_GRP'(1);
    else if (shift)  sel <= {sel[N_GRP-2:0], sel[N_GRP-1]};
  end

  // Wired-OR of the gated group outputs (transmission gates in silicon).
  always_comb begin
    for (int c = 0; c < N_COL; c++) begin
      link[c] = '0;
      for (int g = 0; g < N_GRP; g++)
        if (sel[g]) link[c] = link[c] | x_array[g*N_COL + c];
    end
  end
endmodule
