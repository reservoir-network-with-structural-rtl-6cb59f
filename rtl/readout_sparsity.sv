// readout_sparsity: random dense/sparse gating of the reservoir-to-readout
// connections (Fig. 6 of the paper).
//
// In sparse mode (`en_sp` high) output neuron i accepts the activation on its
// link only when bit D_i of the sparsity LFSR and the CCU's SP bit are both
// high; a rejected activation enters the readout ring as zero. The LFSR
// steps once per group (`step`) and is reseeded by `start` at the beginning
// of every readout pass, so forward and update passes, and every time step,
// see the same connection pattern. The SP sequence sets the sparsity level:
// with D_i random, a fraction p of SP ones gives an acceptance of about p/2.
// In dense mode every activation is accepted (the dense-mode bypass is this
// design's choice; the figure shows only the sparse path).
// When virtual neurons are in use (`two_slots`), the readout keeps one weight
// per physical neuron and connects it to only one of the two neurons the
// circuit serves: `slot_sel[i]` (bit N_O+i of the same LFSR word) picks which.
// The paper says only that the readout switches to sparse connections so that
// no extra weight storage is needed; this pairing is this design's reading.
// Combinational `accept` and `slot_sel`, LFSR updated on the clock edge.
module readout_sparsity #(
  parameter int unsigned N_O  = 4,
  parameter logic [15:0] SEED = 16'hACE1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic           step,
  input  logic           sp,
  input  logic           en_sp,
  input  logic           two_slots,
  output logic [N_O-1:0] accept,
  output logic [N_O-1:0] slot_sel
);
  logic [15:0] d;

  lfsr #(.W(16)) u_lfsr (.clk, .rst_n, .load(start), .seed(SEED), .step, .q(d));

  initial assert (2 * N_O <= 16) else $error("readout_sparsity: N_O too large for the LFSR word");

  assign accept   = en_sp ? (d[N_O-1:0] & {N_O{sp}}) : '1;
  assign slot_sel = two_slots ? d[2*N_O-1:N_O] : '0;
endmodule
