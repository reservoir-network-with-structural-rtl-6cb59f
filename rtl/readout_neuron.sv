// readout_neuron: one output neuron of the readout layer (Fig. 3 left of the
// paper; eq. 3 and eq. 7).
//
// The neuron holds one reservoir activation in its x register. The register
// is loaded from the neuron's dedicated link to the reservoir (`load`, the
// value replaced by zero when the sparsity gate rejects it) or from the
// previous output neuron of the ring (`rot`, the paper's cycle bus), and is
// passed on to the next neuron through `x_out`. Each `op_valid` cycle uses
// the activation currently held:
//  * forward pass: acc += x * W[addr]   (32-bit accumulator, paper width)
//  * update pass:  W[addr] <= W[addr] - ((yhat - y) * x >> lr_shift)
// The weights live in a 128x24 SRAM (paper). `finish` applies the sigmoid
// (eq. 5) to the accumulator and registers the 16-bit output yhat, which the
// update pass then uses as the network response. `init` writes W[init_addr]
// from this neuron's LFSR (paper: the initial readout weights come from
// LFSRs in the output neurons); the word is shifted right by INIT_SHIFT to
// start with small weights (INIT_SHIFT is this design's choice).
//
// Timing: two-stage pipeline. The SRAM is read in the `op_valid` cycle; the
// product is accumulated, or the new weight written, one cycle later. So
// `finish` must come at least two cycles after the last forward op.
module readout_neuron
  import esn_pkg::*;
#(
  parameter int unsigned DEPTH      = 128,
  parameter int unsigned INIT_SHIFT = 4,
  parameter int unsigned INDEX      = 0,
  parameter int unsigned SEED       = seed_hash(INDEX, 9)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // ring
  input  logic                     load,
  input  logic                     accept,
  input  data_t                    link_in,
  input  logic                     rot,
  input  data_t                    x_prev,
  output data_t                    x_out,
  // multiply-accumulate / update
  input  logic                     acc_clr,
  input  logic                     op_valid,
  input  logic                     op_update,
  input  logic [$clog2(DEPTH)-1:0] addr,
  input  logic                     finish,
  input  data_t                    y,
  input  logic [4:0]               lr_shift,
  // weight initialisation
  input  logic                     init,
  input  logic [$clog2(DEPTH)-1:0] init_addr,
  output data_t                    yhat
);
  localparam int unsigned AW = $clog2(DEPTH);

  data_t   x_reg;
  logic    v1, upd1;
  data_t   x1;
  logic [AW-1:0] a1;
  weight_t w_rd, w_new, w_init;
  oacc_t   acc, z;
  logic signed [DW+WW-1:0] prod;
  logic [23:0] q_init;
  logic we;
  logic [AW-1:0] waddr;
  weight_t wdata;

  assign x_out = x_reg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    x_reg <= '0;
    else if (load) x_reg <= accept ? link_in : '0;
    else if (rot)  x_reg <= x_prev;
  end

  // Stage 1 registers.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; upd1 <= 1'b0; x1 <= '0; a1 <= '0;
    end else begin
      v1 <= op_valid; upd1 <= op_update; x1 <= x_reg; a1 <= addr;
    end
  end

  lfsr #(.W(24), .TAPS(24'hE10000)) u_lfsr_init (
    .clk, .rst_n, .load(1'b0), .seed(SEED[23:0]), .step(init), .q(q_init));
  assign w_init = weight_t'($signed(q_init) >>> INIT_SHIFT);

  sgd_update u_sgd (.w(w_rd), .yhat, .y, .x(x1), .lr_shift, .new_w(w_new));

  // Write-port mux: LFSR initial value or trained weight.
  assign we    = init | (v1 & upd1);
  assign waddr = init ? init_addr : a1;
  assign wdata = init ? w_init : w_new;

  weight_sram #(.DEPTH(DEPTH), .WIDTH(WW)) u_sram (
    .clk, .re(op_valid), .raddr(addr), .rdata(w_rd),
    .we, .waddr, .wdata(wdata));

  assign prod = x1 * $signed(w_rd);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 acc <= '0;
    else if (acc_clr)           acc <= '0;
    else if (v1 && !upd1)       acc <= acc + oacc_t'(prod >>> (X_FRAC + W_FRAC - OACC_FRAC));
  end

  assign z = acc;
  data_t f;
  sigmoid_pwl u_sig (.z, .f);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      yhat <= '0;
    else if (finish) yhat <= f;
  end
endmodule
