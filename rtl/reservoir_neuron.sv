// reservoir_neuron: leaky-integrated, discrete-time, continuous-valued
// reservoir neuron (Fig. 3 right of the paper; eq. 1 and 2 without the
// optional output feedback term). One circuit serves up to N_VIRT neurons
// by time multiplexing: slot 0 is the physical neuron, slot 1 a virtual
// neuron added by neurogenesis.
//
// Every valid word on the neuron's H-tree is either an input feature u(t) or
// a previous-step activation x(t-1) of source `bus_id` of the cluster (the
// source index carries the slot in its top bit).
//  * Input words are multiplied by W_ri, the current word of LFSR-FF, which
//    then steps (paper).
//  * Feedback words are accepted only when bus_id equals S_ID, the next
//    source index this neuron listens to (the paper's "=" comparator and
//    LFSR-S). On a match (En) the word is multiplied by W_r, the current word
//    of LFSR-FB shifted right by esp_shift, and LFSR-FB steps (paper). How
//    S_ID is produced is this design's choice: the sources are swept in
//    ascending order, so S_ID advances by 1 + (LFSR-S & (2^gap_bits - 1))
//    after each match, giving a mean in-degree of about N/(2^(gap_bits-1)).
//  * The two products share one 24-bit accumulator through a mux (paper).
// `start` reseeds all three LFSRs with the seeds of slot `slot` and clears
// the accumulator, so the random matrices W_ri and W_r are the same at every
// time step; each slot has its own seeds, as the paper suggests for new
// neurons. `update` applies tanh (Fig. 4) and the leaky integration
// x' = delta*xhat + (1-delta)*x of slot `slot`, with delta and 1-delta
// supplied by the CCU. Without `commit` the new value goes to the Temp
// register, because the old state is still broadcast to the other slots'
// computation; with `commit` (the last slot of the step) every slot takes its
// new value at once. A slot with `active` low keeps x at zero (reservoir
// size control).
//
// Timing: one bus word per cycle, products are accumulated in the cycle the
// word arrives; `x` changes one cycle after the committing `update`.
module reservoir_neuron
  import esn_pkg::*;
#(
  parameter int unsigned IDW     = 7,   // width of the in-cluster source index (slot bit on top)
  parameter int unsigned N_VIRT  = 2,   // neurons served by this circuit
  parameter int unsigned INDEX   = 0,   // global index, used only for seeds
  // seeds of slot 0 and slot 1
  parameter int unsigned SEED_FF = seed_hash(INDEX, 1),
  parameter int unsigned SEED_FB = seed_hash(INDEX, 2),
  parameter int unsigned SEED_S  = seed_hash(INDEX, 3),
  parameter int unsigned SEED_FF1 = seed_hash(INDEX, 5),
  parameter int unsigned SEED_FB1 = seed_hash(INDEX, 6),
  parameter int unsigned SEED_S1  = seed_hash(INDEX, 7)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic            bus_valid,
  input  bus_kind_e       bus_kind,
  input  logic [IDW-1:0]  bus_id,
  input  data_t           bus_data,
  input  logic            slot,
  input  logic            update,
  input  logic            commit,
  input  logic [N_VIRT-1:0] active,
  input  logic [15:0]     delta,
  input  logic [15:0]     one_minus_delta,
  input  logic [2:0]      gap_bits,
  input  logic [3:0]      esp_shift,
  output data_t           x [N_VIRT]
);
  localparam int unsigned SW = IDW + 8;  // S_ID with headroom past the last source

  logic [15:0] q_ff, q_fb, q_s;
  logic [SW-1:0] s_id;
  logic [7:0] gap_mask;
  logic in_word, en;
  racc_t acc, prod_u, prod_x, addend;
  logic signed [2*DW-1:0] mul_u, mul_x;
  data_t w_r;
  data_t xhat;
  data_t x_cur;
  data_t x_new;
  data_t temp [N_VIRT];
  logic signed [DW+17:0] leak;
  logic [15:0] sd_ff, sd_fb, sd_s;

  initial assert (N_VIRT == 1 || N_VIRT == 2) else $error("reservoir_neuron: N_VIRT must be 1 or 2");

  assign sd_ff = (slot && N_VIRT > 1) ? SEED_FF1[15:0] : SEED_FF[15:0];
  assign sd_fb = (slot && N_VIRT > 1) ? SEED_FB1[15:0] : SEED_FB[15:0];
  assign sd_s  = (slot && N_VIRT > 1) ? SEED_S1[15:0]  : SEED_S[15:0];

  assign gap_mask = 8'((9'd1 << gap_bits) - 9'd1);
  assign in_word  = bus_valid && (bus_kind == BUS_INPUT);
  assign en       = bus_valid && (bus_kind == BUS_FEEDBACK) && (s_id == SW'(bus_id));

  lfsr #(.W(16)) u_lfsr_ff (.clk, .rst_n, .load(start), .seed(sd_ff), .step(in_word), .q(q_ff));
  lfsr #(.W(16)) u_lfsr_fb (.clk, .rst_n, .load(start), .seed(sd_fb), .step(en),      .q(q_fb));
  lfsr #(.W(16)) u_lfsr_s  (.clk, .rst_n, .load(start), .seed(sd_s), .step(en),      .q(q_s));

  // First source index after a reseed: the seed's low bits under the mask.
  logic [15:0] seed_s_nz;
  assign seed_s_nz = (sd_s == 16'd0) ? 16'd1 : sd_s;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     s_id <= '0;
    else if (start) s_id <= SW'(seed_s_nz[7:0] & gap_mask);
    else if (en)    s_id <= s_id + SW'(1) + SW'(q_s[7:0] & gap_mask);
  end

  // Weighted inputs: u (SQ3.12) x W_ri (SQ0.15) and x(t-1) (SQ1.14) x W_r,
  // both aligned to the accumulator's 15 fraction bits.
  assign w_r    = data_t'($signed(q_fb) >>> esp_shift);
  assign mul_u  = $signed(bus_data) * $signed(q_ff);
  assign mul_x  = $signed(bus_data) * w_r;
  assign prod_u = racc_t'(mul_u >>> (U_FRAC + RW_FRAC - RACC_FRAC));
  assign prod_x = racc_t'(mul_x >>> (X_FRAC + RW_FRAC - RACC_FRAC));
  assign addend = in_word ? prod_u : (en ? prod_x : '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     acc <= '0;
    else if (start) acc <= '0;
    else            acc <= acc + addend;
  end

  tanh_pwl u_tanh (.z(acc), .f(xhat));

  // Leaky integration of the slot being computed, delta and 1-delta in Q1.15.
  assign x_cur = x[N_VIRT > 1 ? int'(slot) : 0];
  assign leak  = ($signed({1'b0, delta}) * xhat) + ($signed({1'b0, one_minus_delta}) * x_cur);
  assign x_new = data_t'(leak >>> DELTA_FRAC);

  for (genvar v = 0; v < N_VIRT; v++) begin : g_slot
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        x[v] <= '0; temp[v] <= '0;
      end else if (!active[v]) begin
        x[v] <= '0; temp[v] <= '0;
      end else if (update && (int'(slot) == v || N_VIRT == 1)) begin
        if (commit) x[v] <= x_new;
        else        temp[v] <= x_new;
      end else if (update && commit) begin
        x[v] <= temp[v];
      end
    end
  end
endmodule
