// ccu: central control unit of the echo state network core (Fig. 2 of the
// paper). It holds the hyperparameters written by the external
// microcontroller and sequences the network with two cooperating state
// machines, so that the readout of one time step overlaps the data movement
// of the next (the phase pipelining the paper credits to the MH-Tree
// topology, whose dedicated reservoir-to-readout links leave the H-trees
// free).
//
// Reservoir sequencer:
//   INIT      after reset: write every readout weight from the output
//             neurons' LFSRs (N_ADDR cycles).
//   IDLE      `in_ready` high; a sample (features, labels, train flag) is
//             taken with in_valid && in_ready.
//   START     reseed the reservoir LFSRs with the seeds of the slot being
//             computed, clear the accumulators.
//   INPUT     broadcast the N_I features, one per cycle, on every H-tree.
//   FEEDBACK  sweep the source indices of each cluster on its H-tree:
//             neuron k of every cluster puts x(t-1) of slot v on its tree in
//             cycle v*N_PER + k; 2*N_PER cycles with two slots. With one slot
//             the sweep stops after min(nr_active, N_PER) sources: the
//             switched-off neurons are the highest indices of each cluster,
//             and as every neuron takes its sources in ascending order,
//             leaving them out changes no result.
//   DRAIN     wait for the trees' pipeline (TREE_PIPE cycles).
//   WAIT      wait until the readout has finished with the previous step's
//             activations (forward and update passes read them).
//   UPDATE    reservoir neurons apply tanh and leaky integration to the slot
//             being computed. With two slots in use (more than N_ADDR active
//             neurons, i.e. virtual neurons added), START..UPDATE run once
//             for slot 0, which parks its result in the neurons' Temp
//             register, and once for slot 1, whose UPDATE commits both. The
//             committing UPDATE starts the readout sequencer with this
//             sample's labels.
// Readout sequencer:
//   FWD pass  for each of the groups holding active neurons (all N_GRP with
//             virtual neurons, else ceil(nr_active/N_O)), one cycle to load the group's
//             activations into the readout ring and N_O multiply-accumulate
//             cycles while the ring rotates; then the sigmoid (FIN), and
//             `out_valid` one cycle later.
//   UPD pass  in training mode, a second pass with the same schedule that
//             writes back the SGD-updated weights.
// While the readout runs, the reservoir sequencer already accepts and
// broadcasts the next sample: both only read the activations, which change
// only in UPDATE.
//
// Configuration writes are taken only when both sequencers are idle
// (`cfg_ready`). After reset the core is in the setup phase: it initialises
// the readout weights and then sleeps, taking configuration writes but no
// samples, until the microcontroller sets the run bit (address 7, bit 0);
// clearing the bit puts it back to sleep between samples. The phase order follows the paper; the cycle schedule, the
// handshake and the configuration map are this design's choices.
//
// Latency from the handshake to out_valid, with an idle readout:
//   3 + N_I + L + TREE_PIPE + 1 + G*(N_O+1) + 3 + 1
// with L = min(max(nr_active,1), N_PER) sources swept and
// G = ceil(max(nr_active,1)/N_O) readout groups (N_PER and N_GRP at full
// size). Back-to-back training samples take G*(N_O+1)*2 + 9 cycles each,
// and streamed test samples G*(N_O+1) + 6, once the readout is the
// bottleneck (237, 329 and 166 cycles at the defaults with 128 neurons).
// With virtual neurons (two slots) the reservoir phase has two rounds and
// the latency grows by 2 + N_I + TREE_PIPE + 3*N_PER cycles (436 in all at
// the defaults).
module ccu
  import esn_pkg::*;
#(
  parameter int unsigned N_I       = 4,
  parameter int unsigned N_O       = 4,
  parameter int unsigned N_GRP     = 32,
  parameter int unsigned N_PER     = 64,   // neurons per H-tree cluster
  parameter int unsigned N_ADDR    = 128,  // readout weights per output neuron
  parameter int unsigned TREE_PIPE = 1,
  parameter int unsigned IDW       = 6,
  parameter int unsigned N_VIRT    = 2,    // neurons per reservoir neuron circuit
  parameter int unsigned NRW       = 9     // width of the reservoir-size register
) (
  input  logic            clk,
  input  logic            rst_n,
  // microcontroller: configuration
  input  logic            cfg_we,
  input  logic [2:0]      cfg_addr,
  input  logic [15:0]     cfg_data,
  output logic            cfg_ready,
  // microcontroller: samples
  input  logic            in_valid,
  output logic            in_ready,
  input  logic            in_train,
  input  data_t           in_u [N_I],
  input  data_t           in_y [N_O],
  output logic            out_valid,
  output logic            init_done,
  // hyperparameters to the datapath
  output esn_cfg_t        cfg,
  output logic [15:0]     one_minus_delta,
  output data_t           y_lbl [N_O],
  // H-tree requests (shared by all trees)
  output logic            req_valid,
  output bus_kind_e       req_kind,
  output logic [IDW-1:0]  req_id,
  output data_t           req_data,
  // reservoir
  output logic            res_start,
  output logic            res_update,
  output logic            res_slot,
  output logic            res_commit,
  output logic            two_slots,
  // shifter and sparsity
  output logic            sh_first,
  output logic            sh_shift,
  output logic            sp_start,
  output logic            sp_step,
  output logic            sp_bit,
  // readout
  output logic            ro_acc_clr,
  output logic            ro_load,
  output logic            ro_rot,
  output logic            ro_op,
  output logic            ro_update,
  output logic [$clog2(N_GRP)-1:0] ro_grp,
  output logic [$clog2(N_O+1)-1:0] ro_step,
  output logic            ro_finish,
  output logic            ro_init,
  output logic [$clog2(N_ADDR)-1:0] ro_init_addr
);
  typedef enum logic [3:0] {
    R_INIT, R_IDLE, R_START, R_INPUT, R_FEEDBACK, R_DRAIN, R_WAIT, R_UPDATE
  } rstate_e;
  typedef enum logic [2:0] {
    O_IDLE, O_PREP, O_RUN, O_DRAIN, O_FIN
  } ostate_e;

  localparam int unsigned CW = 16;

  rstate_e rstate;
  ostate_e ostate;
  logic [CW-1:0] cnt;
  logic [1:0] ocnt;
  logic [$clog2(N_GRP)-1:0] grp;
  logic [$clog2(N_O+1)-1:0] stp;
  logic train_r, train_o, upd_pass;
  logic vs, last_slot;
  logic [CW-1:0] n_src;
  logic [$clog2(N_GRP)-1:0] last_grp;
  int unsigned nr_phys;
  data_t u_lat [N_I];
  data_t y_res [N_O];

  assign in_ready  = (rstate == R_IDLE) && cfg.awake;
  assign cfg_ready = ((rstate == R_IDLE) || (rstate == R_INIT)) && (ostate == O_IDLE);
  assign init_done = (rstate != R_INIT);
  assign one_minus_delta = 16'h8000 - cfg.delta;
  // A second slot is computed only when virtual neurons are active.
  assign two_slots = (N_VIRT > 1) && (int'(cfg.nr_active) > int'(N_ADDR));
  assign last_slot = !two_slots || vs;
  // A smaller reservoir gets a shorter feedback sweep and readout pass.
  assign nr_phys   = (int'(cfg.nr_active) == 0) ? 1 : int'(cfg.nr_active);
  assign n_src     = two_slots ? CW'(2 * N_PER) : ((nr_phys < N_PER) ? CW'(nr_phys) : CW'(N_PER));
  assign last_grp  = two_slots ? ($bits(last_grp))'(N_GRP - 1)
                               : ($bits(last_grp))'((nr_phys + N_O - 1) / N_O - 1);

  // Configuration registers (reset values are this design's choice).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.delta      <= 16'h4000;   // 0.5
      cfg.lr_shift   <= 5'd4;
      cfg.gap_bits   <= 3'd4;
      cfg.esp_shift  <= 4'd1;
      cfg.sig_thr    <= '0;
      cfg.nr_active  <= NRW'(N_GRP * N_O);
      cfg.en_sp      <= 1'b0;
      cfg.sp_pattern <= 8'hFF;
      cfg.awake      <= 1'b0;
    end else if (cfg_we && cfg_ready) begin
      unique case (cfg_addr_e'(cfg_addr))
        CFG_DELTA: cfg.delta      <= (cfg_data > 16'h8000) ? 16'h8000 : cfg_data;
        CFG_LR:    cfg.lr_shift   <= cfg_data[4:0];
        CFG_GAP:   cfg.gap_bits   <= cfg_data[2:0];
        CFG_ESP:   cfg.esp_shift  <= cfg_data[3:0];
        CFG_THR:   cfg.sig_thr    <= cfg_data[14:0];
        CFG_NR:    cfg.nr_active  <= (cfg_data > 16'(N_ADDR * N_VIRT)) ? NRW'(N_ADDR * N_VIRT)
                                                                      : cfg_data[NRW-1:0];
        CFG_SP:    {cfg.en_sp, cfg.sp_pattern} <= {cfg_data[15], cfg_data[7:0]};
        CFG_RUN:   cfg.awake      <= cfg_data[0];
      endcase
    end
  end

  // Reservoir sequencer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate <= R_INIT; cnt <= '0; train_r <= 1'b0; vs <= 1'b0;
      for (int i = 0; i < N_I; i++) u_lat[i] <= '0;
      for (int o = 0; o < N_O; o++) y_res[o] <= '0;
    end else begin
      unique case (rstate)
        R_INIT: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(N_ADDR - 1)) begin rstate <= R_IDLE; cnt <= '0; end
        end
        R_IDLE: if (in_valid && cfg.awake) begin
          u_lat <= in_u; y_res <= in_y; train_r <= in_train;
          rstate <= R_START; cnt <= '0; vs <= 1'b0;
        end
        R_START: rstate <= R_INPUT;
        R_INPUT: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(N_I - 1)) begin rstate <= R_FEEDBACK; cnt <= '0; end
        end
        R_FEEDBACK: begin
          cnt <= cnt + 1'b1;
          if (cnt == n_src - 1'b1) begin rstate <= R_DRAIN; cnt <= '0; end
        end
        R_DRAIN: begin
          cnt <= cnt + 1'b1;
          if (cnt == CW'(TREE_PIPE - 1)) begin
            rstate <= last_slot ? R_WAIT : R_UPDATE; cnt <= '0;
          end
        end
        R_WAIT: if (ostate == O_IDLE) rstate <= R_UPDATE;
        R_UPDATE: begin
          if (last_slot) rstate <= R_IDLE;
          else begin rstate <= R_START; vs <= 1'b1; end
        end
        default: rstate <= R_IDLE;
      endcase
    end
  end

  // Readout sequencer, started by the reservoir update.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ostate <= O_IDLE; ocnt <= '0; grp <= '0; stp <= '0;
      train_o <= 1'b0; upd_pass <= 1'b0; out_valid <= 1'b0;
      for (int o = 0; o < N_O; o++) y_lbl[o] <= '0;
    end else begin
      out_valid <= (ostate == O_FIN) && !upd_pass;
      unique case (ostate)
        O_IDLE: if (res_commit) begin
          y_lbl <= y_res; train_o <= train_r; upd_pass <= 1'b0;
          ostate <= O_PREP;
        end
        O_PREP: begin ostate <= O_RUN; grp <= '0; stp <= '0; end
        O_RUN: begin
          if (stp == ($bits(stp))'(N_O)) begin
            stp <= '0;
            if (grp == last_grp) begin ostate <= O_DRAIN; ocnt <= '0; end
            else grp <= grp + 1'b1;
          end else stp <= stp + 1'b1;
        end
        O_DRAIN: begin
          ocnt <= ocnt + 1'b1;
          if (ocnt == 2'd1) ostate <= upd_pass ? O_IDLE : O_FIN;
        end
        O_FIN: begin
          if (train_o) begin ostate <= O_PREP; upd_pass <= 1'b1; end
          else ostate <= O_IDLE;
        end
        default: ostate <= O_IDLE;
      endcase
    end
  end

  // Datapath controls (Moore outputs of the states and counters).
  always_comb begin
    req_valid  = 1'b0;
    req_kind   = BUS_INPUT;
    req_id     = IDW'(cnt);
    req_data   = '0;
    res_start  = (rstate == R_START);
    res_update = (rstate == R_UPDATE);
    res_commit = (rstate == R_UPDATE) && last_slot;
    res_slot   = vs;
    sh_first   = (ostate == O_PREP);
    sp_start   = (ostate == O_PREP);
    ro_acc_clr = (ostate == O_PREP) && !upd_pass;
    ro_load    = (ostate == O_RUN) && (stp == '0);
    sp_step    = ro_load;
    ro_op      = (ostate == O_RUN) && (stp != '0);
    ro_rot     = ro_op && (stp != ($bits(stp))'(N_O));
    sh_shift   = (ostate == O_RUN) && (stp == ($bits(stp))'(N_O));
    ro_update  = upd_pass;
    ro_grp     = grp;
    ro_step    = (stp == '0) ? '0 : stp - 1'b1;   // ring position of the op
    sp_bit     = cfg.sp_pattern[3'(grp)];
    ro_finish  = (ostate == O_FIN);
    ro_init    = (rstate == R_INIT);
    ro_init_addr = ($bits(ro_init_addr))'(cnt);
    if (rstate == R_INPUT) begin
      req_valid = 1'b1;
      req_kind  = BUS_INPUT;
      for (int i = 0; i < N_I; i++) if (cnt == CW'(i)) req_data = u_lat[i];
    end else if (rstate == R_FEEDBACK) begin
      req_valid = 1'b1;
      req_kind  = BUS_FEEDBACK;
    end
  end
endmodule
