// esn_top: echo state network core with on-chip readout training, in the
// MH-Tree data-movement topology (Fig. 2 and Fig. 5(d) of the paper).
//
// A 4x128x4 network: N_I input features in SQ3.12 are broadcast on N_TREE
// H-trees to a 2D array of N_R reservoir neurons (N_R/N_COL groups of N_COL).
// Each H-tree serves one cluster of N_R/N_TREE neurons and also carries that
// cluster's feedback activations, so recurrent connections stay inside a
// cluster (this design's reading of the multiple-H-tree topology). The
// shifter puts one group at a time on N_COL dedicated links, one per output
// neuron; the N_O output neurons form a ring that passes every activation to
// every output neuron. The readout trains itself with SGD when the sample is
// flagged for training.
// Neurogenesis: every reservoir neuron circuit can also serve a second,
// virtual neuron (N_VIRT = 2), so the reservoir size register ranges up to
// N_VIRT*N_R. Virtual neuron k has index N_R + k and shares circuit k; the
// H-trees then carry 2*N_R/N_TREE sources per cluster, and the readout keeps
// its N_R weights per output, each connected to one of the two neurons of a
// circuit (sparse readout mode).
// The CCU sequences everything and talks to the external microcontroller
// through the configuration and sample ports.
//
// The optional LPF/HPF input filters, the microcontroller and its ADC are
// outside this module: features arrive already quantized.
//
// Interface: configuration writes (cfg_we/cfg_addr/cfg_data) are taken
// while cfg_ready is high (the whole core idle); after reset the core
// initialises the readout weights (init_done) and then sleeps until the run
// bit is written; a sample is taken with in_valid && in_ready, and the N_O
// outputs yhat (SQ1.14, from the readout sigmoid) are valid while out_valid
// is high and held until the next sample. The readout of one sample overlaps
// the broadcasts of the next. Latency and throughput: see ccu.
module esn_top
  import esn_pkg::*;
#(
  parameter int unsigned N_I       = 4,
  parameter int unsigned N_R       = 128,
  parameter int unsigned N_O       = 4,
  parameter int unsigned N_COL     = 4,
  parameter int unsigned N_TREE    = 2,
  parameter int unsigned TREE_PIPE = 1,
  parameter int unsigned N_VIRT    = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [2:0]  cfg_addr,
  input  logic [15:0] cfg_data,
  output logic        cfg_ready,
  input  logic        in_valid,
  output logic        in_ready,
  input  logic        in_train,
  input  data_t       in_u [N_I],
  input  data_t       in_y [N_O],
  output logic        out_valid,
  output data_t       out_yhat [N_O],
  output logic        init_done
);
  localparam int unsigned N_GRP = N_R / N_COL;
  localparam int unsigned N_PER = N_R / N_TREE;
  localparam int unsigned IDW   = clog2_min1(N_PER * N_VIRT);
  localparam int unsigned AW    = $clog2(N_R);

  // The readout ring needs one link per output neuron.
  initial assert (N_COL == N_O && N_R % N_COL == 0 && N_R % N_TREE == 0 &&
                  (N_VIRT == 1 || N_VIRT == 2) && N_R * N_VIRT < 512)
    else $error("esn_top: unsupported array shape");

  esn_cfg_t    cfg;
  logic [15:0] one_minus_delta;
  data_t       y_lbl [N_O];
  logic        req_valid;
  bus_kind_e   req_kind;
  logic [IDW-1:0] req_id;
  data_t       req_data;
  logic res_start, res_update, res_slot, res_commit, two_slots, sh_first, sh_shift, sp_start, sp_step, sp_bit;
  logic ro_acc_clr, ro_load, ro_rot, ro_op, ro_update, ro_finish, ro_init;
  logic [$clog2(N_GRP)-1:0] ro_grp;
  logic [$clog2(N_O+1)-1:0] ro_step;
  logic [AW-1:0] ro_init_addr;

  ccu #(.N_I(N_I), .N_O(N_O), .N_GRP(N_GRP), .N_PER(N_PER), .N_ADDR(N_R),
        .TREE_PIPE(TREE_PIPE), .IDW(IDW), .N_VIRT(N_VIRT)) u_ccu (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .cfg_ready,
    .in_valid, .in_ready, .in_train, .in_u, .in_y, .out_valid, .init_done,
    .cfg, .one_minus_delta, .y_lbl,
    .req_valid, .req_kind, .req_id, .req_data,
    .res_start, .res_update, .res_slot, .res_commit, .two_slots, .sh_first, .sh_shift, .sp_start, .sp_step, .sp_bit,
    .ro_acc_clr, .ro_load, .ro_rot, .ro_op, .ro_update, .ro_grp, .ro_step,
    .ro_finish, .ro_init, .ro_init_addr);

  // ---------------------------------------------------------------- reservoir
  // x_all[v*N_R + n]: slot v of reservoir neuron circuit n
  data_t x_all [N_R * N_VIRT];

  for (genvar t = 0; t < N_TREE; t++) begin : g_tree
    data_t          x_cl [N_PER * N_VIRT];
    logic           bus_valid;
    bus_kind_e      bus_kind;
    logic [IDW-1:0] bus_id;
    data_t          bus_data;
    logic           suppressed;

    for (genvar v = 0; v < N_VIRT; v++) begin : g_xv
      for (genvar k = 0; k < N_PER; k++) begin : g_x
        assign x_cl[v*N_PER + k] = x_all[v*N_R + t*N_PER + k];
      end
    end

    htree #(.N(N_PER * N_VIRT), .IDW(IDW), .PIPE(TREE_PIPE)) u_htree (
      .clk, .rst_n, .req_valid, .req_kind, .req_id, .req_data,
      .sig_thr(cfg.sig_thr), .x_cluster(x_cl),
      .bus_valid, .bus_kind, .bus_id, .bus_data, .suppressed);

    for (genvar k = 0; k < N_PER; k++) begin : g_neuron
      logic [N_VIRT-1:0] act;
      data_t xs [N_VIRT];
      for (genvar v = 0; v < N_VIRT; v++) begin : g_v
        assign act[v] = (v*N_R + t*N_PER + k) < int'(cfg.nr_active);
        assign x_all[v*N_R + t*N_PER + k] = xs[v];
      end
      reservoir_neuron #(.IDW(IDW), .N_VIRT(N_VIRT), .INDEX(t*N_PER + k)) u_neuron (
        .clk, .rst_n, .start(res_start),
        .bus_valid, .bus_kind, .bus_id, .bus_data,
        .slot(res_slot), .update(res_update), .commit(res_commit),
        .active(act),
        .delta(cfg.delta), .one_minus_delta,
        .gap_bits(cfg.gap_bits), .esp_shift(cfg.esp_shift),
        .x(xs));
    end
  end

  // ------------------------------------------------------ reservoir -> readout
  data_t link [N_COL];
  logic [N_O-1:0] accept, slot_sel;

  // one shifter per slot; each column link takes the slot chosen by the
  // readout sparsity unit
  for (genvar v = 0; v < N_VIRT; v++) begin : g_shift
    data_t x_sl [N_R];
    data_t lk [N_COL];
    logic [N_GRP-1:0] sh_sel;
    for (genvar n = 0; n < N_R; n++) begin : g_x
      assign x_sl[n] = x_all[v*N_R + n];
    end
    shifter #(.N_GRP(N_GRP), .N_COL(N_COL)) u_shifter (
      .clk, .rst_n, .first(sh_first), .shift(sh_shift), .x_array(x_sl),
      .sel(sh_sel), .link(lk));
  end

  for (genvar c = 0; c < N_COL; c++) begin : g_link
    if (N_VIRT > 1) begin : g_sel
      assign link[c] = slot_sel[c] ? g_shift[N_VIRT-1].lk[c] : g_shift[0].lk[c];
    end else begin : g_one
      assign link[c] = g_shift[0].lk[c];
    end
  end

  readout_sparsity #(.N_O(N_O)) u_sparsity (
    .clk, .rst_n, .start(sp_start), .step(sp_step), .sp(sp_bit),
    .en_sp(cfg.en_sp), .two_slots, .accept, .slot_sel);

  data_t x_ring [N_O];

  for (genvar o = 0; o < N_O; o++) begin : g_out
    logic [AW-1:0] addr;
    // After s rotations output neuron o holds the activation of link
    // (o - s) mod N_O of the current group.
    assign addr = AW'(int'(ro_grp) * N_COL + ((o + N_O - int'(ro_step)) % N_O));

    readout_neuron #(.DEPTH(N_R), .INDEX(o)) u_out (
      .clk, .rst_n,
      .load(ro_load), .accept(accept[o]), .link_in(link[o]),
      .rot(ro_rot), .x_prev(x_ring[(o + N_O - 1) % N_O]), .x_out(x_ring[o]),
      .acc_clr(ro_acc_clr), .op_valid(ro_op), .op_update(ro_update), .addr,
      .finish(ro_finish), .y(y_lbl[o]), .lr_shift(cfg.lr_shift),
      .init(ro_init), .init_addr(ro_init_addr), .yhat(out_yhat[o]));
  end
endmodule
