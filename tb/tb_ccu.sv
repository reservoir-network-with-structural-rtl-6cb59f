// tb_ccu: runs the controller alone and checks its schedule: weight
// initialisation addresses, the order and count of input and feedback
// broadcasts, one reservoir start and update per sample, the readout
// passes (group/step order, loads, shifts), one extra pass in training
// mode, the latency formula of the module header, configuration writes and
// the ready/valid handshake. With more neurons than circuits (virtual
// neurons), it checks the two reservoir rounds: slot 0 then slot 1, each
// sweeping twice as many sources, and only the second update committing.
// With fewer active neurons than circuits it checks the shorter schedule:
// min(nr_active, N_PER) sources per sweep and ceil(nr_active/N_O) readout
// groups. It also checks the setup phase: no sample is taken until the run bit is
// written, and none after it is cleared.
module tb_ccu;
  import esn_pkg::*;
  localparam int NI = 4, NO = 4, NG = 4, NP = 8, NA = 16, TP = 2, IDW = 4;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [2:0] cfg_addr = 0; logic [15:0] cfg_data = 0;
  logic in_valid = 0, in_ready, in_train = 0, out_valid, init_done, cfg_ready;
  data_t in_u [NI], in_y [NO], y_lbl [NO], req_data;
  esn_cfg_t cfg; logic [15:0] omd;
  logic req_valid; bus_kind_e req_kind; logic [IDW-1:0] req_id;
  logic res_start, res_update, res_slot, res_commit, two_slots, sh_first, sh_shift, sp_start, sp_step, sp_bit;
  logic ro_acc_clr, ro_load, ro_rot, ro_op, ro_update, ro_finish, ro_init;
  logic [1:0] ro_grp; logic [2:0] ro_step; logic [3:0] ro_init_addr;
  int checks = 0, failures = 0;

  ccu #(.N_I(NI), .N_O(NO), .N_GRP(NG), .N_PER(NP), .N_ADDR(NA), .TREE_PIPE(TP), .IDW(IDW), .N_VIRT(2)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .cfg_ready, .in_valid, .in_ready, .in_train, .in_u, .in_y,
    .out_valid, .init_done, .cfg, .one_minus_delta(omd), .y_lbl, .req_valid, .req_kind, .req_id,
    .req_data, .res_start, .res_update, .res_slot, .res_commit, .two_slots, .sh_first, .sh_shift, .sp_start, .sp_step, .sp_bit,
    .ro_acc_clr, .ro_load, .ro_rot, .ro_op, .ro_update, .ro_grp, .ro_step, .ro_finish,
    .ro_init, .ro_init_addr);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic cfg_write(input int a, input int d);
    cfg_we = 1; cfg_addr = 3'(a); cfg_data = 16'(d); @(negedge clk); cfg_we = 0;
  endtask

  task automatic sample(input bit train);
    int cyc = 0, n_in = 0, n_fb = 0, n_start = 0, n_upd = 0, n_load = 0, n_op = 0, n_fin = 0, n_pass = 0;
    int n_shift = 0, exp_lat, op_idx = 0, lat, n_commit = 0;
    int nv = two_slots ? 2 : 1;
    int nr1 = (int'(cfg.nr_active) == 0) ? 1 : int'(cfg.nr_active);
    int L = (nv == 2) ? 2 * NP : ((nr1 < NP) ? nr1 : NP);   // sources per sweep
    int G = (nv == 2) ? NG : (nr1 + NO - 1) / NO;           // readout groups
    bit seen_update = 0;
    foreach (in_u[i]) in_u[i] = data_t'($urandom);
    foreach (in_y[i]) in_y[i] = data_t'($urandom);
    in_train = train; in_valid = 1;
    check(in_ready, "ready in idle");
    @(negedge clk); in_valid = 0;
    check(!in_ready, "busy after handshake");
    lat = 0;
    while (!(lat > 0 && cfg_ready) && cyc < 5000) begin
      if (res_start) begin
        check(n_in == NI * n_start && int'(res_slot) == n_start, "start before inputs, slot order");
        n_start++;
      end
      if (req_valid && req_kind == BUS_INPUT) begin
        check(req_data == in_u[n_in % NI], $sformatf("input %0d order", n_in)); n_in++;
      end
      if (req_valid && req_kind == BUS_FEEDBACK) begin
        check(int'(req_id) == n_fb % L && n_in == NI * n_start, $sformatf("feedback id %0d", req_id)); n_fb++;
      end
      if (res_update) begin
        n_upd++;
        check(n_fb == L * n_upd && int'(res_slot) == n_upd - 1, "update after sweep");
        check(res_commit == (n_upd == nv), "only the last round commits");
        if (res_commit) begin n_commit++; seen_update = 1; end
        check(!seen_update || res_commit || n_pass == 0, "no readout before commit");
      end
      if (sh_first) begin n_pass++; op_idx = 0; check(seen_update, "readout after update"); end
      if (sh_first && n_pass == 1) check(y_lbl == in_y, "labels handed to the readout");
      if (ro_load) n_load++;
      if (sh_shift) n_shift++;
      if (ro_op) begin
        check(int'(ro_grp) == op_idx / NO && int'(ro_step) == op_idx % NO,
              $sformatf("op %0d grp %0d step %0d", op_idx, ro_grp, ro_step));
        check(ro_update == (n_pass == 2), "update flag only in second pass");
        check(ro_rot == (int'(ro_step) != NO - 1), "ring rotates between ops");
        op_idx++; n_op++;
      end
      if (ro_finish) begin n_fin++; check(n_op == G * NO, "finish after forward pass"); end
      if (out_valid) begin lat = cyc + 1; check(n_fin == 1, "out_valid after finish"); end
      @(negedge clk); cyc++;
    end
    exp_lat = 3 + NI + ((nv == 2) ? NP : L) + TP + 1 + G * (NO + 1) + 3 + 1 + ((nv == 2) ? 2 + NI + TP + 3 * NP : 0);
    check(lat == exp_lat, $sformatf("latency %0d exp %0d", lat, exp_lat));
    check(n_in == NI * nv && n_fb == L * nv && n_start == nv && n_upd == nv && n_commit == 1,
          "reservoir phase counts");
    check(n_pass == (train ? 2 : 1) && n_load == G * n_pass && n_op == G * NO * n_pass &&
          n_shift == G * n_pass && n_fin == 1, "readout phase counts");
    check(in_ready, "ready again");
  endtask

  // Two training samples back to back: the second one's broadcasts must run
  // while the first one's readout is busy, and the reservoir update must wait
  // for the readout to finish.
  task automatic overlap();
    int cyc = 0, n_out = 0, n_fb_during_ro = 0, t_accept2 = -1, t_out2 = -1, t_out1 = -1;
    in_train = 1; in_valid = 1;
    while (n_out < 2 && cyc < 5000) begin
      if (in_valid && in_ready && t_out1 < 0 && cyc > 0) t_accept2 = cyc;
      if (req_valid && int'(dut.ostate) != 0) n_fb_during_ro++;
      if (res_update) check(int'(dut.ostate) == 0, "reservoir update only with an idle readout");
      if (out_valid) begin n_out++; if (n_out == 1) t_out1 = cyc; else t_out2 = cyc; end
      @(negedge clk); cyc++;
      if (t_accept2 >= 0) in_valid = 0;
    end
    check(n_out == 2, "two outputs");
    check(n_fb_during_ro >= NI + NP, $sformatf("broadcasts overlapped with readout: %0d", n_fb_during_ro));
    check(t_out2 - t_out1 == NG * (NO + 1) * 2 + 9,
          $sformatf("back-to-back training interval %0d exp %0d", t_out2 - t_out1, NG * (NO + 1) * 2 + 9));
    while (!cfg_ready) @(negedge clk);
  endtask

  initial begin
    int n = 0;
    @(negedge clk); rst_n = 1;
    check(!init_done && !in_ready, "initialising after reset");
    while (ro_init) begin
      check(int'(ro_init_addr) == n, "init address"); n++; @(negedge clk);
    end
    check(n == NA && init_done && !in_ready, $sformatf("init covers %0d addresses, then sleep", n));
    in_valid = 1; repeat (5) @(negedge clk); in_valid = 0;
    check(int'(dut.rstate) == 1 && !res_start, "no sample taken while asleep");
    cfg_write(CFG_RUN, 1);
    check(in_ready && cfg.awake, "awake after the run bit");
    cfg_write(CFG_DELTA, 16'h2000);
    cfg_write(CFG_LR, 7);
    cfg_write(CFG_SP, 16'h80A5);
    cfg_write(CFG_DELTA, 16'h9000);   // clipped to 1.0
    check(cfg.delta == 16'h8000 && omd == 16'h0000, "delta clipped");
    cfg_write(CFG_DELTA, 16'h2000);
    check(cfg.delta == 16'h2000 && omd == 16'h6000 && cfg.lr_shift == 7 && cfg.en_sp && cfg.sp_pattern == 8'hA5,
          "configuration registers");
    sample(0);
    sample(1);
    sample(1);
    sample(0);
    overlap();
    // virtual neurons: 20 of at most 2*16 neurons, then a request above the
    // limit
    cfg_write(CFG_NR, 20);
    check(two_slots && cfg.nr_active == 20, "two slots with 20 neurons");
    sample(0);
    sample(1);
    cfg_write(CFG_NR, 40);
    check(cfg.nr_active == 32, "reservoir size clipped to 2*N_ADDR");
    sample(1);
    cfg_write(CFG_NR, 16);
    check(!two_slots, "one slot with 16 neurons");
    sample(0);
    // a smaller reservoir: shorter sweep and fewer readout groups
    cfg_write(CFG_NR, 6);
    sample(1);
    sample(0);
    cfg_write(CFG_NR, 0);
    sample(1);
    cfg_write(CFG_NR, 16);
    cfg_write(CFG_RUN, 0);
    check(!in_ready && cfg_ready, "back to sleep, still configurable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
