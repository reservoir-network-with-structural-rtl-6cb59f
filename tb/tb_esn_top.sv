// tb_esn_top: end-to-end test of the whole core at its default size
// (4 inputs, 128 reservoir neurons on 2 H-trees, 4 outputs).
//
// A synthetic activity-recognition stream is generated here: four classes,
// each a slowly varying three-axis signal (plus a constant fourth feature)
// with its own offsets and noise, quantized to SQ3.12. The core is trained
// on-line with SGD and then tested. Every output and every reservoir
// activation is compared, sample by sample, with a behavioural model of the
// network written from the equations (reservoir eq. 1, 2, 4; readout eq. 3,
// 5, 7) and the connection rules; the final weights are compared too.
// Along the way the test switches on each mechanism of the design and
// counts it: training and test samples, feedback connections, suppressed
// small feedback words, sparse readout connections, a reduced reservoir
// size, different leak/learning/ESP settings, tanh and sigmoid saturation,
// virtual neurons, and the sleep of the setup phase.
// It also checks the per-sample latency (shorter for a smaller reservoir),
// the interval between back-to-back training samples (whose broadcasts
// overlap the previous readout update pass), the interval of streamed test
// samples (offered whenever in_ready is high) at 128 and at 32 neurons,
// and that training lowers the error.
module tb_esn_top;
  import esn_pkg::*;
  localparam int NI = 4, NR = 128, NO = 4, NCOL = 4, NT = 2, NPER = NR / NT, NG = NR / NCOL, NV = 2;
  // handshake to out_valid when the readout is idle at the handshake
  localparam int LAT = 3 + NI + NPER + 1 + 1 + NG * (NCOL + 1) + 3 + 1;
  // the same with virtual neurons: a second START..UPDATE round for slot 1,
  // and both rounds sweep twice as many sources
  localparam int LAT2 = LAT + 2 + NI + 1 + 3 * NPER;
  // out_valid to out_valid for back-to-back training samples
  localparam int TRAIN_INTERVAL = NG * (NCOL + 1) * 2 + 9;
  localparam int TEST_INTERVAL  = NG * (NCOL + 1) + 6;
  // with nr <= NR active neurons the sweep covers min(nr, NPER) sources and
  // the readout ceil(nr/NCOL) groups
  function automatic int lat_of(input int nr);
    int n1 = (nr < 1) ? 1 : nr;
    if (nr > NR) return LAT2;
    return 3 + NI + ((n1 < NPER) ? n1 : NPER) + 1 + 1 + ((n1 + NCOL - 1) / NCOL) * (NCOL + 1) + 3 + 1;
  endfunction

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [2:0] cfg_addr = 0; logic [15:0] cfg_data = 0;
  logic in_valid = 0, in_ready, in_train = 0, out_valid, init_done, cfg_ready;
  data_t in_u [NI], in_y [NO], out_yhat [NO];
  int checks = 0, failures = 0;

  esn_top dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .cfg_ready, .in_valid, .in_ready, .in_train,
               .in_u, .in_y, .out_valid, .out_yhat, .init_done);

  always #10 clk = ~clk;   // 50 MHz
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok && failures < 20) $display("FAIL %s", what);
    if (!ok) failures++;
  endtask

  // ------------------------------------------------------------ the model
  int m_delta = 16'h4000, m_lr = 4, m_gap = 4, m_esp = 1, m_thr = 0, m_nr = NR, m_ensp = 0, m_sp = 8'hFF;
  longint mx [NR * NV];      // mx[v*NR + n]: slot v of circuit n
  longint mw [NO][NR];
  int myhat [NO];
  // mechanism counters
  int n_train = 0, n_test = 0, n_fb_conn = 0, n_supp = 0, n_reject = 0, n_inactive_steps = 0;
  int n_tanh_sat = 0, n_sig_sat = 0, n_cfg = 0, n_hw_supp = 0, n_virt_steps = 0, n_sleep = 0;

  function automatic logic [15:0] nxt16(input logic [15:0] s);
    return s[0] ? ((s >> 1) ^ 16'hB400) : (s >> 1);
  endfunction
  function automatic logic [23:0] nxt24(input logic [23:0] s);
    return s[0] ? ((s >> 1) ^ 24'hE10000) : (s >> 1);
  endfunction
  function automatic logic [15:0] nz16(input logic [15:0] s);
    return (s == 0) ? 16'd1 : s;
  endfunction
  function automatic longint w24(input longint v); return longint'($signed(24'(v))); endfunction
  function automatic longint w32(input longint v); return longint'($signed(32'(v))); endfunction

  task automatic model_init();
    for (int o = 0; o < NO; o++) begin
      logic [23:0] r = seed_hash(o, 9);
      if (r == 0) r = 1;
      for (int a = 0; a < NR; a++) begin
        mw[o][a] = longint'($signed(r)) >>> 4;
        r = nxt24(r);
      end
    end
    foreach (mx[n]) mx[n] = 0;
  endtask

  task automatic model_step(input int u [NI], input int y [NO], input bit train);
    longint xn [NR * NV];
    longint xe [NR];
    int nv = (m_nr > NR) ? 2 : 1;
    int mask = (1 << m_gap) - 1;
    logic [15:0] sp_l;
    // reservoir
    if (nv == 2) n_virt_steps++;
    for (int j = 0; j < NR * NV; j++) begin
      int v = j / NR, n = j % NR;
      logic [15:0] ff = nz16(seed_hash(n, 1 + 4 * v)), fb = nz16(seed_hash(n, 2 + 4 * v)), sl = nz16(seed_hash(n, 3 + 4 * v));
      int sid = int'(sl[7:0]) & mask;
      longint acc = 0, xh;
      int cl = n / NPER;
      for (int i = 0; i < NI; i++) begin
        acc = w24(acc + ((longint'(u[i]) * longint'($signed(ff))) >>> 12));
        ff = nxt16(ff);
      end
      for (int k = 0; k < NPER * nv; k++) begin
        longint xv = mx[(k / NPER) * NR + cl * NPER + k % NPER];
        if (((xv < 0) ? -xv : xv) < m_thr) begin xv = 0; if (j == 0) n_supp++; end
        if (k == sid) begin
          acc = w24(acc + ((xv * (longint'($signed(fb)) >>> m_esp)) >>> 14));
          sid = sid + 1 + (int'(sl[7:0]) & mask);
          fb = nxt16(fb); sl = nxt16(sl);
          n_fb_conn++;
        end
      end
      if (acc >= 32768) begin xh = 16384; n_tanh_sat++; end
      else if (acc < -32768) begin xh = -16384; n_tanh_sat++; end
      else xh = acc >>> 1;
      if (j < m_nr) xn[j] = (longint'(m_delta) * xh + longint'(32768 - m_delta) * mx[j]) >>> 15;
      else begin xn[j] = 0; if (j < NR) n_inactive_steps++; end
    end
    mx = xn;
    // readout: sparsity gating of the links
    sp_l = 16'hACE1;
    for (int g = 0; g < NG; g++) begin
      bit sp = m_sp[g % 8];
      for (int c = 0; c < NCOL; c++) begin
        bit acc_ok = m_ensp ? (sp_l[c] && sp) : 1'b1;
        int slot = (nv == 2) ? int'(sp_l[NCOL + c]) : 0;
        xe[g * NCOL + c] = acc_ok ? mx[slot * NR + g * NCOL + c] : 0;
        if (!acc_ok) n_reject++;
      end
      sp_l = nxt16(sp_l);
    end
    for (int o = 0; o < NO; o++) begin
      longint z = 0;
      for (int a = 0; a < NR; a++) z = w32(z + ((xe[a] * mw[o][a]) >>> 14));
      if (z > 4194304) begin myhat[o] = 16384; n_sig_sat++; end
      else if (z < -4194304) begin myhat[o] = 0; n_sig_sat++; end
      else myhat[o] = int'((z + 4194304) >>> 9);     // floor((z/4 + 0.5) * 2^14) in SQ10.21 -> SQ1.14
    end
    if (train) begin
      for (int o = 0; o < NO; o++)
        for (int a = 0; a < NR; a++) begin
          longint nw = mw[o][a] - ((((longint'(myhat[o]) - longint'(y[o])) * xe[a]) >>> 7) >>> m_lr);
          mw[o][a] = (nw > 8388607) ? 8388607 : ((nw < -8388608) ? -8388608 : nw);
        end
      n_train++;
    end else n_test++;
  endtask

  // --------------------------------------------------------------- stimulus
  always @(posedge clk) if (dut.g_tree[0].suppressed) n_hw_supp++;

  task automatic cfg_write(input int a, input int d);
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);
    cfg_we = 1; cfg_addr = 3'(a); cfg_data = 16'(d); @(negedge clk); cfg_we = 0;
    case (a)
      CFG_DELTA: m_delta = d;
      CFG_LR:    m_lr = d;
      CFG_GAP:   m_gap = d;
      CFG_ESP:   m_esp = d;
      CFG_THR:   m_thr = d;
      CFG_NR:    begin m_nr = (d > NR * NV) ? NR * NV : d; for (int n = m_nr; n < NR * NV; n++) mx[n] = 0; end
      CFG_SP:    begin m_ensp = d >> 15; m_sp = d & 8'hFF; end
      default: ;
    endcase
    n_cfg++;
  endtask

  real phase [NO];
  // one sample of class c at time t: a slow oscillation per axis plus noise
  task automatic gen(input int c, input int t, output int u [NI]);
    real base [NO][3] = '{'{0.2, 1.0, -0.3}, '{-0.9, 0.1, 0.4}, '{0.5, -0.6, 1.2}, '{-0.2, -0.8, -1.0}};
    real amp  [NO] = '{0.05, 0.02, 0.6, 0.9};
    for (int a = 0; a < 3; a++) begin
      real v = base[c][a] + amp[c] * $sin(0.7 * t * (c + 1) + a)
               + (real'($urandom_range(0, 1000)) / 1000.0 - 0.5) * 0.1;
      u[a] = int'(v * 4096.0);
    end
    u[3] = 4096;   // bias feature
  endtask

  bit ro_idle;
  int n_lat_idle = 0, n_lat_ok = 0, n_lat_short = 0;
  int lat_cycles, n_overlap_check = 0, n_overlap = 0;
  int test_iv = -1, test_iv_const = 1;
  always @(posedge clk) if (dut.req_valid && !dut.cfg_ready && int'(dut.u_ccu.ostate) != 0) n_overlap++;
  task automatic run_sample(input int u [NI], input int c, input bit train, output real err);
    int y [NO];
    int cyc = 0;
    foreach (y[o]) y[o] = (o == c) ? 16384 : 0;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    foreach (in_u[i]) in_u[i] = data_t'(u[i]);
    foreach (in_y[o]) in_y[o] = data_t'(y[o]);
    in_train = train; in_valid = 1;
    ro_idle = cfg_ready;
    @(negedge clk); in_valid = 0;
    while (!out_valid && cyc < 2000) begin @(negedge clk); cyc++; end
    lat_cycles = cyc + 1;
    if (ro_idle) begin
      n_lat_idle++;
      if (lat_cycles < LAT) n_lat_short++;
      if (lat_cycles == lat_of(m_nr)) n_lat_ok++;
      else if (failures < 20) $display("latency %0d with %0d neurons", lat_cycles, m_nr);
    end
    model_step(u, y, train);
    err = 0;
    for (int o = 0; o < NO; o++) begin
      check(int'(out_yhat[o]) == myhat[o], $sformatf("sample %0d yhat[%0d]=%0d exp %0d", n_train + n_test, o, out_yhat[o], myhat[o]));
      err += (real'(myhat[o] - y[o]) / 16384.0) ** 2;
    end
    for (int n = 0; n < NR * NV; n++)
      check(longint'(dut.x_all[n]) == mx[n], $sformatf("x[%0d]=%0d exp %0d", n, dut.x_all[n], mx[n]));
  endtask

  function automatic int argmax(input data_t v [NO]);
    int b = 0;
    for (int o = 1; o < NO; o++) if (v[o] > v[b]) b = o;
    return b;
  endfunction

  // Offer 10 test samples whenever in_ready is high, collect the outputs
  // separately, and measure the out_valid to out_valid interval.
  task automatic stream(output int iv, output int iv_const);
    int tt = 1000000;
    int u_s [NI];
    iv = -1; iv_const = 1;
    fork
      for (int s = 0; s < 10; s++) begin
        @(negedge clk);
        while (!in_ready) @(negedge clk);
        gen(s % NO, tt++, u_s);
        foreach (in_u[i]) in_u[i] = data_t'(u_s[i]);
        in_train = 0; in_valid = 1;
        @(negedge clk); in_valid = 0;
      end
      begin
        int tprev = -1;
        for (int s = 0; s < 10; s++) begin
          @(posedge clk iff out_valid);
          if (tprev >= 0) begin
            if (iv < 0) iv = $time / 20 - tprev;
            else if (iv != $time / 20 - tprev) iv_const = 0;
          end
          tprev = $time / 20;
        end
      end
    join
  endtask

  initial begin
    int u [NI];
    real e, e_first = 0, e_last = 0;
    int correct = 0, cls, t = 0;
    model_init();
    repeat (3) @(negedge clk); rst_n = 1;
    while (!init_done) @(negedge clk);
    // setup phase: the core sleeps until the run bit is written
    repeat (10) begin
      @(negedge clk);
      if (!in_ready) n_sleep++;
    end
    cfg_write(CFG_DELTA, 16'h5000);
    check(!in_ready, "asleep during setup");
    cfg_write(CFG_RUN, 1);
    cfg_write(CFG_LR, 3);
    cfg_write(CFG_ESP, 2);
    // phase 1: training, dense readout
    for (int s = 0; s < 160; s++) begin
      cls = (s / 10) % NO;
      gen(cls, t++, u);
      run_sample(u, cls, 1, e);
      if (s < 40) e_first += e; else if (s >= 120) e_last += e;
    end
    check(e_last < e_first, $sformatf("training lowers the error: first %f last %f", e_first, e_last));
    // phase 2: test
    for (int s = 0; s < 40; s++) begin
      cls = (s / 5) % NO;
      gen(cls, t++, u);
      run_sample(u, cls, 0, e);
      if (argmax(out_yhat) == cls) correct++;
    end
    $display("test accuracy on the synthetic stream: %0d/40", correct);
    // phase 3: other settings: feedback suppression, sparse readout,
    // smaller reservoir, sparser reservoir, faster leak
    cfg_write(CFG_THR, 3000);
    cfg_write(CFG_SP, 16'h8000 | 8'hB7);
    cfg_write(CFG_NR, 100);
    cfg_write(CFG_GAP, 5);
    cfg_write(CFG_DELTA, 16'h8000);
    cfg_write(CFG_ESP, 0);
    for (int s = 0; s < 30; s++) begin
      cls = (s / 5) % NO;
      gen(cls, t++, u);
      u[0] = u[0] * 3;   // larger drive: saturate some neurons
      run_sample(u, cls, s % 2 == 0, e);
    end
    // phase 4: neurogenesis, virtual neurons in the second slot of each
    // neuron circuit (200, then 256 neurons; a request above 256 is clipped)
    cfg_write(CFG_NR, 200);
    for (int s = 0; s < 10; s++) begin
      cls = (s / 3) % NO;
      gen(cls, t++, u);
      run_sample(u, cls, s % 2 == 0, e);
    end
    cfg_write(CFG_NR, 300);
    check(int'(dut.u_ccu.cfg.nr_active) == NR * NV, "reservoir size clipped to the number of slots");
    cfg_write(CFG_SP, 8'hFF);
    for (int s = 0; s < 10; s++) begin
      cls = (s / 3) % NO;
      gen(cls, t++, u);
      run_sample(u, cls, s % 2 == 1, e);
    end
    cfg_write(CFG_NR, NR);
    cfg_write(CFG_SP, 16'h8000 | 8'hB7);
    // back-to-back training: the next sample's broadcasts overlap the
    // readout update pass
    begin
      int t0, n_ov = 0, n_iv = 0, tprev = -1;
      for (int s = 0; s < 12; s++) begin
        cls = s % NO;
        gen(cls, t++, u);
        run_sample(u, cls, 1, e);
        t0 = $time / 20;
        if (tprev >= 0 && t0 - tprev == TRAIN_INTERVAL) n_iv++;
        tprev = t0;
      end
      n_overlap_check = n_iv;
    end
    // final weights
    while (!cfg_ready) @(negedge clk);
    for (int a = 0; a < NR; a++) begin
      check(longint'($signed(dut.g_out[0].u_out.u_sram.mem[a])) == mw[0][a], $sformatf("w0[%0d]", a));
      check(longint'($signed(dut.g_out[1].u_out.u_sram.mem[a])) == mw[1][a], $sformatf("w1[%0d]", a));
      check(longint'($signed(dut.g_out[2].u_out.u_sram.mem[a])) == mw[2][a], $sformatf("w2[%0d]", a));
      check(longint'($signed(dut.g_out[3].u_out.u_sram.mem[a])) == mw[3][a], $sformatf("w3[%0d]", a));
    end
    check(n_lat_idle > 40 && n_lat_ok == n_lat_idle, $sformatf("latency as expected on %0d/%0d samples", n_lat_ok, n_lat_idle));
    $display("mechanisms: train=%0d test=%0d fb_connections=%0d suppressed(model)=%0d suppressed(tree0)=%0d",
             n_train, n_test, n_fb_conn, n_supp, n_hw_supp);
    $display("            sparse_rejects=%0d inactive_neuron_steps=%0d tanh_sat=%0d sigmoid_sat=%0d cfg_writes=%0d virtual_steps=%0d",
             n_reject, n_inactive_steps, n_tanh_sat, n_sig_sat, n_cfg, n_virt_steps);
    check(n_lat_short > 0, $sformatf("shorter latency with fewer neurons on %0d samples", n_lat_short));
    check(n_virt_steps > 0, "steps with virtual neurons happened");
    check(n_sleep == 10, "sleep during setup");
    check(n_train > 0, "training happened");
    check(n_overlap > 0, $sformatf("H-tree broadcasts overlapped a readout pass %0d times", n_overlap));
    check(n_overlap_check == 11, $sformatf("back-to-back training interval on %0d/11 samples", n_overlap_check));
    check(n_test > 0, "testing happened");
    check(n_fb_conn > 0, "feedback connections used");
    check(n_supp > 0 && n_hw_supp > 0, "small feedback words suppressed");
    check(n_reject > 0, "sparse readout rejected links");
    check(n_inactive_steps > 0, "reduced reservoir size");
    check(n_tanh_sat > 0, "tanh saturated");
    check(n_sig_sat > 0, "sigmoid saturated");
    // streaming test samples (a new sample offered whenever in_ready is
    // high, outputs collected separately): measure the sample interval.
    // The reference model is not stepped here, so this comes last.
    stream(test_iv, test_iv_const);
    $display("streaming test samples: one every %0d cycles", test_iv);
    check(test_iv_const == 1 && test_iv == TEST_INTERVAL,
          $sformatf("streaming test interval %0d, expected %0d", test_iv, TEST_INTERVAL));
    // the same with a 32-neuron reservoir: 8 readout groups instead of 32
    while (!cfg_ready) @(negedge clk);
    cfg_write(CFG_NR, 32);
    stream(test_iv, test_iv_const);
    $display("streaming test samples, 32 neurons: one every %0d cycles", test_iv);
    check(test_iv_const == 1 && test_iv == 8 * (NCOL + 1) + 6,
          $sformatf("streaming test interval %0d with 32 neurons, expected %0d", test_iv, 8 * (NCOL + 1) + 6));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
