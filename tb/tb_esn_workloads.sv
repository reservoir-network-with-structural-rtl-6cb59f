// tb_esn_workloads: runs the default-size core on the two kinds of task the
// design targets, with generated data, and on a sweep of reservoir sizes.
//
//  * activity-like stream: 3 accelerometer-like axes (4 classes with
//    different offsets, oscillation and noise) plus a bias feature, at
//    reservoir sizes 32, 64, 96 and 128 (set through the reservoir-size
//    register), and 192 and 256, which add virtual neurons time-multiplexed
//    on the 128 neuron circuits. The core is reset before each size, trained on 200 samples
//    and tested on 40.
//  * the activity-like stream at 128 neurons with uniform or Gaussian noise
//    added to the test inputs (training stays clean), as a robustness run.
//  * EMG-like stream: 2 rectified channels whose oscillation amplitude
//    depends on the class (4 classes), plus a bias feature, at size 128.
// Checked: every sample completes, neurons above the selected size stay at
// zero, training lowers the squared error, and the test accuracy of the
// activity stream at full size is well above chance. The accuracies are
// printed; they describe this generated data only. The EMG-like stream is
// only learned slightly above chance (its class lies in a slow amplitude
// that the short leaky memory averages poorly), so only the error drop is
// checked for it. The latency of a test sample is printed for each size
// and checked to grow with the size up to 128 neurons (Fig. 11(d) trend: a
// smaller reservoir runs a shorter schedule); above 128 it stays at the
// two-round value.
module tb_esn_workloads;
  import esn_pkg::*;
  localparam int NI = 4, NR = 128, NO = 4;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0; logic [2:0] cfg_addr = 0; logic [15:0] cfg_data = 0;
  logic in_valid = 0, in_ready, in_train = 0, out_valid, init_done, cfg_ready;
  data_t in_u [NI], in_y [NO], out_yhat [NO];
  int checks = 0, failures = 0;

  esn_top dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data, .cfg_ready, .in_valid, .in_ready,
               .in_train, .in_u, .in_y, .out_valid, .out_yhat, .init_done);

  always #10 clk = ~clk;
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic cfg_write(input int a, input int d);
    @(negedge clk);
    while (!cfg_ready) @(negedge clk);
    cfg_we = 1; cfg_addr = 3'(a); cfg_data = 16'(d); @(negedge clk); cfg_we = 0;
  endtask

  function automatic real noise(input real a);
    return (real'($urandom_range(0, 1000)) / 1000.0 - 0.5) * a;
  endfunction

  function automatic real absr(input real a);
    return a < 0.0 ? -a : a;
  endfunction

  // extra test-input noise: kind 0 none, 1 uniform in +-lvl, 2 Gaussian with
  // standard deviation lvl (Box-Muller)
  int  noise_kind = 0;
  real noise_lvl  = 0.0;
  function automatic real extra_noise();
    real u1, u2;
    if (noise_kind == 1) return noise(2.0 * noise_lvl);
    if (noise_kind == 2) begin
      u1 = (real'($urandom_range(1, 100000))) / 100000.0;
      u2 = (real'($urandom_range(0, 100000))) / 100000.0;
      return noise_lvl * $sqrt(-2.0 * $ln(u1)) * $cos(6.2831853 * u2);
    end
    return 0.0;
  endfunction

  task automatic gen_har(input int c, input int t, output int u [NI]);
    real base [NO][3] = '{'{0.2, 1.0, -0.3}, '{-0.9, 0.1, 0.4}, '{0.5, -0.6, 1.2}, '{-0.2, -0.8, -1.0}};
    real amp  [NO] = '{0.05, 0.02, 0.6, 0.9};
    for (int a = 0; a < 3; a++)
      u[a] = int'((base[c][a] + amp[c] * $sin(0.7 * t * (c + 1) + a) + noise(0.1) + extra_noise()) * 4096.0);
    u[3] = 4096;
  endtask

  task automatic gen_emg(input int c, input int t, output int u [NI]);
    real a0 [NO] = '{0.2, 1.2, 0.2, 1.2};
    real a1 [NO] = '{0.2, 0.2, 1.2, 1.2};
    u[0] = int'((a0[c] * absr($sin(2.1 * t)) + noise(0.2)) * 4096.0);
    u[1] = int'((a1[c] * absr($sin(1.7 * t + 1.0)) + noise(0.2)) * 4096.0);
    u[2] = 0;
    u[3] = 4096;
  endtask

  int last_lat = 0;   // handshake to out_valid of the last sample, in cycles

  task automatic sample(input int u [NI], input int c, input bit train, output real err, output bit hit);
    int cyc = 0, best = 0;
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    foreach (in_u[i]) in_u[i] = data_t'(u[i]);
    foreach (in_y[o]) in_y[o] = (o == c) ? 16'sh4000 : 16'sh0000;
    in_train = train; in_valid = 1;
    @(negedge clk); in_valid = 0;
    while (!out_valid && cyc < 3000) begin @(negedge clk); cyc++; end
    check(out_valid, "sample completes");
    last_lat = cyc + 1;
    err = 0;
    for (int o = 0; o < NO; o++) begin
      err += (real'(out_yhat[o] - in_y[o]) / 16384.0) ** 2;
      if (out_yhat[o] > out_yhat[best]) best = o;
    end
    hit = (best == c);
  endtask

  task automatic run(input bit emg, input int size, input int nk, input real lvl, output int acc);
    int u [NI];
    real e, e_first = 0, e_last = 0;
    bit hit;
    int t = 0, zero_ok = 1;
    int ntrain = 200;
    rst_n = 0; repeat (2) @(negedge clk); rst_n = 1;
    while (!init_done) @(negedge clk);
    cfg_write(CFG_RUN, 1);
    cfg_write(CFG_DELTA, emg ? 16'h1000 : 16'h5000);
    cfg_write(CFG_LR, 3);
    cfg_write(CFG_ESP, 2);
    cfg_write(CFG_NR, size);
    for (int s = 0; s < ntrain; s++) begin
      int c = (s / 10) % NO;
      if (emg) gen_emg(c, t++, u); else gen_har(c, t++, u);
      sample(u, c, 1, e, hit);
      if (s < 40) e_first += e; else if (s >= ntrain - 40) e_last += e;
      for (int n = size; n < 2 * NR; n++) if (dut.x_all[n] != 0) zero_ok = 0;
    end
    acc = 0;
    noise_kind = nk; noise_lvl = lvl;
    for (int s = 0; s < 40; s++) begin
      int c = (s / 10) % NO;
      if (emg) gen_emg(c, t++, u); else gen_har(c, t++, u);
      sample(u, c, 0, e, hit);
      acc += hit;
    end
    noise_kind = 0;
    check(zero_ok == 1, $sformatf("size %0d: neurons above the size stay zero", size));
    check(e_last < e_first, $sformatf("size %0d: training lowers the error (%f -> %f)", size, e_first, e_last));
    $display("%s stream, reservoir size %0d, test noise %s %0.2f: test accuracy %0d/40, error first/last 40 training samples %f / %f, test latency %0d cycles",
             emg ? "EMG-like" : "activity-like", size, nk == 1 ? "uniform" : (nk == 2 ? "Gaussian" : "none"), lvl,
             acc, e_first, e_last, last_lat);
  endtask

  initial begin
    int acc;
    int sizes [6] = '{32, 64, 96, 128, 192, 256};
    int lat_prev = 0;
    foreach (sizes[i]) begin
      run(0, sizes[i], 0, 0.0, acc);
      // up to 128 neurons the schedule grows with the size; above, both
      // rounds always run in full
      check((sizes[i] > 128) ? (last_lat >= lat_prev) : (last_lat > lat_prev),
            $sformatf("latency grows with the reservoir size (%0d at %0d)", last_lat, sizes[i]));
      lat_prev = last_lat;
      if (sizes[i] == 128) check(acc >= 30, $sformatf("activity-like accuracy at 128 neurons %0d/40", acc));
    end
    run(0, 128, 1, 0.3, acc);
    run(0, 128, 2, 0.2, acc);
    check(acc >= 20, $sformatf("activity-like accuracy with Gaussian test noise %0d/40", acc));
    run(1, 128, 0, 0.0, acc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
