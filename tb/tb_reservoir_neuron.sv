// tb_reservoir_neuron: runs several time steps through one reservoir neuron
// circuit and compares its activations after every update with a behavioural
// model written from eq. 1, eq. 2, eq. 4 and the neuron's connection rule.
// Each step sends 4 input words, then a sweep of feedback sources with random
// activations and random idle cycles. The first steps use one slot (64
// sources, the slot-1 neuron switched off); later steps use both slots (128
// sources, slot 0 parked in Temp until slot 1 commits), each slot with its
// own seeds. Also checks that the weights repeat from step to step (same
// input gives the same accumulation), that the sparsity setting changes the
// number of accepted sources, and the `active` control.
module tb_reservoir_neuron;
  import esn_pkg::*;
  localparam int IDW = 7;
  localparam logic [15:0] SFF = 16'h1D2B, SFB = 16'h7A31, SS = 16'h00C5;
  localparam logic [15:0] SFF1 = 16'h5E17, SFB1 = 16'h0B93, SS1 = 16'h3362;
  logic clk = 0, rst_n = 0, start = 0, bus_valid = 0, update = 0, commit = 0, slot = 0;
  logic [1:0] active = 2'b01;
  bus_kind_e bus_kind = BUS_INPUT;
  logic [IDW-1:0] bus_id = 0;
  data_t bus_data = 0, x [2];
  logic [15:0] delta = 16'h3000, omd;
  logic [2:0] gap_bits = 3'd3;
  logic [3:0] esp_shift = 4'd1;
  int checks = 0, failures = 0;

  assign omd = 16'h8000 - delta;

  reservoir_neuron #(.IDW(IDW), .N_VIRT(2), .SEED_FF(SFF), .SEED_FB(SFB), .SEED_S(SS),
                     .SEED_FF1(SFF1), .SEED_FB1(SFB1), .SEED_S1(SS1)) dut (
    .clk, .rst_n, .start, .bus_valid, .bus_kind, .bus_id, .bus_data, .slot, .update, .commit,
    .active, .delta, .one_minus_delta(omd), .gap_bits, .esp_shift, .x);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [15:0] nxt(input logic [15:0] s);
    return s[0] ? ((s >> 1) ^ 16'hB400) : (s >> 1);
  endfunction

  // model state
  logic [15:0] m_ff, m_fb, m_s;
  int m_sid, m_acc, accepted;
  int m_x [2];
  int m_new [2];

  function automatic int wrap24(input longint v);
    return int'($signed(24'(v)));
  endfunction

  task automatic m_start(input int v);
    int mask = (1 << gap_bits) - 1;
    m_ff = v ? SFF1 : SFF; m_fb = v ? SFB1 : SFB; m_s = v ? SS1 : SS;
    m_sid = int'(m_s[7:0]) & mask; m_acc = 0; accepted = 0;
  endtask

  task automatic word(input bit fb, input int id, input int d);
    int mask = (1 << gap_bits) - 1;
    bus_valid = 1; bus_kind = fb ? BUS_FEEDBACK : BUS_INPUT; bus_id = IDW'(id); bus_data = data_t'(d);
    if (!fb) begin
      m_acc = wrap24(longint'(m_acc) + ((longint'(d) * longint'($signed(m_ff))) >>> 12));
      m_ff = nxt(m_ff);
    end else if (id == m_sid) begin
      longint w = longint'($signed(m_fb)) >>> esp_shift;
      m_acc = wrap24(longint'(m_acc) + ((longint'(d) * w) >>> 14));
      m_sid = m_sid + 1 + (int'(m_s[7:0]) & mask);
      m_fb = nxt(m_fb); m_s = nxt(m_s); accepted++;
    end
    @(negedge clk);
    bus_valid = 0;
  endtask

  task automatic do_update(input int v, input bit last);
    int xh;
    if (m_acc >= 32768) xh = 16384;
    else if (m_acc < -32768) xh = -16384;
    else xh = m_acc >>> 1;
    m_new[v] = int'((longint'(delta) * xh + longint'(omd) * m_x[v]) >>> 15);
    slot = v[0]; commit = last; update = 1; @(negedge clk); update = 0; commit = 0;
    if (last) begin
      for (int w = 0; w < 2; w++) m_x[w] = active[w] ? m_new[w] : 0;
      for (int w = 0; w < 2; w++) check(int'(x[w]) == m_x[w], $sformatf("x[%0d]=%0d exp %0d", w, x[w], m_x[w]));
    end else begin
      check(int'(dut.temp[v]) == m_new[v], $sformatf("temp=%0d exp %0d", dut.temp[v], m_new[v]));
      for (int w = 0; w < 2; w++) check(int'(x[w]) == m_x[w], "x unchanged before commit");
    end
  endtask

  // one time step; nv slots in use, sources get random activations
  task automatic time_step(input int u [4], input int nv, output int n_acc);
    int src [128];
    foreach (src[k]) src[k] = int'($urandom_range(0, 32768)) - 16384;
    for (int v = 0; v < nv; v++) begin
      slot = v[0]; start = 1; @(negedge clk); start = 0; m_start(v);
      for (int i = 0; i < 4; i++) word(0, 0, u[i]);
      for (int k = 0; k < 64 * nv; k++) begin
        if ($urandom_range(0, 4) == 0) @(negedge clk);   // idle cycle
        word(1, k, src[k]);
      end
      check(dut.acc == racc_t'(m_acc), $sformatf("acc %0d exp %0d", dut.acc, m_acc));
      if (v == 0) n_acc = accepted;
      do_update(v, v == nv - 1);
    end
  endtask

  initial begin
    int u [4];
    int n, n3, n1, acc_a;
    m_x = '{0, 0};
    @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      foreach (u[i]) u[i] = int'($urandom_range(0, 65535)) - 32768;
      if (t == 10) delta = 16'h8000;
      if (t == 20) begin esp_shift = 4'd3; active = 2'b11; end
      if (t == 30) delta = 16'h2000;
      time_step(u, (t >= 20) ? 2 : 1, n);
      if (t == 0) n3 = n;
    end
    // same inputs, no feedback: accumulation must repeat exactly
    foreach (u[i]) u[i] = 1000 * (i + 1);
    slot = 0; start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < 4; i++) word(0, 0, u[i]);
    acc_a = int'(dut.acc);
    start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < 4; i++) word(0, 0, u[i]);
    check(int'(dut.acc) == acc_a, "W_ri not repeated");
    // slot 1 uses other seeds
    slot = 1; start = 1; @(negedge clk); start = 0;
    for (int i = 0; i < 4; i++) word(0, 0, u[i]);
    check(int'(dut.acc) != acc_a, "slot 1 uses its own input weights");
    // sparser setting accepts fewer sources
    gap_bits = 3'd1; active = 2'b01; time_step(u, 1, n1);
    check(n1 > n3 && n3 > 0, $sformatf("sources gap3=%0d gap1=%0d", n3, n1));
    $display("accepted sources: gap_bits=3 -> %0d, gap_bits=1 -> %0d", n3, n1);
    check(x[1] == 0, "inactive slot 1 is zero");
    active = 0; @(negedge clk);
    check(x[0] == 0, "inactive neuron not zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
