// tb_readout_neuron: fills the weight SRAM from the neuron's LFSR, runs
// forward passes (multiply-accumulate and sigmoid) and training passes (SGD
// write-back) with activations arriving from the link (with accept/reject)
// and from the ring, and compares yhat, the accumulator and every stored
// weight with an integer model of eq. 3, 5 and 7.
module tb_readout_neuron;
  import esn_pkg::*;
  localparam int D = 16;
  localparam logic [23:0] SEED = 24'h5A5A17;
  logic clk = 0, rst_n = 0;
  logic load = 0, accept = 1, rot = 0, acc_clr = 0, op_valid = 0, op_update = 0, finish = 0, init = 0;
  data_t link_in = 0, x_prev = 0, x_out, y = 0, yhat;
  logic [3:0] addr = 0, init_addr = 0;
  logic [4:0] lr_shift = 2;
  int checks = 0, failures = 0;

  readout_neuron #(.DEPTH(D), .INIT_SHIFT(4), .SEED(SEED)) dut (
    .clk, .rst_n, .load, .accept, .link_in, .rot, .x_prev, .x_out,
    .acc_clr, .op_valid, .op_update, .addr, .finish, .y, .lr_shift,
    .init, .init_addr, .yhat);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  longint mw [D];
  longint macc;
  int myhat;

  function automatic longint sat24(input longint v);
    return (v > 8388607) ? 8388607 : ((v < -8388608) ? -8388608 : v);
  endfunction

  // One pass over all D addresses in a shuffled order. Activations come
  // from the link (accepted or not) or from the ring input.
  task automatic pass(input bit upd, input int xs [D], input bit acc_ok [D], input bit from_ring [D]);
    int order [D];
    foreach (order[i]) order[i] = i;
    order.shuffle();
    if (!upd) begin acc_clr = 1; @(negedge clk); acc_clr = 0; macc = 0; end
    for (int k = 0; k < D; k++) begin
      int a = order[k];
      int xv = (from_ring[a] || acc_ok[a]) ? xs[a] : 0;
      // load the activation
      if (from_ring[a]) begin rot = 1; x_prev = data_t'(xs[a]); end
      else begin load = 1; link_in = data_t'(xs[a]); accept = acc_ok[a]; end
      @(negedge clk); rot = 0; load = 0;
      check(int'(x_out) == xv, "x register");
      op_valid = 1; op_update = upd; addr = 4'(a);
      @(negedge clk); op_valid = 0;
      if (!upd) macc += (longint'(xv) * mw[a]) >>> 14;
      else mw[a] = sat24(mw[a] - ((((longint'(myhat) - longint'(y)) * xv) >>> 7) >>> lr_shift));
    end
    @(negedge clk); @(negedge clk);
    if (!upd) begin
      real z = real'(macc) / 2097152.0;
      check(longint'(dut.acc) == macc, $sformatf("acc %0d exp %0d", dut.acc, macc));
      finish = 1; @(negedge clk); finish = 0;
      myhat = (z > 2.0) ? 16384 : ((z < -2.0) ? 0 : int'($floor((z / 4.0 + 0.5) * 16384.0)));
      check(int'(yhat) == myhat || int'(yhat) == myhat - 1 && z <= 2.0 && z >= -2.0,
            $sformatf("yhat %0d exp %0d", yhat, myhat));
      myhat = int'(yhat);
    end else begin
      for (int a = 0; a < D; a++)
        check(longint'($signed(dut.u_sram.mem[a])) == mw[a], $sformatf("w[%0d] %0d exp %0d", a, $signed(dut.u_sram.mem[a]), mw[a]));
    end
  endtask

  initial begin
    logic [23:0] r;
    int xs [D];
    bit ok [D], ring [D];
    @(negedge clk); rst_n = 1;
    // initialisation from the LFSR (x^24+x^23+x^22+x^17+1, Galois form)
    r = SEED;
    init = 1;
    for (int a = 0; a < D; a++) begin
      init_addr = 4'(a); mw[a] = longint'($signed(r)) >>> 4;
      r = r[0] ? ((r >> 1) ^ 24'hE10000) : (r >> 1);
      @(negedge clk);
    end
    init = 0;
    for (int a = 0; a < D; a++)
      check(longint'($signed(dut.u_sram.mem[a])) == mw[a], $sformatf("init w[%0d]", a));
    // train toward y = 1 and y = 0 alternately, with test passes between
    for (int it = 0; it < 12; it++) begin
      foreach (xs[i]) begin
        xs[i] = int'($urandom_range(0, 32768)) - 16384;
        ok[i] = ($urandom_range(0, 3) != 0);
        ring[i] = ($urandom_range(0, 1) != 0);
      end
      y = (it % 2 == 0) ? 16'sh4000 : 16'sh0000;
      lr_shift = 5'(it % 4);
      pass(0, xs, ok, ring);
      pass(1, xs, ok, ring);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
