// tb_readout_sparsity: dense mode accepts everything; sparse mode accepts
// link i exactly when SP and bit i of the sparsity LFSR (modelled here from
// its polynomial) are high; reseeding replays the same pattern; the share of
// accepted activations follows the SP duty. With two slots, slot_sel[i]
// follows bit 4+i of the same LFSR word and is zero otherwise.
module tb_readout_sparsity;
  logic clk = 0, rst_n = 0, start = 0, step = 0, sp = 0, en_sp = 0, two_slots = 0;
  logic [3:0] accept, slot_sel;
  int checks = 0, failures = 0;

  readout_sparsity #(.N_O(4), .SEED(16'hACE1)) dut (.clk, .rst_n, .start, .step, .sp, .en_sp, .two_slots, .accept, .slot_sel);

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

  function automatic logic [15:0] ref_step(input logic [15:0] s);
    return s[0] ? ((s >> 1) ^ 16'hB400) : (s >> 1);
  endfunction

  initial begin
    logic [15:0] r;
    logic [3:0] first [64];
    int acc_full, acc_half;
    @(negedge clk); rst_n = 1;
    for (int i = 0; i < 20; i++) begin
      step = 1; @(negedge clk);
      check(accept == 4'hF, "dense mode accepts all");
      check(slot_sel == 4'h0, "one slot: slot 0 only");
    end
    step = 0; en_sp = 1; sp = 1;
    start = 1; @(negedge clk); start = 0;
    r = 16'hACE1; acc_full = 0;
    two_slots = 1; #1;
    for (int i = 0; i < 64; i++) begin
      check(accept == r[3:0], $sformatf("sparse %0d got %b exp %b", i, accept, r[3:0]));
      check(slot_sel == r[7:4], $sformatf("slot select %0d got %b exp %b", i, slot_sel, r[7:4]));
      first[i] = accept; acc_full += $countones(accept);
      step = 1; @(negedge clk); step = 0; r = ref_step(r);
    end
    sp = 0; #1;
    check(accept == 4'h0, "SP low rejects all");
    // replay after reseed, SP toggling every other group
    start = 1; @(negedge clk); start = 0; acc_half = 0;
    for (int i = 0; i < 64; i++) begin
      sp = (i % 2 == 0);
      #1;
      check(accept == (first[i] & {4{sp}}), $sformatf("replay %0d", i));
      acc_half += $countones(accept);
      step = 1; @(negedge clk); step = 0;
    end
    check(acc_full > 90 && acc_full < 170, $sformatf("about half accepted: %0d/256", acc_full));
    check(acc_half < acc_full, "lower SP duty accepts fewer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
