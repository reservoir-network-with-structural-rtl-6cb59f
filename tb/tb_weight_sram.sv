// tb_weight_sram: random reads and writes against an array model, checking
// the one-cycle read latency and simultaneous read/write of different rows.
module tb_weight_sram;
  logic clk = 0, re = 0, we = 0;
  logic [6:0] raddr = 0, waddr = 0;
  logic [23:0] rdata, wdata = 0;
  logic [23:0] model [128];
  int checks = 0, failures = 0;

  weight_sram dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [6:0] ra;
    // fill
    we = 1;
    for (int a = 0; a < 128; a++) begin
      waddr = 7'(a); wdata = 24'($urandom); model[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 3000; i++) begin
      ra = 7'($urandom); re = 1; raddr = ra;
      we = ($urandom_range(0, 1) != 0);
      waddr = 7'($urandom); if (waddr == ra) waddr = waddr + 1'b1;
      wdata = 24'($urandom);
      @(negedge clk);
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata != model[ra]) begin
        failures++; $display("FAIL addr %0d got %h exp %h", ra, rdata, model[ra]);
      end
    end
    re = 0; we = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
