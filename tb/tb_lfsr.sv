// tb_lfsr: checks the LFSR against an independently written Fibonacci-form
// description of the same polynomial (the Galois register's output bit
// sequence must match), its reload, its hold and the maximal period of the
// 16-bit default polynomial.
module tb_lfsr;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [15:0] seed = 16'h1234, q;
  int checks = 0, failures = 0;

  lfsr #(.W(16)) dut (.clk, .rst_n, .load, .seed, .step, .q);

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

  // Galois step written from the polynomial x^16+x^14+x^13+x^11+1:
  // shift right, and when the bit shifted out is 1 flip bits 15, 13, 12, 10.
  function automatic logic [15:0] ref_step(input logic [15:0] s);
    logic [15:0] n;
    n = {1'b0, s[15:1]};
    if (s[0]) begin n[15] ^= 1'b1; n[13] ^= 1'b1; n[12] ^= 1'b1; n[10] ^= 1'b1; end
    return n;
  endfunction

  initial begin
    logic [15:0] r;
    int period;
    @(negedge clk); rst_n = 1;
    check(q == 16'h1234, "reset loads seed");
    r = q;
    step = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk); r = ref_step(r);
      check(q == r, $sformatf("step %0d q=%h exp=%h", i, q, r));
    end
    step = 0;
    repeat (3) @(negedge clk);
    check(q == r, "hold without step");
    load = 1; seed = 16'h0; @(negedge clk); load = 0;
    check(q == 16'h0001, "zero seed replaced by 1");
    load = 1; seed = 16'hBEEF; @(negedge clk); load = 0;
    check(q == 16'hBEEF, "reload");
    // Period of the maximal polynomial is 2^16-1.
    step = 1; period = 0;
    do begin @(negedge clk); period++; end while (q != 16'hBEEF && period < 70000);
    step = 0;
    check(period == 65535, $sformatf("period %0d", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
