// tb_shifter: loads a random activation array and checks that every
// link carries the selected group's neuron, one group per shift, with
// wrap-around and exactly one group selected.
module tb_shifter;
  import esn_pkg::*;
  localparam int G = 8, C = 4;
  logic clk = 0, rst_n = 0, first = 0, shift = 0;
  data_t x_array [G*C];
  logic [G-1:0] sel;
  data_t link [C];
  int checks = 0, failures = 0;

  shifter #(.N_GRP(G), .N_COL(C)) dut (.clk, .rst_n, .first, .shift, .x_array, .sel, .link);

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < G*C; i++) x_array[i] = data_t'($urandom);
    @(negedge clk); rst_n = 1;
    checks++; if (link[0] != 0 || sel != 0) begin failures++; $display("FAIL idle links"); end
    first = 1; @(negedge clk); first = 0;
    for (int k = 0; k < 2*G; k++) begin
      automatic int g = k % G;
      checks++;
      if ($countones(sel) != 1 || !sel[g]) begin failures++; $display("FAIL sel %b at %0d", sel, k); end
      for (int c = 0; c < C; c++) begin
        checks++;
        if (link[c] != x_array[g*C + c]) begin
          failures++; $display("FAIL group %0d col %0d got %h exp %h", g, c, link[c], x_array[g*C+c]);
        end
      end
      shift = 1; @(negedge clk); shift = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
