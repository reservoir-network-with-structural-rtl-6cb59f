// tb_tanh_pwl: compares the piece-wise tanh with the clamp of eq. 4 written
// with integer arithmetic: accumulator SQ8.15 in, SQ1.14 out.
module tb_tanh_pwl;
  import esn_pkg::*;
  racc_t z;
  data_t f;
  int checks = 0, failures = 0;

  tanh_pwl dut (.z, .f);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(input int zi);
    int exp;
    z = racc_t'(zi);
    #1;
    if (zi >= 32768)       exp = 16384;   // z >= 1.0  -> +1.0
    else if (zi < -32768)  exp = -16384;  // z < -1.0  -> -1.0
    else                   exp = zi / 2 - ((zi < 0 && (zi % 2 != 0)) ? 1 : 0);
    checks++;
    if (int'(f) != exp) begin
      failures++;
      $display("FAIL z=%0d f=%0d exp=%0d", zi, int'(f), exp);
    end
  endtask

  initial begin
    int v;
    try(0); try(1); try(-1); try(32767); try(32768); try(-32768); try(-32769);
    try(8388607); try(-8388608); try(16384); try(-16385); try(100000); try(-100000);
    for (int i = 0; i < 3000; i++) begin
      v = int'($urandom_range(0, 200000)) - 100000;
      try(v);
      v = int'($signed(24'($urandom)));
      try(v);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
