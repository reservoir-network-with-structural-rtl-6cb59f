// tb_sigmoid_pwl: compares the piece-wise sigmoid with eq. 5 evaluated in
// real arithmetic (input SQ10.21, output SQ1.14), allowing one LSB for the
// truncation.
module tb_sigmoid_pwl;
  import esn_pkg::*;
  oacc_t z;
  data_t f;
  int checks = 0, failures = 0;

  sigmoid_pwl dut (.z, .f);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic try(input int zi);
    real zr, yr;
    int exp;
    z = oacc_t'(zi);
    #1;
    zr = real'(zi) / 2097152.0;
    if (zr > 2.0)       yr = 1.0;
    else if (zr < -2.0) yr = 0.0;
    else                yr = zr / 4.0 + 0.5;
    exp = int'($floor(yr * 16384.0));
    checks++;
    if (int'(f) > exp || int'(f) < exp - 1) begin
      failures++;
      $display("FAIL z=%f f=%0d exp=%0d", zr, int'(f), exp);
    end
  endtask

  initial begin
    try(0); try(4194304); try(4194305); try(-4194304); try(-4194305);
    try(2097152); try(-2097152); try(1); try(-1);
    try(32'sh7FFFFFFF); try(-32'sh7FFFFFFF);
    for (int i = 0; i < 4000; i++) begin
      try(int'($urandom_range(0, 12000000)) - 6000000);
      try(int'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
