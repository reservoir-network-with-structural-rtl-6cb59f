// tb_sgd_update: compares the weight update with eq. 7 computed with 64-bit
// integers: new_w = sat24(w - floor(floor((yhat-y)*x / 2^7) / 2^lr)).
module tb_sgd_update;
  import esn_pkg::*;
  weight_t w, new_w;
  data_t yhat, y, x;
  logic [4:0] lr_shift;
  int checks = 0, failures = 0;

  sgd_update dut (.w, .yhat, .y, .x, .lr_shift, .new_w);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint fdiv(input longint a, input int sh);
    longint d = longint'(1) << sh;
    longint q = a / d;
    if (a < 0 && (a % d) != 0) q = q - 1;  // floor
    return q;
  endfunction

  task automatic try(input int wi, input int yh, input int yy, input int xx, input int lr);
    longint g, r;
    w = weight_t'(wi); yhat = data_t'(yh); y = data_t'(yy); x = data_t'(xx);
    lr_shift = 5'(lr);
    #1;
    g = fdiv(fdiv(longint'(yh - yy) * longint'(xx), 7), lr);
    r = longint'(wi) - g;
    if (r > 8388607) r = 8388607;
    if (r < -8388608) r = -8388608;
    checks++;
    if (longint'(new_w) != r) begin
      failures++;
      $display("FAIL w=%0d yhat=%0d y=%0d x=%0d lr=%0d got=%0d exp=%0d", wi, yh, yy, xx, lr, new_w, r);
    end
  endtask

  initial begin
    try(0, 16384, 0, 16384, 0);
    try(100, 0, 16384, 16384, 3);
    try(8388600, 0, 16384, 16384, 0);
    try(-8388600, 16384, 0, 16384, 0);
    for (int i = 0; i < 5000; i++)
      try(int'($signed(24'($urandom))), int'($urandom_range(0, 16384)),
          ($urandom_range(0, 1) != 0) ? 16384 : 0,
          int'($urandom_range(0, 32768)) - 16384, int'($urandom_range(0, 12)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
