// tb_htree: input words pass unchanged; a feedback slot carries the
// addressed neuron's activation and its index; words below the significance
// threshold are sent as zero; the latency equals PIPE.
module tb_htree;
  import esn_pkg::*;
  localparam int N = 16, IDW = 4, PIPE = 2;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0;
  bus_kind_e req_kind = BUS_INPUT;
  logic [IDW-1:0] req_id = 0;
  data_t req_data = 0;
  logic [14:0] sig_thr = 0;
  data_t x_cluster [N];
  logic bus_valid, suppressed;
  bus_kind_e bus_kind;
  logic [IDW-1:0] bus_id;
  data_t bus_data;
  int checks = 0, failures = 0;

  htree #(.N(N), .IDW(IDW), .PIPE(PIPE)) dut (.clk, .rst_n, .req_valid, .req_kind, .req_id, .req_data,
    .sig_thr, .x_cluster, .bus_valid, .bus_kind, .bus_id, .bus_data, .suppressed);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { bit v; bus_kind_e k; int id; int d; } exp_t;
  exp_t q[$];
  int dropped = 0;

  initial begin
    for (int i = 0; i < N; i++) x_cluster[i] = data_t'($urandom_range(0, 8000) - 4000);
    @(negedge clk); rst_n = 1;
    for (int c = 0; c < 2000; c++) begin
      exp_t e;
      int xv, mag;
      if (c == 1000) sig_thr = 15'd1500;
      req_valid = ($urandom_range(0, 3) != 0);
      req_kind  = ($urandom_range(0, 1) != 0) ? BUS_FEEDBACK : BUS_INPUT;
      req_id    = IDW'($urandom);
      req_data  = data_t'($urandom);
      xv = int'(x_cluster[req_id]); mag = (xv < 0) ? -xv : xv;
      e.v = req_valid; e.k = req_kind; e.id = int'(req_id);
      e.d = (req_kind == BUS_FEEDBACK) ? xv : int'(req_data);
      if (req_kind == BUS_FEEDBACK && mag < int'(sig_thr)) begin
        if (req_valid) dropped++;
        e.d = 0;
      end
      q.push_back(e);
      @(negedge clk);
      if (q.size() >= PIPE) begin
        e = q.pop_front();
        checks++;
        if (bus_valid != e.v || (e.v && (bus_kind != e.k || int'(bus_id) != e.id || int'(bus_data) != e.d))) begin
          failures++;
          $display("FAIL cycle %0d: got v%0d k%0d id%0d d%0d exp v%0d k%0d id%0d d%0d", c,
                   bus_valid, bus_kind, bus_id, bus_data, e.v, e.k, e.id, e.d);
        end
      end
    end
    checks++; if (dropped == 0) begin failures++; $display("FAIL no word suppressed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
