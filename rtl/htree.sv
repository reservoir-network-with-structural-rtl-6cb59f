// htree: one H-tree of the MH-Tree data-movement topology (Fig. 5(a),(d) of
// the paper): it broadcasts words from its root to every reservoir neuron of
// its cluster.
//
// The CCU issues one request per cycle at the root: either an input feature
// (kind BUS_INPUT, data from the microcontroller) or a feedback slot (kind
// BUS_FEEDBACK, neuron index `req_id`). For a feedback slot the addressed
// neuron's activation is gathered from the cluster (in silicon the neurons'
// tri-state drivers; here a multiplexer) and tested by the single
// significance circuit at the root: a word with |x| below `sig_thr` is sent
// as zero, so the data lines and the multipliers of the cluster do not
// toggle for it. The slot itself (valid, index) is still broadcast, so every
// neuron's connection sequence stays aligned. The paper
// describes this evaluation outside the neurons; the threshold form is this
// design's choice. The word then passes PIPE register stages (the repeater
// stages of the tree; PIPE is this design's choice) and reaches all neurons
// together, so the tree's latency is PIPE cycles.
module htree
  import esn_pkg::*;
#(
  parameter int unsigned N    = 64,
  parameter int unsigned IDW  = 6,
  parameter int unsigned PIPE = 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           req_valid,
  input  bus_kind_e      req_kind,
  input  logic [IDW-1:0] req_id,
  input  data_t          req_data,
  input  logic [14:0]    sig_thr,
  input  data_t          x_cluster [N],
  output logic           bus_valid,
  output bus_kind_e      bus_kind,
  output logic [IDW-1:0] bus_id,
  output data_t          bus_data,
  output logic           suppressed
);
  typedef struct packed {
    logic           valid;
    bus_kind_e      kind;
    logic [IDW-1:0] id;
    data_t          data;
  } word_t;

  data_t  src_x;
  logic [DW-1:0] src_mag;
  word_t  root;
  word_t  stage [PIPE+1];

  assign src_x   = (int'(req_id) < N) ? x_cluster[req_id] : '0;
  assign src_mag = src_x[DW-1] ? DW'(-src_x) : DW'(src_x);

  always_comb begin
    root.valid = req_valid;
    root.kind  = req_kind;
    root.id    = req_id;
    root.data  = req_data;
    suppressed = 1'b0;
    if (req_kind == BUS_FEEDBACK) begin
      root.data = src_x;
      if (req_valid && (src_mag < DW'(sig_thr))) begin
        root.data  = '0;
        suppressed = 1'b1;
      end
    end
  end

  assign stage[0] = root;
  for (genvar p = 0; p < PIPE; p++) begin : g_pipe
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) stage[p+1] <= '0;
      else        stage[p+1] <= stage[p];
    end
  end

  assign bus_valid = stage[PIPE].valid;
  assign bus_kind  = stage[PIPE].kind;
  assign bus_id    = stage[PIPE].id;
  assign bus_data  = stage[PIPE].data;
endmodule
