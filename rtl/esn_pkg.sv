// esn_pkg: number formats, shared types and constants of the echo state
// network core.
//
// Number formats (all two's complement):
//   input feature u(t)      16 bit SQ3.12   (given by the paper)
//   reservoir activation x  16 bit SQ1.14   (this design's choice: it is the
//                           tanh output {z[23], z[15:1]} of a 24-bit
//                           accumulator with 15 fraction bits, Fig. 4 bit slicing)
//   random weights W_ri/W_r 16 bit SQ0.15   (LFSR word, MSB used as sign)
//   reservoir accumulator   24 bit SQ8.15   (width from the paper)
//   readout weight          24 bit SQ3.21   (given by the paper)
//   readout accumulator     32 bit SQ10.21  (width from the paper)
//   readout output yhat, y  16 bit SQ1.14   (this design's choice)
//   leak rate delta         16 bit unsigned Q1.15 (1.0 = 16'h8000)
package esn_pkg;

  localparam int unsigned DW      = 16;  // data word on the H-trees
  localparam int unsigned RACC_W  = 24;  // reservoir accumulator
  localparam int unsigned WW      = 24;  // readout weight
  localparam int unsigned OACC_W  = 32;  // readout accumulator

  localparam int unsigned U_FRAC    = 12;
  localparam int unsigned X_FRAC    = 14;
  localparam int unsigned RW_FRAC   = 15;
  localparam int unsigned RACC_FRAC = 15;
  localparam int unsigned W_FRAC    = 21;
  localparam int unsigned OACC_FRAC = 21;
  localparam int unsigned DELTA_FRAC = 15;

  typedef logic signed [DW-1:0]     data_t;
  typedef logic signed [RACC_W-1:0] racc_t;
  typedef logic signed [WW-1:0]     weight_t;
  typedef logic signed [OACC_W-1:0] oacc_t;

  localparam data_t X_ONE     = data_t'(16'sh4000);  // +1.0 in SQ1.14
  localparam data_t X_MONE    = data_t'(16'shC000);  // -1.0 in SQ1.14

  // Kind of word carried by an H-tree.
  typedef enum logic [0:0] {BUS_INPUT = 1'b0, BUS_FEEDBACK = 1'b1} bus_kind_e;

  // Hyperparameters written by the external microcontroller.
  typedef struct packed {
    logic [15:0] delta;        // leak rate, Q1.15
    logic [4:0]  lr_shift;     // learning rate = 2^-lr_shift
    logic [2:0]  gap_bits;     // reservoir sparsity: mean gap between feedback sources
    logic [3:0]  esp_shift;    // right shift of W_r (echo state property)
    logic [14:0] sig_thr;      // feedback broadcasts with |x| below this are suppressed
    logic [8:0]  nr_active;    // number of active reservoir neurons, physical and virtual
    logic        en_sp;        // readout sparse-connection mode
    logic [7:0]  sp_pattern;   // SP sequence: rotated one bit per readout group
    logic        awake;        // 0: setup phase, the core sleeps and takes no samples
  } esn_cfg_t;

  // Configuration register addresses.
  typedef enum logic [2:0] {
    CFG_DELTA = 3'd0, CFG_LR = 3'd1, CFG_GAP = 3'd2, CFG_ESP = 3'd3,
    CFG_THR = 3'd4, CFG_NR = 3'd5, CFG_SP = 3'd6, CFG_RUN = 3'd7
  } cfg_addr_e;

  // Seeds: every LFSR gets a distinct non-zero seed derived from an index.
  function automatic logic [31:0] seed_hash(input int unsigned idx, input int unsigned salt);
    logic [31:0] h;
    h = 32'h9E37_79B9 * (idx + 1) ^ (32'h85EB_CA6B * (salt + 7));
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    if (h == 32'd0) h = 32'h1;
    return h;
  endfunction

  function automatic int unsigned clog2_min1(input int unsigned n);
    return (n <= 2) ? 1 : $clog2(n);
  endfunction

endpackage
