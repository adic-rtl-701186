// adic_pkg: types, constants and fixed-point helpers shared by the anomaly
// detection engine.
//
// Number format. Every stored quantity (inputs x, PRBS weights W and biases b,
// hidden activations h, output weights beta, reconstructions x~, theta, eta)
// is a 16-bit two's-complement word. The design treats it as Q4.12 (12
// fractional bits): this is the reading under which the 32-bit accumulator
// window ACC[27:12] quoted for the neurons returns the product of two Q4.12
// operands in Q4.12 again. The 12-bit fraction is this design's choice.
//
// The network limits (16 inputs, 32 hidden nodes, 16 outputs, 7 base
// learners, 16-bit datapath, 32-bit accumulators) follow the chip; the
// configuration encoding in cfg_t is this design's own.
package adic_pkg;

  localparam int unsigned DW    = 16;  // data word
  localparam int unsigned ACCW  = 32;  // neuron accumulator
  localparam int unsigned FRAC  = 12;  // fractional bits of a data word
  localparam int unsigned D_MAX = 16;  // input features
  localparam int unsigned L_MAX = 32;  // hidden nodes per base learner
  localparam int unsigned M_MAX = 16;  // output nodes
  localparam int unsigned N_BL  = 7;   // base learners on the chip
  localparam int unsigned ERRW  = 32;  // squared reconstruction error
  localparam int unsigned LACCW = 48;  // learning-rule partial sums

  typedef logic signed [DW-1:0]   word_t;
  typedef logic signed [ACCW-1:0] acc_t;
  typedef logic signed [LACCW-1:0] lacc_t;

  // Inference datapath precision (training always uses 16 bits).
  typedef enum logic [1:0] {
    DP_16 = 2'd0,
    DP_12 = 2'd1,
    DP_8  = 2'd2
  } dp_prec_e;

  // Bit width kept from each PRBS word for W and b during inference.
  typedef enum logic [2:0] {
    WB_FULL = 3'd0,   // all 16 bits (the width used for training)
    WB_2    = 3'd1,
    WB_4    = 3'd2,
    WB_6    = 3'd3,
    WB_8    = 3'd4
  } wb_prec_e;

  // Run-time configuration common to all base learners.
  typedef struct packed {
    logic [7:0]  d;         // number of inputs, 1..16
    logic [7:0]  l;         // number of hidden nodes, 1..32
    logic [7:0]  m;         // number of outputs, 1..16 (1 in boundary mode)
    logic        boundary;  // 1: ELM-B, every output's target is 1.0
    logic        lite;      // 1: OPIUM-Lite, theta frozen at theta0*I
    logic [1:0]  acc_sel;   // accumulator window, 0 selects ACC[27:12]
    dp_prec_e    dp_prec;   // inference datapath width
    wb_prec_e    wb_prec;   // inference W/b width
    word_t       theta0;    // initial diagonal of theta
  } cfg_t;

  localparam word_t ONE = word_t'(1 << FRAC);  // 1.0 in Q4.12

  // Saturate a 32-bit value to a 16-bit word.
  function automatic word_t sat16(input logic signed [ACCW-1:0] v);
    if (v > 32'sd32767)       return 16'sh7fff;
    else if (v < -32'sd32768) return 16'sh8000;
    else                      return word_t'(v);
  endfunction

  // Saturate a wide learning partial sum to a 16-bit word.
  function automatic word_t sat16w(input lacc_t v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return word_t'(v);
  endfunction

  // 16-bit word taken from an accumulator: window ACC[27-2s : 12-2s],
  // saturated when the bits above the window are not a sign extension.
  function automatic word_t acc_window(input acc_t acc, input logic [1:0] sel);
    acc_t sh;
    sh = acc >>> (FRAC - 2 * int'(sel));
    return sat16(sh);
  endfunction

  // Keep the top 'bits' bits of a word, clear the rest.
  function automatic word_t keep_msbs(input word_t v, input int bits);
    logic [DW-1:0] mask;
    mask = '1;
    mask = mask << (DW - bits);
    return word_t'(v & mask);
  endfunction

  function automatic int dp_bits(input dp_prec_e p);
    case (p)
      DP_12:   return 12;
      DP_8:    return 8;
      default: return 16;
    endcase
  endfunction

  function automatic int wb_bits(input wb_prec_e p);
    case (p)
      WB_2:    return 2;
      WB_4:    return 4;
      WB_6:    return 6;
      WB_8:    return 8;
      default: return 16;
    endcase
  endfunction

  // Q4.12 product rounded toward minus infinity, saturated to a word.
  function automatic word_t qmul(input word_t a, input word_t b);
    acc_t p;
    p = acc_t'(a) * acc_t'(b);
    return sat16(p >>> FRAC);
  endfunction

endpackage
