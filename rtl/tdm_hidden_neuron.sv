// tdm_hidden_neuron: the single physical hidden neuron of a base learner,
// time-multiplexed over all L hidden nodes.
//
// It computes h_j = g(sum_i W_ji * x_i + b_j) one product per clock: a
// 16x16 multiplier (MUL) feeds a 32-bit accumulator (ACC). A neuron starts
// with 'load_bias', which places b_j in the accumulator aligned to the
// product's binary point (b << 12), and then receives one 'mac' per input.
// The output h is taken combinationally from the accumulator: the 16-bit
// window ACC[27:12] (or a window shifted left by 2*acc_sel bits, giving a
// gain of 4^acc_sel), saturated, then passed through g().
//
// Paper vs. own choices: MUL + ACC, the 32-bit accumulator and the ACC[27:12]
// window follow the chip. The activation g() is taken to be ReLU, the window
// is saturated rather than wrapped, and the 2-bit window code is mapped to
// shifts of 0/2/4/6 bits; these are this design's choices. In inference, the
// input x is cut to 'bits' bits (8, 12 or 16) before the multiply.
//
// Timing: load_bias and mac act on the rising edge when 'en' is high; h is
// valid in the cycle after the last mac of a node.
// Because of the ReLU, the sign bit of h is always zero.
module tdm_hidden_neuron
  import adic_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       load_bias,
  input  logic       mac,
  input  word_t      x,
  input  word_t      w,
  input  word_t      b,
  input  logic [4:0] bits,     // input precision: 8, 12 or 16
  input  logic [1:0] acc_sel,
  output acc_t       acc,
  output word_t      h
);

  word_t xq;
  word_t win;

  assign xq = keep_msbs(x, int'(bits));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (en) begin
      if (load_bias)  acc <= acc_t'(b) <<< FRAC;
      else if (mac)   acc <= acc + acc_t'(w) * acc_t'(xq);
    end
  end

  assign win = acc_window(acc, acc_sel);
  assign h   = win[DW-1] ? '0 : win;  // ReLU

endmodule
