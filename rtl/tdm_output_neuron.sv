// tdm_output_neuron: the single physical output neuron of a base learner,
// time-multiplexed over all m outputs.
//
// It computes x~_k = sum_j beta_jk * h_j one product per clock with a 16x16
// multiplier and a 32-bit accumulator. 'first' starts a new output (the
// accumulator is loaded with the product instead of adding it), 'mac' adds
// the product. The result is the saturated 16-bit window ACC[27:12] (shifted
// left by 2*acc_sel bits for a gain of 4^acc_sel). The output layer is
// linear: no activation.
//
// Paper vs. own choices: MUL + ACC, the 32-bit accumulator and the ACC[27:12]
// window follow the chip; saturation and the window code mapping are this
// design's. In inference both operands are cut to 'bits' bits (8, 12, 16).
//
// Timing: 'mac' acts on the rising edge when 'en' is high; xhat is valid in
// the cycle after the last product of an output.
module tdm_output_neuron
  import adic_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       mac,
  input  logic       first,    // with mac: this is beta_1k * h_1
  input  word_t      beta,
  input  word_t      h,
  input  logic [4:0] bits,
  input  logic [1:0] acc_sel,
  output acc_t       acc,
  output word_t      xhat
);

  acc_t prod;

  assign prod = acc_t'(keep_msbs(beta, int'(bits))) * acc_t'(keep_msbs(h, int'(bits)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
    end else if (en && mac) begin
      acc <= first ? prod : acc + prod;
    end
  end

  assign xhat = acc_window(acc, acc_sel);

endmodule
