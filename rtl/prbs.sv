// prbs: pseudo-random generator of the first-layer weights W and biases b of
// one base learner.
//
// The random first layer of the extreme learning machine is never stored: it
// is regenerated from a seed each time a sample passes through the hidden
// layer, so the same seed always yields the same W and b. Different base
// learners get different seeds and therefore different random projections.
//
// How it works: a 16-bit Fibonacci LFSR with the maximal-length polynomial
// x^16 + x^14 + x^13 + x^11 + 1 is advanced by 16 steps per word (the 16
// steps are unrolled into one combinational function), so each word holds
// 16 fresh bits and covers the full range -2^15 .. 2^15-1. The polynomial,
// the 16-steps-per-word rule and the replacement of an all-zero seed by
// 16'hACE1 are this design's choices; the chip's PRBS is only described as
// producing up to 16-bit words from a seed.
//
// Precision control: 'bits' (2, 4, 6, 8 or 16) keeps the top bits of every
// word and clears the rest. The chip offers 2..8 bits for inference; 16 bits
// is used for training and may also be chosen for inference.
//
// Interface and timing: 'load' (seed) and 'step' act on the rising clock edge
// when 'en' is high; 'load' has priority. After 'load' the output holds the
// first word of the sequence; every 'step' moves to the next word. The output
// is a registered value, ready in the cycle after the load or step.
module prbs
  import adic_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,     // clock enable (models the BL clock gate)
  input  logic        load,   // restart the sequence from 'seed'
  input  logic        step,   // advance to the next word
  input  logic [15:0] seed,
  input  logic [4:0]  bits,   // kept precision: 2, 4, 6, 8 or 16
  output word_t       word
);

  logic [15:0] state;

  function automatic logic [15:0] lfsr16(input logic [15:0] s);
    logic [15:0] r;
    r = s;
    for (int st = 0; st < 16; st++) begin
      r = {r[14:0], r[15] ^ r[13] ^ r[12] ^ r[10]};
    end
    return r;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= 16'hACE1;
    end else if (en) begin
      if (load)      state <= lfsr16((seed == 16'd0) ? 16'hACE1 : seed);
      else if (step) state <= lfsr16(state);
    end
  end

  assign word = keep_msbs(word_t'(state), int'(bits));

endmodule
