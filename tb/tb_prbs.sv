// tb_prbs: checks the PRBS weight generator against an independent LFSR
// model: the word sequence after a load, repeatability after a reload, the
// all-zero seed rule, precision truncation of every word, and that nothing
// moves while the clock enable is low.
module tb_prbs;
  import adic_pkg::*;
  import adic_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, load = 0, step = 0;
  logic [15:0] seed = 16'h1234;
  logic [4:0]  bits = 5'd16;
  word_t word;
  int checks = 0, failures = 0;

  prbs dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int got, input int exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run_seq(input logic [15:0] sd, input int nbits, input int n);
    int s;
    seed = sd; bits = 5'(nbits);
    @(negedge clk) load = 1;
    @(negedge clk) load = 0;
    s = lfsr_next(sd == 0 ? 32'hACE1 : int'(sd));
    for (int i = 0; i < n; i++) begin
      check(int'(word), rkeep(s, nbits), $sformatf("seed %h bits %0d word %0d", sd, nbits, i));
      step = 1;
      @(negedge clk) step = 0;
      s = lfsr_next(s);
    end
  endtask

  initial begin
    int hold;
    int seen_neg, seen_pos;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_seq(16'h1234, 16, 600);
    run_seq(16'h1234, 16, 50);        // reload gives the same words
    run_seq(16'h0000, 16, 20);        // zero seed replaced
    run_seq(16'hBEEF, 2, 40);
    run_seq(16'hBEEF, 4, 40);
    run_seq(16'hBEEF, 6, 40);
    run_seq(16'hBEEF, 8, 40);
    // full signed range is used
    seen_neg = 0; seen_pos = 0;
    seed = 16'h0F0F; bits = 16;
    @(negedge clk) load = 1;
    @(negedge clk) load = 0;
    for (int i = 0; i < 200; i++) begin
      if (word < -16384) seen_neg++;
      if (word > 16384) seen_pos++;
      step = 1; @(negedge clk); step = 0;
    end
    checks++;
    if (seen_neg == 0 || seen_pos == 0) begin
      failures++;
      $display("FAIL range");
    end
    // clock enable low: no step
    hold = int'(word);
    en = 0; step = 1;
    repeat (5) @(negedge clk);
    check(int'(word), hold, "gated");
    en = 1; step = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
