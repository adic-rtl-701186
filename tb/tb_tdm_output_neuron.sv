// tb_tdm_output_neuron: random output-node sums x~ = window(sum beta*h) with
// 'first' restarting the accumulator, compared with an integer model for
// every window and operand precision.
module tb_tdm_output_neuron;
  import adic_pkg::*;
  import adic_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, mac = 0, first = 0;
  word_t beta, h, xhat;
  logic [4:0] bits = 16;
  logic [1:0] acc_sel = 0;
  acc_t acc;
  int checks = 0, failures = 0;

  tdm_output_neuron dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int l, nb, sel, a, bs, hs;
    beta = 0; h = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      l   = 1 + (t % 32);
      nb  = (t % 3 == 0) ? 16 : (t % 3 == 1) ? 12 : 8;
      sel = (t / 3) % 4;
      bits = 5'(nb); acc_sel = 2'(sel);
      a = 0;
      for (int j = 0; j < l; j++) begin
        bs = $signed(16'($urandom)) / ((t % 2) ? 16 : 256);
        hs = $signed(16'($urandom)) / 256;
        a = a + rkeep(bs, nb) * rkeep(hs, nb);
        mac = 1; first = (j == 0); beta = word_t'(bs); h = word_t'(hs);
        @(negedge clk);
      end
      mac = 0; first = 0;
      checks++;
      if (int'(xhat) != rwin(a, sel)) begin
        failures++;
        $display("FAIL t=%0d xhat=%0d exp %0d", t, xhat, rwin(a, sel));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
