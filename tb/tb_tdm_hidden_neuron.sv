// tb_tdm_hidden_neuron: drives random hidden-node computations (bias then d
// products) through the neuron and compares h with an integer model of
// ReLU(window(b*2^12 + sum w*x)), for every accumulator window, input
// precision and a saturating case; also checks one product per clock.
module tb_tdm_hidden_neuron;
  import adic_pkg::*;
  import adic_ref_pkg::*;

  logic clk = 0, rst_n = 0, en = 1, load_bias = 0, mac = 0;
  word_t x, w, b, h;
  logic [4:0] bits = 16;
  logic [1:0] acc_sel = 0;
  acc_t acc;
  int checks = 0, failures = 0;

  tdm_hidden_neuron dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic node(input int d, input int scale, input int nb, input int sel);
    int xs[16], ws[16], bb, a, exp_h;
    bits = 5'(nb); acc_sel = 2'(sel);
    bb = $signed(16'($urandom)) / scale;
    a = bb * 4096;
    for (int i = 0; i < d; i++) begin
      xs[i] = $signed(16'($urandom)) / scale;
      ws[i] = $signed(16'($urandom));
      a = a + ws[i] * rkeep(xs[i], nb);
    end
    @(negedge clk); load_bias = 1; b = word_t'(bb);
    @(negedge clk); load_bias = 0;
    for (int i = 0; i < d; i++) begin
      mac = 1; x = word_t'(xs[i]); w = word_t'(ws[i]);
      @(negedge clk);
    end
    mac = 0;
    exp_h = rwin(a, sel);
    if (exp_h < 0) exp_h = 0;
    checks++;
    if (int'(h) != exp_h || acc != a) begin
      failures++;
      $display("FAIL node d=%0d bits=%0d sel=%0d: h=%0d exp %0d", d, nb, sel, h, exp_h);
    end
  endtask

  initial begin
    int nb;
    x = 0; w = 0; b = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      nb = (t % 3 == 0) ? 16 : (t % 3 == 1) ? 12 : 8;
      node(1 + (t % 16), (t % 2) ? 64 : 1024, nb, t % 4);
    end
    // saturation: large positive accumulation clips to 32767
    @(negedge clk); load_bias = 1; b = 16'sh7fff; acc_sel = 3; bits = 16;
    @(negedge clk); load_bias = 0;
    checks++;
    if (h != 16'sh7fff) begin failures++; $display("FAIL saturate %0d", h); end
    // clock enable low freezes the accumulator
    en = 0; mac = 1; x = 100; w = 100;
    @(negedge clk);
    checks++;
    if (acc != (32'sh7fff <<< 12)) begin failures++; $display("FAIL gate"); end
    en = 1; mac = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
