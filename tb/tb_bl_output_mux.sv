// tb_bl_output_mux: random BL results; checks that the buffer shows the
// selected BL's x~, error and decision one cycle after the selection, holds
// while 'load' is low, and reads zero for a selection past the last BL.
module tb_bl_output_mux;
  import adic_pkg::*;
  localparam int NBL = 7, MMAX = 16;
  logic clk = 0, rst_n = 0, load = 1;
  logic [2:0] sel = 0;
  word_t xhat_in [NBL][MMAX];
  logic [31:0] err_in [NBL];
  logic [NBL-1:0] dec_in;
  word_t xhat_out [MMAX];
  logic [31:0] err_out;
  logic dec_out;
  int checks = 0, failures = 0;

  bl_output_mux #(.NBL(NBL), .MMAX(MMAX)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic randomize_inputs();
    foreach (xhat_in[b, k]) xhat_in[b][k] = word_t'($urandom);
    foreach (err_in[b]) err_in[b] = $urandom;
    dec_in = 7'($urandom);
  endtask

  initial begin
    int bad;
    word_t hold0;
    randomize_inputs();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      randomize_inputs();
      sel = 3'($urandom_range(0, 7));
      load = 1;
      @(negedge clk);
      bad = 0;
      for (int k = 0; k < MMAX; k++)
        if (xhat_out[k] != ((sel < NBL) ? xhat_in[sel][k] : '0)) bad++;
      if (err_out != ((sel < NBL) ? err_in[sel] : '0)) bad++;
      if (dec_out != ((sel < NBL) ? dec_in[sel] : 1'b0)) bad++;
      checks++;
      if (bad) begin failures++; $display("FAIL t=%0d sel=%0d", t, sel); end
    end
    // hold
    sel = 0; load = 1;
    @(negedge clk);
    hold0 = xhat_out[0];
    load = 0;
    randomize_inputs();
    xhat_in[0][0] = ~hold0;
    @(negedge clk);
    checks++;
    if (xhat_out[0] != hold0) begin failures++; $display("FAIL hold"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
