// tb_adic_regs: bus-level test of the register block: reset values, word
// and byte writes with read-back of every writable register, the
// configuration outputs, command pulses, and the status and result read
// paths.
module tb_adic_regs;
  import adic_pkg::*;
  localparam int NBL = 7, DMAX = 16, MMAX = 16;
  logic clk = 0, rst_n = 0;
  logic per_en = 0;
  logic [1:0] per_we = 0;
  logic [13:0] per_addr = 0;
  logic [15:0] per_din = 0, per_dout;
  cfg_t cfg;
  logic adaptive;
  logic [2:0] n_fixed, bl_sel;
  word_t x_vec [DMAX];
  logic [15:0] seeds [NBL];
  logic [31:0] thresholds [NBL];
  logic cmd_init, cmd_train, cmd_infer, cmd_clear;
  logic busy = 0, done = 0, anomaly = 0, vote = 0;
  logic [2:0] n_cur = 1, n_used = 3;
  logic [3:0] rounds = 2;
  logic [2:0] votes = 5;
  logic dec_sel = 1;
  logic [NBL-1:0] decisions = 7'b1010101;
  word_t xhat_sel [MMAX];
  logic [31:0] err_sel = 32'hDEAD_BEEF;
  int checks = 0, failures = 0;
  int n_init = 0, n_train = 0, n_infer = 0, n_clear = 0;

  adic_regs dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    n_init  += cmd_init;
    n_train += cmd_train;
    n_infer += cmd_infer;
    n_clear += cmd_clear;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input int d, input logic [1:0] we = 2'b11);
    @(negedge clk);
    per_en = 1; per_we = we; per_addr = 14'(a); per_din = 16'(d);
    @(negedge clk);
    per_en = 0; per_we = 0;
  endtask

  task automatic rd(input int a, output logic [15:0] d);
    @(negedge clk);
    per_en = 1; per_we = 0; per_addr = 14'(a);
    #1 d = per_dout;
    @(negedge clk);
    per_en = 0;
  endtask

  task automatic expect_rd(input int a, input logic [15:0] exp, input string what);
    logic [15:0] d;
    rd(a, d);
    checks++;
    if (d !== exp) begin failures++; $display("FAIL %s: read %h expected %h", what, d, exp); end
  endtask

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [15:0] v;
    foreach (xhat_sel[k]) xhat_sel[k] = word_t'(k * 3 - 20);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // reset values
    expect_rd(2, 16, "D reset");
    expect_rd(3, 32, "L reset");
    expect_rd(4, 16, "M reset");
    expect_rd(7, 16'h1000, "theta0 reset");
    chk(adaptive && n_fixed == 7 && !cfg.lite && !cfg.boundary, "mode reset");
    chk(thresholds[3] == 32'hffff_ffff, "threshold reset");
    #1 chk(per_dout == 0, "idle bus reads zero");
    // configuration
    wr(2, 12); wr(3, 20); wr(4, 1);
    wr(5, 16'h0033);    // boundary, lite, fixed mode, n_fixed 3
    wr(6, 16'h0027);    // acc_sel 3, dp 12, wb 4 bits
    wr(7, 16'h0800);
    wr(8, 5);
    chk(cfg.d == 12 && cfg.l == 20 && cfg.m == 1, "sizes");
    chk(cfg.boundary && cfg.lite && !adaptive && n_fixed == 3, "mode");
    chk(cfg.acc_sel == 3 && cfg.dp_prec == DP_12 && cfg.wb_prec == WB_4, "precision");
    chk(cfg.theta0 == 16'sh0800 && bl_sel == 5, "theta0 and select");
    // byte writes
    wr(7, 16'hAB55, 2'b01);
    expect_rd(7, 16'h0855, "low byte write");
    wr(7, 16'hAB55, 2'b10);
    expect_rd(7, 16'hAB55, "high byte write");
    // byte writes into every array region and the mode register
    for (int a = 0; a < 16; a++) begin
      logic [15:0] old, v;
      int addr;
      addr = (a < 8) ? 16'h10 + a : ((a < 12) ? 16'h20 + a - 8 : 16'h30 + a - 12);
      rd(addr, old);
      v = 16'($urandom);
      wr(addr, v, (a % 2) ? 2'b10 : 2'b01);
      expect_rd(addr, (a % 2) ? {v[15:8], old[7:0]} : {old[15:8], v[7:0]},
                $sformatf("byte write at %h", addr));
    end
    // input vector, seeds, thresholds
    for (int i = 0; i < DMAX; i++) wr(16'h10 + i, i * 257 - 1000);
    for (int i = 0; i < DMAX; i++) begin
      expect_rd(16'h10 + i, 16'(i * 257 - 1000), "x read-back");
      chk(x_vec[i] == word_t'(i * 257 - 1000), "x output");
    end
    for (int b = 0; b < NBL; b++) begin
      wr(16'h20 + b, 16'h1111 * (b + 1));
      wr(16'h30 + 2 * b, 16'h0100 + b);
      wr(16'h31 + 2 * b, 16'h0002 + b);
    end
    for (int b = 0; b < NBL; b++) begin
      chk(seeds[b] == 16'(16'h1111 * (b + 1)), "seed");
      chk(thresholds[b] == {16'(16'h0002 + b), 16'(16'h0100 + b)}, "threshold");
      expect_rd(16'h31 + 2 * b, 16'(16'h0002 + b), "threshold high read");
    end
    // commands
    wr(0, 1); wr(0, 2); wr(0, 4); wr(0, 4); wr(0, 8);
    chk(n_init == 1 && n_train == 1 && n_infer == 2 && n_clear == 1, "command pulses");
    // status and results
    busy = 1; anomaly = 1; vote = 1;
    expect_rd(1, {1'b0, 7'b1010101, 1'b0, 3'd1, 1'b1, 1'b1, 1'b0, 1'b1}, "status");
    busy = 0;
    @(negedge clk) done = 1;
    @(negedge clk) done = 0;
    rd(1, v);
    chk(v[1], "result valid after done");
    expect_rd(9, {5'd0, 3'd5, 1'b0, 3'd3, 4'd2}, "rounds");
    expect_rd(16'h52, 16'h0001, "decision of the selected BL");
    dec_sel = 0;
    expect_rd(16'h52, 16'h0000, "decision of the selected BL");
    expect_rd(16'h50, 16'hBEEF, "err low");
    expect_rd(16'h51, 16'hDEAD, "err high");
    for (int k = 0; k < MMAX; k++) expect_rd(16'h40 + k, 16'(k * 3 - 20), "xhat");
    wr(0, 4);
    rd(1, v);
    chk(!v[1], "result valid cleared by a new command");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
