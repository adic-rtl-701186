// tb_online_learning: runs OPIUM and OPIUM-Lite updates on random hidden
// activations and errors and compares every beta word, read back through
// the forward-pass port, with the integer reference model (which also
// tracks theta, so theta errors show up in later beta values). Also checks
// the cycle count of init and of one update, and that the theta memory stays
// idle in OPIUM-Lite mode.
module tb_online_learning;
  import adic_pkg::*;
  import adic_ref_pkg::*;

  localparam int LMAX = 32, MMAX = 16;
  logic clk = 0, rst_n = 0, en = 1, start_init = 0, start_learn = 0, beta_rd = 0;
  cfg_t cfg;
  word_t h_vec [LMAX];
  word_t e_vec [MMAX];
  logic [8:0] beta_raddr = 0;
  word_t beta_rdata;
  logic busy, done, theta_active;
  int checks = 0, failures = 0;
  int theta_cycles = 0;

  online_learning dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (theta_active) theta_cycles++;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bl_model mdl;
  rcfg_t rc;

  task automatic pulse_wait(input bit init, output int cycles);
    @(negedge clk);
    if (init) start_init = 1; else start_learn = 1;
    @(negedge clk);
    start_init = 0; start_learn = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  task automatic compare_beta(input string tag);
    int bad = 0;
    for (int j = 0; j < rc.l; j++)
      for (int k = 0; k < rc.m; k++) begin
        beta_rd = 1; beta_raddr = {5'(j), 4'(k)};
        @(negedge clk);
        beta_rd = 0;
        if (int'(beta_rdata) != mdl.beta[j][k]) begin
          bad++;
          if (bad < 5) $display("FAIL %s beta[%0d][%0d]=%0d exp %0d", tag, j, k,
                                beta_rdata, mdl.beta[j][k]);
        end
      end
    checks++;
    if (bad) failures++;
  endtask

  task automatic run(input bit lite, input int l, input int m, input int nsamp);
    int cyc, exp_cyc;
    rc = '{d: 16, l: l, m: m, boundary: 0, lite: lite, acc_sel: 0, dp_code: 0,
           wb_code: 0, theta0: 4096};
    cfg = '0;
    cfg.d = 16; cfg.l = 8'(l); cfg.m = 8'(m); cfg.lite = lite; cfg.theta0 = 16'sd4096;
    mdl.init(rc);
    pulse_wait(1, cyc);
    checks++;
    if (cyc != LMAX * LMAX + 2) begin
      failures++; $display("FAIL init cycles %0d", cyc);
    end
    for (int s = 0; s < nsamp; s++) begin
      for (int j = 0; j < LMAX; j++) begin
        h_vec[j] = word_t'($urandom_range(0, (s % 2) ? 32767 : 6000));
        mdl.h[j] = int'(h_vec[j]);
      end
      for (int k = 0; k < MMAX; k++) begin
        e_vec[k] = word_t'(int'($urandom_range(0, 8000)) - 4000);
        mdl.e[k] = int'(e_vec[k]);
      end
      mdl.learn(rc);
      theta_cycles = 0;
      pulse_wait(0, cyc);
      exp_cyc = lite ? (l + l + l * 34 + 2 * l * m + 2)
                     : (l * l + 1 + l + l * 34 + 2 * l * l + 2 * l * m + 2);
      checks++;
      if (cyc != exp_cyc) begin
        failures++; $display("FAIL learn cycles %0d expected %0d", cyc, exp_cyc);
      end
      checks++;
      if (lite && theta_cycles != 0) begin
        failures++; $display("FAIL theta memory active in Lite mode");
      end
      compare_beta($sformatf("lite=%0d l=%0d s=%0d", lite, l, s));
    end
  endtask

  initial begin
    mdl = new(0);
    foreach (h_vec[j]) h_vec[j] = '0;
    foreach (e_vec[k]) e_vec[k] = '0;
    cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(0, 32, 16, 4);
    run(1, 32, 16, 4);
    run(0, 9, 3, 3);
    run(1, 5, 1, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
