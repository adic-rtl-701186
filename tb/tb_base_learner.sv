// tb_base_learner: one BL against the integer reference model. Initialises,
// trains on noisy copies of a fixed pattern (OPIUM, then OPIUM-Lite, then
// boundary mode), and runs inferences at full and reduced precision, with
// other accumulator windows and with thresholds on both sides of the error.
// Every x~ word, the error and the decision are compared; the inference
// latency is checked against 1 + L(d+1) + 1 + Lm + 2 + m + 1 cycles
// (1078 at d = 16, L = 32, m = 16) and a gated clock must only stretch it.
module tb_base_learner;
  import adic_pkg::*;
  import adic_ref_pkg::*;

  localparam int DMAX = 16, LMAX = 32, MMAX = 16;
  logic clk = 0, rst_n = 0, en = 1;
  cfg_t cfg;
  logic [15:0] seed = 16'h5A5A;
  logic [31:0] threshold = '1;
  word_t x_vec [DMAX];
  logic start_init = 0, start_train = 0, start_infer = 0;
  logic busy, done, decision, theta_active;
  logic [31:0] err;
  word_t xhat_vec [MMAX];
  int checks = 0, failures = 0;
  bit gate_mode = 0;

  base_learner dut (.*);
  always #5 clk = ~clk;

  // optional clock gating pattern while running
  always @(negedge clk) if (gate_mode) en = busy ? ($urandom % 4 != 0) : 1'b1;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bl_model mdl;
  rcfg_t rc;
  int pattern [16];
  int xs [16];

  function automatic void set_cfg(int d, int l, int m, bit boundary, bit lite, int sel,
                                  int dp, int wb);
    rc = '{d: d, l: l, m: m, boundary: boundary, lite: lite, acc_sel: sel, dp_code: dp,
           wb_code: wb, theta0: 4096};
    cfg.d = 8'(d); cfg.l = 8'(l); cfg.m = 8'(m); cfg.boundary = boundary; cfg.lite = lite;
    cfg.acc_sel = 2'(sel); cfg.dp_prec = dp_prec_e'(dp); cfg.wb_prec = wb_prec_e'(wb);
    cfg.theta0 = 16'sd4096;
  endfunction

  task automatic command(input int which, output int cycles);
    @(negedge clk);
    case (which)
      0: start_init = 1;
      1: start_train = 1;
      default: start_infer = 1;
    endcase
    @(negedge clk);
    start_init = 0; start_train = 0; start_infer = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  task automatic new_sample(input int noise, input int offset);
    for (int i = 0; i < 16; i++) begin
      xs[i] = pattern[i] + int'($urandom_range(0, 2 * noise)) - noise + offset;
      x_vec[i] = word_t'(xs[i]);
    end
  endtask

  task automatic compare(input string tag);
    int bad = 0;
    for (int k = 0; k < rc.m; k++)
      if (int'(xhat_vec[k]) != mdl.xhat[k]) begin
        bad++;
        if (bad < 4) $display("FAIL %s xhat[%0d]=%0d exp %0d", tag, k, xhat_vec[k], mdl.xhat[k]);
      end
    if (longint'(err) != mdl.sq_err) begin
      bad++; $display("FAIL %s err=%0d exp %0d", tag, err, mdl.sq_err);
    end
    if (decision != mdl.decision) begin
      bad++; $display("FAIL %s decision=%0d exp %0d", tag, decision, mdl.decision);
    end
    checks++;
    if (bad) failures++;
  endtask

  task automatic train(input int n, input int noise);
    int cyc;
    for (int s = 0; s < n; s++) begin
      new_sample(noise, 0);
      mdl.forward(rc, xs, 1, longint'(threshold));
      mdl.learn(rc);
      command(1, cyc);
      compare($sformatf("train %0d", s));
    end
  endtask

  task automatic infer(input int offset, input longint th, input string tag,
                       input int exp_cycles);
    int cyc;
    threshold = 32'(th);
    new_sample(200, offset);
    mdl.forward(rc, xs, 0, th);
    command(2, cyc);
    compare(tag);
    if (exp_cycles > 0) begin
      checks++;
      if (cyc != exp_cycles) begin
        failures++; $display("FAIL %s latency %0d expected %0d", tag, cyc, exp_cycles);
      end
    end
  endtask

  initial begin
    int cyc, lat;
    mdl = new(int'(seed));
    for (int i = 0; i < 16; i++) pattern[i] = int'($urandom_range(0, 4096)) - 2048;
    foreach (x_vec[i]) x_vec[i] = '0;
    cfg = '0;
    set_cfg(16, 32, 16, 0, 0, 0, 0, 0);
    repeat (2) @(negedge clk);
    rst_n = 1;

    // OPIUM, reconstruction mode, full size
    mdl.init(rc);
    command(0, cyc);
    train(12, 150);
    lat = 2 + 32 * 17 + 1 + 32 * 16 + 2 + 16 + 1;
    infer(0, 32'hffffffff, "infer healthy", lat);
    infer(0, 0, "infer th=0", lat);
    infer(3000, 1000, "infer offset", lat);
    infer(0, mdl.sq_err, "infer th=err", lat);
    // reduced precision and other windows (model unchanged)
    for (int dp = 0; dp < 3; dp++)
      for (int wb = 0; wb < 5; wb++) begin
        set_cfg(16, 32, 16, 0, 0, 0, dp, wb);
        infer(0, 5000, $sformatf("prec dp=%0d wb=%0d", dp, wb), lat);
      end
    set_cfg(16, 32, 16, 0, 0, 1, 0, 0);
    infer(0, 5000, "acc_sel 1", lat);
    set_cfg(16, 32, 16, 0, 0, 0, 0, 0);
    // clock gating stretches but does not change the result
    gate_mode = 1;
    threshold = 32'd2000;
    new_sample(200, 0);
    mdl.forward(rc, xs, 0, 2000);
    command(2, cyc);
    gate_mode = 0; en = 1;
    compare("gated");
    checks++;
    if (cyc <= lat) begin failures++; $display("FAIL gated latency %0d", cyc); end

    // OPIUM-Lite, smaller network
    set_cfg(12, 20, 12, 0, 1, 0, 0, 0);
    mdl.init(rc);
    command(0, cyc);
    train(8, 150);
    infer(0, 3000, "lite", 2 + 20 * 13 + 1 + 20 * 12 + 2 + 12 + 1);
    checks++;
    if (theta_active) begin failures++; $display("FAIL theta active"); end

    // boundary mode: one output, target 1.0
    set_cfg(16, 32, 1, 1, 0, 0, 0, 0);
    mdl.init(rc);
    command(0, cyc);
    train(10, 150);
    infer(0, 500, "boundary", 2 + 32 * 17 + 1 + 32 + 2 + 1 + 1);
    infer(5000, 500, "boundary far", 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
