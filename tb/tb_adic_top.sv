// tb_adic_top: end-to-end test of the whole chip at its default size (7 BLs,
// d = 16, L = 32, m = 16), driven only through the MSP430-style bus, and
// checked against seven instances of the integer reference model plus a
// model of the ADEPOS controller.
//
// Sequence: init; OPIUM training on noisy copies of a "healthy" pattern;
// thresholds set from the trained models; ADEPOS inference on healthy
// samples (one BL suffices), on a BL with a hair-trigger threshold (the
// ensemble grows to 3 and shrinks back) and on faulty samples (the ensemble
// grows to 7 and confirms the anomaly); clearing; fixed-size inference at
// reduced precision; then OPIUM-Lite training (theta memories must stay
// idle) and boundary-mode training and inference. For every sample the
// status word (vote, N, passes, BL decisions, anomaly) and the selected BL's
// x~ and error are compared with the models. Each mechanism is counted and
// must occur at least once.
module tb_adic_top;
  import adic_pkg::*;
  import adic_ref_pkg::*;

  localparam int NBL = 7;
  logic clk = 0, rst_n = 0;
  logic per_en = 0;
  logic [1:0] per_we = 0;
  logic [13:0] per_addr = 0;
  logic [15:0] per_din = 0, per_dout;
  logic anomaly;
  logic [NBL-1:0] bl_clk_en, theta_mem_on;
  int checks = 0, failures = 0;

  adic_top dut (.*);
  always #5 clk = ~clk;

  // mechanism counters
  int n_init = 0, n_train_opium = 0, n_train_lite = 0, n_infer_adepos = 0,
      n_infer_fixed = 0, n_escalate = 0, n_shrink = 0, n_confirm = 0, n_clear = 0,
      n_boundary = 0, n_reduced_prec = 0, n_gated_bl = 0, n_theta_idle = 0;
  int theta_on_cycles = 0;
  always @(posedge clk) if (theta_mem_on != '0) theta_on_cycles++;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bl_model mdl [NBL];
  rcfg_t rc;
  int pattern [16];
  int xs [16];
  longint th [NBL];
  int n_model = 1;
  bit in_cmd = 0;
  bit anom_model = 0;

  task automatic wr(input int a, input int d);
    @(negedge clk);
    per_en = 1; per_we = 2'b11; per_addr = 14'(a); per_din = 16'(d);
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

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // issue a command and poll STATUS until the result is valid
  task automatic command(input int bits_, output logic [15:0] status);
    wr(0, bits_);
    do rd(1, status); while (status[0] || !status[1]);
  endtask

  task automatic set_cfg(int l, int m, bit boundary, bit lite, bit adaptive, int nfix,
                         int dp, int wb);
    rc = '{d: 16, l: l, m: m, boundary: boundary, lite: lite, acc_sel: 0, dp_code: dp,
           wb_code: wb, theta0: 4096};
    wr(3, l); wr(4, m);
    wr(5, (nfix << 4) | (adaptive << 2) | (lite << 1) | boundary);
    wr(6, (wb << 4) | (dp << 2));
  endtask

  task automatic set_threshold(input int b, input longint t);
    th[b] = t;
    wr(16'h30 + 2 * b, int'(t & 16'hffff));
    wr(16'h31 + 2 * b, int'((t >> 16) & 16'hffff));
  endtask

  task automatic new_sample(input int noise, input int offset);
    for (int i = 0; i < 16; i++) begin
      xs[i] = pattern[i] + int'($urandom_range(0, 2 * noise)) - noise + offset;
      wr(16'h10 + i, xs[i]);
    end
  endtask

  task automatic check_bl(input int b, input string tag);
    logic [15:0] v, lo, hi;
    int bad = 0;
    wr(8, b);
    for (int k = 0; k < rc.m; k++) begin
      rd(16'h40 + k, v);
      if (int'($signed(v)) != mdl[b].xhat[k]) bad++;
    end
    rd(16'h50, lo); rd(16'h51, hi);
    if (longint'({hi, lo}) != mdl[b].sq_err) bad++;
    rd(16'h52, v);
    if (v[0] != mdl[b].decision) bad++;
    chk(bad == 0, $sformatf("%s BL%0d outputs (%0d mismatches, err %0d vs %0d)", tag, b,
                            bad, {hi, lo}, mdl[b].sq_err));
  endtask

  task automatic do_init();
    logic [15:0] st;
    foreach (mdl[b]) mdl[b].init(rc);
    command(1, st);
    n_init++;
  endtask

  task automatic do_train(input int n, input int noise);
    logic [15:0] st;
    for (int s = 0; s < n; s++) begin
      new_sample(noise, 0);
      foreach (mdl[b]) begin
        mdl[b].forward(rc, xs, 1, th[b]);
        mdl[b].learn(rc);
      end
      theta_on_cycles = 0;
      command(2, st);
      if (rc.lite) begin
        n_train_lite++;
        if (theta_on_cycles == 0) n_theta_idle++;
        chk(theta_on_cycles == 0, "theta memories idle in OPIUM-Lite training");
      end else begin
        n_train_opium++;
        chk(theta_on_cycles > 0, "theta memories used in OPIUM training");
      end
      if (s == n - 1) check_bl(s % NBL, "train");
    end
  endtask

  // one inference command; returns the vote
  task automatic do_infer(input bit adaptive, input int nfix, input string tag);
    logic [15:0] st, rounds_r;
    int n, nn, passes, v;
    bit esc, conf, vt;
    logic [NBL-1:0] dec, en_seen;
    foreach (mdl[b]) mdl[b].forward(rc, xs, 0, th[b]);
    for (int b = 0; b < NBL; b++) dec[b] = mdl[b].decision;
    passes = 0;
    if (adaptive) begin
      n = n_model;
      do begin
        v = $countones(dec & 7'((1 << n) - 1));
        adepos_step(n, v, NBL, nn, esc, conf, vt);
        passes++;
        if (esc) begin n_escalate++; n = nn; end
      end while (esc);
      if (!vt && nn < n) n_shrink++;
      if (conf) begin n_confirm++; anom_model = 1; end
      n_model = nn;
      n_infer_adepos++;
    end else begin
      n = nfix;
      v = $countones(dec & 7'((1 << n) - 1));
      vt = (2 * v >= n + 1);
      passes = 1;
      n_infer_fixed++;
    end
    en_seen = '0;
    in_cmd = 1;
    fork
      begin command(4, st); in_cmd = 0; end
      while (in_cmd) begin @(negedge clk); en_seen |= bl_clk_en; end
    join
    if (en_seen != '1) n_gated_bl++;
    rd(9, rounds_r);
    chk(st[3] == vt, $sformatf("%s vote %0d expected %0d", tag, st[3], vt));
    chk(st[14:8] == (dec & 7'((1 << n) - 1)), $sformatf("%s decisions %b expected %b", tag,
        st[14:8], dec & 7'((1 << n) - 1)));
    chk(rounds_r[3:0] == 4'(passes), $sformatf("%s passes %0d expected %0d", tag,
        rounds_r[3:0], passes));
    chk(rounds_r[6:4] == 3'(n), $sformatf("%s BLs used %0d expected %0d", tag,
        rounds_r[6:4], n));
    chk(en_seen == 7'((1 << n) - 1), $sformatf("%s clock-enabled BLs %b", tag, en_seen));
    chk(rounds_r[10:8] == 3'($countones(dec & 7'((1 << n) - 1))),
        $sformatf("%s votes %0d", tag, rounds_r[10:8]));
    if (adaptive) begin
      chk(st[6:4] == 3'(n_model), $sformatf("%s next N %0d expected %0d", tag, st[6:4],
                                            n_model));
      chk(st[2] == anom_model && anomaly == anom_model, $sformatf("%s anomaly flag", tag));
    end
    check_bl(0, tag);
  endtask

  initial begin
    logic [15:0] v, st;
    longint mx;
    for (int i = 0; i < 16; i++) pattern[i] = int'($urandom_range(0, 4096)) - 2048;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // the models take the chip's reset seeds, read over the bus
    for (int b = 0; b < NBL; b++) begin
      rd(16'h20 + b, v);
      mdl[b] = new(int'(v));
      th[b] = 64'hffff_ffff;
    end

    // ---- OPIUM training, reconstruction mode, full size ----
    set_cfg(32, 16, 0, 0, 1, 7, 0, 0);
    do_init();
    do_train(10, 120);
    // thresholds: twice the largest error of each BL on fresh healthy data
    for (int b = 0; b < NBL; b++) th[b] = 0;
    for (int s = 0; s < 6; s++) begin
      for (int i = 0; i < 16; i++) xs[i] = pattern[i] + int'($urandom_range(0, 240)) - 120;
      foreach (mdl[b]) begin
        mdl[b].forward(rc, xs, 0, 0);
        if (mdl[b].sq_err > th[b]) th[b] = mdl[b].sq_err;
      end
    end
    for (int b = 0; b < NBL; b++) set_threshold(b, 2 * th[b] + 16);

    // ---- ADEPOS inference ----
    for (int s = 0; s < 4; s++) begin
      new_sample(100, 0);
      do_infer(1, 7, $sformatf("healthy %0d", s));
    end
    // hair-trigger BL1: ensemble grows to 3 and shrinks back
    mx = th[0];
    set_threshold(0, 0);
    for (int s = 0; s < 2; s++) begin
      new_sample(100, 0);
      do_infer(1, 7, $sformatf("hair-trigger %0d", s));
    end
    set_threshold(0, mx);
    // faulty samples: far from the healthy pattern
    for (int s = 0; s < 3 && !anom_model; s++) begin
      new_sample(100, 12000);
      do_infer(1, 7, $sformatf("faulty %0d", s));
    end
    chk(anomaly == 1, "anomaly confirmed on faulty data");
    wr(0, 8);
    anom_model = 0; n_model = 1; n_clear++;
    #1 chk(anomaly == 0, "anomaly cleared");

    // ---- fixed ensemble, full and reduced precision ----
    set_cfg(32, 16, 0, 0, 0, 7, 0, 0);
    new_sample(100, 0);
    do_infer(0, 7, "fixed 7");
    set_cfg(32, 16, 0, 0, 0, 5, 1, 4);
    new_sample(100, 0);
    do_infer(0, 5, "fixed 5 12-bit/8-bit");
    n_reduced_prec++;
    set_cfg(32, 16, 0, 0, 0, 3, 2, 2);
    new_sample(100, 6000);
    do_infer(0, 3, "fixed 3 8-bit/4-bit");
    n_reduced_prec++;

    // ---- OPIUM-Lite training ----
    set_cfg(32, 16, 0, 1, 1, 7, 0, 0);
    for (int b = 0; b < NBL; b++) set_threshold(b, 64'hffff_ffff);
    do_init();
    do_train(6, 120);
    new_sample(100, 0);
    do_infer(1, 7, "lite infer");

    // ---- boundary mode (ELM-B): one output, target 1.0 ----
    set_cfg(32, 1, 1, 0, 0, 7, 0, 0);
    for (int b = 0; b < NBL; b++) set_threshold(b, 200);
    do_init();
    do_train(6, 120);
    new_sample(100, 0);
    do_infer(0, 7, "boundary healthy");
    new_sample(100, 9000);
    do_infer(0, 7, "boundary faulty");
    n_boundary++;

    $display("mechanisms: init %0d opium-train %0d lite-train %0d adepos-infer %0d fixed-infer %0d",
             n_init, n_train_opium, n_train_lite, n_infer_adepos, n_infer_fixed);
    $display("            escalate %0d shrink %0d confirm %0d clear %0d boundary %0d",
             n_escalate, n_shrink, n_confirm, n_clear, n_boundary);
    $display("            reduced-precision %0d gated-BL %0d theta-idle %0d",
             n_reduced_prec, n_gated_bl, n_theta_idle);
    chk(n_init > 0, "init happened");
    chk(n_train_opium > 0, "OPIUM training happened");
    chk(n_train_lite > 0, "OPIUM-Lite training happened");
    chk(n_infer_adepos > 0, "ADEPOS inference happened");
    chk(n_infer_fixed > 0, "fixed inference happened");
    chk(n_escalate > 0, "ensemble escalation happened");
    chk(n_shrink > 0, "ensemble shrink happened");
    chk(n_confirm > 0, "anomaly confirmation happened");
    chk(n_clear > 0, "clear happened");
    chk(n_boundary > 0, "boundary mode happened");
    chk(n_reduced_prec > 0, "reduced precision happened");
    chk(n_gated_bl > 0, "BL clock gating happened");
    chk(n_theta_idle > 0, "theta memory idle happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
