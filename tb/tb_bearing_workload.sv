// tb_bearing_workload: the chip on a bearing-monitoring style workload, run
// at its default size through the bus: d = m = 5 features, L = 32 hidden
// nodes, all 7 BLs, reconstruction mode, ADEPOS on.
//
// The data are generated here, not recorded: five slowly varying
// time-domain features of a vibration signal (RMS, kurtosis, peak-to-peak,
// crest factor, skewness), each a 7-bit signed integer (-64..63) placed in
// the top bits of a Q4.12 word (value v becomes v * 32, so the features span
// +-0.5). A healthy phase has small noise around fixed levels; after
// FAULT_AT samples the RMS, peak-to-peak and kurtosis features drift upward
// and the noise grows, as in a bearing that runs to failure.
//
// For each learning rule (OPIUM, then OPIUM-Lite) the bench
//   * trains all BLs on the first N_TRAIN healthy samples,
//   * sets each BL's threshold on the host side to mean + 4 standard
//     deviations of its squared error over further healthy samples,
//   * streams the rest of the run through ADEPOS inference, comparing every
//     vote, ensemble size, pass count and the anomaly flag with the integer
//     reference model, and stops streaming once the anomaly is confirmed.
// It reports the average number of BL passes per healthy sample (the
// energy proxy of the approximate ensemble) and the sample at which the
// fault was confirmed, and checks that no anomaly is confirmed in the
// healthy phase and that one is confirmed once the drift is large.
module tb_bearing_workload;
  import adic_pkg::*;
  import adic_ref_pkg::*;

  localparam int NBL      = 7;
  localparam int D        = 5;
  localparam int N_TRAIN  = 60;
  localparam int N_CAL    = 20;
  localparam int N_RUN    = 160;
  localparam int FAULT_AT = 200;

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

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bl_model mdl [NBL];
  rcfg_t rc;
  int xs [16];
  longint th [NBL];
  int n_model;
  bit anom_model;
  int n_confirmed_runs = 0, n_escalations = 0;

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

  task automatic command(input int bits_, output logic [15:0] status);
    wr(0, bits_);
    do rd(1, status); while (status[0] || !status[1]);
  endtask

  function automatic int clip7(input int v);
    return v > 63 ? 63 : (v < -64 ? -64 : v);
  endfunction

  // sample t of the run: healthy levels plus noise, drifting after FAULT_AT
  task automatic make_sample(input int t);
    int lvl [D];
    int drift, noise;
    lvl = '{-20, -30, -16, 8, 2};
    drift = (t > FAULT_AT) ? (t - FAULT_AT) : 0;
    noise = 2 + drift / 8;
    for (int i = 0; i < D; i++) begin
      int v;
      v = lvl[i] + int'($urandom_range(0, 2 * noise)) - noise;
      if (i == 0 || i == 2) v += drift;        // RMS, peak-to-peak
      if (i == 1) v += drift / 2;              // kurtosis
      xs[i] = clip7(v) * 32;
    end
    for (int i = D; i < 16; i++) xs[i] = 0;
    for (int i = 0; i < D; i++) wr(16'h10 + i, xs[i]);
  endtask

  task automatic run_rule(input bit lite);
    logic [15:0] v, st, rounds_r;
    longint sum [NBL], sumsq [NBL];
    int passes_healthy = 0, healthy_samples = 0, confirmed_at = -1;
    rc = '{d: D, l: 32, m: D, boundary: 0, lite: lite, acc_sel: 0, dp_code: 0,
           wb_code: 0, theta0: 4096};
    wr(2, D); wr(3, 32); wr(4, D);
    wr(5, (7 << 4) | (1 << 2) | (int'(lite) << 1));
    wr(6, 0);
    for (int b = 0; b < NBL; b++) begin
      th[b] = 64'hffff_ffff;
      wr(16'h30 + 2 * b, 16'hffff); wr(16'h31 + 2 * b, 16'hffff);
    end
    foreach (mdl[b]) mdl[b].init(rc);
    command(1, st);
    // training on the healthy start of the run
    for (int t = 0; t < N_TRAIN; t++) begin
      make_sample(t);
      foreach (mdl[b]) begin
        mdl[b].forward(rc, xs, 1, th[b]);
        mdl[b].learn(rc);
      end
      command(2, st);
    end
    // host-side thresholds: mean + 4 sd of each BL's error on healthy data
    foreach (sum[b]) begin sum[b] = 0; sumsq[b] = 0; end
    for (int t = N_TRAIN; t < N_TRAIN + N_CAL; t++) begin
      make_sample(t);
      foreach (mdl[b]) begin
        mdl[b].forward(rc, xs, 0, 0);
        sum[b] += mdl[b].sq_err;
        sumsq[b] += mdl[b].sq_err * mdl[b].sq_err;
      end
    end
    for (int b = 0; b < NBL; b++) begin
      real mu, sd;
      mu = real'(sum[b]) / N_CAL;
      sd = $sqrt(real'(sumsq[b]) / N_CAL - mu * mu);
      th[b] = longint'(mu + 4.0 * sd) + 8;
      wr(16'h30 + 2 * b, int'(th[b] & 16'hffff));
      wr(16'h31 + 2 * b, int'((th[b] >> 16) & 16'hffff));
    end
    // monitoring with ADEPOS
    wr(0, 8);
    n_model = 1; anom_model = 0;
    for (int t = N_TRAIN + N_CAL; t < N_RUN + FAULT_AT && !anom_model; t++) begin
      int n, nn, passes, votes_;
      bit esc, conf, vt;
      logic [NBL-1:0] dec;
      make_sample(t);
      foreach (mdl[b]) mdl[b].forward(rc, xs, 0, th[b]);
      for (int b = 0; b < NBL; b++) dec[b] = mdl[b].decision;
      n = n_model; passes = 0;
      do begin
        votes_ = $countones(dec & 7'((1 << n) - 1));
        adepos_step(n, votes_, NBL, nn, esc, conf, vt);
        passes++;
        if (esc) begin n = nn; n_escalations++; end
      end while (esc);
      if (conf) begin anom_model = 1; confirmed_at = t; end
      n_model = nn;
      command(4, st);
      rd(9, rounds_r);
      chk(st[3] == vt && st[6:4] == 3'(n_model) && rounds_r[3:0] == 4'(passes) &&
          rounds_r[6:4] == 3'(n) && st[2] == anom_model && anomaly == anom_model,
          $sformatf("sample %0d: status %h rounds %h, model vote %0d N %0d->%0d passes %0d",
                    t, st, rounds_r, vt, n, n_model, passes));
      if (t <= FAULT_AT) begin
        passes_healthy += n;
        healthy_samples++;
        chk(!anom_model, $sformatf("no anomaly confirmed on healthy sample %0d", t));
      end
    end
    chk(anom_model, "fault confirmed during the drift");
    if (anom_model) n_confirmed_runs++;
    $display("%s: healthy samples %0d, mean BLs per healthy sample %0.2f, fault at %0d, confirmed at %0d",
             lite ? "OPIUM-Lite" : "OPIUM", healthy_samples,
             real'(passes_healthy) / healthy_samples, FAULT_AT, confirmed_at);
    chk(real'(passes_healthy) / healthy_samples < 2.0,
        "ADEPOS keeps the ensemble small on healthy data");
  endtask

  initial begin
    logic [15:0] v;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < NBL; b++) begin
      rd(16'h20 + b, v);
      mdl[b] = new(int'(v));
    end
    run_rule(0);
    run_rule(1);
    $display("mechanisms: confirmed runs %0d escalations %0d", n_confirmed_runs, n_escalations);
    chk(n_escalations > 0, "ensemble escalation happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
