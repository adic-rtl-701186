// tb_adepos_ctrl: the ensemble controller with behavioural base learners
// that answer a start after a random delay with a decision chosen by the
// testbench. Checks, against a step-by-step model of the ADEPOS algorithm,
// the set of clock-enabled BLs, the number of passes per sample
// (escalation), the vote, N for the next sample (growth and shrinking), the
// confirmed-anomaly flag and its clearing, the fixed-N mode, and that init
// and training start all BLs.
module tb_adepos_ctrl;
  import adic_ref_pkg::*;
  localparam int NBL = 7;
  logic clk = 0, rst_n = 0;
  logic cmd_init = 0, cmd_train = 0, cmd_infer = 0, cmd_clear = 0, adaptive = 1;
  logic [2:0] n_fixed = 3'd7;
  logic [NBL-1:0] bl_done = '0, bl_decision = '0;
  logic [NBL-1:0] bl_en, decisions;
  logic bl_init, bl_train, bl_infer, busy, done, vote, anomaly;
  logic [2:0] votes, n_used, n_cur;
  logic [3:0] rounds;
  int checks = 0, failures = 0;
  logic [NBL-1:0] want;     // decision each BL will return
  int starts [NBL];
  int cnt_escalate = 0, cnt_shrink = 0, cnt_confirm = 0;

  adepos_ctrl #(.NBL(NBL)) dut (.*);
  always #5 clk = ~clk;

  // behavioural BLs
  for (genvar b = 0; b < NBL; b++) begin : g_bl
    initial begin
      forever begin
        @(posedge clk);
        if (bl_en[b] && (bl_init || bl_train || bl_infer)) begin
          starts[b]++;
          repeat ($urandom_range(3, 20)) @(posedge clk);
          #1 bl_decision[b] = want[b];
          bl_done[b] = 1;
          @(posedge clk);
          #1 bl_done[b] = 0;
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic cmd(input int which);
    @(negedge clk);
    case (which)
      0: cmd_init = 1;
      1: cmd_train = 1;
      2: cmd_infer = 1;
      default: cmd_clear = 1;
    endcase
    @(negedge clk);
    cmd_init = 0; cmd_train = 0; cmd_infer = 0; cmd_clear = 0;
    if (which != 3) while (busy || !done) @(negedge clk);
  endtask

  initial begin
    int n, n_next, passes, v, maxen;
    bit esc, conf, vt, anom_model;
    logic [NBL-1:0] en_seen;
    foreach (starts[b]) starts[b] = 0;
    want = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(bl_en == '0, "all BLs gated at idle");
    cmd(0);
    foreach (starts[b]) chk(starts[b] == 1, "init starts every BL");
    cmd(1);
    foreach (starts[b]) chk(starts[b] == 2, "train starts every BL");

    // adaptive inference on random decision patterns
    n = 1; anom_model = 0;
    for (int s = 0; s < 300; s++) begin
      // mostly healthy, sometimes bursts of anomalies
      if (s % 40 < 30) want = 7'($urandom) & 7'($urandom) & 7'($urandom);
      else want = 7'($urandom) | 7'($urandom);
      if (s % 97 == 96) want = '1;
      // model: run until not escalating
      passes = 0;
      do begin
        v = $countones(want & 7'((1 << n) - 1));
        adepos_step(n, v, NBL, n_next, esc, conf, vt);
        passes++;
        if (esc) cnt_escalate++;
        if (!vt && n_next < n) cnt_shrink++;
        if (conf) begin cnt_confirm++; anom_model = 1; end
        if (esc) n = n_next;
      end while (esc);
      if (!esc) n = n_next;
      en_seen = '0;
      fork
        cmd(2);
        begin
          @(negedge clk);
          while (!done) begin @(negedge clk); en_seen |= bl_en; end
        end
      join
      chk(rounds == 4'(passes), $sformatf("sample %0d passes %0d vs %0d", s, rounds, passes));
      chk(vote == vt, $sformatf("sample %0d vote", s));
      chk(n_cur == 3'(n), $sformatf("sample %0d next N %0d vs %0d", s, n_cur, n));
      chk(anomaly == anom_model, $sformatf("sample %0d anomaly flag", s));
      maxen = $countones(en_seen);
      chk(en_seen == 7'((1 << maxen) - 1) && maxen == int'(n_used),
          $sformatf("sample %0d enabled BLs %b", s, en_seen));
      if (anomaly) begin
        cmd(3);
        anom_model = 0; n = 1;
        chk(!anomaly && n_cur == 1, "clear");
      end
    end
    chk(cnt_escalate > 0 && cnt_shrink > 0 && cnt_confirm > 0, "all ADEPOS moves seen");
    $display("escalations %0d shrinks %0d confirmed %0d", cnt_escalate, cnt_shrink, cnt_confirm);

    // fixed mode: always n_fixed BLs, one pass
    adaptive = 0; n_fixed = 3'd5;
    want = 7'b0000111;
    cmd(2);
    chk(rounds == 1 && n_used == 5 && vote == 1, "fixed N=5 vote 3 of 5");
    want = 7'b0000011;
    cmd(2);
    chk(rounds == 1 && n_used == 5 && vote == 0, "fixed N=5 vote 2 of 5");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
