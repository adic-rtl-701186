// tb_majority_voter: exhaustive check over all decision and active masks of
// the vote count, the active count and the majority rule T >= (N+1)/2.
module tb_majority_voter;
  logic [6:0] decision, active;
  logic [2:0] votes, n_active;
  logic anomaly;
  int checks = 0, failures = 0;

  majority_voter #(.NBL(7)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, n, exp_a;
    for (int a = 0; a < 128; a++)
      for (int d = 0; d < 128; d++) begin
        decision = 7'(d); active = 7'(a);
        #1;
        t = $countones(d & a);
        n = $countones(a);
        exp_a = (n > 0) && (2 * t >= n + 1);  // T >= (N+1)/2 taken as a real-valued bound
        checks++;
        if (votes != 3'(t) || n_active != 3'(n) || anomaly != exp_a[0]) begin
          failures++;
          if (failures < 5) $display("FAIL a=%b d=%b: %0d %0d %0d", active, decision, votes,
                                     n_active, anomaly);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
