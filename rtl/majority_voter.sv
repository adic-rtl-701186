// majority_voter: ensemble decision of the active base learners.
//
// Counts the anomaly decisions D_i of the BLs selected by 'active'
// (T = sum of D_i) and declares the ensemble vote an anomaly when
// T >= (N+1)/2, N being the number of active BLs; this is the majority rule
// of the ADEPOS algorithm, which keeps N odd so that ties cannot occur.
// Purely combinational.
module majority_voter #(
  parameter int unsigned NBL = 7,
  localparam int unsigned CW = $clog2(NBL + 1)
) (
  input  logic [NBL-1:0] decision,
  input  logic [NBL-1:0] active,
  output logic [CW-1:0]  votes,     // T
  output logic [CW-1:0]  n_active,  // N
  output logic           anomaly    // T >= (N+1)/2
);

  always_comb begin
    votes    = '0;
    n_active = '0;
    for (int b = 0; b < NBL; b++) begin
      votes    = votes    + CW'(decision[b] & active[b]);
      n_active = n_active + CW'(active[b]);
    end
  end

  // T >= (N+1)/2 with integer division  <=>  2T >= N+1 for odd N
  assign anomaly = (n_active != '0) &&
                   ({1'b0, votes, 1'b0} >= ({2'b00, n_active} + 1'b1));

endmodule
