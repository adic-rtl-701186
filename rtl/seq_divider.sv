// seq_divider: signed sequential divider used for the OPIUM learning rate
// eta_j = (theta h)_j / (1 + h' theta h).
//
// Restoring division on magnitudes, one quotient bit per clock: 'start'
// loads numerator and denominator, 'done' pulses W+1 cycles later with the
// quotient truncated toward zero. The denominator must be non-zero (the
// caller clamps it). Division hardware is not described for the chip; a
// radix-2 sequential divider is this design's choice as the smallest unit
// that does the job, since only L divisions are needed per training sample.
// Lint note: the top bit of the magnitude quotient and of the partial
// remainder are never read, as a W-bit signed quotient of magnitudes always
// fits in W-1 bits and the remainder keeps one guard bit.
module seq_divider #(
  parameter int unsigned W = 32
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic                start,
  input  logic signed [W-1:0] num,
  input  logic signed [W-1:0] den,
  output logic                busy,
  output logic                done,
  output logic signed [W-1:0] quo
);

  logic [W-1:0]         n_mag, d_mag, q;
  logic [W:0]           rem;
  logic                 neg;
  logic [$clog2(W+1)-1:0] cnt;
  logic [W:0]           trial;

  assign trial = {rem[W-1:0], n_mag[W-1]} - {1'b0, d_mag};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      n_mag <= '0; d_mag <= '0; q <= '0; rem <= '0; neg <= 1'b0; cnt <= '0;
      quo <= '0;
    end else if (en) begin
      done <= 1'b0;
      if (start && !busy) begin
        n_mag <= num[W-1] ? W'(-num) : W'(num);
        d_mag <= den[W-1] ? W'(-den) : W'(den);
        neg   <= num[W-1] ^ den[W-1];
        rem   <= '0;
        q     <= '0;
        cnt   <= '0;
        busy  <= 1'b1;
      end else if (busy) begin
        if (!trial[W]) begin
          rem <= trial;
          q   <= {q[W-2:0], 1'b1};
        end else begin
          rem <= {rem[W-1:0], n_mag[W-1]};
          q   <= {q[W-2:0], 1'b0};
        end
        n_mag <= {n_mag[W-2:0], 1'b0};
        cnt   <= cnt + 1'b1;
        if (cnt == ($clog2(W+1))'(W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          quo  <= neg ? -$signed((!trial[W]) ? {q[W-2:0], 1'b1} : {q[W-2:0], 1'b0})
                      :  $signed((!trial[W]) ? {q[W-2:0], 1'b1} : {q[W-2:0], 1'b0});
        end
      end
    end
  end

endmodule
