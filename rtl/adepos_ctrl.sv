// adepos_ctrl: ensemble controller of the chip. It starts and clock-enables
// the base learners, collects their decisions, votes, and in adaptive mode
// runs the ADEPOS algorithm that decides how many BLs take part.
//
// ADEPOS (approximate computing by a variable ensemble size): the number of
// active BLs N starts at 1. For each sample the first N BLs run and vote.
//  - If fewer than (N+1)/2 flag an anomaly, the sample is healthy; N drops
//    by 2 (not below 1) for the next sample.
//  - Otherwise, if N < K, N grows by 2 and the same sample is run again by
//    the larger ensemble; if N = K the anomaly is confirmed: the sticky
//    'anomaly' output (O_e) is set.
// In fixed mode ('adaptive' low) the first n_fixed BLs always run and vote.
// Idle BLs have their clock enable low; during init and training all K BLs
// run, since ADEPOS needs every BL trained.
//
// Commands are one-cycle pulses accepted while idle. 'done' pulses when a
// command has finished; for inference 'vote', 'votes', 'n_used' and
// 'rounds' (how many ensemble passes the sample took) are then valid, and
// n_cur holds the ensemble size for the next sample. 'clear' resets the
// anomaly flag and N.
//
// The algorithm is the paper's; running it in hardware on the chip rather
// than on the host, the command interface and the handshake are this
// design's choices.
// Lint note: rst_n also appears in the 'disable iff' of the assertions
// below, which lint reports as a reset used both synchronously and
// asynchronously; the logic itself only uses it as an asynchronous reset.
module adepos_ctrl #(
  parameter int unsigned NBL = 7,
  localparam int unsigned CW = $clog2(NBL + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cmd_init,
  input  logic           cmd_train,
  input  logic           cmd_infer,
  input  logic           cmd_clear,
  input  logic           adaptive,
  input  logic [CW-1:0]  n_fixed,     // odd, 1..NBL
  input  logic [NBL-1:0] bl_done,
  input  logic [NBL-1:0] bl_decision,
  output logic [NBL-1:0] bl_en,       // per-BL clock enable
  output logic           bl_init,
  output logic           bl_train,
  output logic           bl_infer,
  output logic           busy,
  output logic           done,
  output logic           vote,
  output logic [CW-1:0]  votes,
  output logic [CW-1:0]  n_used,
  output logic [CW-1:0]  n_cur,
  output logic [3:0]     rounds,
  output logic           anomaly,
  output logic [NBL-1:0] decisions
);

  typedef enum logic [2:0] {A_IDLE, A_START, A_WAIT, A_VOTE, A_DONE} astate_e;
  typedef enum logic [1:0] {OP_INIT, OP_TRAIN, OP_INFER} op_e;

  astate_e        state;
  op_e            op;
  logic [NBL-1:0] mask, seen;
  logic [CW-1:0]  v_votes, v_n;
  logic           v_anom;

  function automatic logic [NBL-1:0] first_n(input logic [CW-1:0] n);
    logic [NBL-1:0] r;
    for (int b = 0; b < NBL; b++) r[b] = (b < int'(n));
    return r;
  endfunction

  majority_voter #(.NBL(NBL)) u_vote (
    .decision(bl_decision), .active(mask), .votes(v_votes), .n_active(v_n),
    .anomaly(v_anom)
  );

  assign busy     = (state != A_IDLE) && (state != A_DONE);
  assign bl_en    = (state == A_START || state == A_WAIT) ? mask : '0;
  assign bl_init  = (state == A_START) && (op == OP_INIT);
  assign bl_train = (state == A_START) && (op == OP_TRAIN);
  assign bl_infer = (state == A_START) && (op == OP_INFER);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= A_IDLE;
      op        <= OP_INIT;
      mask      <= '0;
      seen      <= '0;
      done      <= 1'b0;
      vote      <= 1'b0;
      votes     <= '0;
      n_used    <= '0;
      n_cur     <= CW'(1);
      rounds    <= '0;
      anomaly   <= 1'b0;
      decisions <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        A_IDLE: begin
          seen <= '0;
          if (cmd_clear) begin
            anomaly <= 1'b0;
            n_cur   <= CW'(1);
          end else if (cmd_init || cmd_train) begin
            op    <= cmd_init ? OP_INIT : OP_TRAIN;
            mask  <= '1;
            state <= A_START;
          end else if (cmd_infer) begin
            op     <= OP_INFER;
            mask   <= first_n(adaptive ? n_cur : n_fixed);
            rounds <= 4'd1;
            state  <= A_START;
          end
        end
        A_START: state <= A_WAIT;
        A_WAIT: begin
          seen <= seen | bl_done;
          if (((seen | bl_done) & mask) == mask)
            state <= (op == OP_INFER) ? A_VOTE : A_DONE;
        end
        A_VOTE: begin
          vote      <= v_anom;
          votes     <= v_votes;
          n_used    <= v_n;
          decisions <= bl_decision & mask;
          state     <= A_DONE;
          if (adaptive) begin
            if (!v_anom) begin
              if (n_cur != CW'(1)) n_cur <= n_cur - CW'(2);
            end else if (n_cur != CW'(NBL)) begin
              // escalate: same sample, two more BLs
              n_cur  <= n_cur + CW'(2);
              mask   <= first_n(n_cur + CW'(2));
              rounds <= rounds + 1'b1;
              seen   <= '0;
              state  <= A_START;
            end else begin
              anomaly <= 1'b1;
            end
          end
        end
        A_DONE: begin
          done  <= 1'b1;
          state <= A_IDLE;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  // an ensemble size is always odd and within 1..NBL
  a_n_odd: assert property (@(posedge clk) disable iff (!rst_n)
                            n_cur[0] && (n_cur <= CW'(NBL)));

endmodule
