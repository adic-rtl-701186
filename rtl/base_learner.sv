// base_learner: one extreme-learning-machine one-class classifier (BL) of
// the ensemble: PRBS, TDM hidden neuron, TDM output neuron and the online
// learning module, sequenced by a small controller.
//
// For an input sample x (d features) the BL computes the hidden layer
// h_j = ReLU(sum_i W_ji x_i + b_j) for j = 1..L with W and b regenerated by
// the PRBS from the BL's seed, then the output layer x~_k = sum_j beta_jk h_j
// for k = 1..m, then the squared reconstruction error
// err = sum_k (t_k - x~_k)^2, where the target t is x itself (reconstruction
// mode, m = d) or 1.0 for every output (boundary mode, m = 1). The decision
// is err > threshold. In training the error vector t - x~ and h are then
// handed to the online learning module, which updates beta (and theta).
//
// Approximate computing: in inference the datapath operands are cut to
// cfg.dp_prec bits and the PRBS words to cfg.wb_prec bits; training always
// runs at 16 bits. 'en' is the BL's clock enable: an inactive BL is frozen,
// which is how the ensemble controller models clock gating of idle BLs.
//
// Commands (one-cycle pulses while idle): start_init clears beta and sets
// theta = theta0*I; start_infer runs one inference; start_train runs the
// forward pass and one OPIUM (or OPIUM-Lite) update. 'done' pulses when a
// command completes; decision, err and xhat_vec then hold until the next one.
//
// Timing of the forward pass: 1 (seed) + L*(d+1) (hidden layer, bias plus d
// products per node, one product per clock) + 1 + L*m + 2 (output layer)
// + m (error) + 1 cycles, plus the cycle that accepts the command: 1078
// cycles for d = 16, L = 32, m = 16, in line
// with the chip's figure of about 1000 cycles per BL decision.
//
// From the chip: the block structure, the TDM neurons, one product per
// clock, the dataflow order x, H, X~, eta, theta, beta, the per-BL seed and
// threshold, the squared-error-versus-threshold decision, the bit-precision
// controls. Own choices: the error definition in fixed point
// (sum of (e_k^2 >> 12)), the PRBS word order (b_j then W_j1..W_jd for each
// node j), and the command/handshake interface.
// Lint note: the neurons' raw accumulator outputs are left unread here;
// they exist for observation in unit tests.
// Lint note: rst_n also appears in the 'disable iff' of the assertions
// below, which lint reports as a reset used both synchronously and
// asynchronously; the logic itself only uses it as an asynchronous reset.
module base_learner
  import adic_pkg::*;
#(
  parameter int unsigned DMAX = adic_pkg::D_MAX,
  parameter int unsigned LMAX = adic_pkg::L_MAX,
  parameter int unsigned MMAX = adic_pkg::M_MAX,
  localparam int unsigned DW_I = $clog2(DMAX + 1),
  localparam int unsigned LW   = $clog2(LMAX),
  localparam int unsigned MW   = $clog2(MMAX)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  cfg_t              cfg,
  input  logic [15:0]       seed,
  input  logic [ERRW-1:0]   threshold,
  input  word_t             x_vec [DMAX],
  input  logic              start_init,
  input  logic              start_train,
  input  logic              start_infer,
  output logic              busy,
  output logic              done,
  output logic              decision,
  output logic [ERRW-1:0]   err,
  output word_t             xhat_vec [MMAX],
  output logic              theta_active
);

  typedef enum logic [3:0] {
    B_IDLE, B_INIT, B_SEED, B_HID, B_HID_TAIL, B_OUT, B_OUT_W1, B_OUT_W2,
    B_ERR, B_LEARN, B_LEARN_WAIT, B_DONE
  } bstate_e;

  bstate_e state;
  logic    training;

  logic [LW-1:0]   j, oj;
  logic [DW_I-1:0] i;
  logic [MW-1:0]   k, ok, cap_k;
  logic            ov, cap;

  word_t h_buf [LMAX];
  word_t e_buf [MMAX];

  logic [LW-1:0] l_last;
  logic [MW-1:0] m_last;
  assign l_last = LW'(cfg.l - 8'd1);
  assign m_last = MW'(cfg.m - 8'd1);

  // precision of this pass
  logic [4:0] dp_b, wb_b;
  assign dp_b = training ? 5'd16 : 5'(dp_bits(cfg.dp_prec));
  assign wb_b = training ? 5'd16 : 5'(wb_bits(cfg.wb_prec));

  // PRBS
  logic  prbs_load, prbs_step;
  word_t prbs_word;
  prbs u_prbs (
    .clk, .rst_n, .en, .load(prbs_load), .step(prbs_step), .seed, .bits(wb_b),
    .word(prbs_word)
  );

  // hidden neuron
  logic  hn_bias, hn_mac;
  word_t hn_x, hn_h;
  acc_t  hn_acc;
  assign hn_bias = (state == B_HID) && (i == '0);
  assign hn_mac  = (state == B_HID) && (i != '0);
  assign hn_x    = (i != '0) ? x_vec[($clog2(DMAX))'(i - 1'b1)] : '0;
  tdm_hidden_neuron u_hid (
    .clk, .rst_n, .en, .load_bias(hn_bias), .mac(hn_mac), .x(hn_x), .w(prbs_word),
    .b(prbs_word), .bits(dp_b), .acc_sel(cfg.acc_sel), .acc(hn_acc), .h(hn_h)
  );

  assign prbs_load = (state == B_SEED);
  assign prbs_step = (state == B_HID);

  // online learning (owns theta and beta)
  logic  ol_busy, ol_done, ol_init, ol_learn;
  word_t beta_rdata;
  assign ol_init  = (state == B_INIT);
  assign ol_learn = (state == B_LEARN);
  online_learning #(.LMAX(LMAX), .MMAX(MMAX)) u_ol (
    .clk, .rst_n, .en, .cfg, .start_init(ol_init), .start_learn(ol_learn),
    .h_vec(h_buf), .e_vec(e_buf), .beta_raddr({j, k}), .beta_rd(state == B_OUT),
    .beta_rdata, .busy(ol_busy), .done(ol_done), .theta_active
  );

  // output neuron
  word_t on_xhat;
  acc_t  on_acc;
  tdm_output_neuron u_out (
    .clk, .rst_n, .en, .mac(ov), .first(oj == '0), .beta(beta_rdata), .h(h_buf[oj]),
    .bits(dp_b), .acc_sel(cfg.acc_sel), .acc(on_acc), .xhat(on_xhat)
  );

  // error term of output k
  word_t tgt, e_k;
  acc_t  e_sq;
  assign tgt  = cfg.boundary ? ONE : x_vec[k];
  assign e_k  = sat16(acc_t'(tgt) - acc_t'(xhat_vec[k]));
  assign e_sq = (acc_t'(e_k) * acc_t'(e_k)) >>> FRAC;

  assign busy = (state != B_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= B_IDLE;
      training <= 1'b0;
      j <= '0; i <= '0; k <= '0;
      oj <= '0; ok <= '0; ov <= 1'b0;
      cap <= 1'b0; cap_k <= '0;
      done     <= 1'b0;
      decision <= 1'b0;
      err      <= '0;
      for (int n = 0; n < LMAX; n++) h_buf[n] <= '0;
      for (int n = 0; n < MMAX; n++) begin
        e_buf[n]    <= '0;
        xhat_vec[n] <= '0;
      end
    end else if (en) begin
      done <= 1'b0;
      // output layer pipeline: product one cycle after the beta read
      ov    <= (state == B_OUT);
      oj    <= j;
      ok    <= k;
      cap   <= ov && (oj == l_last);
      cap_k <= ok;
      if (cap) xhat_vec[cap_k] <= on_xhat;

      unique case (state)
        B_IDLE: begin
          j <= '0; i <= '0; k <= '0;
          if (start_init) begin
            state <= B_INIT;
          end else if (start_train || start_infer) begin
            training <= start_train;
            state    <= B_SEED;
          end
        end
        B_INIT:       state <= B_LEARN_WAIT;
        B_SEED:       state <= B_HID;
        B_HID: begin
          if (i == '0 && j != '0) h_buf[j - 1'b1] <= hn_h;
          if (i == DW_I'(cfg.d)) begin
            i <= '0;
            if (j == l_last) begin
              state <= B_HID_TAIL;
            end else begin
              j <= j + 1'b1;
            end
          end else begin
            i <= i + 1'b1;
          end
        end
        B_HID_TAIL: begin
          h_buf[j] <= hn_h;
          j     <= '0;
          k     <= '0;
          state <= B_OUT;
        end
        B_OUT: begin
          if (j == l_last) begin
            j <= '0;
            if (k == m_last) begin
              k     <= '0;
              state <= B_OUT_W1;
            end else begin
              k <= k + 1'b1;
            end
          end else begin
            j <= j + 1'b1;
          end
        end
        B_OUT_W1: state <= B_OUT_W2;
        B_OUT_W2: begin
          k     <= '0;
          err   <= '0;
          state <= B_ERR;
        end
        B_ERR: begin
          e_buf[k] <= e_k;
          err      <= err + ERRW'(e_sq);
          if (k == m_last) begin
            k     <= '0;
            state <= training ? B_LEARN : B_DONE;
          end else begin
            k <= k + 1'b1;
          end
        end
        B_LEARN:      state <= B_LEARN_WAIT;
        B_LEARN_WAIT: if (ol_done) state <= B_DONE;
        B_DONE: begin
          decision <= (err > threshold);
          done     <= 1'b1;
          state    <= B_IDLE;
        end
        default: state <= B_IDLE;
      endcase
    end
  end

  // the learning engine only runs inside a command of this BL
  a_learn_in_cmd: assert property (@(posedge clk) disable iff (!rst_n)
                                   ol_busy |-> busy);

endmodule
