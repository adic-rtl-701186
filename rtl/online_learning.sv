// online_learning: OPIUM / OPIUM-Lite training of the output weights beta of
// one base learner, together with the two parameter memories theta (L x L)
// and beta (L x m).
//
// For one training sample, given the hidden activations h (from the forward
// pass) and the output error e = target - x~, it performs
//   p     = theta h                          (L x L products)
//   s     = h' p                             (L products)
//   eta_j = p_j / (1 + s)                    (L divisions)
//   theta = theta - eta p'                   (L x L read-modify-writes)
//   beta  = beta + eta e'                    (L x m read-modify-writes)
// which is the OPIUM rule eta = theta h / (1 + h' theta h),
// beta += eta (x - beta h), theta -= eta h' theta, with theta symmetric so that
// h' theta = p'. The phases follow the order eta, theta, beta of the chip's
// training timeline. In OPIUM-Lite mode ('lite') theta is never read or
// written: it stays at its initial value theta0*I, so p = theta0*h is formed
// without the memory, the theta update is skipped and the theta memory's
// enable stays low for the whole sample.
//
// 'start_init' writes theta = theta0*I (OPIUM only) and beta = 0; it takes
// LMAX*LMAX + 2 cycles. Outside training the beta memory serves the forward pass
// through beta_raddr / beta_rd (one-cycle read latency).
//
// Arithmetic is Q4.12 with 32-bit products summed in 48-bit accumulators
// (the partial sums of p and s exceed 32 bits once h approaches its
// full range); every stored result is saturated to 16 bits, products are
// shifted right by 12 (floor) and 1 + s is clamped to 1 .. 2^31-1. The
// number formats, the sequential divider, the storage layout
// (theta[j][l] at j*LMAX+l, beta[j][k] at j*MMAX+k) and the memory init
// command are this design's choices; the update equations, the frozen-theta
// Lite mode and the memories come from the chip description.
//
// Timing (OPIUM, L hidden, m outputs): L*L+1 (p) + L (s) + L*(W+2) (eta)
// + 2*L*L (theta) + 2*L*m (beta) + 2 cycles; 'done' pulses at the end.
// Lint note: rst_n also appears in the 'disable iff' of the assertions
// below, which lint reports as a reset used both synchronously and
// asynchronously; the logic itself only uses it as an asynchronous reset.
// The engine reads only the size, Lite and theta0 fields of the shared
// configuration struct; its other fields are unused here.
module online_learning
  import adic_pkg::*;
#(
  parameter int unsigned LMAX = adic_pkg::L_MAX,
  parameter int unsigned MMAX = adic_pkg::M_MAX,
  localparam int unsigned TAW = $clog2(LMAX * LMAX),
  localparam int unsigned BAW = $clog2(LMAX * MMAX),
  localparam int unsigned LW  = $clog2(LMAX),
  localparam int unsigned MW  = $clog2(MMAX)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           en,
  input  cfg_t           cfg,
  input  logic           start_init,
  input  logic           start_learn,
  input  word_t          h_vec [LMAX],
  input  word_t          e_vec [MMAX],
  input  logic [BAW-1:0] beta_raddr,
  input  logic           beta_rd,
  output word_t          beta_rdata,
  output logic           busy,
  output logic           done,
  output logic           theta_active   // theta memory enabled this cycle
);

  typedef enum logic [3:0] {
    S_IDLE, S_INIT, S_P, S_P_TAIL, S_P_LITE, S_S, S_DIV_GO, S_DIV_WAIT,
    S_TH_RD, S_TH_WR, S_B_RD, S_B_WR, S_DONE
  } state_e;

  state_e state;

  logic [LW-1:0]  r, c;          // row / column counters
  logic [MW-1:0]  k;
  logic [TAW:0]   init_cnt;
  logic           pv;            // pipelined theta read valid (p phase)
  logic [LW-1:0]  pr, pc;
  lacc_t          acc;
  acc_t           denom;
  lacc_t          s_sum;
  word_t          p   [LMAX];
  word_t          eta [LMAX];

  // theta memory
  logic           th_ce, th_we;
  logic [TAW-1:0] th_addr;
  word_t          th_wdata, th_rdata;
  // beta memory
  logic           b_ce, b_we;
  logic [BAW-1:0] b_addr;
  word_t          b_wdata, b_rdata;

  // divider
  logic           div_start, div_busy, div_done;
  acc_t           div_quo;

  // shared multiplier
  word_t          mul_a, mul_b;
  acc_t           prod;
  lacc_t          acc_next;

  logic [LW-1:0]  l_last;
  logic [MW-1:0]  m_last;
  assign l_last = LW'(cfg.l - 8'd1);
  assign m_last = MW'(cfg.m - 8'd1);

  sp_sram #(.DEPTH(LMAX * LMAX), .WIDTH(DW)) u_theta (
    .clk, .ce(th_ce), .we(th_we), .addr(th_addr), .wdata(th_wdata), .rdata(th_rdata)
  );
  sp_sram #(.DEPTH(LMAX * MMAX), .WIDTH(DW)) u_beta (
    .clk, .ce(b_ce), .we(b_we), .addr(b_addr), .wdata(b_wdata), .rdata(b_rdata)
  );
  seq_divider #(.W(ACCW)) u_div (
    .clk, .rst_n, .en, .start(div_start), .num(acc_t'(p[r]) <<< FRAC), .den(denom),
    .busy(div_busy), .done(div_done), .quo(div_quo)
  );

  assign beta_rdata   = b_rdata;
  assign busy         = (state != S_IDLE);
  assign theta_active = th_ce;

  // Operand selection for the shared multiplier.
  always_comb begin
    mul_a = '0;
    mul_b = '0;
    unique case (state)
      S_P, S_P_TAIL: begin mul_a = th_rdata;   mul_b = h_vec[pc]; end
      S_P_LITE:      begin mul_a = cfg.theta0; mul_b = h_vec[r];  end
      S_S:           begin mul_a = h_vec[r];   mul_b = p[r];      end
      S_TH_WR:       begin mul_a = eta[r];     mul_b = p[c];      end
      S_B_WR:        begin mul_a = eta[r];     mul_b = e_vec[k];  end
      default: ;
    endcase
  end
  assign prod     = acc_t'(mul_a) * acc_t'(mul_b);
  assign acc_next = ((pc == '0) ? '0 : acc) + lacc_t'(prod);
  assign s_sum    = lacc_t'(ONE) + ((acc + lacc_t'(prod)) >>> FRAC);  // 1 + h' theta h

  // Memory port control.
  always_comb begin
    th_ce = 1'b0; th_we = 1'b0; th_addr = '0; th_wdata = '0;
    b_ce  = 1'b0; b_we  = 1'b0; b_addr  = '0; b_wdata  = '0;
    unique case (state)
      S_IDLE: begin
        b_ce   = en && beta_rd;
        b_addr = beta_raddr;
      end
      S_INIT: begin
        th_ce    = en && !cfg.lite;
        th_we    = 1'b1;
        th_addr  = init_cnt[TAW-1:0];
        th_wdata = (init_cnt[TAW-1:LW] == init_cnt[LW-1:0]) ? cfg.theta0 : '0;
        b_ce     = en && (init_cnt < (TAW+1)'(LMAX * MMAX));
        b_we     = 1'b1;
        b_addr   = BAW'(init_cnt);
        b_wdata  = '0;
      end
      S_P: begin
        th_ce   = en;
        th_addr = {r, c};
      end
      S_TH_RD: begin
        th_ce   = en;
        th_addr = {r, c};
      end
      S_TH_WR: begin
        th_ce    = en;
        th_we    = 1'b1;
        th_addr  = {r, c};
        th_wdata = sat16(acc_t'(th_rdata) - (prod >>> FRAC));
      end
      S_B_RD: begin
        b_ce   = en;
        b_addr = {r, k};
      end
      S_B_WR: begin
        b_ce    = en;
        b_we    = 1'b1;
        b_addr  = {r, k};
        b_wdata = sat16(acc_t'(b_rdata) + (prod >>> FRAC));
      end
      default: ;
    endcase
  end

  assign div_start = (state == S_DIV_GO);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      r        <= '0;
      c        <= '0;
      k        <= '0;
      init_cnt <= '0;
      pv       <= 1'b0;
      pr       <= '0;
      pc       <= '0;
      acc      <= '0;
      denom    <= acc_t'(ONE);
      done     <= 1'b0;
      for (int i = 0; i < LMAX; i++) begin
        p[i]   <= '0;
        eta[i] <= '0;
      end
    end else if (en) begin
      done <= 1'b0;
      // p = theta h, one product per cycle, one cycle behind the read
      if (pv) begin
        acc <= acc_next;
        if (pc == l_last) p[pr] <= sat16w(acc_next >>> FRAC);
      end
      unique case (state)
        S_IDLE: begin
          r <= '0; c <= '0; k <= '0; pv <= 1'b0;
          if (start_init) begin
            init_cnt <= '0;
            state    <= S_INIT;
          end else if (start_learn) begin
            state <= cfg.lite ? S_P_LITE : S_P;
          end
        end
        S_INIT: begin
          init_cnt <= init_cnt + 1'b1;
          if (init_cnt == (TAW+1)'(LMAX * LMAX - 1)) state <= S_DONE;
        end
        S_P: begin
          pv <= 1'b1;
          pr <= r;
          pc <= c;
          if (c == l_last) begin
            c <= '0;
            if (r == l_last) begin
              r     <= '0;
              state <= S_P_TAIL;
            end else begin
              r <= r + 1'b1;
            end
          end else begin
            c <= c + 1'b1;
          end
        end
        S_P_TAIL: begin
          pv    <= 1'b0;
          pc    <= '0;
          acc   <= '0;
          state <= S_S;
        end
        S_P_LITE: begin
          p[r] <= sat16(prod >>> FRAC);
          if (r == l_last) begin
            r     <= '0;
            acc   <= '0;
            state <= S_S;
          end else begin
            r <= r + 1'b1;
          end
        end
        S_S: begin
          acc <= acc + lacc_t'(prod);
          if (r == l_last) begin
            r     <= '0;
            state <= S_DIV_GO;
            // denominator 1 + h' theta h, clamped to 1 LSB .. 2^31-1
            if (s_sum < 1)                   denom <= 1;
            else if (s_sum > 48'sh7fff_ffff) denom <= 32'sh7fff_ffff;
            else                             denom <= acc_t'(s_sum);
          end else begin
            r <= r + 1'b1;
          end
        end
        S_DIV_GO: begin
          state <= S_DIV_WAIT;
        end
        S_DIV_WAIT: begin
          if (div_done) begin
            eta[r] <= sat16(div_quo);
            if (r == l_last) begin
              r     <= '0;
              c     <= '0;
              state <= cfg.lite ? S_B_RD : S_TH_RD;
            end else begin
              r     <= r + 1'b1;
              state <= S_DIV_GO;
            end
          end
        end
        S_TH_RD: state <= S_TH_WR;
        S_TH_WR: begin
          state <= S_TH_RD;
          if (c == l_last) begin
            c <= '0;
            if (r == l_last) begin
              r     <= '0;
              k     <= '0;
              state <= S_B_RD;
            end else begin
              r <= r + 1'b1;
            end
          end else begin
            c <= c + 1'b1;
          end
        end
        S_B_RD: state <= S_B_WR;
        S_B_WR: begin
          state <= S_B_RD;
          if (k == m_last) begin
            k <= '0;
            if (r == l_last) begin
              r     <= '0;
              state <= S_DONE;
            end else begin
              r <= r + 1'b1;
            end
          end else begin
            k <= k + 1'b1;
          end
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the divider only runs while the engine is in a division phase
  a_div_in_update: assert property (@(posedge clk) disable iff (!rst_n)
                                    div_busy |-> busy);

endmodule
