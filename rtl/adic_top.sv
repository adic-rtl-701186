// adic_top: the anomaly detection chip. An ensemble of NBL = 7 extreme
// learning machine base learners (BLs) behind an MSP430-style peripheral
// bus, with majority voting and ADEPOS control of the number of active BLs.
//
// Data path: the host writes the configuration and a feature vector through
// the bus (adic_regs), then a command. The ensemble controller (adepos_ctrl)
// clock-enables and starts the BLs; all of them see the same input and
// differ only in their PRBS seed. Training commands run every BL once
// (forward pass plus an OPIUM / OPIUM-Lite update); inference commands run
// the first N BLs, vote, and in ADEPOS mode grow or shrink N. Results of a
// chosen BL reach the bus through the read-out multiplexer and buffer
// (bl_output_mux). Status and the anomaly flag are read from the bus.
//
// Ports beyond the bus go to parts that are not logic: bl_clk_en is the
// per-BL clock enable that drives each BL's clock gate (and could also
// drive its power switch and isolation cells in a multi-supply layout), and
// theta_mem_on marks the cycles in which a BL's theta memory is accessed,
// the signal that lets that memory be gated or powered down in OPIUM-Lite
// mode. 'anomaly' is the sticky ensemble decision O_e.
//
// Timing: bus writes act on the rising clock edge, reads are combinational.
// An inference pass takes about 1080 cycles (d = 16, L = 32, m = 16); an
// OPIUM training pass about 6300 cycles (forward pass plus a 5219-cycle
// update), OPIUM-Lite about 3260; init 1026 cycles.
// Lint note: rst_n also appears in the 'disable iff' of the assertions
// below, which lint reports as a reset used both synchronously and
// asynchronously; the logic itself only uses it as an asynchronous reset.
module adic_top
  import adic_pkg::*;
#(
  parameter int unsigned NBL  = adic_pkg::N_BL,
  parameter int unsigned DMAX = adic_pkg::D_MAX,
  parameter int unsigned LMAX = adic_pkg::L_MAX,
  parameter int unsigned MMAX = adic_pkg::M_MAX,
  localparam int unsigned CW = $clog2(NBL + 1),
  localparam int unsigned SW = $clog2(NBL)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           per_en,
  input  logic [1:0]     per_we,
  input  logic [13:0]    per_addr,
  input  logic [15:0]    per_din,
  output logic [15:0]    per_dout,
  output logic           anomaly,
  output logic [NBL-1:0] bl_clk_en,
  output logic [NBL-1:0] theta_mem_on
);

  cfg_t            cfg;
  logic            adaptive;
  logic [CW-1:0]   n_fixed, n_cur, n_used, votes;
  logic [SW-1:0]   bl_sel;
  word_t           x_vec [DMAX];
  logic [15:0]     seeds [NBL];
  logic [ERRW-1:0] thresholds [NBL];
  logic            cmd_init, cmd_train, cmd_infer, cmd_clear;
  logic            busy, done, vote;
  logic [3:0]      rounds;
  logic [NBL-1:0]  decisions;
  word_t           xhat_sel [MMAX];
  logic [ERRW-1:0] err_sel;
  logic            dec_sel;

  logic [NBL-1:0]  bl_done, bl_dec, bl_busy;
  logic            bl_init, bl_train, bl_infer;
  word_t           bl_xhat [NBL][MMAX];
  logic [ERRW-1:0] bl_err [NBL];

  adic_regs #(.NBL(NBL), .DMAX(DMAX), .MMAX(MMAX)) u_regs (
    .clk, .rst_n, .per_en, .per_we, .per_addr, .per_din, .per_dout,
    .cfg, .adaptive, .n_fixed, .bl_sel, .x_vec, .seeds, .thresholds,
    .cmd_init, .cmd_train, .cmd_infer, .cmd_clear,
    .busy, .done, .anomaly, .vote, .n_cur, .n_used, .rounds, .votes, .decisions,
    .xhat_sel, .err_sel, .dec_sel
  );

  adepos_ctrl #(.NBL(NBL)) u_ctrl (
    .clk, .rst_n, .cmd_init, .cmd_train, .cmd_infer, .cmd_clear, .adaptive,
    .n_fixed, .bl_done, .bl_decision(bl_dec), .bl_en(bl_clk_en),
    .bl_init, .bl_train, .bl_infer, .busy, .done, .vote, .votes, .n_used,
    .n_cur, .rounds, .anomaly, .decisions
  );

  for (genvar b = 0; b < NBL; b++) begin : g_bl
    base_learner #(.DMAX(DMAX), .LMAX(LMAX), .MMAX(MMAX)) u_bl (
      .clk, .rst_n, .en(bl_clk_en[b]), .cfg, .seed(seeds[b]),
      .threshold(thresholds[b]), .x_vec,
      .start_init(bl_init), .start_train(bl_train), .start_infer(bl_infer),
      .busy(bl_busy[b]), .done(bl_done[b]), .decision(bl_dec[b]),
      .err(bl_err[b]), .xhat_vec(bl_xhat[b]), .theta_active(theta_mem_on[b])
    );
  end

  bl_output_mux #(.NBL(NBL), .MMAX(MMAX)) u_mux (
    .clk, .rst_n, .load(!busy), .sel(bl_sel), .xhat_in(bl_xhat), .err_in(bl_err),
    .dec_in(bl_dec), .xhat_out(xhat_sel), .err_out(err_sel), .dec_out(dec_sel)
  );

  // a BL only runs while the controller has its clock enabled
  for (genvar b = 0; b < NBL; b++) begin : g_chk
    a_gated_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                   !bl_clk_en[b] |-> !theta_mem_on[b]);
    a_busy_enabled: assert property (@(posedge clk) disable iff (!rst_n)
                                     bl_busy[b] |-> bl_clk_en[b]);
  end

endmodule
