// adic_regs: host interface of the chip, a slave on an MSP430-style
// peripheral bus (16-bit data, 14-bit word address, byte write enables),
// holding the configuration, the input sample and the command and status
// registers.
//
// Bus protocol (as on the openMSP430 peripheral bus): a transfer is one
// cycle with per_en high; per_we[1:0] non-zero writes the low and/or high
// byte of the addressed word at the rising edge, per_we = 0 reads, and
// per_dout returns the addressed word combinationally in the same cycle
// (zero when per_en is low).
//
// Register map (word addresses):
//   0x00 CMD     W  bit0 init, bit1 train, bit2 infer, bit3 clear anomaly (pulses)
//   0x01 STATUS  R  bit0 busy, bit1 result valid, bit2 anomaly, bit3 vote,
//                   bits6:4 N for the next sample, bits14:8 BL decisions
//   0x02 D, 0x03 L, 0x04 M  network size
//   0x05 MODE    bit0 boundary, bit1 OPIUM-Lite, bit2 ADEPOS, bits6:4 fixed N
//   0x06 PREC    bits1:0 accumulator window, bits3:2 datapath width,
//                bits6:4 PRBS width (codes of adic_pkg)
//   0x07 THETA0  initial theta diagonal (Q4.12)
//   0x08 BL_SEL  BL shown at 0x40..0x52
//   0x09 ROUNDS  R  bits3:0 ensemble passes taken by the last sample,
//                   bits6:4 N of its last pass, bits10:8 anomaly votes T
//   0x10..0x1F X[0..15]        input sample (Q4.12)
//   0x20..0x26 SEED[0..6]      PRBS seed of each BL
//   0x30..0x3D TH[0..6]        threshold of each BL, low word then high word
//   0x40..0x4F XHAT[0..15]  R  reconstruction of the selected BL
//   0x50, 0x51 ERR          R  squared error of the selected BL (low, high)
//   0x52 DEC                R  bit0 decision of the selected BL
// Reset values: d = 16, L = 32, m = 16, reconstruction mode, OPIUM, ADEPOS
// on, fixed N = 7, full precision, theta0 = 1.0, thresholds all ones.
//
// The 16-bit data and 14-bit address bus follow the chip; the register map,
// reset values and read timing are this design's choices.
module adic_regs
  import adic_pkg::*;
#(
  parameter int unsigned NBL  = adic_pkg::N_BL,
  parameter int unsigned DMAX = adic_pkg::D_MAX,
  parameter int unsigned MMAX = adic_pkg::M_MAX,
  localparam int unsigned CW = $clog2(NBL + 1),
  localparam int unsigned SW = $clog2(NBL)
) (
  input  logic            clk,
  input  logic            rst_n,
  // MSP430 peripheral bus
  input  logic            per_en,
  input  logic [1:0]      per_we,
  input  logic [13:0]     per_addr,
  input  logic [15:0]     per_din,
  output logic [15:0]     per_dout,
  // configuration
  output cfg_t            cfg,
  output logic            adaptive,
  output logic [CW-1:0]   n_fixed,
  output logic [SW-1:0]   bl_sel,
  output word_t           x_vec [DMAX],
  output logic [15:0]     seeds [NBL],
  output logic [ERRW-1:0] thresholds [NBL],
  // commands
  output logic            cmd_init,
  output logic            cmd_train,
  output logic            cmd_infer,
  output logic            cmd_clear,
  // status
  input  logic            busy,
  input  logic            done,
  input  logic            anomaly,
  input  logic            vote,
  input  logic [CW-1:0]   n_cur,
  input  logic [CW-1:0]   n_used,
  input  logic [3:0]      rounds,
  input  logic [CW-1:0]   votes,
  input  logic [NBL-1:0]  decisions,
  input  word_t           xhat_sel [MMAX],
  input  logic [ERRW-1:0] err_sel,
  input  logic            dec_sel
);

  // word offsets into the array regions, cut to the width of their index
  localparam int unsigned XW = $clog2(DMAX);
  localparam int unsigned MW = $clog2(MMAX);
  logic [XW-1:0] off_x;
  logic [MW-1:0] off_h;
  logic [SW-1:0] off_s, off_t;
  assign off_x      = XW'(per_addr - 14'h10);
  assign off_s      = SW'(per_addr - 14'h20);
  assign off_t      = SW'((per_addr - 14'h30) >> 1);
  assign off_h      = MW'(per_addr - 14'h40);

  logic wr, rd;
  logic result_valid;
  assign wr = per_en && (per_we != 2'b00);
  assign rd = per_en && (per_we == 2'b00);

  function automatic logic [15:0] merge(input logic [15:0] old, input logic [15:0] nw,
                                        input logic [1:0] we);
    return {we[1] ? nw[15:8] : old[15:8], we[0] ? nw[7:0] : old[7:0]};
  endfunction

  function automatic logic [15:0] seed_reset(input int b);
    return 16'hACE1 ^ 16'((b + 1) * 16'h1F35);
  endfunction

  logic [15:0] r_mode, r_prec;

  assign cfg.boundary = r_mode[0];
  assign cfg.lite     = r_mode[1];
  assign adaptive     = r_mode[2];
  assign n_fixed      = CW'(r_mode[6:4]);
  assign cfg.acc_sel  = r_prec[1:0];
  assign cfg.dp_prec  = dp_prec_e'(r_prec[3:2]);
  assign cfg.wb_prec  = wb_prec_e'(r_prec[6:4]);

  // commands are pulses decoded straight from the write
  assign cmd_init  = wr && per_addr == 14'h00 && per_we[0] && per_din[0];
  assign cmd_train = wr && per_addr == 14'h00 && per_we[0] && per_din[1];
  assign cmd_infer = wr && per_addr == 14'h00 && per_we[0] && per_din[2];
  assign cmd_clear = wr && per_addr == 14'h00 && per_we[0] && per_din[3];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.d      <= 8'(DMAX);
      cfg.l      <= 8'(adic_pkg::L_MAX);
      cfg.m      <= 8'(MMAX);
      cfg.theta0 <= ONE;
      r_mode     <= 16'h0074;   // ADEPOS on, fixed N = 7
      r_prec     <= 16'h0000;
      bl_sel     <= '0;
      result_valid <= 1'b0;
      for (int i = 0; i < DMAX; i++) x_vec[i] <= '0;
      for (int b = 0; b < NBL; b++) begin
        seeds[b]      <= seed_reset(b);
        thresholds[b] <= '1;
      end
    end else begin
      if (done) result_valid <= 1'b1;
      else if (cmd_init || cmd_train || cmd_infer) result_valid <= 1'b0;
      if (wr) begin
        unique casez (per_addr)
          14'h02: cfg.d      <= merge({8'h00, cfg.d}, per_din, per_we)[7:0];
          14'h03: cfg.l      <= merge({8'h00, cfg.l}, per_din, per_we)[7:0];
          14'h04: cfg.m      <= merge({8'h00, cfg.m}, per_din, per_we)[7:0];
          14'h05: r_mode     <= merge(r_mode, per_din, per_we);
          14'h06: r_prec     <= merge(r_prec, per_din, per_we);
          14'h07: cfg.theta0 <= merge(cfg.theta0, per_din, per_we);
          14'h08: bl_sel     <= SW'(merge(16'(bl_sel), per_din, per_we));
          default: begin
            if (per_addr >= 14'h10 && per_addr < 14'h10 + 14'(DMAX))
              x_vec[off_x] <= merge(x_vec[off_x], per_din, per_we);
            if (per_addr >= 14'h20 && per_addr < 14'h20 + 14'(NBL))
              seeds[off_s] <= merge(seeds[off_s], per_din, per_we);
            if (per_addr >= 14'h30 && per_addr < 14'h30 + 14'(2 * NBL)) begin
              if (per_addr[0])
                thresholds[off_t][31:16] <=
                  merge(thresholds[off_t][31:16], per_din, per_we);
              else
                thresholds[off_t][15:0] <=
                  merge(thresholds[off_t][15:0], per_din, per_we);
            end
          end
        endcase
      end
    end
  end

  always_comb begin
    per_dout = '0;
    if (rd) begin
      unique casez (per_addr)
        14'h01: per_dout = {1'b0, 7'(decisions), 1'b0, 3'(n_cur), vote, anomaly,
                            result_valid, busy};
        14'h02: per_dout = {8'h00, cfg.d};
        14'h03: per_dout = {8'h00, cfg.l};
        14'h04: per_dout = {8'h00, cfg.m};
        14'h05: per_dout = r_mode;
        14'h06: per_dout = r_prec;
        14'h07: per_dout = cfg.theta0;
        14'h08: per_dout = 16'(bl_sel);
        14'h09: per_dout = {5'd0, 3'(votes), 1'b0, 3'(n_used), rounds};
        14'h50: per_dout = err_sel[15:0];
        14'h51: per_dout = err_sel[31:16];
        14'h52: per_dout = {15'd0, dec_sel};
        default: begin
          if (per_addr >= 14'h10 && per_addr < 14'h10 + 14'(DMAX))
            per_dout = x_vec[off_x];
          if (per_addr >= 14'h20 && per_addr < 14'h20 + 14'(NBL))
            per_dout = seeds[off_s];
          if (per_addr >= 14'h30 && per_addr < 14'h30 + 14'(2 * NBL))
            per_dout = per_addr[0] ? thresholds[off_t][31:16]
                                   : thresholds[off_t][15:0];
          if (per_addr >= 14'h40 && per_addr < 14'h40 + 14'(MMAX))
            per_dout = xhat_sel[off_h];
        end
      endcase
    end
  end

endmodule
