// bl_output_mux: read-out multiplexer and buffer between the base learners
// and the host bus.
//
// The host picks one BL with 'sel'; the mux forwards that BL's
// reconstruction x~ (m words), its squared error and its decision into a
// buffer register that the bus reads. The buffer is loaded every cycle in
// which 'load' is high, so its content is a stable copy taken one cycle
// after the selection; an out-of-range 'sel' reads as zero.
//
// The block is named on the chip's floorplan only ("BL Multiplexer+Buffer
// Logic"); what it forwards and the one-cycle register are this design's
// choices.
module bl_output_mux
  import adic_pkg::*;
#(
  parameter int unsigned NBL  = adic_pkg::N_BL,
  parameter int unsigned MMAX = adic_pkg::M_MAX,
  localparam int unsigned SW = $clog2(NBL)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic [SW-1:0]   sel,
  input  word_t           xhat_in [NBL][MMAX],
  input  logic [ERRW-1:0] err_in [NBL],
  input  logic [NBL-1:0]  dec_in,
  output word_t           xhat_out [MMAX],
  output logic [ERRW-1:0] err_out,
  output logic            dec_out
);

  logic valid_sel;
  assign valid_sel = (int'(sel) < NBL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < MMAX; k++) xhat_out[k] <= '0;
      err_out <= '0;
      dec_out <= 1'b0;
    end else if (load) begin
      for (int k = 0; k < MMAX; k++) xhat_out[k] <= valid_sel ? xhat_in[sel][k] : '0;
      err_out <= valid_sel ? err_in[sel] : '0;
      dec_out <= valid_sel ? dec_in[sel] : 1'b0;
    end
  end

endmodule
