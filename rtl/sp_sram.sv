// sp_sram: single-port synchronous memory, used for the theta (L x L) and
// beta (L x m) parameter stores of each base learner's online learning
// module.
//
// Written as an array so that synthesis infers a memory (an SRAM compiler
// macro would take its place on silicon). One access per clock: when 'ce' is
// high a write stores 'wdata' at 'addr', a read returns the word at 'addr'
// on 'rdata' in the next cycle. When 'ce' is low nothing is accessed and
// rdata holds, which is how the OPIUM-Lite mode keeps the theta memory idle.
// Contents are not reset; the learning module initialises them.
module sp_sram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             ce,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ce) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
