// synapse_buffer: the per-tile synapse buffer (SB).
//
// A single-ported memory whose row is one synapse set: 16 synapse bricks,
// one per filter lane, i.e. 16 x 16 synapses of 16 bits (4096 bits).  A read
// (`rd_en`) returns the row in `rdata` on the next clock edge; a write
// (`we`) stores a whole row and has priority.  In the chip the SB is written
// only by the host before a layer runs.
//
// Follows the paper: 2 MB per tile, 256 synapses per access, one port.  The
// paper builds it from eDRAM; here it is a plain memory array that a
// synthesis flow maps to whatever macro the process offers.  Own choice: row
// organisation (one synapse set per row, 4096 rows for 2 MB).
module synapse_buffer
  import pra_pkg::*;
#(
  parameter int unsigned FILTERS = 16,
  parameter int unsigned LANES   = 16,
  parameter int unsigned ROWS    = 4096,
  localparam int unsigned AW     = $clog2(ROWS),
  localparam int unsigned ROW_W  = FILTERS * LANES * SYN_W
) (
  input  logic             clk,
  input  logic             we,
  input  logic             rd_en,
  input  logic [AW-1:0]    addr,
  input  logic [ROW_W-1:0] wdata,
  output logic [ROW_W-1:0] rdata
);

  logic [ROW_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we)         mem[addr] <= wdata;
    else if (rd_en) rdata     <= mem[addr];
  end

endmodule
