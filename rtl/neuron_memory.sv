// neuron_memory: the central neuron memory (NM).
//
// Single-ported.  A row holds BPR neuron bricks (16 neurons of 16 bits
// each).  A read (`rd_en`) returns the whole row on `rdata` at the next clock
// edge, so the dispatcher can collect every brick of a pallet that lies in
// that row at once.  A write stores one brick into slot `wslot` of row
// `addr` and has priority over a read.
//
// Follows the paper: 4 MB, central, single ported, neurons stored in 16-bit
// fixed point.  The paper builds it from eDRAM; here it is a plain memory
// array.  Own choice: 16 bricks (4096 bits) per row, 8192 rows.
module neuron_memory
  import pra_pkg::*;
#(
  parameter int unsigned ROWS  = 8192,
  parameter int unsigned BPR   = 16,
  parameter int unsigned LANES = 16,
  localparam int unsigned AW    = $clog2(ROWS),
  localparam int unsigned SW    = $clog2(BPR),
  localparam int unsigned BRK_W = LANES * NEURON_W
) (
  input  logic                        clk,
  input  logic                        rd_en,
  input  logic                        we,
  input  logic [AW-1:0]               addr,
  input  logic [SW-1:0]               wslot,
  input  logic [BRK_W-1:0]            wdata,
  output logic [BPR-1:0][BRK_W-1:0]   rdata
);

  logic [BPR-1:0][BRK_W-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we)         mem[addr][wslot] <= wdata;
    else if (rd_en) rdata            <= mem[addr];
  end

endmodule
