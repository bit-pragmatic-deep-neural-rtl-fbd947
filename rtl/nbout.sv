// nbout: the per-tile output neuron buffer (NBout).
//
// Holds one partial output neuron per PIP: COLS windows x FILTERS filters,
// ACC_W bits each.  `we` captures the whole PIP array at once (end of a
// pallet).  `all` exposes every entry (read back into the PIPs as i_nbout)
// and `rd_col` selects one window's output brick for draining to the neuron
// memory on `rdata` (combinational read).
//
// Follows the paper: NBout accepts the tile's partial output neurons and
// feeds them back to the PIPs.  Own choice: register storage and the
// whole-array write at pallet end.
module nbout
  import pra_pkg::*;
#(
  parameter int unsigned COLS    = 16,
  parameter int unsigned FILTERS = 16,
  localparam int unsigned CW     = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic                                       we,
  input  logic [COLS-1:0][FILTERS-1:0][ACC_W-1:0]    wdata,
  output logic [COLS-1:0][FILTERS-1:0][ACC_W-1:0]    all,
  input  logic [CW-1:0]                              rd_col,
  output logic [FILTERS-1:0][ACC_W-1:0]              rdata
);

  always_ff @(posedge clk or negedge rst_n) begin
    // reset per entry: one 12288-bit constant trips verilator's replication limit
    if (!rst_n) begin
      for (int j = 0; j < COLS; j++)
        for (int f = 0; f < FILTERS; f++) all[j][f] <= '0;
    end else if (we) all <= wdata;
  end

  assign rdata = all[rd_col];

endmodule
