// window_column: the neuron side of one PIP column (one window lane).
//
// Holds the neuron brick that the column is working on in 16 oneffset
// generators and the column's shared 2-stage shift control.  On `load` the
// 16 neurons of a new brick enter the generators; from the next cycle on the
// column presents, per lane, whether its term fires, its 1st-stage shift and
// its sign, plus the common 2nd-stage shift.  Lanes that fire advance to their
// next oneffset; a lane whose neuron has ended presents no term while it waits
// for the other lanes (pallet/column-level lane synchronization).  `last` is
// high in the final cycle of the brick and `idle` when no lane has work, so a
// new brick may be loaded in the same cycle as `last` without a bubble.
//
// Follows the paper: one oneffset per neuron per cycle from leading-one
// detectors, all lanes of a column wait for the neuron with the most essential
// bits, one control per column.  Own choice: the generator registers double as
// the column's input neuron buffer (NBin) and are shared by all tiles, since
// every tile sees the same oneffsets.
module window_column
  import pra_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned L     = 2,
  localparam int unsigned KW   = (L == 0) ? 1 : L
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          load,
  input  logic [LANES-1:0][NEURON_W-1:0] brick,
  output logic [LANES-1:0]              fire,
  output logic [LANES-1:0]              neg,
  output logic [LANES-1:0][KW-1:0]      k_shift,
  output logic [POW_W-1:0]              c_shift,
  output logic                          last,
  output logic                          idle
);

  oneffset_t [LANES-1:0] off;
  logic      [LANES-1:0] valid;

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    oneffset_gen u_gen (
      .clk, .rst_n, .load,
      .neuron (brick[i]),
      .adv    (fire[i]),
      .off    (off[i]),
      .valid  (valid[i]),
      .neg    (neg[i])
    );
  end

  column_ctrl #(.LANES(LANES), .L(L)) u_ctrl (
    .off, .valid, .c_shift, .k_shift, .fire, .last
  );

  assign idle = ~|valid;

endmodule
