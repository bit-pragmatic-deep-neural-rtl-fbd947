// oneffset_gen: converts one 16-bit neuron into its oneffset stream.
//
// On `load` the generator takes a two's complement neuron and keeps its
// magnitude in a register together with the sign.  Each cycle a 16-bit
// leading-one detector presents the most significant remaining essential bit
// as `off.pow`; `off.eon` is set when it is the last one.  When `adv` is high
// the presented bit is cleared, so the next cycle shows the next oneffset.
// `valid` is low once no essential bit is left (a zero neuron is never valid).
// `neg` tells the PIP to negate the synapse for a negative neuron.
//
// Follows the paper: one oneffset per neuron per cycle, (pow,eon) with a
// 4-bit pow, produced by a leading-one detector (so highest bit first, as in
// the text's example 101 -> (0010,0)(0000,1)).  Own choices: sign-magnitude
// handling through `neg`, the `valid` flag, and load having priority over adv.
module oneffset_gen
  import pra_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic [NEURON_W-1:0] neuron,
  input  logic                adv,
  output oneffset_t           off,
  output logic                valid,
  output logic                neg
);

  logic [NEURON_W-1:0] rem_q;
  logic [NEURON_W-1:0] mag;
  logic [NEURON_W-1:0] onehot;
  logic [POW_W-1:0]    lod;

  assign mag = neuron[NEURON_W-1] ? NEURON_W'(-neuron) : neuron;

  always_comb begin
    lod = '0;
    for (int i = 0; i < NEURON_W; i++)
      if (rem_q[i]) lod = POW_W'(i);
  end

  assign onehot    = NEURON_W'(1) << lod;
  assign valid     = |rem_q;
  assign off.pow   = lod;
  assign off.eon   = valid && ((rem_q & ~onehot) == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q <= '0;
      neg   <= 1'b0;
    end else if (load) begin
      rem_q <= mag;
      neg   <= neuron[NEURON_W-1];
    end else if (adv && valid) begin
      rem_q <= rem_q & ~onehot;
    end
  end

endmodule
