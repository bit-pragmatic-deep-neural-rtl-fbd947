// output_unit: turns partial output neurons into stored 16-bit neurons.
//
// Combinational, one brick (LANES values) at a time.  For each accumulator
// value: apply the activation f (ReLU, when cfg.relu is set), drop
// cfg.out_shift fractional bits (arithmetic shift), saturate to the 16-bit
// two's complement range, then AND with a mask that keeps only bits
// keep_msb..keep_lsb.  The mask is how software-provided per-layer
// precisions zero out prefix and suffix bits before the neurons reach the
// neuron memory, which lowers the essential-bit count of the next layer.
//
// Follows the paper: f after NBout (Fig. 6) and trimming with AND gates and
// precision-derived masks (The Role of Software).  Own choices: ReLU as f,
// the alignment shift, saturation, and the mask encoding as two bit indices.
module output_unit
  import pra_pkg::*;
#(
  parameter int unsigned LANES = 16
) (
  input  layer_cfg_t                       cfg,
  input  logic [LANES-1:0][ACC_W-1:0]      acc,
  output logic [LANES-1:0][NEURON_W-1:0]   neuron
);

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 << (NEURON_W-1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(1 << (NEURON_W-1));

  logic [NEURON_W-1:0] mask;

  always_comb begin
    for (int b = 0; b < NEURON_W; b++)
      mask[b] = (b <= int'(cfg.keep_msb)) && (b >= int'(cfg.keep_lsb));
  end

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [ACC_W-1:0] v;
      v = $signed(acc[i]);
      if (cfg.relu && v < 0) v = '0;
      v = v >>> cfg.out_shift;
      if (v > MAXV) v = MAXV;
      else if (v < MINV) v = MINV;
      neuron[i] = v[NEURON_W-1:0] & mask;
    end
  end

endmodule
