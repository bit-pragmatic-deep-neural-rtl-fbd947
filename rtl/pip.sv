// pip: Pragmatic Inner-Product unit with 2-stage shifting.
//
// Each cycle the PIP combines its 16 synapses (held in the column's synapse
// register) with the 16 oneffsets of one window's neuron brick:
//   term_i = fire_i ? (neg_i ? -s_i : s_i) << k_i : 0     (1st stage)
//   acc   <= (first ? (acc_in ? i_nbout : 0) : acc) + ((sum_i term_i) << c)
// `fire` plays the role of the per-synapse AND gate that injects null terms,
// `k` are the per-lane 1st-stage shifts (L bits each) and `c` the common
// 2nd-stage shift; both come from the column control.  The accumulator is the
// partial output neuron (o_nbout).  `first` starts a new output neuron from
// the value read back from NBout (i_nbout).  `out` is o_nbout, or
// max(o_nbout, i_nbout) when `max_sel` is set.
//
// Timing: combinational terms, adder tree and 2nd-stage shift; the
// accumulator updates on the rising clock edge.
//
// Follows the paper (Fig. 7 and Fig. 8a): neg, AND, 1st-stage shifter, adder
// tree over terms of 16+2^L-1 bits, common 2nd-stage shifter, adder with a
// first-cycle multiplexer selecting i_nbout, and the max unit.  Own choices:
// the negation keeps one extra bit so that -(-32768) does not wrap, the
// accumulator width (ACC_W), and that the figure's output precision shift
// is done later, in the output unit.
module pip
  import pra_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned L     = 2,
  localparam int unsigned KW     = (L == 0) ? 1 : L,
  localparam int unsigned TERM_W = SYN_W + 1 + (1 << L) - 1,
  localparam int unsigned TREE_W = TERM_W + $clog2(LANES)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [LANES-1:0][SYN_W-1:0]  syn,
  input  logic [LANES-1:0]             fire,
  input  logic [LANES-1:0]             neg,
  input  logic [LANES-1:0][KW-1:0]     k_shift,
  input  logic [POW_W-1:0]             c_shift,
  input  logic                         first,
  input  logic                         acc_in,
  input  logic [ACC_W-1:0]             i_nbout,
  input  logic                         max_sel,
  output logic [ACC_W-1:0]             o_nbout,
  output logic [ACC_W-1:0]             out
);

  logic signed [TREE_W-1:0] tree;
  logic signed [ACC_W-1:0]  shifted;
  logic signed [ACC_W-1:0]  base;

  always_comb begin
    tree = '0;
    for (int i = 0; i < LANES; i++) begin
      logic signed [SYN_W:0]    s;
      logic signed [TERM_W-1:0] t;
      s = neg[i] ? -$signed({syn[i][SYN_W-1], syn[i]}) : $signed({syn[i][SYN_W-1], syn[i]});
      t = fire[i] ? (TERM_W'(s) <<< k_shift[i]) : '0;
      tree = tree + TREE_W'(t);
    end
  end

  assign shifted = ACC_W'(tree) <<< c_shift;
  assign base    = !first ? $signed(o_nbout) : acc_in ? $signed(i_nbout) : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) o_nbout <= '0;
    else        o_nbout <= base + shifted;
  end

  assign out = (max_sel && ($signed(i_nbout) > $signed(o_nbout))) ? i_nbout : o_nbout;

endmodule
