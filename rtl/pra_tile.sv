// pra_tile: one Pragmatic tile, a COLS x FILTERS array of PIPs.
//
// PIP(j,f) multiplies the oneffsets of window j with the synapses of filter
// f.  All PIPs of column j receive the same oneffsets and shift controls
// (from the chip's window column j); all PIPs of row f use synapses of
// filter f.  Synapses flow SB -> synapse set register (SSR) -> the column's
// synapse register (SR):
//   * `sb_rd_en` reads one synapse set (16 filters x 16 synapses) from SB;
//     the row appears on the SB output after one clock edge and
//     `ssr_we[e]` copies it into SSR e on the following edge.
//   * `sr_load[j]` copies SSR `sr_sel[j]` into column j's SR on the clock
//     edge; the column starts using it in the next cycle, together with the
//     neuron brick loaded at the same moment.
// When a pallet ends `nbout_we` captures all PIP outputs into NBout.  The
// host-side drain selects a window with `drain_col` and reads the activated,
// trimmed output brick on `drain_brick` (one 16-filter brick).
//
// Follows the paper (Fig. 6, Fig. 9): 16x16 PIPs, SB with one port and one
// 4096-bit bus, SSRs in front of the SB, one SR per PIP column, NBout and
// f.  Own choices: the SR is one register per column holding the 16 filters'
// synapses (the figure draws one per PIP, which is the same storage), the
// SB-to-SSR pipeline register, and the drain port.
// Each PIP's raw accumulator output o_nbout is left open: NBout captures the
// PIP's `out`, which is that accumulator or the max result.  Verilator's
// PINCONNECTEMPTY note on that pin is expected and stands.
module pra_tile
  import pra_pkg::*;
#(
  parameter int unsigned COLS    = 16,
  parameter int unsigned FILTERS = 16,
  parameter int unsigned LANES   = 16,
  parameter int unsigned L       = 2,
  parameter int unsigned SSRS    = 1,
  parameter int unsigned SB_ROWS = 4096,
  localparam int unsigned KW     = (L == 0) ? 1 : L,
  localparam int unsigned SBAW   = $clog2(SB_ROWS),
  localparam int unsigned SSW    = (SSRS > 1) ? $clog2(SSRS) : 1,
  localparam int unsigned CW     = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned ROW_W  = FILTERS * LANES * SYN_W
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  layer_cfg_t                             cfg,
  // host write port of the SB
  input  logic                                   sb_we,
  input  logic [SBAW-1:0]                        sb_waddr,
  input  logic [ROW_W-1:0]                       sb_wdata,
  // synapse supply, from the controller
  input  logic                                   sb_rd_en,
  input  logic [SBAW-1:0]                        sb_raddr,
  input  logic [SSRS-1:0]                        ssr_we,
  input  logic [COLS-1:0]                        sr_load,
  input  logic [COLS-1:0][SSW-1:0]               sr_sel,
  // oneffset bus, from the window columns
  input  logic [COLS-1:0][LANES-1:0]             fire,
  input  logic [COLS-1:0][LANES-1:0]             neg,
  input  logic [COLS-1:0][LANES-1:0][KW-1:0]     k_shift,
  input  logic [COLS-1:0][POW_W-1:0]             c_shift,
  input  logic [COLS-1:0]                        first,
  // output side
  input  logic                                   nbout_we,
  input  logic [CW-1:0]                          drain_col,
  output logic [FILTERS-1:0][NEURON_W-1:0]       drain_brick
);

  typedef logic [FILTERS-1:0][LANES-1:0][SYN_W-1:0] synset_t;

  synset_t                                   sb_rdata;
  synset_t [SSRS-1:0]                        ssr_q;
  synset_t [COLS-1:0]                        sr_q;
  logic [COLS-1:0][FILTERS-1:0][ACC_W-1:0]   pip_out;
  logic [COLS-1:0][FILTERS-1:0][ACC_W-1:0]   nb_all;
  logic [FILTERS-1:0][ACC_W-1:0]             nb_rd;

  synapse_buffer #(.FILTERS(FILTERS), .LANES(LANES), .ROWS(SB_ROWS)) u_sb (
    .clk,
    .we    (sb_we),
    .rd_en (sb_rd_en),
    .addr  (sb_we ? sb_waddr : sb_raddr),
    .wdata (sb_wdata),
    .rdata (sb_rdata)
  );

  always_ff @(posedge clk) begin
    for (int e = 0; e < SSRS; e++)
      if (ssr_we[e]) ssr_q[e] <= sb_rdata;
    for (int j = 0; j < COLS; j++)
      if (sr_load[j]) sr_q[j] <= ssr_q[sr_sel[j]];
  end

  for (genvar j = 0; j < COLS; j++) begin : g_col
    for (genvar f = 0; f < FILTERS; f++) begin : g_pip
      pip #(.LANES(LANES), .L(L)) u_pip (
        .clk, .rst_n,
        .syn     (sr_q[j][f]),
        .fire    (fire[j]),
        .neg     (neg[j]),
        .k_shift (k_shift[j]),
        .c_shift (c_shift[j]),
        .first   (first[j]),
        .acc_in  (cfg.acc_in),
        .i_nbout (nb_all[j][f]),
        .max_sel (cfg.max_out),
        .o_nbout (),
        .out     (pip_out[j][f])
      );
    end
  end

  nbout #(.COLS(COLS), .FILTERS(FILTERS)) u_nbout (
    .clk, .rst_n,
    .we     (nbout_we),
    .wdata  (pip_out),
    .all    (nb_all),
    .rd_col (drain_col),
    .rdata  (nb_rd)
  );

  output_unit #(.LANES(FILTERS)) u_out (
    .cfg,
    .acc    (nb_rd),
    .neuron (drain_brick)
  );

endmodule
