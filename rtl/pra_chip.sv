// pra_chip: the bit-pragmatic DNN accelerator (convolutional layers).
//
// Data flow: the neuron memory (NM) holds the layer's input and receives its
// output.  The dispatcher collects, for each window step, one neuron brick per
// window of the current pallet.  COLS window columns turn those bricks into
// oneffsets (one essential bit per neuron per cycle) and 2-stage shift
// controls, and broadcast them to all TILES tiles.  Each tile holds its own
// synapse buffer (SB) with the synapses of its 16 filters and a COLS x 16
// array of PIPs, so the chip produces COLS x 16 x TILES output neurons per
// pallet.  The controller sequences pallets, SB reads into the synapse set
// registers, per-column brick loads and the write-back of NBout through the
// output units into NM.
//
// Host interface: while `busy` is low the host owns the NM port
// (host_nm_*, brick writes and row reads with one cycle latency) and may
// write SB rows of any tile (host_sb_*).  It then sets `cfg` and pulses `go`;
// `done` pulses when the layer's outputs are all in NM.  cfg must stay
// stable while busy.
//
// Follows the paper's main configuration: 16 tiles, 16x16 PIPs per tile,
// 16-neuron bricks, 16-brick pallets, 2-stage shifting with L = 2, per-column
// synchronization with one SSR and a two-pallet dispatcher buffer, 2 MB SB
// per tile, 4 MB NM.  The host ports stand in for the off-chip memory
// interface, which the paper does not describe.
module pra_chip
  import pra_pkg::*;
#(
  parameter int unsigned TILES   = 16,
  parameter int unsigned COLS    = 16,
  parameter int unsigned FILTERS = 16,
  parameter int unsigned L       = 2,
  parameter int unsigned SSRS    = 1,
  parameter int unsigned PALLETS = 2,
  parameter int unsigned SB_ROWS = 4096,
  parameter int unsigned NM_ROWS = 8192,
  parameter int unsigned BPR     = 16,
  localparam int unsigned LANES  = BRICK,
  localparam int unsigned KW     = (L == 0) ? 1 : L,
  localparam int unsigned SBAW   = $clog2(SB_ROWS),
  localparam int unsigned NAW    = $clog2(NM_ROWS),
  localparam int unsigned SW     = $clog2(BPR),
  localparam int unsigned SSW    = (SSRS > 1) ? $clog2(SSRS) : 1,
  localparam int unsigned CW     = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned TW     = (TILES > 1) ? $clog2(TILES) : 1,
  localparam int unsigned BRK_W  = LANES * NEURON_W,
  localparam int unsigned ROW_W  = FILTERS * LANES * SYN_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  layer_cfg_t                 cfg,
  input  logic                       go,
  output logic                       busy,
  output logic                       done,
  // host access to NM (only while !busy)
  input  logic                       host_nm_we,
  input  logic                       host_nm_rd,
  input  logic [NAW-1:0]             host_nm_addr,
  input  logic [SW-1:0]              host_nm_slot,
  input  logic [BRK_W-1:0]           host_nm_wdata,
  output logic [BPR-1:0][BRK_W-1:0]  nm_rdata,
  // host access to the SBs (only while !busy)
  input  logic                       host_sb_we,
  input  logic [TW-1:0]              host_sb_tile,
  input  logic [SBAW-1:0]            host_sb_addr,
  input  logic [ROW_W-1:0]           host_sb_wdata
);

  // controller <-> dispatcher
  logic                      disp_start;
  logic [11:0]               ox0, oy;
  logic [23:0]               k_steps;
  logic [COLS-1:0]           col_mask, avail, col_load, first, col_last, col_idle;
  logic [COLS-1:0][23:0]     need_step;
  logic [COLS-1:0][BRK_W-1:0] brick;
  // NM ports
  logic                      d_rd_en;
  logic [NAW-1:0]            d_raddr;
  logic                      c_we;
  logic [NAW-1:0]            c_waddr;
  logic [SW-1:0]             c_wslot;
  logic                      nm_rd_en, nm_we;
  logic [NAW-1:0]            nm_addr;
  logic [SW-1:0]             nm_slot;
  logic [BRK_W-1:0]          nm_wdata;
  // tiles
  logic                      sb_rd_en, nbout_we;
  logic [SBAW-1:0]           sb_raddr;
  logic [SSRS-1:0]           ssr_we;
  logic [COLS-1:0][SSW-1:0]  sr_sel;
  logic [TW-1:0]             drain_tile;
  logic [CW-1:0]             drain_col;
  logic [TILES-1:0][FILTERS-1:0][NEURON_W-1:0] drain_brick;
  // oneffset bus
  logic [COLS-1:0][LANES-1:0]         fire, neg;
  logic [COLS-1:0][LANES-1:0][KW-1:0] k_shift;
  logic [COLS-1:0][POW_W-1:0]         c_shift;

  // ---- neuron memory and its port arbitration -------------------------
  always_comb begin
    if (!busy) begin
      nm_rd_en = host_nm_rd;
      nm_we    = host_nm_we;
      nm_addr  = host_nm_addr;
      nm_slot  = host_nm_slot;
      nm_wdata = host_nm_wdata;
    end else begin
      nm_rd_en = d_rd_en;
      nm_we    = c_we;
      nm_addr  = d_rd_en ? d_raddr : c_waddr;
      nm_slot  = c_wslot;
      nm_wdata = drain_brick[drain_tile];
    end
  end

  neuron_memory #(.ROWS(NM_ROWS), .BPR(BPR), .LANES(LANES)) u_nm (
    .clk,
    .rd_en (nm_rd_en),
    .we    (nm_we),
    .addr  (nm_addr),
    .wslot (nm_slot),
    .wdata (nm_wdata),
    .rdata (nm_rdata)
  );

  dispatcher #(.COLS(COLS), .LANES(LANES), .PALLETS(PALLETS), .NM_ROWS(NM_ROWS), .BPR(BPR)) u_disp (
    .clk, .rst_n, .cfg,
    .start     (disp_start),
    .ox0, .oy, .k_steps, .col_mask,
    .nm_rd_en  (d_rd_en),
    .nm_raddr  (d_raddr),
    .nm_rdata,
    .need_step,
    .take      (col_load),
    .avail,
    .brick
  );

  for (genvar j = 0; j < COLS; j++) begin : g_col
    window_column #(.LANES(LANES), .L(L)) u_col (
      .clk, .rst_n,
      .load    (col_load[j]),
      .brick   (brick[j]),
      .fire    (fire[j]),
      .neg     (neg[j]),
      .k_shift (k_shift[j]),
      .c_shift (c_shift[j]),
      .last    (col_last[j]),
      .idle    (col_idle[j])
    );
  end

  pra_controller #(.TILES(TILES), .COLS(COLS), .SSRS(SSRS), .SB_ROWS(SB_ROWS),
                   .NM_ROWS(NM_ROWS), .BPR(BPR)) u_ctrl (
    .clk, .rst_n, .cfg, .go, .busy, .done,
    .disp_start, .ox0, .oy, .k_steps, .col_mask, .need_step, .avail,
    .nm_rd_busy (d_rd_en),
    .col_last, .col_idle, .col_load, .first,
    .sb_rd_en, .sb_raddr, .ssr_we, .sr_sel, .nbout_we,
    .drain_tile, .drain_col,
    .nm_we    (c_we),
    .nm_waddr (c_waddr),
    .nm_wslot (c_wslot)
  );

  for (genvar t = 0; t < TILES; t++) begin : g_tile
    pra_tile #(.COLS(COLS), .FILTERS(FILTERS), .LANES(LANES), .L(L), .SSRS(SSRS),
               .SB_ROWS(SB_ROWS)) u_tile (
      .clk, .rst_n, .cfg,
      .sb_we       (!busy && host_sb_we && host_sb_tile == TW'(t)),
      .sb_waddr    (host_sb_addr),
      .sb_wdata    (host_sb_wdata),
      .sb_rd_en, .sb_raddr, .ssr_we,
      .sr_load     (col_load),
      .sr_sel,
      .fire, .neg, .k_shift, .c_shift, .first,
      .nbout_we,
      .drain_col,
      .drain_brick (drain_brick[t])
    );
  end

endmodule
