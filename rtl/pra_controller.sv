// pra_controller: runs one convolutional layer on the Pragmatic chip.
//
// Output pallets are visited filter group by filter group (fg), then row by
// row (oy), then COLS windows at a time along x (ox0).  For each pallet:
//   * the dispatcher is restarted and prefetches neuron bricks;
//   * the synapse side reads synapse set k (SB row fg*K + k, K = Fx*Fy*I/16)
//     into a free synapse set register (SSR); only one SB read is issued per
//     cycle and every set is read once per pallet;
//   * each window column runs independently (per-column synchronization):
//     when it is idle or finishing its brick, and both its next neuron brick
//     (from the dispatcher) and the matching synapse set (in an SSR) are
//     present, it loads them in one cycle; otherwise it stalls.  Each SSR has
//     a down counter of the columns that still have to copy it and is freed
//     when that reaches zero;
//   * when every active column has consumed all K steps and gone idle, the
//     PIP outputs are written into NBout of every tile (`nbout_we`) and the
//     next pallet starts while NBout is drained to NM one output brick per
//     cycle, in cycles where the dispatcher does not read NM.
// `done` pulses when the last pallet is drained.
//
// Output brick address: out_base + ((oy*Ox + x)*OB + fg*TILES + t) with
// OB = ng*TILES, i.e. the same channel-fastest layout as the input.
//
// Follows the paper: per-column lane synchronization, SSRs with down
// counters, one SB port, SB read once per set per pallet, overlap of NM
// fetch with processing.  The loop order, the address layout, the draining
// scheme and the handshake timing are this design's own choices.
module pra_controller
  import pra_pkg::*;
#(
  parameter int unsigned TILES   = 16,
  parameter int unsigned COLS    = 16,
  parameter int unsigned SSRS    = 1,
  parameter int unsigned SB_ROWS = 4096,
  parameter int unsigned NM_ROWS = 8192,
  parameter int unsigned BPR     = 16,
  localparam int unsigned SBAW   = $clog2(SB_ROWS),
  localparam int unsigned NAW    = $clog2(NM_ROWS),
  localparam int unsigned SW     = $clog2(BPR),
  localparam int unsigned SSW    = (SSRS > 1) ? $clog2(SSRS) : 1,
  localparam int unsigned CW     = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned TW     = (TILES > 1) ? $clog2(TILES) : 1,
  localparam int unsigned CNTW   = $clog2(COLS + 1)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  layer_cfg_t                cfg,
  input  logic                      go,
  output logic                      busy,
  output logic                      done,
  // dispatcher
  output logic                      disp_start,
  output logic [11:0]               ox0,
  output logic [11:0]               oy,
  output logic [23:0]               k_steps,
  output logic [COLS-1:0]           col_mask,
  output logic [COLS-1:0][23:0]     need_step,
  input  logic [COLS-1:0]           avail,
  input  logic                      nm_rd_busy,
  // window columns
  input  logic [COLS-1:0]           col_last,
  input  logic [COLS-1:0]           col_idle,
  output logic [COLS-1:0]           col_load,
  output logic [COLS-1:0]           first,
  // tiles
  output logic                      sb_rd_en,
  output logic [SBAW-1:0]           sb_raddr,
  output logic [SSRS-1:0]           ssr_we,
  output logic [COLS-1:0][SSW-1:0]  sr_sel,
  output logic                      nbout_we,
  output logic [TW-1:0]             drain_tile,
  output logic [CW-1:0]             drain_col,
  // NM write port (drain)
  output logic                      nm_we,
  output logic [NAW-1:0]            nm_waddr,
  output logic [SW-1:0]             nm_wslot
);

  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN, S_FLUSH} state_e;
  typedef enum logic [1:0] {SSR_FREE, SSR_PEND, SSR_VALID} ssr_state_e;

  state_e                      state;
  ssr_state_e [SSRS-1:0]       ssr_st;
  logic [SSRS-1:0][23:0]       ssr_step;
  logic [SSRS-1:0][CNTW-1:0]   ssr_cnt;
  logic [SSRS-1:0][CNTW-1:0]   ssr_dec;   // columns copying each SSR this cycle

  always_comb begin
    ssr_dec = '0;
    for (int e = 0; e < SSRS; e++)
      for (int j = 0; j < COLS; j++)
        if (col_load[j] && sr_sel[j] == SSW'(e)) ssr_dec[e] = ssr_dec[e] + 1'b1;
  end
  logic [23:0]                 sb_step;
  logic [COLS-1:0][23:0]       cstep;
  logic [7:0]                  fg;

  // drain state
  logic                        dr_busy;
  logic [TW-1:0]               dr_t;
  logic [CW-1:0]               dr_j;
  logic [11:0]                 dr_ox0, dr_oy;
  logic [7:0]                  dr_fg;
  logic [COLS-1:0]             dr_mask;

  assign k_steps   = 24'(cfg.fx) * 24'(cfg.fy) * 24'(cfg.ib);
  assign need_step = cstep;
  assign busy      = (state != S_IDLE);

  always_comb
    for (int j = 0; j < COLS; j++) col_mask[j] = (24'(ox0) + 24'(j)) < 24'(cfg.ox);

  // ---- SSR allocation and column loads --------------------------------
  logic            ssr_free_found;
  logic [SSW-1:0]  ssr_free_e;
  logic [COLS-1:0] ssr_hit;
  logic            pallet_end;

  always_comb begin
    ssr_free_found = 1'b0;
    ssr_free_e     = '0;
    for (int e = SSRS-1; e >= 0; e--)
      if (ssr_st[e] == SSR_FREE) begin
        ssr_free_found = 1'b1;
        ssr_free_e     = SSW'(e);
      end
    sb_rd_en = (state == S_RUN) && ssr_free_found && (sb_step < k_steps);
    sb_raddr = SBAW'(24'(fg) * k_steps + sb_step);
    for (int e = 0; e < SSRS; e++) ssr_we[e] = (ssr_st[e] == SSR_PEND);

    for (int j = 0; j < COLS; j++) begin
      ssr_hit[j] = 1'b0;
      sr_sel[j]  = '0;
      for (int e = 0; e < SSRS; e++)
        if (ssr_st[e] == SSR_VALID && ssr_step[e] == cstep[j]) begin
          ssr_hit[j] = 1'b1;
          sr_sel[j]  = SSW'(e);
        end
      col_load[j] = (state == S_RUN) && col_mask[j] && (col_idle[j] || col_last[j])
                    && (cstep[j] < k_steps) && avail[j] && ssr_hit[j];
      first[j]    = col_load[j] && (cstep[j] == '0);
    end

    pallet_end = (state == S_RUN);
    for (int j = 0; j < COLS; j++)
      if (col_mask[j] && !(cstep[j] == k_steps && col_idle[j])) pallet_end = 1'b0;
  end

  assign nbout_we   = pallet_end && !dr_busy;
  assign disp_start = (state == S_START);

  // ---- drain ------------------------------------------------------------
  logic [23:0] dr_addr;
  assign drain_tile = dr_t;
  assign drain_col  = dr_j;
  assign dr_addr    = cfg.out_base
                    + ((24'(dr_oy) * 24'(cfg.ox) + 24'(dr_ox0) + 24'(dr_j)) * (24'(cfg.ng) * 24'(TILES))
                    + 24'(dr_fg) * 24'(TILES) + 24'(dr_t));
  assign nm_we      = dr_busy && dr_mask[dr_j] && !nm_rd_busy;
  assign nm_waddr   = NAW'(dr_addr >> SW);
  assign nm_wslot   = dr_addr[SW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      done    <= 1'b0;
      ssr_st  <= '{default: SSR_FREE};
      ssr_step <= '0;
      ssr_cnt <= '0;
      sb_step <= '0;
      cstep   <= '0;
      fg      <= '0;
      ox0     <= '0;
      oy      <= '0;
      dr_busy <= 1'b0;
      dr_t    <= '0;
      dr_j    <= '0;
      dr_ox0  <= '0;
      dr_oy   <= '0;
      dr_fg   <= '0;
      dr_mask <= '0;
    end else begin
      done <= 1'b0;

      // drain engine
      if (dr_busy && (nm_we || !dr_mask[dr_j])) begin
        if (32'(dr_j) == COLS-1) begin
          dr_j <= '0;
          if (32'(dr_t) == TILES-1) begin
            dr_t    <= '0;
            dr_busy <= 1'b0;
          end else dr_t <= dr_t + 1'b1;
        end else dr_j <= dr_j + 1'b1;
      end

      case (state)
        S_IDLE: if (go) begin
          fg    <= '0;
          oy    <= '0;
          ox0   <= '0;
          state <= S_START;
        end
        S_START: begin
          ssr_st  <= '{default: SSR_FREE};
          sb_step <= '0;
          cstep   <= '0;
          state   <= S_RUN;
        end
        S_RUN: begin
          // SSR bookkeeping
          for (int e = 0; e < SSRS; e++) begin
            if (ssr_st[e] == SSR_PEND) ssr_st[e] <= SSR_VALID;
            else if (ssr_st[e] == SSR_VALID) begin
              ssr_cnt[e] <= ssr_cnt[e] - ssr_dec[e];
              if (ssr_cnt[e] == ssr_dec[e]) ssr_st[e] <= SSR_FREE;
            end
          end
          if (sb_rd_en) begin
            ssr_st[ssr_free_e]   <= SSR_PEND;
            ssr_step[ssr_free_e] <= sb_step;
            ssr_cnt[ssr_free_e]  <= CNTW'($countones(col_mask));
            sb_step              <= sb_step + 1;
          end
          for (int j = 0; j < COLS; j++)
            if (col_load[j]) cstep[j] <= cstep[j] + 1;

          if (nbout_we) begin
            dr_busy <= 1'b1;
            dr_t    <= '0;
            dr_j    <= '0;
            dr_ox0  <= ox0;
            dr_oy   <= oy;
            dr_fg   <= fg;
            dr_mask <= col_mask;
            if (24'(ox0) + 24'(COLS) < 24'(cfg.ox)) begin
              ox0   <= ox0 + 12'(COLS);
              state <= S_START;
            end else if (oy + 1 < cfg.oy) begin
              ox0   <= '0;
              oy    <= oy + 1;
              state <= S_START;
            end else if (fg + 1 < cfg.ng) begin
              ox0   <= '0;
              oy    <= '0;
              fg    <= fg + 1;
              state <= S_START;
            end else begin
              state <= S_FLUSH;
            end
          end
        end
        S_FLUSH: if (!dr_busy) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
