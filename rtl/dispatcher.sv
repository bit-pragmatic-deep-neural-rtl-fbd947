// dispatcher: collects neuron bricks from the neuron memory for the columns.
//
// For one output pallet (COLS adjacent windows starting at output position
// (ox0, oy)) the dispatcher walks the window steps k = 0..K-1 in the order
// ib (fastest), fx, fy.  Step k of column j needs the input brick
//     b = in_base + ((oy*S + fy)*nx + (ox0 + j)*S + fx)*IB + ib
// i.e. bricks spaced S*IB apart.  A pallet buffer of PALLETS entries holds
// the bricks of consecutive steps.  Filling an entry reads NM rows: each
// cycle the row of the lowest still-missing brick is read, and on its return
// every missing brick in that row is captured, so a unit-stride pallet that
// sits in one or two rows takes one or two reads.  Reads are pipelined (one
// per cycle).  Column j asks for step `need_step[j]`; `avail[j]` says that
// step's brick is buffered and `brick[j]` presents it; `take[j]` consumes
// it.  An entry is freed once every active column (`col_mask`) has taken its
// brick, and then refilled with the next step.  `start` (one cycle) resets
// the buffer for a new pallet; the pallet position must stay stable after.
//
// Follows the paper: strided brick fetch from a single-ported NM that may
// take several cycles per pallet and is overlapped with processing, and a
// two-pallet buffer that lets columns drift apart by one step (Sec. Per-Column
// Synchronization).  The paper reuses an earlier design for the dispatcher
// and does not describe it; the fetch algorithm, the data layout in NM and
// the step order are this design's own.
module dispatcher
  import pra_pkg::*;
#(
  parameter int unsigned COLS    = 16,
  parameter int unsigned LANES   = 16,
  parameter int unsigned PALLETS = 2,
  parameter int unsigned NM_ROWS = 8192,
  parameter int unsigned BPR     = 16,
  localparam int unsigned NAW    = $clog2(NM_ROWS),
  localparam int unsigned SW     = $clog2(BPR),
  localparam int unsigned BRK_W  = LANES * NEURON_W,
  localparam int unsigned EW     = (PALLETS > 1) ? $clog2(PALLETS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  layer_cfg_t                    cfg,
  input  logic                          start,
  input  logic [11:0]                   ox0,
  input  logic [11:0]                   oy,
  input  logic [23:0]                   k_steps,
  input  logic [COLS-1:0]               col_mask,
  // neuron memory read port
  output logic                          nm_rd_en,
  output logic [NAW-1:0]                nm_raddr,
  input  logic [BPR-1:0][BRK_W-1:0]     nm_rdata,
  // column side
  input  logic [COLS-1:0][23:0]         need_step,
  input  logic [COLS-1:0]               take,
  output logic [COLS-1:0]               avail,
  output logic [COLS-1:0][BRK_W-1:0]    brick
);

  typedef struct packed {
    logic               valid;    // all bricks present
    logic               filling;  // being fetched
    logic [23:0]        step;
    logic [COLS-1:0]    rem;      // columns that have not taken it yet
  } entry_t;

  entry_t [PALLETS-1:0]                       ent;
  logic   [PALLETS-1:0][COLS-1:0][BRK_W-1:0]  bricks;
  logic   [COLS-1:0][23:0]                    addr_q;   // addresses of the filling entry
  logic   [COLS-1:0]                          pend;
  logic   [EW-1:0]                            fill_e;
  logic                                       inflight;
  logic   [NAW-1:0]                           inflight_row;

  logic [23:0] fetch_step;
  logic [11:0] fx_c, fy_c, ib_c;

  // addresses of the next step to fetch
  logic [23:0] b0, delta;
  logic [COLS-1:0][23:0] addr_n;
  assign b0    = cfg.in_base + ((24'(oy) * 24'(cfg.stride) + 24'(fy_c)) * 24'(cfg.nx)
                 + 24'(ox0) * 24'(cfg.stride) + 24'(fx_c)) * 24'(cfg.ib) + 24'(ib_c);
  assign delta = 24'(cfg.stride) * 24'(cfg.ib);
  always_comb
    for (int j = 0; j < COLS; j++) addr_n[j] = b0 + 24'(j) * delta;

  function automatic logic [NAW-1:0] row_of(logic [23:0] a);
    return NAW'(a >> SW);
  endfunction

  // ---- filling engine --------------------------------------------------
  logic [COLS-1:0] match, pend_n;
  logic            filling;
  int              issue_j;
  logic            free_found;
  logic [EW-1:0]   free_e;

  assign filling = ent[fill_e].filling;

  always_comb begin
    for (int j = 0; j < COLS; j++)
      match[j] = inflight && pend[j] && (row_of(addr_q[j]) == inflight_row);
    pend_n  = pend & ~match;
    issue_j = 0;
    for (int j = COLS-1; j >= 0; j--) if (pend_n[j]) issue_j = j;
    nm_rd_en = filling && (pend_n != '0);
    nm_raddr = row_of(addr_q[issue_j]);
    free_found = 1'b0;
    free_e     = '0;
    for (int e = PALLETS-1; e >= 0; e--)
      if (!ent[e].valid && !ent[e].filling) begin
        free_found = 1'b1;
        free_e     = EW'(e);
      end
  end

  // ---- column side -----------------------------------------------------
  always_comb begin
    avail = '0;
    brick = '0;
    for (int j = 0; j < COLS; j++)
      for (int e = 0; e < PALLETS; e++)
        if (ent[e].valid && ent[e].step == need_step[j] && ent[e].rem[j]) begin
          avail[j] = 1'b1;
          brick[j] = bricks[e][j];
        end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ent        <= '0;
      pend       <= '0;
      fill_e     <= '0;
      inflight   <= 1'b0;
      inflight_row <= '0;
      fetch_step <= '0;
      fx_c <= '0; fy_c <= '0; ib_c <= '0;
    end else if (start) begin
      ent        <= '0;
      pend       <= '0;
      inflight   <= 1'b0;
      fetch_step <= '0;
      fx_c <= '0; fy_c <= '0; ib_c <= '0;
    end else begin
      // capture returning row
      for (int j = 0; j < COLS; j++)
        if (match[j]) bricks[fill_e][j] <= nm_rdata[addr_q[j][SW-1:0]];
      inflight     <= nm_rd_en;
      inflight_row <= nm_raddr;
      pend         <= pend_n;
      if (filling && pend_n == '0) begin
        ent[fill_e].filling <= 1'b0;
        ent[fill_e].valid   <= 1'b1;
      end
      // consumption
      for (int e = 0; e < PALLETS; e++)
        if (ent[e].valid) begin
          logic [COLS-1:0] r;
          r = ent[e].rem;
          for (int j = 0; j < COLS; j++)
            if (take[j] && ent[e].step == need_step[j]) r[j] = 1'b0;
          ent[e].rem <= r;
          if (r == '0) ent[e].valid <= 1'b0;
        end
      // allocate the next step
      if (!filling && free_found && fetch_step < k_steps) begin
        ent[free_e].filling <= 1'b1;
        ent[free_e].step    <= fetch_step;
        ent[free_e].rem     <= col_mask;
        fill_e              <= free_e;
        addr_q              <= addr_n;
        pend                <= col_mask;
        fetch_step          <= fetch_step + 1;
        if (ib_c + 1 < cfg.ib) ib_c <= ib_c + 1;
        else begin
          ib_c <= '0;
          if (fx_c + 1 < cfg.fx) fx_c <= fx_c + 1;
          else begin
            fx_c <= '0;
            fy_c <= fy_c + 1;
          end
        end
      end
    end
  end

endmodule
