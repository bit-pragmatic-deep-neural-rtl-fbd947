// tb_pra_controller: self-checking test of the layer controller.
// The window columns and the dispatcher are replaced by simple models: a
// loaded column stays busy for a random 1..16 cycles (with `last` in its
// final cycle) and a column's next brick becomes available after a random
// delay.  The test follows the SB reads into a model of the SSR and checks
// that every column load copies the synapse set of its own step, that each
// SB row is read exactly once per pallet, that `first` marks step 0 only,
// that NBout is written once per pallet after all columns finished, that
// the drain writes every expected output brick address once and never while
// the dispatcher reads NM, that some column had to wait for the single SSR,
// and that `done` comes at the end.
module tb_pra_controller;
  import pra_pkg::*;
  localparam int TILES = 2, COLS = 4, SSRS = 1;
  logic clk = 0, rst_n = 0, go = 0, busy, done;
  layer_cfg_t cfg;
  logic disp_start, nm_rd_busy, sb_rd_en, nbout_we, nm_we;
  logic [11:0] ox0, oy;
  logic [23:0] k_steps;
  logic [COLS-1:0] col_mask, avail, col_last, col_idle, col_load, first;
  logic [COLS-1:0][23:0] need_step;
  logic [11:0] sb_raddr;
  logic [0:0] ssr_we;
  logic [COLS-1:0][0:0] sr_sel;
  logic [0:0] drain_tile;
  logic [1:0] drain_col;
  logic [12:0] nm_waddr;
  logic [3:0] nm_wslot;
  int checks = 0, failures = 0;

  pra_controller #(.TILES(TILES), .COLS(COLS), .SSRS(SSRS)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // column and dispatcher models
  int busy_left [COLS];
  int avail_in [COLS];
  int sb_pipe, ssr_row, pallet_reads, n_ssr_wait, n_pallets, n_nbout;
  int written [int];
  bit sb_pipe_v;

  always_comb
    for (int j = 0; j < COLS; j++) begin
      col_idle[j] = busy_left[j] == 0;
      col_last[j] = busy_left[j] == 1;
      avail[j]    = avail_in[j] == 0;
    end

  always @(posedge clk) begin
    nm_rd_busy <= ($urandom % 3) == 0;
    if (disp_start) pallet_reads = 0;
    // SB -> SSR model
    if (sb_pipe_v && ssr_we[0]) ssr_row = sb_pipe;
    sb_pipe_v = sb_rd_en;
    if (sb_rd_en) begin sb_pipe = int'(sb_raddr); pallet_reads++; end
    for (int j = 0; j < COLS; j++) begin
      if (busy && col_mask[j] && (col_idle[j] || col_last[j]) && need_step[j] < k_steps
          && avail[j] && !col_load[j]) n_ssr_wait++;
      if (col_load[j]) begin
        chk(ssr_row == int'(k_steps) * int'(dut.fg) + int'(need_step[j]), "column copies its own synapse set");
        chk(first[j] == (need_step[j] == 0), "first marks step 0");
        busy_left[j] = 1 + $urandom % 16;
        avail_in[j] = $urandom % 3;
      end else begin
        if (busy_left[j] > 0) busy_left[j]--;
        if (avail_in[j] > 0) avail_in[j]--;
      end
    end
    if (nbout_we) begin
      n_nbout++;
      chk(pallet_reads == int'(k_steps), "each SB row read once per pallet");
      for (int j = 0; j < COLS; j++)
        if (col_mask[j]) chk(need_step[j] == k_steps && busy_left[j] == 0, "NBout written after all columns finished");
    end
    if (nm_we) begin
      int a;
      chk(!nm_rd_busy, "drain yields NM to the dispatcher");
      a = int'(nm_waddr) * 16 + int'(nm_wslot);
      chk(!written.exists(a), "each output brick written once");
      written[a] = 1;
    end
  end

  task automatic run(int ox_, int oy_, int ng, int fx, int ib);
    int exp_pallets;
    cfg = '0;
    cfg.nx = 12'(ox_ + fx - 1); cfg.fx = 12'(fx); cfg.fy = 12'(fx); cfg.ib = 12'(ib); cfg.stride = 4'd1;
    cfg.ox = 12'(ox_); cfg.oy = 12'(oy_); cfg.ng = 8'(ng); cfg.out_base = 24'd1000;
    written.delete(); n_nbout = 0;
    @(negedge clk); go = 1; @(negedge clk); go = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    exp_pallets = ((ox_ + COLS - 1) / COLS) * oy_ * ng;
    chk(n_nbout == exp_pallets, $sformatf("pallets %0d exp %0d", n_nbout, exp_pallets));
    chk(written.size() == ox_ * oy_ * ng * TILES, "all output bricks written");
    for (int y = 0; y < oy_; y++) for (int x = 0; x < ox_; x++) for (int g = 0; g < ng; g++)
      for (int t = 0; t < TILES; t++)
        chk(written.exists(1000 + (y * ox_ + x) * ng * TILES + g * TILES + t), "output address");
    chk(!busy, "idle after done");
  endtask

  initial begin
    cfg = '0; nm_rd_busy = 0; sb_pipe_v = 0; ssr_row = -1; n_ssr_wait = 0;
    for (int j = 0; j < COLS; j++) begin busy_left[j] = 0; avail_in[j] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(8, 2, 1, 3, 2);
    run(6, 3, 2, 1, 3);
    chk(n_ssr_wait > 0, "a column waited for the SSR");
    $display("ssr waits: %0d", n_ssr_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
