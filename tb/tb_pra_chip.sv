// tb_pra_chip: end-to-end test of the accelerator on small convolutional
// layers (2 tiles, 4 window columns; 16 filters per tile, 16-neuron bricks).
// The host loads input neurons into NM and synapses into the SBs, starts the
// layer, waits for done and reads the output neurons back from NM, comparing
// each with a direct convolution followed by ReLU, alignment shift,
// saturation and precision trimming.  Neurons are random with few essential
// bits, some zero and some negative.  Two layers are run: 3x3 stride 1 over
// 32 channels, and 3x3 stride 2 with a partial last pallet and trimming.
// The test counts how often the mechanisms of the design occur (2-stage lane
// stalls, columns waiting for the SSR, columns waiting for the dispatcher,
// columns working on different steps, multi-row pallet fetches, negative
// neurons, partial pallets, trimmed output bits) and fails if one never does.
// It also checks that no pallet takes longer than the bit-parallel worst case
// of 16 cycles per brick step plus a fixed overhead.
module tb_pra_chip;
  import pra_pkg::*;
  localparam int TILES = 2, COLS = 4, F = 16, LANES = 16, SB_ROWS = 256, NM_ROWS = 512;
  localparam int NAW = $clog2(NM_ROWS), SBAW = $clog2(SB_ROWS), TW = (TILES > 1) ? $clog2(TILES) : 1;
  logic clk = 0, rst_n = 0, go = 0, busy, done;
  layer_cfg_t cfg;
  logic host_nm_we = 0, host_nm_rd = 0, host_sb_we = 0;
  logic [NAW-1:0] host_nm_addr = '0;
  logic [3:0] host_nm_slot = '0;
  logic [255:0] host_nm_wdata = '0;
  logic [15:0][255:0] nm_rdata;
  logic [TW-1:0] host_sb_tile = '0;
  logic [SBAW-1:0] host_sb_addr = '0;
  logic [F-1:0][LANES-1:0][15:0] host_sb_wdata = '0;
  int checks = 0, failures = 0;
  int n_lane_stall = 0, n_ssr_wait = 0, n_disp_wait = 0, n_skew = 0, n_multirow = 0,
      n_neg = 0, n_partial = 0, n_trim = 0;

  pra_chip #(.TILES(TILES), .COLS(COLS), .SB_ROWS(SB_ROWS), .NM_ROWS(NM_ROWS)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- event monitors -----------------------------------------------------
  always @(posedge clk) if (busy) begin
    for (int j = 0; j < COLS; j++) begin
      logic free;
      free = dut.col_idle[j] || dut.col_last[j];
      if (dut.fire[j] & dut.neg[j]) n_neg++;
      if (dut.u_ctrl.state == 2'd2 && dut.col_mask[j] && free && dut.need_step[j] < dut.k_steps) begin
        if (dut.avail[j] && !dut.u_ctrl.ssr_hit[j]) n_ssr_wait++;
        if (!dut.avail[j] && dut.u_ctrl.ssr_hit[j]) n_disp_wait++;
      end
      if (dut.col_mask[j] && dut.col_mask[0] && dut.need_step[j] != dut.need_step[0]) n_skew++;
    end
    if (dut.disp_start && dut.col_mask != '1) n_partial++;
  end

  for (genvar j = 0; j < COLS; j++) begin : g_mon
    always @(posedge clk)
      if (busy && (dut.g_col[j].u_col.valid & ~dut.g_col[j].u_col.fire) != 0) n_lane_stall++;
  end

  // ---- data -------------------------------------------------------------
  int nx, ny, ib, fx, fy, s, ox, oy, in_base, out_base;
  logic [15:0] nin [int];                  // key (y*nx + x)*I + i
  logic [15:0] syn [int];                  // key ((f*fy + y)*fx + x)*I + i

  function automatic logic [15:0] rnd_neuron(bit allow_neg);
    logic [15:0] v;
    v = 16'($urandom) & 16'($urandom) & 16'($urandom) & 16'h0fff;
    if ($urandom % 4 == 0) v = '0;
    if (allow_neg && $urandom % 6 == 0) v = -v;
    return v;
  endfunction

  task automatic run_layer(int p_nx, int p_ib, int p_f, int p_s, int p_base, int p_obase,
                           int shift, int kmsb, int klsb, bit negs);
    int I, K, pallets, rows_read, steps;
    nx = p_nx; ny = p_nx; ib = p_ib; fx = p_f; fy = p_f; s = p_s; in_base = p_base; out_base = p_obase;
    I = ib * 16;
    ox = (nx - fx) / s + 1; oy = (ny - fy) / s + 1;
    K = fx * fy * ib;
    nin.delete(); syn.delete();
    // input neurons -> NM
    for (int y = 0; y < ny; y++) for (int x = 0; x < nx; x++) for (int b = 0; b < ib; b++) begin
      int a;
      logic [255:0] w;
      for (int l = 0; l < 16; l++) begin
        nin[(y*nx + x)*I + b*16 + l] = rnd_neuron(negs);
        w[l*16 +: 16] = nin[(y*nx + x)*I + b*16 + l];
      end
      a = in_base + (y*nx + x)*ib + b;
      @(negedge clk); host_nm_we = 1; host_nm_addr = NAW'(a / 16); host_nm_slot = 4'(a % 16); host_nm_wdata = w;
    end
    @(negedge clk); host_nm_we = 0;
    // synapses -> SB rows (row k holds step k = (fy, fx, ib) with ib fastest)
    for (int f = 0; f < TILES*F; f++)
      for (int y = 0; y < fy; y++) for (int x = 0; x < fx; x++) for (int i = 0; i < I; i++)
        syn[((f*fy + y)*fx + x)*I + i] = 16'($signed(10'($urandom)));
    for (int t = 0; t < TILES; t++)
      for (int k = 0; k < K; k++) begin
        int b, x, y;
        logic [F-1:0][LANES-1:0][15:0] row;
        b = k % ib; x = (k / ib) % fx; y = k / (ib * fx);
        for (int f = 0; f < F; f++) for (int l = 0; l < 16; l++)
          row[f][l] = syn[(((t*F + f)*fy + y)*fx + x)*I + b*16 + l];
        @(negedge clk); host_sb_we = 1; host_sb_tile = TW'(t); host_sb_addr = SBAW'(k); host_sb_wdata = row;
      end
    @(negedge clk); host_sb_we = 0;
    // configure and run
    cfg = '0;
    cfg.nx = 12'(nx); cfg.fx = 12'(fx); cfg.fy = 12'(fy); cfg.ib = 12'(ib); cfg.stride = 4'(s);
    cfg.ox = 12'(ox); cfg.oy = 12'(oy); cfg.ng = 8'd1; cfg.in_base = 24'(in_base); cfg.out_base = 24'(out_base);
    cfg.out_shift = 6'(shift); cfg.keep_msb = 4'(kmsb); cfg.keep_lsb = 4'(klsb); cfg.relu = 1'b1;
    pallets = ((ox + COLS - 1) / COLS) * oy;
    rows_read = 0; steps = 0;
    @(negedge clk); go = 1; @(negedge clk); go = 0;
    begin
      int cyc, pal_cyc, worst;
      cyc = 0; pal_cyc = 0; worst = 0;
      while (!done) begin
        @(posedge clk);
        cyc++; pal_cyc++;
        if (dut.d_rd_en) rows_read++;
        if (dut.disp_start) begin
          if (pal_cyc > worst) worst = pal_cyc;
          pal_cyc = 0;
        end
        if (cyc > 2000000) break;
      end
      steps = pallets * K;
      if (rows_read > steps) n_multirow++;
      chk(done, "layer finished");
      chk(worst <= 16 * K + 40, $sformatf("pallet time %0d within bit-parallel bound %0d", worst, 16 * K + 40));
      $display("layer %0dx%0dx%0d f%0d s%0d: %0d pallets, %0d cycles, %0d NM row reads for %0d steps",
               nx, ny, I, fx, s, pallets, cyc, rows_read, steps);
    end
    // read back and compare
    for (int y = 0; y < oy; y++) for (int x = 0; x < ox; x++) for (int t = 0; t < TILES; t++) begin
      int a;
      a = out_base + ((y*ox + x)*TILES + t);
      @(negedge clk); host_nm_rd = 1; host_nm_addr = NAW'(a / 16);
      @(negedge clk); host_nm_rd = 0;
      for (int f = 0; f < F; f++) begin
        longint acc, v;
        logic [15:0] e, got;
        acc = 0;
        for (int yy = 0; yy < fy; yy++) for (int xx = 0; xx < fx; xx++) for (int i = 0; i < I; i++)
          acc += longint'($signed(syn[(((t*F + f)*fy + yy)*fx + xx)*I + i]))
               * longint'($signed(nin[((y*s + yy)*nx + (x*s + xx))*I + i]));
        v = acc < 0 ? 0 : acc;
        v = v >>> shift;
        if (v > 32767) v = 32767;
        e = 16'(v);
        for (int b = 0; b < 16; b++) if (b > kmsb || b < klsb) begin
          if (e[b]) n_trim++;
          e[b] = 1'b0;
        end
        got = nm_rdata[a % 16][f*16 +: 16];
        chk(got == e, $sformatf("o(%0d,%0d,%0d) = %h, expected %h", x, y, t*F + f, got, e));
      end
    end
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(10, 2, 3, 1, 0, 4000, 8, 15, 0, 1);
    run_layer(11, 1, 3, 2, 300, 6000, 6, 11, 2, 0);
    $display("events: lane_stall=%0d ssr_wait=%0d disp_wait=%0d column_skew=%0d multirow=%0d neg=%0d partial=%0d trim=%0d",
             n_lane_stall, n_ssr_wait, n_disp_wait, n_skew, n_multirow, n_neg, n_partial, n_trim);
    chk(n_lane_stall > 0, "2-stage lane stall happened");
    chk(n_ssr_wait > 0, "column waited for SSR");
    chk(n_disp_wait > 0, "column waited for dispatcher");
    chk(n_skew > 0, "columns out of step (per-column sync)");
    chk(n_multirow > 0, "multi-row pallet fetch");
    chk(n_neg > 0, "negative neuron terms");
    chk(n_partial > 0, "partial pallet");
    chk(n_trim > 0, "precision trimming removed bits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
