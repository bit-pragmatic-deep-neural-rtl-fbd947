// tb_pra_tile: self-checking test of one tile (4 columns x 16 filters).
// Synapse sets are written into the SB, read into the SSR and copied into
// the column synapse registers; random oneffset controls (fire, sign,
// 1st- and 2nd-stage shifts) are then driven per column.  An integer model
// accumulates sum(+-s << (k + c)) per PIP.  At the end NBout is written and
// every output brick is drained through the output unit and compared.  A
// second pass uses cfg.acc_in (continue from NBout) and a third cfg.max_out.
module tb_pra_tile;
  import pra_pkg::*;
  localparam int COLS = 4, F = 16, LANES = 16, SB_ROWS = 64;
  logic clk = 0, rst_n = 0;
  layer_cfg_t cfg;
  logic sb_we, sb_rd_en, nbout_we;
  logic [5:0] sb_waddr, sb_raddr;
  logic [F-1:0][LANES-1:0][15:0] sb_wdata;
  logic [0:0] ssr_we;
  logic [COLS-1:0] sr_load, first;
  logic [COLS-1:0][0:0] sr_sel;
  logic [COLS-1:0][LANES-1:0] fire, neg;
  logic [COLS-1:0][LANES-1:0][1:0] k_shift;
  logic [COLS-1:0][3:0] c_shift;
  logic [1:0] drain_col;
  logic [F-1:0][15:0] drain_brick;
  logic [F-1:0][LANES-1:0][15:0] sets [SB_ROWS];
  longint acc [COLS][F];
  longint prev [COLS][F];
  int checks = 0, failures = 0;

  pra_tile #(.COLS(COLS), .SB_ROWS(SB_ROWS)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] expect_out(longint v);
    if (cfg.relu && v < 0) v = 0;
    v = v >>> cfg.out_shift;
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return 16'(v);
  endfunction

  task automatic pass(int steps, bit acc_in, bit max_out);
    cfg.acc_in = acc_in; cfg.max_out = max_out;
    for (int j = 0; j < COLS; j++) for (int f = 0; f < F; f++) begin
      prev[j][f] = acc[j][f];
      acc[j][f] = acc_in ? acc[j][f] : 0;
    end
    for (int k = 0; k < steps; k++) begin
      @(negedge clk); sb_rd_en = 1; sb_raddr = 6'(k);
      @(negedge clk); sb_rd_en = 0; ssr_we = 1;
      @(negedge clk); ssr_we = 0; sr_load = '1; first = (k == 0) ? '1 : '0;
      fire = '0;
      @(negedge clk); sr_load = '0; first = '0;
      repeat (1 + $urandom % 5) begin
        for (int j = 0; j < COLS; j++) begin
          c_shift[j] = 4'($urandom);
          for (int i = 0; i < LANES; i++) begin
            fire[j][i] = 1'($urandom); neg[j][i] = ($urandom % 4) == 0; k_shift[j][i] = 2'($urandom);
            if (fire[j][i])
              for (int f = 0; f < F; f++) begin
                longint s;
                s = longint'($signed(sets[k][f][i]));
                acc[j][f] += (neg[j][i] ? -s : s) <<< (int'(k_shift[j][i]) + int'(c_shift[j]));
              end
          end
        end
        @(negedge clk);
      end
      fire = '0;
    end
    @(negedge clk); nbout_we = 1;
    @(negedge clk); nbout_we = 0;
    for (int j = 0; j < COLS; j++) begin
      drain_col = 2'(j); #1;
      for (int f = 0; f < F; f++) begin
        longint v;
        v = (max_out && prev[j][f] > acc[j][f]) ? prev[j][f] : acc[j][f];
        if (max_out) acc[j][f] = v;
        chk(drain_brick[f] == expect_out(v), $sformatf("col %0d filter %0d: %h exp %h", j, f, drain_brick[f], expect_out(v)));
      end
    end
  endtask

  initial begin
    cfg = '0; cfg.relu = 1; cfg.out_shift = 6'd14; cfg.keep_msb = 4'd15; cfg.keep_lsb = 4'd0;
    sb_we = 0; sb_rd_en = 0; nbout_we = 0; sb_waddr = '0; sb_raddr = '0; sb_wdata = '0;
    ssr_we = '0; sr_load = '0; first = '0; sr_sel = '0; fire = '0; neg = '0; k_shift = '0; c_shift = '0;
    drain_col = '0;
    for (int j = 0; j < COLS; j++) for (int f = 0; f < F; f++) acc[j][f] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < SB_ROWS; r++) begin
      for (int f = 0; f < F; f++) for (int i = 0; i < LANES; i++) sets[r][f][i] = 16'($signed(12'($urandom)));
      @(negedge clk); sb_we = 1; sb_waddr = 6'(r); sb_wdata = sets[r];
    end
    @(negedge clk); sb_we = 0;
    pass(9, 0, 0);
    pass(5, 1, 0);
    pass(4, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
