// tb_dispatcher: self-checking test of the dispatcher with a neuron memory.
// The memory is filled so that every neuron encodes its own brick address
// and lane.  For several layer shapes (strides 1 and 2, windows crossing
// rows, partial pallets) the test plays 16 columns that ask for their steps
// in order with random delays, and checks each delivered brick against the
// address formula, that a column is never served a step twice, that at most
// two pallets are buffered ahead, and that an aligned unit-stride pallet is
// fetched with a single NM row read.
module tb_dispatcher;
  import pra_pkg::*;
  localparam int COLS = 16, LANES = 16, NM_ROWS = 8192, BPR = 16;
  logic clk = 0, rst_n = 0, start = 0;
  layer_cfg_t cfg;
  logic [11:0] ox0, oy;
  logic [23:0] k_steps;
  logic [COLS-1:0] col_mask, take, avail;
  logic [COLS-1:0][23:0] need_step;
  logic [COLS-1:0][255:0] brick;
  logic nm_rd_en, nm_we;
  logic [12:0] nm_raddr, nm_addr;
  logic [3:0] wslot;
  logic [255:0] wdata;
  logic [BPR-1:0][255:0] nm_rdata;
  logic loading;
  int checks = 0, failures = 0, reads = 0, multirow = 0;

  dispatcher #(.COLS(COLS)) dut (.*);
  neuron_memory nm (.clk, .rd_en(nm_rd_en), .we(nm_we), .addr(nm_addr), .wslot, .wdata, .rdata(nm_rdata));
  assign nm_addr = loading ? nm_addr_l : nm_raddr;
  logic [12:0] nm_addr_l;
  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [255:0] pattern(int b);
    logic [255:0] v;
    for (int i = 0; i < LANES; i++) v[i*16 +: 16] = 16'(b * 16 + i);
    return v;
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_pallet(int nx, int fx, int fy, int ibc, int s, int x0, int y0, int ox, int base, bit count_reads);
    int k, exp_reads;
    logic [COLS-1:0][23:0] st;
    int hold [COLS];
    cfg = '0;
    cfg.nx = 12'(nx); cfg.fx = 12'(fx); cfg.fy = 12'(fy); cfg.ib = 12'(ibc);
    cfg.stride = 4'(s); cfg.ox = 12'(ox); cfg.in_base = 24'(base);
    ox0 = 12'(x0); oy = 12'(y0);
    k = fx * fy * ibc; k_steps = 24'(k);
    for (int j = 0; j < COLS; j++) col_mask[j] = (x0 + j) < ox;
    st = '0; need_step = '0; take = '0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    reads = 0;
    for (int j = 0; j < COLS; j++) hold[j] = $urandom % 3;
    while (1) begin
      bit alldone;
      alldone = 1;
      for (int j = 0; j < COLS; j++) if (col_mask[j] && st[j] < k) alldone = 0;
      if (alldone) break;
      need_step = st;
      #1;
      for (int j = 0; j < COLS; j++) begin
        take[j] = 0;
        if (col_mask[j] && st[j] < k && avail[j]) begin
          if (hold[j] > 0) hold[j]--;
          else begin
            int fyy, fxx, ii, b;
            ii = int'(st[j]) % ibc; fxx = (int'(st[j]) / ibc) % fx; fyy = int'(st[j]) / (ibc * fx);
            b = base + ((y0 * s + fyy) * nx + (x0 + j) * s + fxx) * ibc + ii;
            chk(brick[j] == pattern(b), $sformatf("col %0d step %0d brick", j, st[j]));
            take[j] = 1;
            hold[j] = $urandom % 3;
          end
        end
        if (!col_mask[j]) chk(!avail[j], "masked column never served");
      end
      // at most two steps ahead of the slowest active column
      for (int j = 0; j < COLS; j++)
        for (int i = 0; i < COLS; i++)
          if (col_mask[j] && col_mask[i] && avail[j]) chk(st[j] <= st[i] + 2, "two-pallet window");
      @(posedge clk);
      if (nm_rd_en) reads++;
      #1;
      for (int j = 0; j < COLS; j++) if (take[j]) st[j]++;
      take = '0;
      @(negedge clk);
    end
    exp_reads = 0;
    for (int kk = 0; kk < k; kk++) begin
      int rows[$];
      for (int j = 0; j < COLS; j++) if (col_mask[j]) begin
        int ii, fxx, fyy, b;
        ii = kk % ibc; fxx = (kk / ibc) % fx; fyy = kk / (ibc * fx);
        b = base + ((y0 * s + fyy) * nx + (x0 + j) * s + fxx) * ibc + ii;
        if (!(b / 16 inside {rows})) rows.push_back(b / 16);
      end
      exp_reads += rows.size();
      if (count_reads && kk % fx == 0) chk(rows.size() == 1, "aligned step is one row");
    end
    chk(reads == exp_reads, $sformatf("one NM read per distinct row (%0d reads, %0d expected)", reads, exp_reads));
    if (reads > k) multirow++;
  endtask

  initial begin
    cfg = '0; ox0 = '0; oy = '0; k_steps = '0; col_mask = '0; take = '0; need_step = '0;
    nm_we = 0; wslot = '0; wdata = '0; nm_addr_l = '0; loading = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 4096; b++) begin
      @(negedge clk); nm_we = 1; nm_addr_l = 13'(b / 16); wslot = 4'(b % 16); wdata = pattern(b);
    end
    @(negedge clk); nm_we = 0; loading = 0;
    // unit stride, ib = 1, base aligned so each step's 16 bricks are one row
    run_pallet(32, 3, 3, 1, 1, 0, 0, 30, 0, 1);
    run_pallet(32, 3, 3, 1, 1, 16, 1, 30, 0, 0);   // partial pallet (14 windows), crosses rows
    run_pallet(20, 3, 2, 2, 2, 0, 1, 9, 100, 0);   // stride 2, two bricks deep
    run_pallet(40, 1, 1, 3, 1, 5, 2, 40, 37, 0);   // unaligned
    chk(multirow > 0, "multi-row pallet fetch seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
