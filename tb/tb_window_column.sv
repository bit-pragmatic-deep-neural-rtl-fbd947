// tb_window_column: self-checking test of one window column (L = 2).
// Loads random neuron bricks and runs each to completion.  Checks that the
// terms issued per lane add up to the neuron's magnitude (sum of
// 2^(k + c) over the cycles the lane fires), that the sign is reported, that
// the brick takes exactly as many cycles as an independent model of the
// min-offset / 2^L-window schedule predicts, and that `last` is high only in
// the final cycle.  Also runs the neurons of the paper's 2-stage example
// (bits {8,5,1}, {7,0}, {7,6,4}), which finish in 4 cycles.
module tb_window_column;
  import pra_pkg::*;
  localparam int LANES = 16;
  logic clk = 0, rst_n = 0, load = 0;
  logic [LANES-1:0][15:0] brick;
  logic [LANES-1:0] fire, neg;
  logic [LANES-1:0][1:0] k_shift;
  logic [3:0] c_shift;
  logic last, idle;
  int checks = 0, failures = 0, stalls = 0;

  window_column #(.LANES(LANES), .L(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [15:0] mag16(logic [15:0] v);
    return v[15] ? 16'(-v) : v;
  endfunction

  function automatic int model_cycles(logic [LANES-1:0][15:0] b);
    logic [LANES-1:0][15:0] m;
    int cyc = 0;
    for (int i = 0; i < LANES; i++) m[i] = mag16(b[i]);
    while (m != '0) begin
      int top[LANES];
      int mn = 99;
      for (int i = 0; i < LANES; i++) begin
        top[i] = -1;
        for (int p = 0; p < 16; p++) if (m[i][p]) top[i] = p;
        if (top[i] >= 0 && top[i] < mn) mn = top[i];
      end
      for (int i = 0; i < LANES; i++)
        if (top[i] >= 0 && top[i] - mn < 4) m[i][top[i]] = 1'b0;
      cyc++;
    end
    return cyc;
  endfunction

  initial begin
    brick = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      longint got[LANES];
      int cyc, exp_cyc;
      for (int i = 0; i < LANES; i++) begin
        brick[i] = 16'($urandom) & 16'($urandom) & 16'($urandom);
        if ($urandom % 8 == 0) brick[i] = -brick[i];
        if ($urandom % 4 == 0) brick[i] = '0;
        got[i] = 0;
      end
      if (n == 0) begin
        brick = '0;
        brick[0] = 16'b100100010; brick[1] = 16'b010000001; brick[2] = 16'b011010000;
      end
      exp_cyc = model_cycles(brick);
      @(negedge clk); load = 1;
      @(negedge clk); load = 0;
      chk(idle == (brick == '0), "idle only for zero brick");
      cyc = 0;
      while (!idle) begin
        for (int i = 0; i < LANES; i++) begin
          if (fire[i]) got[i] += longint'(1) << (int'(k_shift[i]) + int'(c_shift));
          else if (brick[i] != 0 && got[i] != mag16(brick[i])) stalls++;
          if (brick[i] != 0) chk(neg[i] == brick[i][15], "neg");
        end
        cyc++;
        chk(last == (cyc == exp_cyc), $sformatf("last at cycle %0d of %0d", cyc, exp_cyc));
        @(negedge clk);
        if (cyc > 40) break;
      end
      chk(cyc == exp_cyc, $sformatf("cycles %0d exp %0d", cyc, exp_cyc));
      if (n == 0) chk(cyc == 4, "paper example in 4 cycles");
      for (int i = 0; i < LANES; i++)
        chk(got[i] == longint'(mag16(brick[i])), $sformatf("lane %0d sum", i));
    end
    chk(stalls > 0, "2-stage lane stall seen");
    $display("lane stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
