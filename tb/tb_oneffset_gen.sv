// tb_oneffset_gen: self-checking test of the oneffset generator.
// Loads random signed neurons (biased towards few essential bits), advances
// with random pauses and checks that the stream lists the magnitude's set
// bits from the highest down, that eon marks the last one, that the sign is
// reported, and that a neuron with p essential bits takes exactly p advancing
// cycles.
module tb_oneffset_gen;
  import pra_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, adv = 0;
  logic [15:0] neuron;
  oneffset_t off;
  logic valid, neg;
  int checks = 0, failures = 0;

  oneffset_gen dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    neuron = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      logic [15:0] v, mag;
      int exp_pos, cyc;
      v = 16'($urandom) & 16'($urandom) & 16'($urandom);
      if (n % 5 == 0) v = 16'($urandom);
      if (n == 1) v = 16'h0005;              // paper example 101 -> (2,0)(0,1)
      if (n == 2) v = 16'h0000;
      if (n == 3) v = 16'h8000;
      mag = v[15] ? -v : v;
      @(negedge clk); load = 1; neuron = v; adv = 0;
      @(negedge clk); load = 0;
      chk(neg == v[15], "sign");
      exp_pos = 15; cyc = 0;
      while (mag != 0) begin
        while (!mag[exp_pos]) exp_pos--;
        chk(valid, "valid while bits remain");
        chk(int'(off.pow) == exp_pos, $sformatf("n=%h pow=%0d exp=%0d", v, off.pow, exp_pos));
        chk(off.eon == ((mag & ~(16'(1) << exp_pos)) == 0), "eon");
        if (n == 1 && cyc == 0) chk(off.pow == 4'b0010 && !off.eon, "paper example first");
        if (n == 1 && cyc == 1) chk(off.pow == 4'b0000 && off.eon, "paper example second");
        adv = ($urandom % 4) != 0;
        @(negedge clk);
        if (adv) begin mag[exp_pos] = 1'b0; cyc++; end
      end
      adv = 0;
      chk(!valid, "not valid at end");
      chk(cyc == $countones(v[15] ? -v : v), "cycles == essential bits");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
