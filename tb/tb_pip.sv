// tb_pip: self-checking test of the Pragmatic inner-product unit (L = 2).
// Drives random synapses, fire/neg masks and shifts, a first-cycle load from
// i_nbout and the max output, and compares the accumulator each cycle with
// an integer model: acc = (first ? (acc_in ? i_nbout : 0) : acc) + sum(+-s_i << k_i) << c.
module tb_pip;
  import pra_pkg::*;
  localparam int LANES = 16;
  logic clk = 0, rst_n = 0;
  logic [LANES-1:0][15:0] syn;
  logic [LANES-1:0] fire, neg;
  logic [LANES-1:0][1:0] k_shift;
  logic [3:0] c_shift;
  logic first, max_sel, acc_in;
  logic [ACC_W-1:0] i_nbout, o_nbout, out;
  longint model;
  int checks = 0, failures = 0;

  pip #(.LANES(LANES), .L(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    syn = '0; fire = '0; neg = '0; k_shift = '0; c_shift = '0; first = 0; i_nbout = '0; max_sel = 0; acc_in = 1;
    model = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      longint sum;
      @(negedge clk);
      for (int i = 0; i < LANES; i++) begin
        syn[i] = 16'($urandom);
        if (n % 7 == 0) syn[i] = 16'h8000;
        fire[i] = 1'($urandom);
        neg[i] = 1'($urandom);
        k_shift[i] = 2'($urandom);
      end
      c_shift = 4'($urandom);
      first = ($urandom % 20) == 0;
      i_nbout = ACC_W'(longint'($signed(32'($urandom))) * 64);
      max_sel = 1'($urandom);
      acc_in = ($urandom % 4) != 0;
      #1;
      chk(out == ((max_sel && $signed(i_nbout) > $signed(o_nbout)) ? i_nbout : o_nbout), "max/out");
      sum = 0;
      for (int i = 0; i < LANES; i++)
        if (fire[i]) sum += (neg[i] ? -longint'($signed(syn[i])) : longint'($signed(syn[i]))) <<< k_shift[i];
      model = (first ? (acc_in ? longint'($signed(i_nbout)) : 0) : model) + (sum <<< c_shift);
      @(posedge clk); #1;
      chk(longint'($signed(o_nbout)) == model, $sformatf("acc %0d vs %0d", $signed(o_nbout), model));
      if ($urandom % 50 == 0) begin  // keep within range
        @(negedge clk); fire = '0; first = 1; acc_in = 0; @(posedge clk); #1; model = 0; first = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
