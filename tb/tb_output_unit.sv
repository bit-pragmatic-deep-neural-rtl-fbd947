// tb_output_unit: self-checking test of the output unit.
// Random accumulators and settings (ReLU on/off, alignment shift, kept bit
// range) against an integer model; includes saturation at both ends.
module tb_output_unit;
  import pra_pkg::*;
  localparam int LANES = 16;
  layer_cfg_t cfg;
  logic [LANES-1:0][ACC_W-1:0] acc;
  logic [LANES-1:0][15:0] neuron;
  int checks = 0, failures = 0;

  output_unit dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    cfg = '0;
    for (int n = 0; n < 2000; n++) begin
      cfg.relu = 1'($urandom);
      cfg.out_shift = 6'($urandom % 24);
      cfg.keep_lsb = 4'($urandom);
      cfg.keep_msb = 4'($urandom);
      if ($urandom % 2) begin cfg.keep_lsb = 0; cfg.keep_msb = 15; end
      for (int i = 0; i < LANES; i++)
        acc[i] = ACC_W'(longint'($signed(32'($urandom))) * longint'($urandom % 3000));
      #1;
      for (int i = 0; i < LANES; i++) begin
        longint v;
        logic [15:0] e;
        v = longint'($signed(acc[i]));
        if (cfg.relu && v < 0) v = 0;
        v = v >>> cfg.out_shift;
        if (v > 32767) v = 32767;
        if (v < -32768) v = -32768;
        e = 16'(v);
        for (int b = 0; b < 16; b++) if (b > cfg.keep_msb || b < cfg.keep_lsb) e[b] = 1'b0;
        chk(neuron[i] == e, $sformatf("acc %0d -> %h exp %h", $signed(acc[i]), neuron[i], e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
