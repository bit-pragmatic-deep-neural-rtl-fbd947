// tb_neuron_memory: self-checking test of the neuron memory.
// Writes random bricks into random (row, slot) places, then reads whole rows
// back with one cycle latency and compares every slot.
module tb_neuron_memory;
  localparam int ROWS = 8192, BPR = 16, BRK_W = 256;
  logic clk = 0, rd_en = 0, we = 0;
  logic [12:0] addr;
  logic [3:0] wslot;
  logic [BRK_W-1:0] wdata;
  logic [BPR-1:0][BRK_W-1:0] rdata;
  logic [BRK_W-1:0] shadow [int];
  int checks = 0, failures = 0;

  neuron_memory dut (.*);
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
    addr = '0; wslot = '0; wdata = '0;
    // fill 20 rows completely, then overwrite random bricks
    for (int r = 0; r < 20; r++)
      for (int s = 0; s < BPR; s++) begin
        @(negedge clk); we = 1; addr = 13'(r * 397); wslot = 4'(s);
        for (int w = 0; w < 8; w++) wdata[w*32 +: 32] = $urandom;
        shadow[r * 16 + s] = wdata;
      end
    for (int n = 0; n < 100; n++) begin
      int r, s;
      r = $urandom % 20; s = $urandom % 16;
      @(negedge clk); we = 1; addr = 13'(r * 397); wslot = 4'(s);
      for (int w = 0; w < 8; w++) wdata[w*32 +: 32] = $urandom;
      shadow[r * 16 + s] = wdata;
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < 20; r++) begin
      @(negedge clk); rd_en = 1; addr = 13'(r * 397);
      @(negedge clk); rd_en = 0;
      for (int s = 0; s < BPR; s++) chk(rdata[s] == shadow[r * 16 + s], $sformatf("row %0d slot %0d", r, s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
