// tb_synapse_buffer: self-checking test of the synapse buffer.
// Writes random 4096-bit rows at random addresses, then reads them back and
// checks the one-cycle read latency and that a write takes priority.
module tb_synapse_buffer;
  localparam int ROWS = 4096, ROW_W = 4096;
  logic clk = 0, we = 0, rd_en = 0;
  logic [11:0] addr;
  logic [ROW_W-1:0] wdata, rdata;
  logic [ROW_W-1:0] shadow [int];
  int checks = 0, failures = 0;

  synapse_buffer dut (.*);
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
    addr = '0; wdata = '0;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      we = 1; rd_en = 0; addr = 12'($urandom);
      for (int w = 0; w < ROW_W/32; w++) wdata[w*32 +: 32] = $urandom;
      shadow[int'(addr)] = wdata;
    end
    @(negedge clk); we = 0;
    foreach (shadow[a]) begin
      @(negedge clk); rd_en = 1; addr = 12'(a);
      @(negedge clk); rd_en = 0;
      chk(rdata == shadow[a], $sformatf("row %0d", a));
    end
    // write has priority over read and does not change rdata
    @(negedge clk); rd_en = 1; we = 1; addr = 12'd7; wdata = '1;
    begin
      logic [ROW_W-1:0] held;
      held = rdata;
      @(negedge clk); we = 0; rd_en = 0;
      chk(rdata == held, "write does not read");
      rd_en = 1; @(negedge clk); rd_en = 0;
      chk(rdata == '1, "written row");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
