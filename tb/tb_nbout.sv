// tb_nbout: self-checking test of the output neuron buffer.
// Writes random arrays, checks that they are held until the next write and
// that every column can be read out as one brick.
module tb_nbout;
  import pra_pkg::*;
  localparam int COLS = 16, FILTERS = 16;
  logic clk = 0, rst_n = 0, we = 0;
  logic [COLS-1:0][FILTERS-1:0][ACC_W-1:0] wdata, all, ref_q;
  logic [3:0] rd_col;
  logic [FILTERS-1:0][ACC_W-1:0] rdata;
  int checks = 0, failures = 0;

  nbout dut (.*);
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
    wdata = '0; rd_col = '0; ref_q = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(all == '0, "reset");
    for (int n = 0; n < 50; n++) begin
      for (int j = 0; j < COLS; j++)
        for (int f = 0; f < FILTERS; f++) wdata[j][f] = {$urandom, $urandom};
      we = ($urandom % 3) != 0;
      if (we) ref_q = wdata;
      @(posedge clk); #1; we = 0;
      chk(all == ref_q, $sformatf("array n=%0d we=%0d %h %h", n, we, all[0][0], ref_q[0][0]));
      for (int j = 0; j < COLS; j++) begin
        rd_col = 4'(j); #1;
        chk(rdata == ref_q[j], "column read");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
