// tb_column_ctrl: self-checking test of the 2-stage shift control (L = 2).
// Checks the example of the paper's 2-stage figure (oneffsets 1,0,4 give a
// 2nd-stage shift of 0, first-stage shifts 1 and 0, third lane stalled), then
// random oneffset sets against an independent model, and the L = 4
// (single-stage) case where every pending lane fires.
module tb_column_ctrl;
  import pra_pkg::*;
  localparam int LANES = 16;
  oneffset_t [LANES-1:0] off;
  logic [LANES-1:0] valid;
  logic [3:0] c_shift, c4;
  logic [LANES-1:0][1:0] k_shift;
  logic [LANES-1:0][3:0] k4;
  logic [LANES-1:0] fire, fire4;
  logic last, last4;
  int checks = 0, failures = 0;

  column_ctrl #(.LANES(LANES), .L(2)) dut (.off, .valid, .c_shift, .k_shift, .fire, .last);
  column_ctrl #(.LANES(LANES), .L(4)) dut4 (.off, .valid, .c_shift(c4), .k_shift(k4), .fire(fire4), .last(last4));

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
    off = '0; valid = '0;
    off[0].pow = 1; off[1].pow = 0; off[2].pow = 4;
    valid[2:0] = 3'b111;
    #1;
    chk(c_shift == 0, "example C");
    chk(fire[0] && k_shift[0] == 1, "example lane0");
    chk(fire[1] && k_shift[1] == 0, "example lane1");
    chk(!fire[2], "example lane2 stalled");
    for (int n = 0; n < 3000; n++) begin
      int mn, k;
      bit lst;
      for (int i = 0; i < LANES; i++) begin
        off[i].pow = 4'($urandom);
        off[i].eon = 1'($urandom);
        valid[i]   = ($urandom % 4) != 0;
      end
      #1;
      mn = 16;
      for (int i = 0; i < LANES; i++) if (valid[i] && off[i].pow < mn) mn = off[i].pow;
      lst = 1;
      if (valid != 0) chk(int'(c_shift) == mn, "C is min");
      for (int i = 0; i < LANES; i++) begin
        k = int'(off[i].pow) - mn;
        chk(fire[i] == (valid[i] && k < 4), "fire");
        if (fire[i]) chk(int'(k_shift[i]) == k, "k");
        chk(fire4[i] == valid[i], "single stage fires all");
        if (fire4[i]) chk(int'(k4[i]) + int'(c4) == int'(off[i].pow), "single stage shift");
        if (valid[i] && !(valid[i] && k < 4 && off[i].eon)) lst = 0;
      end
      chk(last == lst, "last");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
