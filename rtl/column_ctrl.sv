// column_ctrl: 2-stage shift control shared by one column of PIPs.
//
// Combinational.  Given the pending oneffset of each of the 16 neuron lanes
// of a window, it picks the smallest pending position C as the common
// 2nd-stage shift.  Every lane whose position p satisfies p - C < 2^L fires
// this cycle with a 1st-stage shift of p - C; the other pending lanes stall
// (their term is forced to zero) and keep their oneffset for a later cycle.
// `last` is high when every lane that is still pending fires its final
// oneffset this cycle, i.e. the brick is finished after this cycle.
//
// Follows the paper (Fig. 8 and Sec. 2-Stage Shifting): minimum selection,
// subtraction, the 2^L limit, and one control per column.  With L = 4 every
// pending lane fires every cycle (single-stage PIP).  Own choice: lanes with
// no pending oneffset are excluded from the minimum.
module column_ctrl
  import pra_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned L     = 2,               // 1st-stage shift control bits
  localparam int unsigned KW   = (L == 0) ? 1 : L
) (
  input  oneffset_t [LANES-1:0] off,
  input  logic      [LANES-1:0] valid,
  output logic      [POW_W-1:0] c_shift,          // 2nd-stage shift
  output logic [LANES-1:0][KW-1:0] k_shift,       // 1st-stage shifts
  output logic      [LANES-1:0] fire,             // lane's term is used
  output logic                  last
);

  always_comb begin
    c_shift = '1;
    for (int i = 0; i < LANES; i++)
      if (valid[i] && off[i].pow < c_shift) c_shift = off[i].pow;
    last = 1'b1;
    for (int i = 0; i < LANES; i++) begin
      logic [POW_W-1:0] d;
      d          = off[i].pow - c_shift;
      fire[i]    = valid[i] && ({1'b0, d} < (POW_W+1)'(1 << L));
      k_shift[i] = fire[i] ? KW'(d) : '0;
      if (valid[i] && !(fire[i] && off[i].eon)) last = 1'b0;
    end
  end

endmodule
