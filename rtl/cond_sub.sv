// cond_sub: conditional modular correction, y = (a >= m) ? a - m : a.
//
// One "Sub (Sn-M)" box with its 2:1 mux from the Montgomery block diagram.
// Purely combinational; W is the width of both operands. The diagram labels
// the mux select "Sn > M"; this design subtracts when a >= m, so that a value
// equal to M is also reduced (to 0) and results are always in [0, M).
module cond_sub #(
  parameter int unsigned W = 1026
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] m,
  output logic [W-1:0] y
);
  always_comb begin
    if (a >= m) y = a - m;
    else        y = a;
  end
endmodule
