// siegel: Siegel-condition special function unit.
//
// Decides whether columns k-1 and k must be swapped: swap = delta * p > q
// with delta = 0.75, p = R(k-1,k-1)^2 and q = R(k,k)^2 (both non-negative).
// As in the paper, 0.75 * p is formed by two shifters and one adder,
// (p >> 1) + (p >> 2), instead of a multiplier. The squares are supplied by
// the core (CMUL on the diagonal, pre-scaled by 1/4 so they stay in range);
// the same scale on both inputs cancels. Combinational.
module siegel
  import lr_pkg::*;
(
  input  fx_t  p,
  input  fx_t  q,
  output logic swap
);
  logic [W:0] p75;
  always_comb begin
    p75  = (W+1)'(p >>> 1) + (W+1)'(p >>> 2);
    swap = $signed(p75) > (W+1)'(q);
  end
endmodule
