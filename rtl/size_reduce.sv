// size_reduce: size-reduction special function unit.
//
// Computes y = a - mu * b for one packed complex element, where mu is a
// Gaussian integer with parts in [-4, 4] (Algorithm lines 7 and 8: one element
// of R(1:l,k) or T(:,k) per call). It is multiplier-less: |mu_re| * b and
// |mu_im| * b are sums of b, 2b and 4b selected by the bits of |mu|, and the
// signs are applied afterwards. Results saturate to 16 bits. The shift-add
// construction is this design's own; the paper says the unit is single-cycle
// and multiplier-less. Combinational.
module size_reduce
  import lr_pkg::*;
(
  input  cplx_t a,
  input  cplx_t b,
  input  mu_t   mu,
  output cplx_t y
);
  // val * m for a small signed integer m in [-8, 7] by shift-add.
  function automatic logic signed [22:0] smul(input fx_t val, input logic signed [3:0] m);
    logic [3:0]          am;
    logic signed [22:0]  sum;
    am  = m[3] ? 4'(-m) : 4'(m);
    sum = '0;
    if (am[0]) sum = sum + 23'(val);
    if (am[1]) sum = sum + (23'(val) <<< 1);
    if (am[2]) sum = sum + (23'(val) <<< 2);
    if (am[3]) sum = sum + (23'(val) <<< 3);
    return m[3] ? -sum : sum;
  endfunction

  logic signed [22:0] pr, pi;
  always_comb begin
    pr   = smul(b.re, mu.re) - smul(b.im, mu.im);
    pi   = smul(b.im, mu.re) + smul(b.re, mu.im);
    y.re = sat(40'(a.re) - 40'(pr));
    y.im = sat(40'(a.im) - 40'(pi));
  end
endmodule
