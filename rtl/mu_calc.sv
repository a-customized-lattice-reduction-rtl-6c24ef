// mu_calc: size-reduction coefficient special function unit.
//
// Computes mu = round(num / den) for a complex numerator num = R(l,k) and the
// real diagonal den = R(l,l), each part of mu clamped to [-4, 4] (the range
// the paper reports for mu). It uses no multiplier: for each part x it
// compares 2|x| with the odd multiples |d|, 3|d|, 5|d|, 7|d| of the divisor,
// which are formed by shifts and adds, and counts how many it exceeds; the
// sign of mu is sign(x) xor sign(d). Exact half-way values round toward zero.
// A zero divisor gives mu = 0. The comparison scheme is this design's own
// choice; the paper states only that the unit is single-cycle and
// multiplier-less. Combinational, one cycle in the core.
module mu_calc
  import lr_pkg::*;
(
  input  cplx_t num,
  input  fx_t   den,
  output mu_t   mu
);
  function automatic logic signed [3:0] round_div(input fx_t x, input fx_t d);
    logic [18:0] ax2, ad, ad3, ad5, ad7;
    logic [2:0]  m;
    logic        neg;
    ax2 = (x[W-1] ? 19'(-20'(x)) : 19'(x)) << 1;
    ad  = d[W-1] ? 19'(-20'(d)) : 19'(d);
    ad3 = ad + (ad << 1);
    ad5 = ad + (ad << 2);
    ad7 = (ad << 3) - ad;
    m   = 3'(ax2 > ad) + 3'(ax2 > ad3) + 3'(ax2 > ad5) + 3'(ax2 > ad7);
    neg = x[W-1] ^ d[W-1];
    if (d == '0)   return 4'sd0;
    else if (neg)  return -$signed({1'b0, m});
    else           return $signed({1'b0, m});
  endfunction

  always_comb begin
    mu.re = round_div(num.re, den);
    mu.im = round_div(num.im, den);
  end
endmodule
