// cmul: complex multiplier special function unit (CMUL).
//
// Multiplies two packed complex words, p = a * b, with four 16x16 signed
// multipliers, one subtractor (real part: ar*br - ai*bi) and one adder
// (imaginary part: ar*bi + ai*br), the structure the paper gives. Each 32-bit
// sum is rounded to nearest (ties upward) back to Q4.11 and saturated to 16
// bits; the rounding and saturation are this design's choice.
// Purely combinational: the core registers the result, so a CMUL operation
// takes one clock cycle.
module cmul
  import lr_pkg::*;
(
  input  cplx_t a,
  input  cplx_t b,
  output cplx_t p
);
  logic signed [31:0] m_rr, m_ii, m_ri, m_ir;
  logic signed [39:0] s_re, s_im;

  always_comb begin
    m_rr = a.re * b.re;
    m_ii = a.im * b.im;
    m_ri = a.re * b.im;
    m_ir = a.im * b.re;
    s_re = 40'(m_rr) - 40'(m_ii);
    s_im = 40'(m_ri) + 40'(m_ir);
    p.re = sat((s_re + 40'(2**(FRAC-1))) >>> FRAC);
    p.im = sat((s_im + 40'(2**(FRAC-1))) >>> FRAC);
  end
endmodule
