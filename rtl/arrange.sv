// arrange: ARRANGE special function unit.
//
// Rearranges the two 16-bit halves of a packed complex word. The paper only
// says that this unit rearranges 32-bit variables; the operation set is this
// design's choice, taken from what the MLLL sequence needs: conjugate
// (alpha from alpha*), move the imaginary half into the real half with or
// without negation (beta and -beta from the CORDIC's sine output), keep the
// real half (cosine as a real multiplier), negate, and swap halves.
// Negation saturates (-(-16) becomes the largest positive value).
// Combinational.
module arrange
  import lr_pkg::*;
(
  input  ar_op_t op,
  input  cplx_t  a,
  output cplx_t  y
);
  function automatic fx_t neg(input fx_t w);
    return sat(-40'(w));
  endfunction

  always_comb begin
    unique case (op)
      AR_CONJ:  y = '{re: a.re,   im: neg(a.im)};
      AR_NEG:   y = '{re: neg(a.re), im: neg(a.im)};
      AR_REAL:  y = '{re: a.re,   im: '0};
      AR_IMAG:  y = '{re: a.im,   im: '0};
      AR_NIMAG: y = '{re: neg(a.im), im: '0};
      AR_SWAP:  y = '{re: a.im,   im: a.re};
      default:  y = a;
    endcase
  end
endmodule
