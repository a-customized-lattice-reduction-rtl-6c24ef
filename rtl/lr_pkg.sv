// lr_pkg: types and constants shared by the lattice-reduction multiprocessor.
//
// Every matrix element is a complex number packed into one 32-bit word: the
// real part in bits [31:16] and the imaginary part in bits [15:0], each a
// signed 16-bit fixed-point value. The packing follows the paper's data-level
// parallelism (16-bit real and 16-bit imaginary part in one 32-bit variable);
// the split into 4 integer and 11 fraction bits (Q4.11, range [-16,16)) is
// this design's own choice. Arithmetic helpers round products to nearest and
// saturate every result to the 16-bit range.
//
// The matrices are 4x4 (N = 4). The upper-triangular R travels as its 10
// non-zero entries in column order: (0,0) (0,1) (1,1) (0,2) (1,2) (2,2) (0,3)..(3,3).
// Q and T travel column by column, 16 words each.
package lr_pkg;

  localparam int W    = 16;           // bits per real or imaginary part
  localparam int FRAC = 11;           // fraction bits of the Q4.11 format
  localparam int N    = 4;            // matrix dimension (4x4 MIMO)
  localparam int NQ   = N * N;        // words in a Q or T stream
  localparam int NR   = N * (N + 1) / 2;  // words in an R stream (upper triangle)

  typedef logic signed [W-1:0] fx_t;

  typedef struct packed {
    fx_t re;
    fx_t im;
  } cplx_t;

  // Gaussian integer used as the size-reduction coefficient, parts in [-4,4].
  typedef struct packed {
    logic signed [3:0] re;
    logic signed [3:0] im;
  } mu_t;

  // ARRANGE unit operations.
  typedef enum logic [2:0] {
    AR_CONJ  = 3'd0,   // (re, -im)
    AR_NEG   = 3'd1,   // (-re, -im)
    AR_REAL  = 3'd2,   // (re, 0)
    AR_IMAG  = 3'd3,   // (im, 0)
    AR_NIMAG = 3'd4,   // (-im, 0)
    AR_SWAP  = 3'd5    // (im, re)
  } ar_op_t;

  localparam fx_t FX_MAX = fx_t'(2**(W-1) - 1);
  localparam fx_t FX_MIN = fx_t'(-(2**(W-1)));
  localparam fx_t FX_ONE = fx_t'(2**FRAC);

  // Saturate a wide signed value to W bits.
  function automatic fx_t sat(input logic signed [39:0] v);
    if (v > 40'sd32767)       return FX_MAX;
    else if (v < -40'sd32768) return FX_MIN;
    else                      return fx_t'(v);
  endfunction

  function automatic cplx_t cadd(input cplx_t a, input cplx_t b);
    cplx_t r;
    r.re = sat(40'(a.re) + 40'(b.re));
    r.im = sat(40'(a.im) + 40'(b.im));
    return r;
  endfunction

  // Column-order index of R upper-triangle entry (row, col), row <= col.
  function automatic int unsigned r_index(input int unsigned row, input int unsigned col);
    return col * (col + 1) / 2 + row;
  endfunction

endpackage
