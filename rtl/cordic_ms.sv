// cordic_ms: 4-cycle master-slave CORDIC special function unit.
//
// The master CORDIC runs in vectoring mode on the vector (x, y): in each of
// 16 iterations it rotates the vector by +-atan(2^-i) towards the positive
// real axis, the direction being the sign of its imaginary part. The slave
// CORDIC runs in rotation mode on a unit vector (the "1" and "0" inputs)
// using the master's directions, so no angle is ever computed: at the end the
// slave holds (cos phi, -sin phi), i.e. exp(-j*phi) for phi = angle(x + jy),
// and the master holds K*|(x, y)| with the CORDIC gain K = 1.6468.
// As in the paper, one 4-stage datapath (iterations i..i+3 with shifts i..i+3)
// is reused in four consecutive cycles for the 16 iterations, with a
// register and a multiplexer that clears (loads the operands), iterates or
// holds. This design's own choices: the slave starts at 1/K instead of 1 so
// the cosine and sine come out unscaled; a vector with x < 0 is first
// negated (slave starts at -1/K), which extends convergence to all four
// quadrants; the internal words have 20 bits (2 guard and 2 extra fraction
// bits). Timing: start with x, y in cycle t; done is high and cs, mag valid
// in cycle t+4, and they hold until the next start.
module cordic_ms
  import lr_pkg::*;
#(
  parameter int ITER   = 16,
  parameter int STAGES = 4,
  parameter int IW     = 20
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  start,
  input  fx_t   x,
  input  fx_t   y,
  output cplx_t cs,
  output fx_t   mag,
  output logic  done
);
  localparam int PASSES = ITER / STAGES;
  localparam int XF     = IW - W - 2;           // extra fraction bits
  // 1/K in Q(IW).(FRAC+XF): 0.6072529350 * 2^(FRAC+XF), rounded.
  localparam logic signed [IW-1:0] INV_K = IW'(int'(0.6072529350088813 * real'(2**(FRAC+XF)) + 0.5));

  typedef logic signed [IW-1:0] iw_t;
  typedef struct packed { iw_t x; iw_t y; iw_t a; iw_t b; } cst_t;

  cst_t                          st, st_next, dp_in, init;
  logic [$clog2(PASSES+1)-1:0]   pass;
  logic                          run;

  // One pass of the datapath: STAGES micro-rotations with shifts base..base+STAGES-1.
  function automatic cst_t datapath(input cst_t s, input int base);
    cst_t r;
    r = s;
    for (int j = 0; j < STAGES; j++) begin
      automatic int  sh  = base + j;
      automatic logic pos = !r.y[IW-1];       // y >= 0: rotate clockwise
      automatic iw_t  xs = r.x >>> sh, ys = r.y >>> sh, as = r.a >>> sh, bs = r.b >>> sh;
      if (pos) begin
        r = '{x: r.x + ys, y: r.y - xs, a: r.a + bs, b: r.b - as};
      end else begin
        r = '{x: r.x - ys, y: r.y + xs, a: r.a - bs, b: r.b + as};
      end
    end
    return r;
  endfunction

  always_comb begin
    if (x < 0) init = '{x: -(iw_t'(x) <<< XF), y: -(iw_t'(y) <<< XF), a: -INV_K, b: '0};
    else       init = '{x:   iw_t'(x) <<< XF,  y:   iw_t'(y) <<< XF,  a:  INV_K, b: '0};
    dp_in   = start ? init : st;                 // Clear: start from the operands
    st_next = datapath(dp_in, STAGES * (start ? 0 : int'(pass)));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      run  <= 1'b0;
      pass <= '0;
      done <= 1'b0;
      st   <= '0;
    end else if (start) begin
      st   <= st_next;
      run  <= (PASSES > 1);
      pass <= 1;
      done <= (PASSES == 1);
    end else if (run) begin
      st   <= st_next;
      pass <= pass + 1'b1;
      if (int'(pass) == PASSES - 1) begin
        run  <= 1'b0;
        done <= 1'b1;
      end
    end else begin
      done <= 1'b0;                              // hold the result
    end
  end

  function automatic fx_t narrow(input iw_t w);
    return sat((40'(w) + 40'(2**(XF-1))) >>> XF);
  endfunction

  assign cs  = '{re: narrow(st.a), im: narrow(st.b)};
  assign mag = narrow(st.x);
endmodule
