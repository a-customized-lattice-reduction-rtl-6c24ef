// lr_multiprocessor: top level, a pipeline of lattice-reduction cores.
//
// NCORES identical cores (five by default, one MLLL iteration each) are
// chained by FIFO buffers, three per link, one each for the Q, R and T
// matrices, so that NCORES consecutive channel matrices are processed at
// the same time, each in a different iteration. Core 0 receives Q and R
// through two input FIFOs and starts from T = I; the last core writes Q, R
// and T into three output FIFOs. The pipeline structure, the five cores and
// the FIFO links follow the paper; the FIFO depth and the valid/ready
// handshake at the edges are this design's choice.
//
// Interface. Each input stream (q_in, r_in) is a valid/ready word stream: a
// word is taken in a cycle where valid and ready are both high. Q and T words
// are in column order (16 words per matrix), R words are the upper triangle
// in column order (10 words). The outputs (q_out, r_out, t_out) use the same
// handshake in the other direction. core_busy shows which cores are in
// their compute phase; iter_done pulses when a core has stored a result.
//
// Timing: a basis leaves the pipeline after NCORES times one core iteration
// (load + compute + store, about 50 to 215 cycles each); a new basis can enter
// every core iteration.
module lr_multiprocessor
  import lr_pkg::*;
#(
  parameter int NCORES     = 5,
  parameter int FIFO_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              q_in_valid,
  output logic              q_in_ready,
  input  cplx_t             q_in_data,
  input  logic              r_in_valid,
  output logic              r_in_ready,
  input  cplx_t             r_in_data,
  output logic              q_out_valid,
  input  logic              q_out_ready,
  output cplx_t             q_out_data,
  output logic              r_out_valid,
  input  logic              r_out_ready,
  output cplx_t             r_out_data,
  output logic              t_out_valid,
  input  logic              t_out_ready,
  output cplx_t             t_out_data,
  output logic [NCORES-1:0] core_busy,
  output logic [NCORES-1:0] iter_done
);
  // Link s (0..NCORES) feeds core s and is written by core s-1 (or the inputs).
  logic  q_push [NCORES+1], r_push [NCORES+1], t_push [NCORES+1];
  logic  q_pop  [NCORES+1], r_pop  [NCORES+1], t_pop  [NCORES+1];
  logic  q_full [NCORES+1], r_full [NCORES+1], t_full [NCORES+1];
  logic  q_empty[NCORES+1], r_empty[NCORES+1], t_empty[NCORES+1];
  cplx_t q_din  [NCORES+1], r_din  [NCORES+1], t_din  [NCORES+1];
  cplx_t q_dout [NCORES+1], r_dout [NCORES+1], t_dout [NCORES+1];

  for (genvar s = 0; s <= NCORES; s++) begin : g_link
    lr_fifo #(.WIDTH(2*W), .DEPTH(FIFO_DEPTH)) u_q (.clk, .rst, .push(q_push[s]), .din(q_din[s]),
      .full(q_full[s]), .pop(q_pop[s]), .dout(q_dout[s]), .empty(q_empty[s]));
    lr_fifo #(.WIDTH(2*W), .DEPTH(FIFO_DEPTH)) u_r (.clk, .rst, .push(r_push[s]), .din(r_din[s]),
      .full(r_full[s]), .pop(r_pop[s]), .dout(r_dout[s]), .empty(r_empty[s]));
    if (s > 0) begin : g_t                       // core 0 starts from T = I
      lr_fifo #(.WIDTH(2*W), .DEPTH(FIFO_DEPTH)) u_t (.clk, .rst, .push(t_push[s]), .din(t_din[s]),
        .full(t_full[s]), .pop(t_pop[s]), .dout(t_dout[s]), .empty(t_empty[s]));
    end else begin : g_no_t
      assign t_full[s]  = 1'b1;
      assign t_empty[s] = 1'b1;
      assign t_dout[s]  = '0;
    end
  end

  // inputs
  assign q_push[0]  = q_in_valid && !q_full[0];
  assign q_din[0]   = q_in_data;
  assign q_in_ready = !q_full[0];
  assign r_push[0]  = r_in_valid && !r_full[0];
  assign r_din[0]   = r_in_data;
  assign r_in_ready = !r_full[0];
  assign t_push[0]  = 1'b0;
  assign t_din[0]   = '0;

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    lr_core #(.FIRST_CORE(c == 0)) u_core (.clk, .rst,
      .q_in_empty(q_empty[c]), .r_in_empty(r_empty[c]), .t_in_empty(t_empty[c]),
      .q_in_data(q_dout[c]),   .r_in_data(r_dout[c]),   .t_in_data(t_dout[c]),
      .q_in_pop(q_pop[c]),     .r_in_pop(r_pop[c]),     .t_in_pop(t_pop[c]),
      .q_out_full(q_full[c+1]), .r_out_full(r_full[c+1]), .t_out_full(t_full[c+1]),
      .q_out_push(q_push[c+1]), .r_out_push(r_push[c+1]), .t_out_push(t_push[c+1]),
      .q_out_data(q_din[c+1]),  .r_out_data(r_din[c+1]),  .t_out_data(t_din[c+1]),
      .busy_compute(core_busy[c]), .iter_done(iter_done[c]));
  end

  // outputs
  assign q_out_valid       = !q_empty[NCORES];
  assign q_out_data        = q_dout[NCORES];
  assign q_pop[NCORES]     = q_out_ready && !q_empty[NCORES];
  assign r_out_valid       = !r_empty[NCORES];
  assign r_out_data        = r_dout[NCORES];
  assign r_pop[NCORES]     = r_out_ready && !r_empty[NCORES];
  assign t_out_valid       = !t_empty[NCORES];
  assign t_out_data        = t_dout[NCORES];
  assign t_pop[NCORES]     = t_out_ready && !t_empty[NCORES];
endmodule
