// lr_core: one processor core of the lattice-reduction pipeline, performing
// one iteration of the modified complex LLL (MLLL) algorithm on a 4x4 basis.
//
// Operation. The core repeats three phases:
//  1. Load: three input STREAM units read Q (16 words), R (10 words, upper
//     triangle) and T (16 words) from their FIFOs at the same time, one word
//     per cycle each. The first core of the pipeline (FIRST_CORE = 1) reads
//     only Q and R and sets T to the identity.
//  2. Compute: for k = 2..4 (columns 1..3 counting from 0), in this order:
//     - size reduction, for l = k-1 down to 1: mu = round(R(l,k)/R(l,l)) on
//       the MU unit; if mu is not zero, R(1:l,k) -= mu*R(1:l,l) and
//       T(:,k) -= mu*T(:,l), one element per cycle on the SIZE REDUCE unit;
//     - Siegel test: 0.75*R(k-1,k-1)^2 > R(k,k)^2 (squares on CMUL, test on
//       the SIEGEL unit);
//     - if the test holds: swap columns k-1 and k of R and T, then a complex
//       Givens rotation that zeroes R(k,k-1). The CORDIC gives u = a*/|a| for
//       a = R(k-1,k-1); CMUL gives |a| = u*a; the CORDIC on (|a|, b), b =
//       R(k,k-1), gives cos t = |a|/n and -sin t = -b/n; ARRANGE forms
//       cos t, beta = b/n and -beta; CMUL forms alpha* = u*cos t and ARRANGE
//       alpha. With Theta = [alpha* beta; -beta alpha], rows k-1 and k of R
//       (columns k-1..4) become Theta*R and columns k-1, k of Q become
//       Q*Theta^H, each new element being two CMULs and one add.
//  3. Store: three output STREAM units write Q, R and T to the next FIFOs.
//
// What follows the paper: the one-iteration-per-core split, the MLLL steps of
// its Algorithm 1 in a fixed k = 2..4 sweep, the six special function units
// and the three-plus-three STREAM units. The paper's core is a programmable
// transport-triggered processor running compiled C; here a fixed sequencer
// issues the SFU operations instead (one SFU operation per cycle, except that
// an accumulate add runs beside CMUL). Also this design's choices: rotating
// R(k-1:k, k-1:4) rather than only the 2x2 block of Algorithm 1 (so that
// H*T = Q*R holds throughout), the complex form of Theta, and forcing the
// diagonal's imaginary parts and R(k,k-1) to exact zero after a rotation.
//
// Timing, all SFU operations one cycle except the 4-cycle CORDIC: compute
// takes sum over k = 2..4 of [ sum over l = k-1..1 of (1 + (mu != 0)*(l + 4))
// + 2 + swap_k * (31 + 4*(6-k)) ] cycles (k, l counted from 1), between 15
// and 178 cycles. Load and store each take about 18 cycles when the FIFOs
// never stall. busy_compute is high during compute; iter_done pulses when a
// matrix set has been stored.
module lr_core
  import lr_pkg::*;
#(
  parameter bit FIRST_CORE = 1'b0
) (
  input  logic  clk,
  input  logic  rst,
  // input FIFOs (first-word fall-through)
  input  logic  q_in_empty, r_in_empty, t_in_empty,
  input  cplx_t q_in_data,  r_in_data,  t_in_data,
  output logic  q_in_pop,   r_in_pop,   t_in_pop,
  // output FIFOs
  input  logic  q_out_full, r_out_full, t_out_full,
  output logic  q_out_push, r_out_push, t_out_push,
  output cplx_t q_out_data, r_out_data, t_out_data,
  // status
  output logic  busy_compute,
  output logic  iter_done
);
  typedef enum logic [4:0] {
    S_LSTART, S_LOAD, S_MU, S_SRR, S_SRT, S_SQ0, S_SQ1, S_SWAP, S_W1, S_ABS,
    S_W2, S_ARC, S_ARB, S_ARNB, S_ALC, S_AL, S_ROTR, S_ROTQ, S_SSTART, S_STORE
  } state_t;

  state_t      state;
  cplx_t       Qm [N][N];
  cplx_t       Rm [N][N];
  cplx_t       Tm [N][N];
  logic [1:0]  k, l, i, j, ph;
  mu_t         mu_r;
  fx_t         sq0;
  cplx_t       u, v, cth, beta, nbeta, alc, al, acc, t1;
  logic        q_ld_done, r_ld_done, t_ld_done, q_st_done, r_st_done, t_st_done;

  // ---------------------------------------------------------------- streams
  logic        ld_start, st_start;
  logic        q_wr, r_wr, t_wr;
  logic [4:0]  q_widx, r_widx, t_widx, q_ridx, r_ridx, t_ridx;
  cplx_t       q_wdat, r_wdat, t_wdat;
  logic        q_ibusy, r_ibusy, t_ibusy, q_idone, r_idone, t_idone;
  logic        q_obusy, r_obusy, t_obusy, q_odone, r_odone, t_odone;

  // R stream index -> (row, col) of the upper triangle, column order.
  function automatic logic [1:0] r_row(input logic [4:0] idx);
    for (int c = 0; c < N; c++)
      for (int r = 0; r <= c; r++)
        if (r_index(r, c) == int'(idx)) return 2'(r);
    return 2'd0;
  endfunction
  function automatic logic [1:0] r_col(input logic [4:0] idx);
    for (int c = 0; c < N; c++)
      for (int r = 0; r <= c; r++)
        if (r_index(r, c) == int'(idx)) return 2'(c);
    return 2'd0;
  endfunction

  stream_in u_q_in (.clk, .rst, .start(ld_start), .len(5'(NQ)), .fifo_empty(q_in_empty),
    .fifo_dout(q_in_data), .fifo_pop(q_in_pop), .wr_en(q_wr), .wr_idx(q_widx), .wr_data(q_wdat),
    .busy(q_ibusy), .done(q_idone));
  stream_in u_r_in (.clk, .rst, .start(ld_start), .len(5'(NR)), .fifo_empty(r_in_empty),
    .fifo_dout(r_in_data), .fifo_pop(r_in_pop), .wr_en(r_wr), .wr_idx(r_widx), .wr_data(r_wdat),
    .busy(r_ibusy), .done(r_idone));
  stream_in u_t_in (.clk, .rst, .start(ld_start), .len(FIRST_CORE ? 5'd0 : 5'(NQ)),
    .fifo_empty(t_in_empty), .fifo_dout(t_in_data), .fifo_pop(t_in_pop), .wr_en(t_wr),
    .wr_idx(t_widx), .wr_data(t_wdat), .busy(t_ibusy), .done(t_idone));

  stream_out u_q_out (.clk, .rst, .start(st_start), .len(5'(NQ)), .rd_idx(q_ridx),
    .rd_data(Qm[q_ridx[1:0]][q_ridx[3:2]]), .fifo_full(q_out_full), .fifo_push(q_out_push),
    .fifo_din(q_out_data), .busy(q_obusy), .done(q_odone));
  stream_out u_r_out (.clk, .rst, .start(st_start), .len(5'(NR)), .rd_idx(r_ridx),
    .rd_data(Rm[r_row(r_ridx)][r_col(r_ridx)]), .fifo_full(r_out_full), .fifo_push(r_out_push),
    .fifo_din(r_out_data), .busy(r_obusy), .done(r_odone));
  stream_out u_t_out (.clk, .rst, .start(st_start), .len(5'(NQ)), .rd_idx(t_ridx),
    .rd_data(Tm[t_ridx[1:0]][t_ridx[3:2]]), .fifo_full(t_out_full), .fifo_push(t_out_push),
    .fifo_din(t_out_data), .busy(t_obusy), .done(t_odone));

  // ---------------------------------------------------- special function units
  cplx_t  cm_a, cm_b, cm_p;
  cplx_t  sr_a, sr_b, sr_y;
  mu_t    mu_w;
  cplx_t  ar_a, ar_y;
  ar_op_t ar_op;
  fx_t    sg_q;
  logic   sg_swap;
  logic   cor_start;
  fx_t    cor_x, cor_y, cor_mag;
  cplx_t  cor_cs;
  logic   cor_done;

  cmul        u_cmul (.a(cm_a), .b(cm_b), .p(cm_p));
  mu_calc     u_mu   (.num(Rm[l][k]), .den(Rm[l][l].re), .mu(mu_w));
  size_reduce u_sr   (.a(sr_a), .b(sr_b), .mu(mu_r), .y(sr_y));
  siegel      u_sg   (.p(sq0), .q(sg_q), .swap(sg_swap));
  arrange     u_ar   (.op(ar_op), .a(ar_a), .y(ar_y));
  cordic_ms   u_cor  (.clk, .rst, .start(cor_start), .x(cor_x), .y(cor_y), .cs(cor_cs),
                      .mag(cor_mag), .done(cor_done));

  localparam logic [1:0] KMAX = 2'(N - 1);

  // Diagonal element pre-scaled by 1/4 for squaring.
  function automatic cplx_t quarter(input cplx_t d);
    return '{re: d.re >>> 2, im: '0};
  endfunction

  always_comb begin
    cm_a = Rm[k-1][k-1];
    cm_b = u;
    sr_a = Rm[i][k];
    sr_b = Rm[i][l];
    ar_a = v;
    ar_op = AR_REAL;
    cor_start = 1'b0;
    cor_x = Rm[k-1][k].re;                       // post-swap R(k-1,k-1)
    cor_y = Rm[k-1][k].im;
    sg_q  = cm_p.re;
    unique case (state)
      S_SRT: begin sr_a = Tm[i][k]; sr_b = Tm[i][l]; end
      S_SQ0: begin cm_a = quarter(Rm[k-1][k-1]); cm_b = quarter(Rm[k-1][k-1]); end
      S_SQ1: begin cm_a = quarter(Rm[k][k]);     cm_b = quarter(Rm[k][k]);     end
      S_SWAP: cor_start = 1'b1;
      S_ABS: begin
        cm_a = Rm[k-1][k-1]; cm_b = u;
        cor_start = 1'b1; cor_x = cm_p.re; cor_y = Rm[k][k-1].re;
      end
      S_ARC:  ar_op = AR_REAL;
      S_ARB:  ar_op = AR_NIMAG;
      S_ARNB: ar_op = AR_IMAG;
      S_ALC:  begin cm_a = u; cm_b = cth; end
      S_AL:   begin ar_op = AR_CONJ; ar_a = alc; end
      S_ROTR: begin
        unique case (ph)
          2'd0:    begin cm_a = alc;   cm_b = Rm[k-1][j]; end
          2'd1:    begin cm_a = beta;  cm_b = Rm[k][j];   end
          2'd2:    begin cm_a = nbeta; cm_b = Rm[k-1][j]; end
          default: begin cm_a = al;    cm_b = Rm[k][j];   end
        endcase
      end
      S_ROTQ: begin
        unique case (ph)
          2'd0:    begin cm_a = al;    cm_b = Qm[i][k-1]; end
          2'd1:    begin cm_a = beta;  cm_b = Qm[i][k];   end
          2'd2:    begin cm_a = nbeta; cm_b = Qm[i][k-1]; end
          default: begin cm_a = alc;   cm_b = Qm[i][k];   end
        endcase
      end
      default: ;
    endcase
  end

  assign ld_start     = (state == S_LSTART);
  assign st_start     = (state == S_SSTART);
  assign busy_compute = (state inside {[S_MU:S_ROTQ]});

  // ------------------------------------------------------------- sequencer
  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_LSTART;
      k <= 2'd1; l <= 2'd0; i <= 2'd0; j <= 2'd0; ph <= 2'd0;
      q_ld_done <= 1'b0; r_ld_done <= 1'b0; t_ld_done <= 1'b0;
      q_st_done <= 1'b0; r_st_done <= 1'b0; t_st_done <= 1'b0;
      iter_done <= 1'b0;
      mu_r <= '0; sq0 <= '0;
      u <= '0; v <= '0; cth <= '0; beta <= '0; nbeta <= '0; alc <= '0; al <= '0;
      acc <= '0; t1 <= '0;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          Qm[r][c] <= '0; Rm[r][c] <= '0; Tm[r][c] <= '0;
        end
    end else begin
      iter_done <= 1'b0;
      // stream writes into the matrix store
      if (q_wr) Qm[q_widx[1:0]][q_widx[3:2]] <= q_wdat;
      if (r_wr) Rm[r_row(r_widx)][r_col(r_widx)] <= r_wdat;
      if (t_wr) Tm[t_widx[1:0]][t_widx[3:2]] <= t_wdat;
      if (q_idone) q_ld_done <= 1'b1;
      if (r_idone) r_ld_done <= 1'b1;
      if (t_idone) t_ld_done <= 1'b1;
      if (q_odone) q_st_done <= 1'b1;
      if (r_odone) r_st_done <= 1'b1;
      if (t_odone) t_st_done <= 1'b1;

      unique case (state)
        S_LSTART: begin
          q_ld_done <= 1'b0; r_ld_done <= 1'b0; t_ld_done <= 1'b0;
          for (int r = 0; r < N; r++)
            for (int c = 0; c < N; c++) begin
              if (r > c) Rm[r][c] <= '0;
              if (FIRST_CORE) Tm[r][c] <= (r == c) ? '{re: FX_ONE, im: '0} : '0;
            end
          state <= S_LOAD;
        end
        S_LOAD: begin
          if ((q_ld_done || q_idone) && (r_ld_done || r_idone) && (t_ld_done || t_idone)) begin
            k <= 2'd1; l <= 2'd0;
            state <= S_MU;
          end
        end
        S_MU: begin
          if (mu_w != '0) begin
            mu_r  <= mu_w;
            i     <= 2'd0;
            state <= S_SRR;
          end else if (l == 2'd0) begin
            state <= S_SQ0;
          end else begin
            l <= l - 1'b1;
          end
        end
        S_SRR: begin
          Rm[i][k] <= sr_y;
          if (i == l) begin
            i <= 2'd0;
            state <= S_SRT;
          end else begin
            i <= i + 1'b1;
          end
        end
        S_SRT: begin
          Tm[i][k] <= sr_y;
          i <= i + 1'b1;
          if (i == 2'(N - 1)) begin
            if (l == 2'd0) state <= S_SQ0;
            else begin
              l <= l - 1'b1;
              state <= S_MU;
            end
          end
        end
        S_SQ0: begin
          sq0   <= cm_p.re;
          state <= S_SQ1;
        end
        S_SQ1: begin
          if (sg_swap) state <= S_SWAP;
          else if (k == KMAX) state <= S_SSTART;
          else begin
            k <= k + 1'b1; l <= k;
            state <= S_MU;
          end
        end
        S_SWAP: begin                              // CORDIC started on R(k-1,k)
          for (int r = 0; r < N; r++) begin
            Rm[r][k-1] <= Rm[r][k]; Rm[r][k] <= Rm[r][k-1];
            Tm[r][k-1] <= Tm[r][k]; Tm[r][k] <= Tm[r][k-1];
          end
          state <= S_W1;
        end
        S_W1:   if (cor_done) begin u <= cor_cs; state <= S_ABS; end
        S_ABS:  state <= S_W2;                     // CORDIC started on (|a|, b)
        S_W2:   if (cor_done) begin v <= cor_cs; state <= S_ARC; end
        S_ARC:  begin cth   <= ar_y; state <= S_ARB;  end
        S_ARB:  begin beta  <= ar_y; state <= S_ARNB; end
        S_ARNB: begin nbeta <= ar_y; state <= S_ALC;  end
        S_ALC:  begin alc   <= cm_p; state <= S_AL;   end
        S_AL: begin
          al <= ar_y;
          j  <= k - 1'b1;
          ph <= 2'd0;
          state <= S_ROTR;
        end
        S_ROTR: begin
          ph <= ph + 1'b1;
          unique case (ph)
            2'd0: acc <= cm_p;
            2'd1: t1  <= cadd(acc, cm_p);
            2'd2: acc <= cm_p;
            default: begin
              Rm[k-1][j] <= (j == k - 1'b1) ? '{re: t1.re, im: '0} : t1;
              if (j == k - 1'b1)  Rm[k][j] <= '0;
              else if (j == k)    Rm[k][j] <= '{re: cadd(acc, cm_p).re, im: '0};
              else                Rm[k][j] <= cadd(acc, cm_p);
              if (j == 2'(N - 1)) begin
                i <= 2'd0;
                state <= S_ROTQ;
              end else begin
                j <= j + 1'b1;
              end
            end
          endcase
        end
        S_ROTQ: begin
          ph <= ph + 1'b1;
          unique case (ph)
            2'd0: acc <= cm_p;
            2'd1: t1  <= cadd(acc, cm_p);
            2'd2: acc <= cm_p;
            default: begin
              Qm[i][k-1] <= t1;
              Qm[i][k]   <= cadd(acc, cm_p);
              i <= i + 1'b1;
              if (i == 2'(N - 1)) begin
                if (k == KMAX) state <= S_SSTART;
                else begin
                  k <= k + 1'b1; l <= k;
                  state <= S_MU;
                end
              end
            end
          endcase
        end
        S_SSTART: begin
          q_st_done <= 1'b0; r_st_done <= 1'b0; t_st_done <= 1'b0;
          state <= S_STORE;
        end
        S_STORE: begin
          if ((q_st_done || q_odone) && (r_st_done || r_odone) && (t_st_done || t_odone)) begin
            iter_done <= 1'b1;
            state     <= S_LSTART;
          end
        end
        default: state <= S_LSTART;
      endcase
    end
  end

  // The streams never overlap the compute phase.
  a_no_load_in_compute: assert property (@(posedge clk) disable iff (rst)
    busy_compute |-> !(q_ibusy || r_ibusy || t_ibusy || q_obusy || r_obusy || t_obusy));
endmodule
