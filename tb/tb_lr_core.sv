// tb_lr_core: runs single cores on random 4x4 bases.
//
// Core c1 (FIRST_CORE = 0) gets Q, R and T by stream and is iterated: its
// expected output becomes its next input, five iterations per channel, as in
// the pipeline. Core c0 (FIRST_CORE = 1) gets Q and R of every fresh channel
// and must start from T = I. The FIFOs are queue models that run empty and
// full at random. For every matrix set the testbench checks all 42 output
// words against the reference model bit for bit, the number of compute
// cycles against the reference's count, and, in real arithmetic, that
// Q*R = H*T still holds. It also counts size reductions, skipped ones and
// swaps, and fails if any of them never happened.
module tb_lr_core;
  import lr_pkg::*;
  import lr_ref_pkg::*;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  localparam int NSETS = 30;
  int checks = 0, failures = 0;
  int n_nz = 0, n_zero = 0, n_sw = 0, n_nosw = 0, n_stall = 0;
  bit stall_on = 0;

  // ---- one harness per core
  cplx_t qi[2][$], ri[2][$], ti[2][$], qo[2][$], ro[2][$], to[2][$];
  logic  q_in_empty[2], r_in_empty[2], t_in_empty[2], q_in_pop[2], r_in_pop[2], t_in_pop[2];
  cplx_t q_in_data[2], r_in_data[2], t_in_data[2];
  logic  q_out_full[2], r_out_full[2], t_out_full[2], q_out_push[2], r_out_push[2], t_out_push[2];
  cplx_t q_out_data[2], r_out_data[2], t_out_data[2];
  logic  busy[2], idone[2];
  logic  hold[2];
  int    ccount[2];

  for (genvar g = 0; g < 2; g++) begin : g_h
    assign q_in_empty[g] = hold[g] || qi[g].size() == 0;
    assign r_in_empty[g] = hold[g] || ri[g].size() == 0;
    assign t_in_empty[g] = hold[g] || ti[g].size() == 0;
    assign q_in_data[g]  = qi[g].size() ? qi[g][0] : '0;
    assign r_in_data[g]  = ri[g].size() ? ri[g][0] : '0;
    assign t_in_data[g]  = ti[g].size() ? ti[g][0] : '0;
    assign q_out_full[g] = hold[g];
    assign r_out_full[g] = hold[g];
    assign t_out_full[g] = hold[g];
    bit qp = 0, rp = 0, tp = 0;
    always @(negedge clk) begin                  // queues change away from the sampling edge
      if (qp) void'(qi[g].pop_front());
      if (rp) void'(ri[g].pop_front());
      if (tp) void'(ti[g].pop_front());
      qp <= 0; rp <= 0; tp <= 0;
    end
    always @(posedge clk) if (!rst) begin       // nothing moves while reset is held
      qp <= q_in_pop[g]; rp <= r_in_pop[g]; tp <= t_in_pop[g];
      if (q_out_push[g]) qo[g].push_back(q_out_data[g]);
      if (r_out_push[g]) ro[g].push_back(r_out_data[g]);
      if (t_out_push[g]) to[g].push_back(t_out_data[g]);
      if (busy[g]) ccount[g]++;
      hold[g] <= stall_on && ($urandom_range(3) == 0);
      if (hold[g]) n_stall++;
    end
  end

  lr_core #(.FIRST_CORE(1'b1)) c0 (.clk, .rst,
    .q_in_empty(q_in_empty[0]), .r_in_empty(r_in_empty[0]), .t_in_empty(t_in_empty[0]),
    .q_in_data(q_in_data[0]), .r_in_data(r_in_data[0]), .t_in_data(t_in_data[0]),
    .q_in_pop(q_in_pop[0]), .r_in_pop(r_in_pop[0]), .t_in_pop(t_in_pop[0]),
    .q_out_full(q_out_full[0]), .r_out_full(r_out_full[0]), .t_out_full(t_out_full[0]),
    .q_out_push(q_out_push[0]), .r_out_push(r_out_push[0]), .t_out_push(t_out_push[0]),
    .q_out_data(q_out_data[0]), .r_out_data(r_out_data[0]), .t_out_data(t_out_data[0]),
    .busy_compute(busy[0]), .iter_done(idone[0]));
  lr_core #(.FIRST_CORE(1'b0)) c1 (.clk, .rst,
    .q_in_empty(q_in_empty[1]), .r_in_empty(r_in_empty[1]), .t_in_empty(t_in_empty[1]),
    .q_in_data(q_in_data[1]), .r_in_data(r_in_data[1]), .t_in_data(t_in_data[1]),
    .q_in_pop(q_in_pop[1]), .r_in_pop(r_in_pop[1]), .t_in_pop(t_in_pop[1]),
    .q_out_full(q_out_full[1]), .r_out_full(r_out_full[1]), .t_out_full(t_out_full[1]),
    .q_out_push(q_out_push[1]), .r_out_push(r_out_push[1]), .t_out_push(t_out_push[1]),
    .q_out_data(q_out_data[1]), .r_out_data(r_out_data[1]), .t_out_data(t_out_data[1]),
    .busy_compute(busy[1]), .iter_done(idone[1]));

  task automatic feed(input int g, input mat_t Q, input mat_t R, input mat_t T, input bit with_t);
    for (int c = 0; c < N; c++) for (int r = 0; r < N; r++) qi[g].push_back(Q[r][c]);
    for (int c = 0; c < N; c++) for (int r = 0; r <= c; r++) ri[g].push_back(R[r][c]);
    if (with_t) for (int c = 0; c < N; c++) for (int r = 0; r < N; r++) ti[g].push_back(T[r][c]);
  endtask

  task automatic compare(input int g, input mat_t Q, input mat_t R, input mat_t T);
    int bad;
    bad = 0;
    for (int c = 0; c < N; c++) for (int r = 0; r < N; r++) begin
      if (qo[g].pop_front() != Q[r][c]) bad++;
      if (to[g].pop_front() != T[r][c]) bad++;
    end
    for (int c = 0; c < N; c++) for (int r = 0; r <= c; r++) if (ro[g].pop_front() != R[r][c]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL core %0d: %0d words differ", g, bad); end
  endtask

  task automatic wait_out(input int g);
    int t;
    t = 0;
    while ((qo[g].size() < NQ || ro[g].size() < NR || to[g].size() < NQ) && t < 2000) begin
      @(posedge clk); t++;
    end
    @(posedge clk);
  endtask

  mat_t Q, R, T, Q0, R0, T0, I;
  real hre[N][N], him[N][N], err;
  int nz, sw, cyc;

  initial begin
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) I[r][c] = (r == c) ? '{re: 16'sd2048, im: 16'sd0} : '0;
    for (int g = 0; g < 2; g++) begin hold[g] = 0; ccount[g] = 0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int s = 0; s < NSETS; s++) begin
      stall_on = (s % 3 == 2);
      make_basis(Q, R, hre, him);
      T = I;
      Q0 = Q; R0 = R; T0 = T;
      // core 0: one iteration from T = I
      feed(0, Q0, R0, T0, 0);
      mlll_iter(Q0, R0, T0, nz, sw, cyc);
      ccount[0] = 0;
      wait_out(0);
      compare(0, Q0, R0, T0);
      checks++; if (!stall_on && ccount[0] != cyc) begin failures++; $display("FAIL core 0 cycles %0d exp %0d", ccount[0], cyc); end
      // core 1: five iterations, fed back
      for (int it = 0; it < 5; it++) begin
        feed(1, Q, R, T, 1);
        mlll_iter(Q, R, T, nz, sw, cyc);
        n_nz += nz; n_sw += sw; n_nosw += (N - 1) - sw; n_zero += 6 - nz;
        ccount[1] = 0;
        wait_out(1);
        compare(1, Q, R, T);
        checks++; if (!stall_on && ccount[1] != cyc) begin failures++; $display("FAIL core 1 cycles %0d exp %0d", ccount[1], cyc); end
        checks++; if (cyc > 178) begin failures++; $display("FAIL cycle bound"); end
        err = qr_ht_err(Q, R, T, hre, him);
        checks++; if (err > 0.08) begin failures++; $display("FAIL |QR-HT| = %f", err); end
      end
    end
    $display("size reductions %0d, skipped (mu=0) %0d, swaps %0d, no swap %0d, stall cycles %0d",
             n_nz, n_zero, n_sw, n_nosw, n_stall);
    checks++; if (n_nz == 0 || n_zero == 0 || n_sw == 0 || n_nosw == 0 || n_stall == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
