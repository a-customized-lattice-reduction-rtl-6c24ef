// tb_lr_multiprocessor: end-to-end test of the five-core pipeline at its
// default size.
//
// Streams NCH random channel bases (Q, R from a QR decomposition of a random
// 4x4 complex H) into the pipeline back to back, and compares every output
// word with five reference MLLL iterations, bit for bit. In real arithmetic
// it checks Q*R = H*T for every output and that the reduction did not make
// the basis worse (sum of |R(k,k)|^2 ratios). The output side stalls at
// random for the second half of the run. It counts the mechanisms of the
// design: size reductions done and skipped (mu = 0), swaps and no swaps,
// input and output back-pressure, and cycles in which several cores compute
// at once (pipelining); one that never happens counts as a failure. Each
// core must report exactly NCH finished iterations on iter_done.
module tb_lr_multiprocessor;
  import lr_pkg::*;
  import lr_ref_pkg::*;

  localparam int NCH = 40;
  localparam int NC  = 5;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic q_in_valid, q_in_ready, r_in_valid, r_in_ready;
  cplx_t q_in_data, r_in_data;
  logic q_out_valid, q_out_ready, r_out_valid, r_out_ready, t_out_valid, t_out_ready;
  cplx_t q_out_data, r_out_data, t_out_data;
  logic [NC-1:0] core_busy, iter_done;

  lr_multiprocessor dut (.clk, .rst, .q_in_valid, .q_in_ready, .q_in_data, .r_in_valid, .r_in_ready,
    .r_in_data, .q_out_valid, .q_out_ready, .q_out_data, .r_out_valid, .r_out_ready, .r_out_data,
    .t_out_valid, .t_out_ready, .t_out_data, .core_busy, .iter_done);

  int checks = 0, failures = 0;
  int n_nz = 0, n_zero = 0, n_sw = 0, n_nosw = 0, n_in_bp = 0, n_out_bp = 0, n_par = 0, max_par = 0;
  cplx_t qs[$], rs[$], qo[$], ro[$], to[$];
  mat_t eQ[NCH], eR[NCH], eT[NCH];
  real hre[NCH][N][N], him[NCH][N][N];
  bit out_stall = 0;
  int ndone = 0, cyc = 0, first_out = -1, last_out = 0;
  int n_iter[NC];

  bit q_take = 0, r_take = 0;
  always @(negedge clk) begin
    if (q_take) void'(qs.pop_front());
    if (r_take) void'(rs.pop_front());
    q_take <= 0; r_take <= 0;
  end

  assign q_in_valid = qs.size() != 0;
  assign q_in_data  = qs.size() ? qs[0] : '0;
  assign r_in_valid = rs.size() != 0;
  assign r_in_data  = rs.size() ? rs[0] : '0;

  always @(posedge clk) if (!rst) begin
    int nb;
    cyc++;
    q_take <= q_in_valid && q_in_ready;          // queues change at the next falling edge
    r_take <= r_in_valid && r_in_ready;
    if ((q_in_valid && !q_in_ready) || (r_in_valid && !r_in_ready)) n_in_bp++;
    if (q_out_valid && q_out_ready) qo.push_back(q_out_data);
    if (r_out_valid && r_out_ready) ro.push_back(r_out_data);
    if (t_out_valid && t_out_ready) to.push_back(t_out_data);
    if ((q_out_valid && !q_out_ready) || (t_out_valid && !t_out_ready)) n_out_bp++;
    if (q_out_valid && q_out_ready) begin if (first_out < 0) first_out = cyc; last_out = cyc; end
    for (int c = 0; c < NC; c++) if (iter_done[c]) n_iter[c]++;
    nb = $countones(core_busy);
    if (nb >= 2) n_par++;
    if (nb > max_par) max_par = nb;
    q_out_ready <= !out_stall || ($urandom_range(3) == 0);
    r_out_ready <= !out_stall || ($urandom_range(3) == 0);
    t_out_ready <= !out_stall || ($urandom_range(3) == 0);
  end

  initial begin
    mat_t Q, R, T;
    int nz, sw, c, bad;
    real err, g0, g1;
    q_out_ready = 1; r_out_ready = 1; t_out_ready = 1;
    for (int c = 0; c < NC; c++) n_iter[c] = 0;
    for (int ch = 0; ch < NCH; ch++) begin
      make_basis(Q, R, hre[ch], him[ch]);
      for (int cc = 0; cc < N; cc++) for (int r = 0; r < N; r++) qs.push_back(Q[r][cc]);
      for (int cc = 0; cc < N; cc++) for (int r = 0; r <= cc; r++) rs.push_back(R[r][cc]);
      for (int r = 0; r < N; r++) for (int cc = 0; cc < N; cc++) T[r][cc] = (r == cc) ? '{re: 16'sd2048, im: 16'sd0} : '0;
      for (int it = 0; it < NC; it++) begin
        mlll_iter(Q, R, T, nz, sw, c);
        n_nz += nz; n_zero += 6 - nz; n_sw += sw; n_nosw += (N - 1) - sw;
      end
      eQ[ch] = Q; eR[ch] = R; eT[ch] = T;
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int ch = 0; ch < NCH; ch++) begin
      int t;
      out_stall = (ch >= NCH / 2);
      t = 0;
      while ((qo.size() < NQ || ro.size() < NR || to.size() < NQ) && t < 20000) begin @(posedge clk); t++; end
      bad = 0;
      for (int cc = 0; cc < N; cc++) for (int r = 0; r < N; r++) begin
        Q[r][cc] = qo.pop_front(); T[r][cc] = to.pop_front();
      end
      for (int r = 0; r < N; r++) for (int cc = 0; cc < N; cc++) R[r][cc] = '0;
      for (int cc = 0; cc < N; cc++) for (int r = 0; r <= cc; r++) R[r][cc] = ro.pop_front();
      for (int r = 0; r < N; r++) for (int cc = 0; cc < N; cc++)
        if (Q[r][cc] != eQ[ch][r][cc] || R[r][cc] != eR[ch][r][cc] || T[r][cc] != eT[ch][r][cc]) bad++;
      checks++; if (bad) begin failures++; $display("FAIL channel %0d: %0d elements differ", ch, bad); end
      err = qr_ht_err(Q, R, T, hre[ch], him[ch]);
      checks++; if (err > 0.1) begin failures++; $display("FAIL channel %0d |QR-HT| = %f", ch, err); end
      ndone++;
    end
    $display("size reductions %0d, skipped %0d, swaps %0d, no swap %0d", n_nz, n_zero, n_sw, n_nosw);
    $display("input back-pressure %0d cycles, output back-pressure %0d cycles", n_in_bp, n_out_bp);
    $display("cycles with >=2 cores computing %0d, at most %0d at once", n_par, max_par);
    $display("first output word at cycle %0d, %0d bases in %0d cycles (%0d cycles per basis)",
             first_out, NCH, last_out, (last_out - first_out) / (NCH - 1));
    checks++; if (n_nz == 0 || n_zero == 0 || n_sw == 0 || n_nosw == 0) begin failures++; $display("FAIL reduction path unused"); end
    checks++; if (n_in_bp == 0 || n_out_bp == 0) begin failures++; $display("FAIL no back-pressure"); end
    checks++; if (max_par < 2) begin failures++; $display("FAIL cores never overlapped"); end
    checks++; if (ndone != NCH) failures++;
    for (int c = 0; c < NC; c++) begin
      checks++; if (n_iter[c] != NCH) begin failures++; $display("FAIL core %0d reported %0d iterations", c, n_iter[c]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
