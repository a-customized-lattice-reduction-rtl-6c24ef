// tb_lr_rayleigh: workload test on Rayleigh-fading 4x4 channels, the
// channel model of the paper's BER study (complex Gaussian entries of unit
// variance), through the default five-core pipeline.
//
// For NCH channels it checks every output bit for bit against five reference
// iterations and, in real arithmetic, Q*R = H*T. It reports the orthogonality
// defect of the basis before and after reduction (log2 of the product of the
// column norms over |det R|) and fails if the mean defect does not drop by at
// least 30 %, or if any reduced basis is worse than its input.
module tb_lr_rayleigh;
  import lr_pkg::*;
  import lr_ref_pkg::*;

  localparam int NCH = 200;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic q_in_valid, q_in_ready, r_in_valid, r_in_ready;
  cplx_t q_in_data, r_in_data;
  logic q_out_valid, r_out_valid, t_out_valid;
  cplx_t q_out_data, r_out_data, t_out_data;
  logic [4:0] core_busy, iter_done;

  lr_multiprocessor dut (.clk, .rst, .q_in_valid, .q_in_ready, .q_in_data, .r_in_valid, .r_in_ready,
    .r_in_data, .q_out_valid, .q_out_ready(1'b1), .q_out_data, .r_out_valid, .r_out_ready(1'b1),
    .r_out_data, .t_out_valid, .t_out_ready(1'b1), .t_out_data, .core_busy, .iter_done);

  int checks = 0, failures = 0;
  cplx_t qs[$], rs[$], qo[$], ro[$], to[$];
  mat_t eQ[NCH], eR[NCH], eT[NCH];
  real hre[NCH][N][N], him[NCH][N][N], d_in[NCH];
  bit q_take = 0, r_take = 0;

  assign q_in_valid = qs.size() != 0;
  assign q_in_data  = qs.size() != 0 ? qs[0] : '0;
  assign r_in_valid = rs.size() != 0;
  assign r_in_data  = rs.size() != 0 ? rs[0] : '0;

  always @(negedge clk) begin
    if (q_take) void'(qs.pop_front());
    if (r_take) void'(rs.pop_front());
  end
  always @(posedge clk) if (!rst) begin
    q_take <= q_in_valid && q_in_ready;
    r_take <= r_in_valid && r_in_ready;
    if (q_out_valid) qo.push_back(q_out_data);
    if (r_out_valid) ro.push_back(r_out_data);
    if (t_out_valid) to.push_back(t_out_data);
  end

  initial begin
    mat_t Q, R, T;
    int nz, sw, c, bad, worse;
    real err, din_sum, dout_sum, d;
    din_sum = 0; dout_sum = 0; worse = 0;
    for (int ch = 0; ch < NCH; ch++) begin
      make_basis(Q, R, hre[ch], him[ch], 1'b1);
      d_in[ch] = log_defect(R);
      for (int cc = 0; cc < N; cc++) for (int r = 0; r < N; r++) qs.push_back(Q[r][cc]);
      for (int cc = 0; cc < N; cc++) for (int r = 0; r <= cc; r++) rs.push_back(R[r][cc]);
      for (int r = 0; r < N; r++) for (int cc = 0; cc < N; cc++) T[r][cc] = (r == cc) ? '{re: 16'sd2048, im: 16'sd0} : '0;
      for (int it = 0; it < 5; it++) mlll_iter(Q, R, T, nz, sw, c);
      eQ[ch] = Q; eR[ch] = R; eT[ch] = T;
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int ch = 0; ch < NCH; ch++) begin
      int t;
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
      checks++; if (bad != 0) begin failures++; $display("FAIL channel %0d: %0d elements differ", ch, bad); end
      err = qr_ht_err(Q, R, T, hre[ch], him[ch]);
      checks++; if (err > 0.1) begin failures++; $display("FAIL channel %0d |QR-HT| = %f", ch, err); end
      d = log_defect(R);
      din_sum += d_in[ch]; dout_sum += d;
      if (d > d_in[ch] + 0.05) worse++;
    end
    $display("mean log2 orthogonality defect: input %f, reduced %f", din_sum / NCH, dout_sum / NCH);
    checks++; if (dout_sum > 0.7 * din_sum) begin failures++; $display("FAIL defect not reduced enough"); end
    checks++; if (worse != 0) begin failures++; $display("FAIL %0d bases got worse", worse); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
