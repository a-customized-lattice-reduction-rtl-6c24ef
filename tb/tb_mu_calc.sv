// tb_mu_calc: checks mu = round(num/den), parts clamped to [-4,4], against
// real-valued division on exact ties, clamping, zero divisor and random data.
module tb_mu_calc;
  import lr_pkg::*;
  import lr_ref_pkg::*;
  cplx_t num; fx_t den; mu_t mu, e;
  int checks = 0, failures = 0;
  mu_calc dut (.num, .den, .mu);

  task automatic check();
    #1;
    e = rmu(num, den);
    checks++;
    if (mu !== e) begin
      failures++;
      if (failures < 10) $display("FAIL num=%0d,%0d den=%0d got %0d,%0d exp %0d,%0d",
                                  num.re, num.im, den, mu.re, mu.im, e.re, e.im);
    end
  endtask

  initial begin
    // 2.5/1 -> 2 (tie toward zero), -1.6/1 -> -2, 9/1 -> 4 (clamped)
    num = '{re: 16'sd5120, im: -16'sd3277}; den = 16'sd2048; check();
    if (mu.re != 4'sd2 || mu.im != -4'sd2) failures++;
    num = '{re: 16'sd18432, im: -16'sd18432}; den = 16'sd2048; check();
    if (mu.re != 4'sd4 || mu.im != -4'sd4) failures++;
    num = '{re: 16'sd1000, im: 16'sd1000}; den = 16'sd0; check();
    num = '{re: 16'sd3000, im: -16'sd3000}; den = -16'sd1000; check();
    for (int n = 0; n < 5000; n++) begin
      den = fx_t'($urandom);
      if (n % 3 != 0) den = den >>> ($urandom_range(4));
      num.re = fx_t'($urandom) >>> ($urandom_range(3));
      num.im = fx_t'($urandom) >>> ($urandom_range(3));
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
