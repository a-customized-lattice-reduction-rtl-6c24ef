// tb_size_reduce: checks y = a - mu*b against integer multiplication for
// every mu in [-4,4]^2 with random a, b, including saturating cases.
module tb_size_reduce;
  import lr_pkg::*;
  import lr_ref_pkg::*;
  cplx_t a, b, y, e; mu_t mu;
  int checks = 0, failures = 0;
  size_reduce dut (.a, .b, .mu, .y);

  initial begin
    for (int mr = -4; mr <= 4; mr++)
      for (int mi = -4; mi <= 4; mi++)
        for (int n = 0; n < 60; n++) begin
          mu = '{re: 4'(mr), im: 4'(mi)};
          a = cplx_t'($urandom); b = cplx_t'($urandom);
          if (n < 50) begin b.re = b.re >>> 4; b.im = b.im >>> 4; a.re = a.re >>> 1; a.im = a.im >>> 1; end
          #1;
          e = rsr(a, b, mu);
          checks++;
          if (y !== e) begin
            failures++;
            if (failures < 10) $display("FAIL mu=%0d,%0d a=%h b=%h got %h exp %h", mr, mi, a, b, y, e);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
