// tb_cmul: checks the complex multiplier against integer products rounded to
// nearest and saturated, on corner values and 3000 random operand pairs.
module tb_cmul;
  import lr_pkg::*;
  import lr_ref_pkg::*;
  cplx_t a, b, p, e;
  int checks = 0, failures = 0;
  cmul dut (.a, .b, .p);

  task automatic check();
    #1;
    e = rcmul(a, b);
    checks++;
    if (p !== e) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h got %h exp %h", a, b, p, e);
    end
  endtask

  initial begin
    a = '{re: 16'sd2048, im: 16'sd0};  b = '{re: 16'sd1234, im: -16'sd777}; check();
    a = '{re: 16'sd0, im: 16'sd2048};  b = '{re: 16'sd1234, im: -16'sd777}; check();
    a = '{re: 16'sd32767, im: 16'sd32767}; b = a; check();          // saturates
    a = '{re: -16'sd32768, im: 16'sd0}; b = a; check();
    a = '{re: 16'sd3, im: 16'sd0}; b = '{re: 16'sd341, im: 16'sd0}; check();   // rounding
    for (int n = 0; n < 3000; n++) begin
      a = cplx_t'($urandom); b = cplx_t'($urandom);
      if (n % 2 == 0) begin a.re = a.re >>> 3; a.im = a.im >>> 3; b.re = b.re >>> 3; b.im = b.im >>> 3; end
      check();
    end
    // known value: (1+2j)*(3-1j) = 5+5j
    a = '{re: 16'sd2048, im: 16'sd4096}; b = '{re: 16'sd6144, im: -16'sd2048}; #1;
    checks++; if (p.re != 16'sd10240 || p.im != 16'sd10240) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
