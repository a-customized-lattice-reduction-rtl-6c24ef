// tb_cordic_ms: checks the master-slave CORDIC. For vectors in all four
// quadrants it checks that the result arrives exactly 4 cycles after start,
// that cs = exp(-j*angle) within 4 LSB of the real-valued cos/sin, that mag is
// K*|v| within 0.2 %, and that both match the bit-exact reference.
module tb_cordic_ms;
  import lr_pkg::*;
  import lr_ref_pkg::*;
  logic clk = 0, rst = 1, start = 0, done;
  fx_t x, y, mag, emag;
  cplx_t cs, ecs;
  int checks = 0, failures = 0, lat;
  real ang, ec, es, err;
  always #5 clk = ~clk;
  cordic_ms dut (.clk, .rst, .start, .x, .y, .cs, .mag, .done);

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 400; n++) begin
      x = fx_t'($urandom) >>> 2; y = fx_t'($urandom) >>> 2;
      if (n == 0) begin x = 16'sd2048; y = 16'sd0; end
      if (n == 1) begin x = -16'sd2048; y = 16'sd2048; end
      if (n == 2) begin x = 16'sd0; y = -16'sd4096; end
      if (int'(x) * int'(x) + int'(y) * int'(y) < 40000) x = x + 16'sd300;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      lat = 1;
      while (!done && lat < 20) begin @(negedge clk); lat++; end
      checks++; if (lat != 4) begin failures++; $display("FAIL latency %0d", lat); end
      rcordic(x, y, ecs, emag);
      checks++; if (cs !== ecs || mag !== emag) begin failures++; $display("FAIL exact x=%0d y=%0d", x, y); end
      ang = $atan2(real'(y), real'(x));
      ec = $cos(ang) * 2048.0; es = -$sin(ang) * 2048.0;
      err = (real'(cs.re) - ec) * (real'(cs.re) - ec) + (real'(cs.im) - es) * (real'(cs.im) - es);
      checks++; if (err > 16.0) begin failures++; $display("FAIL cs x=%0d y=%0d got %0d,%0d exp %f,%f", x, y, cs.re, cs.im, ec, es); end
      err = real'(mag) / (1.6467602 * $sqrt(real'(x) * real'(x) + real'(y) * real'(y)));
      checks++; if (err < 0.998 || err > 1.002) begin failures++; $display("FAIL mag ratio %f", err); end
      @(negedge clk);
      checks++; if (cs !== ecs) failures++;             // result holds
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
