// tb_siegel: checks swap = 0.75*p > q (0.75*p truncated as p/2 + p/4) on
// boundary values and random non-negative squares.
module tb_siegel;
  import lr_pkg::*;
  import lr_ref_pkg::*;
  fx_t p, q; logic swap;
  int checks = 0, failures = 0;
  siegel dut (.p, .q, .swap);

  task automatic check();
    #1; checks++;
    if (swap !== rsiegel(p, q)) begin
      failures++;
      if (failures < 10) $display("FAIL p=%0d q=%0d got %0b", p, q, swap);
    end
  endtask

  initial begin
    p = 16'sd4000; q = 16'sd2999; check(); if (!swap) failures++;
    p = 16'sd4000; q = 16'sd3000; check(); if (swap) failures++;
    p = 16'sd32767; q = 16'sd24574; check();
    p = 16'sd0; q = 16'sd0; check();
    for (int n = 0; n < 4000; n++) begin
      p = fx_t'($urandom_range(32767));
      q = (n % 2) ? fx_t'($urandom_range(32767)) : fx_t'(int'(p) * 3 / 4 + $urandom_range(6) - 3);
      if (q < 0) q = 0;
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
