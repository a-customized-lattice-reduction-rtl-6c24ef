// tb_stream_out: streams 16 and 10 words from a store model into a FIFO
// model that is full at random; checks order, count, the one-word-per-cycle
// rate when the FIFO has room, and done.
module tb_stream_out;
  import lr_pkg::*;
  logic clk = 0, rst = 1, start = 0, fifo_full, fifo_push, busy, done;
  logic [4:0] len, rd_idx;
  cplx_t rd_data, fifo_din;
  cplx_t dst[$];
  int checks = 0, failures = 0, cyc, base;
  always #5 clk = ~clk;
  stream_out dut (.clk, .rst, .start, .len, .rd_idx, .rd_data, .fifo_full, .fifo_push, .fifo_din,
                  .busy, .done);
  assign rd_data = cplx_t'(base + int'(rd_idx) * 3);

  initial begin
    fifo_full = 0; base = 0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int burst = 0; burst < 40; burst++) begin
      int l;
      l = (burst % 2) ? 10 : 16;
      base = burst * 1000;
      @(negedge clk); start = 1; len = 5'(l);
      @(negedge clk); start = 0;
      cyc = 0;
      while (!done && cyc < 200) begin
        fifo_full = (burst < 20) ? 1'b0 : ($urandom_range(2) == 0);
        @(posedge clk);
        if (fifo_push && fifo_full) begin failures++; $display("FAIL push into a full FIFO"); end
        if (fifo_push && !fifo_full) dst.push_back(fifo_din);
        @(negedge clk); cyc++;
      end
      checks++; if (dst.size() != l) begin failures++; $display("FAIL count %0d of %0d", dst.size(), l); end
      for (int w = 0; w < dst.size(); w++) begin
        checks++; if (dst[w] != cplx_t'(base + w * 3)) begin failures++; $display("FAIL word %0d", w); end
      end
      if (burst < 20) begin checks++; if (cyc != l) begin failures++; $display("FAIL rate %0d", cyc); end end
      dst.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
