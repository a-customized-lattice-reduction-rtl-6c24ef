// tb_stream_in: streams bursts of 16 and 10 words from a FIFO model that
// goes empty at random; checks store index/data order, that every word is
// popped once, the one-word-per-cycle rate when data is present, and done.
module tb_stream_in;
  import lr_pkg::*;
  logic clk = 0, rst = 1, start = 0, fifo_empty, fifo_pop, wr_en, busy, done;
  logic [4:0] len, wr_idx;
  cplx_t fifo_dout, wr_data;
  cplx_t src[$];
  int checks = 0, failures = 0, got, cyc, avail;
  always #5 clk = ~clk;
  stream_in dut (.clk, .rst, .start, .len, .fifo_empty, .fifo_dout, .fifo_pop, .wr_en, .wr_idx,
                 .wr_data, .busy, .done);
  assign fifo_empty = (src.size() == 0) || (avail == 0);
  assign fifo_dout  = (src.size() != 0) ? src[0] : '0;

  initial begin
    avail = 1;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int burst = 0; burst < 40; burst++) begin
      int l;
      l = (burst % 2) ? 10 : 16;
      for (int w = 0; w < 20; w++) src.push_back(cplx_t'(burst * 256 + w));
      @(negedge clk); start = 1; len = 5'(l);
      @(negedge clk); start = 0;
      got = 0; cyc = 0;
      while (!done && cyc < 200) begin
        avail = (burst < 20) ? 1 : int'($urandom_range(2) != 0);
        #1;
        if (wr_en) begin
          checks++;
          if (wr_idx != 5'(got) || wr_data != cplx_t'(burst * 256 + got) || !fifo_pop) begin
            failures++; $display("FAIL idx %0d data %h", wr_idx, wr_data);
          end
        end
        @(posedge clk);
        if (fifo_pop) begin void'(src.pop_front()); got++; end
        @(negedge clk); cyc++;
      end
      checks++; if (got != l) begin failures++; $display("FAIL got %0d of %0d", got, l); end
      if (burst < 20) begin checks++; if (cyc != l) begin failures++; $display("FAIL rate %0d cycles for %0d", cyc, l); end end
      src.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
