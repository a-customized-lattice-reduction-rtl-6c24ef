// tb_lr_fifo: random pushes and pops against a queue model; checks data
// order, full and empty flags, and that a full FIFO holds exactly DEPTH words.
module tb_lr_fifo;
  logic clk = 0, rst = 1, push = 0, pop = 0, full, empty;
  logic [31:0] din, dout;
  logic [31:0] model[$];
  int checks = 0, failures = 0, nfull = 0;
  always #5 clk = ~clk;
  lr_fifo dut (.clk, .rst, .push, .din, .full, .pop, .dout, .empty);

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      checks++;
      if (empty != (model.size() == 0) || full != (model.size() == 16)) begin
        failures++; $display("FAIL flags size=%0d empty=%0b full=%0b", model.size(), empty, full);
      end
      if (!empty) begin
        checks++;
        if (dout != model[0]) begin failures++; $display("FAIL data %h exp %h", dout, model[0]); end
      end
      if (full) nfull++;
      // phases: fill, drain, mixed
      push = (n % 600 < 200) ? ($urandom_range(9) < 8) : (n % 600 < 400) ? ($urandom_range(9) < 2) : $urandom_range(1);
      pop  = (n % 600 < 200) ? ($urandom_range(9) < 2) : (n % 600 < 400) ? ($urandom_range(9) < 8) : $urandom_range(1);
      push = push && !full; pop = pop && !empty;
      din = $urandom;
      @(posedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    checks++; if (nfull == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
