// stream_in: input STREAM unit of a core.
//
// After a one-cycle start pulse with the stream length len, it moves len
// words from a FIFO into the core's matrix store, one word per clock cycle,
// writing store index 0, 1, ..., len-1 in order. While the FIFO is empty it
// waits (the core stalls on its input). done pulses in the cycle after the
// last word is written; busy is high from start until then. The paper says
// each STREAM unit reads one sample per cycle and that three of them read Q,
// R and T at the same time; the counter-driven interface is this design's.
module stream_in
  import lr_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic [4:0]  len,
  input  logic        fifo_empty,
  input  cplx_t       fifo_dout,
  output logic        fifo_pop,
  output logic        wr_en,
  output logic [4:0]  wr_idx,
  output cplx_t       wr_data,
  output logic        busy,
  output logic        done
);
  logic [4:0] cnt, total;

  assign fifo_pop = busy && !fifo_empty && (cnt != total);
  assign wr_en    = fifo_pop;
  assign wr_idx   = cnt;
  assign wr_data  = fifo_dout;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      cnt   <= '0;
      total <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= (len != '0);
        done  <= (len == '0);
        cnt   <= '0;
        total <= len;
      end else if (busy) begin
        if (fifo_pop) cnt <= cnt + 1'b1;
        if (fifo_pop && (cnt + 1'b1 == total)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
