// stream_out: output STREAM unit of a core.
//
// After a one-cycle start pulse with the stream length len, it reads store
// index 0, 1, ..., len-1 (rd_idx, combinational read data rd_data) and pushes
// each word into the next FIFO, one per clock cycle, waiting while the FIFO
// is full. done pulses in the cycle after the last push; busy is high from
// start until then. The paper uses three such units to write Q, R and T at
// the same time; the counter-driven interface is this design's.
module stream_out
  import lr_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic [4:0]  len,
  output logic [4:0]  rd_idx,
  input  cplx_t       rd_data,
  input  logic        fifo_full,
  output logic        fifo_push,
  output cplx_t       fifo_din,
  output logic        busy,
  output logic        done
);
  logic [4:0] cnt, total;

  assign fifo_push = busy && !fifo_full && (cnt != total);
  assign rd_idx    = cnt;
  assign fifo_din  = rd_data;

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
        if (fifo_push) cnt <= cnt + 1'b1;
        if (fifo_push && (cnt + 1'b1 == total)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
