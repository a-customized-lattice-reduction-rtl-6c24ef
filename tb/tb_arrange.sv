// tb_arrange: checks each ARRANGE operation on random words and on the
// saturating negation of the most negative value.
module tb_arrange;
  import lr_pkg::*;
  cplx_t a, y, e; ar_op_t op;
  int checks = 0, failures = 0;
  arrange dut (.op, .a, .y);

  function automatic fx_t n(input fx_t v);
    return (v == -16'sd32768) ? 16'sd32767 : -v;
  endfunction

  initial begin
    for (int t = 0; t < 600; t++) begin
      a = cplx_t'($urandom);
      if (t < 6) a.im = -16'sd32768;
      op = ar_op_t'(t % 6);
      #1;
      case (op)
        AR_CONJ:  e = '{re: a.re, im: n(a.im)};
        AR_NEG:   e = '{re: n(a.re), im: n(a.im)};
        AR_REAL:  e = '{re: a.re, im: 0};
        AR_IMAG:  e = '{re: a.im, im: 0};
        AR_NIMAG: e = '{re: n(a.im), im: 0};
        default:  e = '{re: a.im, im: a.re};
      endcase
      checks++;
      if (y !== e) begin failures++; $display("FAIL op=%0d a=%h got %h exp %h", op, a, y, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
