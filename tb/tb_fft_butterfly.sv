// tb_fft_butterfly: drives the butterfly directly with random samples,
// random delay-unit words, random phase and random twiddles and checks
//   phase 1: delay input = delayed - new, stage output = delayed + new;
//   phase 0: delay input = new, stage output = delayed word x twiddle,
//            truncated by 10 bits;
// with the stage output arriving exactly two clocks later.
module tb_fft_butterfly;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic phase = 0;
  tw_t  tw = '0;
  cplx_v_t din = '0, dl_out = '0, dl_in, dout;
  int checks = 0, failures = 0;

  fft_butterfly dut (.*);
  always #5 clk = !clk;

  cplx_v_t exp_q [$];

  function automatic int w16(longint v); return int'(shortint'(v)); endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    exp_q.push_back('0); exp_q.push_back('0);
    for (int c = 0; c < 2000; c++) begin
      cplx_v_t a, b, e_dl, e_out;
      logic    ph;
      tw_t     w;
      int      wr, wi;
      a = $urandom; b = $urandom;
      a.valid = $urandom_range(1); b.valid = $urandom_range(1);
      ph = $urandom_range(1);
      wr = (c % 4 == 0) ? -2048 : int'($urandom_range(4095)) - 2048;
      wi = int'($urandom_range(4095)) - 2048;
      w.re = 12'(wr); w.im = 12'(wi);
      if (ph) begin w.re = 12'd1024; w.im = 12'd0; end
      @(negedge clk);
      din <= a; dl_out <= b; phase <= ph; tw <= w;
      #1;
      if (ph) begin
        e_dl.valid = a.valid;
        e_dl.d.re = 16'(w16(longint'(b.d.re) - a.d.re));
        e_dl.d.im = 16'(w16(longint'(b.d.im) - a.d.im));
        e_out.valid = a.valid;
        e_out.d.re = 16'(w16(longint'(b.d.re) + a.d.re));
        e_out.d.im = 16'(w16(longint'(b.d.im) + a.d.im));
      end else begin
        e_dl = a;
        e_out.valid = b.valid;
        e_out.d.re = 16'(w16((longint'(b.d.re) * wr - longint'(b.d.im) * wi) >>> 10));
        e_out.d.im = 16'(w16((longint'(b.d.re) * wi + longint'(b.d.im) * wr) >>> 10));
      end
      exp_q.push_back(e_out);
      checks++;
      if (dl_in != e_dl) begin failures++; $display("FAIL dl_in c=%0d", c); end
      // output of the operands given two clocks earlier
      begin
        cplx_v_t e;
        e = exp_q.pop_front();
        checks++;
        if (dout != e) begin
          failures++;
          if (failures < 10) $display("FAIL out c=%0d got %p exp %p", c, dout, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
