// tb_fft_delay: a delay unit of length 5 (and the default 32 in a second
// instance) with a random shift pattern: each word must come out exactly L
// shifts after it went in, and pend must equal "some valid word inside".
module tb_fft_delay;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic shift = 0;
  cplx_v_t din = '0, dout5, dout32;
  logic pend5, pend32;
  int checks = 0, failures = 0;

  fft_delay #(.L(5)) dut5  (.clk, .rst_n, .shift, .din, .dout(dout5),  .pend(pend5));
  fft_delay          dut32 (.clk, .rst_n, .shift, .din, .dout(dout32), .pend(pend32));
  always #5 clk = !clk;

  cplx_v_t hist [$];

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < 32; i++) hist.push_front('0);
    @(negedge clk);
    for (int c = 0; c < 600; c++) begin
      int nv;
      cplx_v_t w;
      // reference from the words pushed so far
      checks += 2;
      if (dout5 != hist[4])   begin failures++; $display("FAIL L5 c=%0d", c); end
      if (dout32 != hist[31]) begin failures++; $display("FAIL L32 c=%0d", c); end
      nv = 0;
      for (int k = 0; k < 5; k++) nv += hist[k].valid;
      checks++;
      if (pend5 != (nv != 0)) begin failures++; $display("FAIL pend5 c=%0d", c); end
      nv = 0;
      for (int k = 0; k < 32; k++) nv += hist[k].valid;
      checks++;
      if (pend32 != (nv != 0)) begin failures++; $display("FAIL pend32 c=%0d", c); end
      w.valid = (c < 300) ? ($urandom_range(3) != 0) : 1'b0;
      w.d     = $urandom;
      din   <= w;
      shift <= ($urandom_range(4) != 0);
      @(posedge clk);
      if (shift) begin hist.push_front(w); void'(hist.pop_back()); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
