// tb_fft_rom: ROM units of 32, 4 and 1 words. The counter must start with
// the first valid input, give phase 0 with twiddle W_{2L}^k on count k and
// phase 1 with twiddle 1 on the second half, run through one first half
// while only pend is high (the flush), and return to zero when idle. Twiddles are compared with values
// rounded here from cos/sin.
module tb_fft_rom;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, pend = 0;
  logic act32, ph32, act4, ph4, act1, ph1;
  tw_t  tw32, tw4, tw1;
  int checks = 0, failures = 0;

  fft_rom #(.L(32)) r32 (.clk, .rst_n, .in_valid, .pend, .active(act32), .phase(ph32), .tw(tw32));
  fft_rom #(.L(4))  r4  (.clk, .rst_n, .in_valid, .pend, .active(act4),  .phase(ph4),  .tw(tw4));
  fft_rom #(.L(1))  r1  (.clk, .rst_n, .in_valid, .pend, .active(act1),  .phase(ph1),  .tw(tw1));
  always #5 clk = !clk;

  function automatic int rnd(real v);
    return $rtoi(v < 0.0 ? v - 0.5 : v + 0.5);
  endfunction

  task automatic check(int l, int pos, logic ph, tw_t tw);
    int er, ei;
    logic eph;
    // while only pend keeps the stage busy (pos >= 64) the counter flushes
    // the first half and then restarts at zero
    if (pos >= 64) pos = (pos - 64) % l;
    eph = (pos % (2 * l)) >= l;
    if (eph) begin er = 1024; ei = 0; end
    else begin
      er = rnd($cos(2.0 * 3.14159265358979 * (pos % l) / (2.0 * l)) * 1024.0);
      ei = rnd(-$sin(2.0 * 3.14159265358979 * (pos % l) / (2.0 * l)) * 1024.0);
    end
    checks++;
    if (ph != eph || int'(tw.re) != er || int'(tw.im) != ei) begin
      failures++;
      $display("FAIL L=%0d pos=%0d phase=%b tw=(%0d,%0d) exp (%0d,%0d)", l, pos, ph, tw.re, tw.im, er, ei);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    for (int frame = 0; frame < 2; frame++) begin
      // 64 valid inputs, then 32 clocks where only pend keeps the stage busy
      for (int pos = 0; pos < 96; pos++) begin
        in_valid <= (pos < 64);
        pend     <= (pos >= 64);
        @(negedge clk);
        check(32, pos, ph32, tw32);
        check(4, pos, ph4, tw4);
        check(1, pos, ph1, tw1);
        checks++;
        if (!act32) begin failures++; $display("FAIL not active"); end
        @(posedge clk);
      end
      in_valid <= 0; pend <= 0;
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (act32 || ph32) begin failures++; $display("FAIL idle"); end
      repeat (3) @(posedge clk);
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
