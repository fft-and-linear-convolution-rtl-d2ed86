// tb_fft_sort: feeds frames of 64 words in bit-reversed order (back to back,
// then with a gap) and checks that each frame leaves in natural order, N
// words on N consecutive clocks, starting two clocks after its last input.
module tb_fft_sort;
  import dsp_pkg::*;
  logic clk = 0, rst_n = 0;
  cplx_v_t din = '0;
  logic out_valid;
  cplx_t dout;
  int checks = 0, failures = 0;

  fft_sort dut (.*);
  always #5 clk = !clk;

  cplx_t exp_q [$];
  int    last_in_cyc [$];
  int    cyc = 0;
  int    run = 0;
  always @(posedge clk) cyc++;

  function automatic int br6(int i);
    int r = 0;
    for (int b = 0; b < 6; b++) if ((i >> b) & 1) r |= 1 << (5 - b);
    return r;
  endfunction

  task automatic frame();
    cplx_t nat [64];
    for (int k = 0; k < 64; k++) begin nat[k] = $urandom; exp_q.push_back(nat[k]); end
    for (int i = 0; i < 64; i++) begin
      din.valid <= 1; din.d <= nat[br6(i)];
      @(posedge clk);
    end
    last_in_cyc.push_back(cyc);
    din.valid <= 0;
  endtask

  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      cplx_t e;
      if (run == 0) begin
        int lc;
        lc = last_in_cyc.pop_front();
        checks++;
        if (cyc - lc != 2) begin failures++; $display("FAIL start %0d clocks after last input", cyc - lc); end
      end
      e = exp_q.pop_front();
      checks++;
      if (dout != e) begin failures++; $display("FAIL word %0d", run); end
      run = (run + 1) % 64;
    end else if (run != 0) begin
      failures++; $display("FAIL output gap");
      run = 0;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    frame(); frame(); frame();
    repeat (80) @(posedge clk);
    frame();
    repeat (100) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL %0d words missing", exp_q.size()); end
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
