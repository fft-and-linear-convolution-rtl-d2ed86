// tb_bsm_dsp_top: end-to-end test of the whole design at its default sizes.
// The convolution engine and the 64-point FFT run at the same time:
//   * convolutions: the published 15 x 15 example, the 1 x 1 and 15 x 1
//     extremes and random signed operations, each checked against a direct
//     convolution, with the n*m + 4 clock latency;
//   * FFT: frames back to back, after a N/2-clock gap and after a long gap,
//     including one whose bins overflow the 16-bit output, each checked bin
//     for bin against the bit-exact model, with the 2N + 11 clock latency.
// It counts how often each mechanism of the design occurred and fails if
// one never did: back-to-back frames (sort unit writing one bank while
// reading the other), pipeline flush after a frame, 16-bit output wrap,
// accumulation of several products into one register-file array, a
// convolution at the 15 x 15 limit, and both engines busy in the same clock.
module tb_bsm_dsp_top;
  import tb_fft_ref_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  logic signed [15:0] buf_A_in = 0, buf_B_in = 0;
  logic [3:0] seq_A_no = 0, seq_B_no = 0;
  logic wr_A_en = 0, wr_B_en = 0;
  logic [31:0] result;
  logic rcv_bit, conv_busy;
  logic in_valid = 0;
  logic signed [11:0] din_r = 0, din_i = 0;
  logic out_valid;
  logic signed [15:0] dout_r, dout_i;
  int checks = 0, failures = 0;

  bsm_dsp_top dut (.*);
  always #5 clk = !clk;

  int cyc = 0;
  always @(posedge clk) cyc++;

  // mechanism counters
  int n_b2b = 0, n_flush = 0, n_wrap = 0, n_multi_acc = 0, n_max_conv = 0, n_both = 0;
  int fft_done = 0, conv_done = 0;

  always @(negedge clk) if (rst_n && conv_busy && (in_valid || out_valid)) n_both++;

  // ---------------- FFT side ----------------
  typedef struct {
    ivec_t xr, xi;
    int    start;
    bit    after_gap;
  } frame_t;
  frame_t fq [$];

  task automatic fft_frame(int kind, int gap, bit last);
    frame_t f;
    for (int t = 0; t < N; t++) begin
      if (kind == 0) begin f.xr[t] = 2047; f.xi[t] = -2048; end      // overflows X[0]
      else begin f.xr[t] = int'($signed(12'($urandom))); f.xi[t] = int'($signed(12'($urandom))); end
    end
    repeat (gap) begin @(negedge clk); in_valid <= 0; end
    f.after_gap = (gap != 0);
    for (int t = 0; t < N; t++) begin
      @(negedge clk);
      in_valid <= 1; din_r <= 12'(f.xr[t]); din_i <= 12'(f.xi[t]);
      if (t == 0) begin f.start = cyc + 1; fq.push_back(f); end
    end
    if (last) begin @(negedge clk); in_valid <= 0; end
  endtask

  int k = 0;
  ivec_t hr, hi;
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      frame_t f;
      f = fq[0];
      if (k == 0) begin
        checks++;
        if (cyc - f.start != 2 * N + 11) begin failures++; $display("FAIL FFT latency %0d", cyc - f.start); end
      end
      hr[k] = dout_r; hi[k] = dout_i;
      k++;
      if (k == N) begin
        ivec_t mr, mi;
        rvec_t fr, fi;
        bit wrapped = 0;
        void'(fq.pop_front());
        fixed_fft(N, f.xr, f.xi, mr, mi);
        float_dft(N, f.xr, f.xi, fr, fi);
        for (int b = 0; b < N; b++) begin
          checks++;
          if (hr[b] != mr[b] || hi[b] != mi[b]) begin
            failures++;
            if (failures < 10) $display("FAIL FFT bin %0d got (%0d,%0d) model (%0d,%0d)", b, hr[b], hi[b], mr[b], mi[b]);
          end
          if (fr[b] > 32767.0 || fr[b] < -32768.0 || fi[b] > 32767.0 || fi[b] < -32768.0) wrapped = 1;
        end
        if (wrapped) n_wrap++;
        if (fq.size() != 0 && fq[0].start == f.start + N) n_b2b++;
        if (!in_valid) n_flush++;
        fft_done++;
        k = 0;
      end
    end else if (k != 0) begin
      failures++; $display("FAIL FFT gap in output"); k = 0;
    end
  end

  // ---------------- convolution side ----------------
  task automatic conv_op(int n, int m, bit fig);
    int x[15], h[15], y[29];
    int lat;
    for (int i = 0; i < 15; i++) begin
      x[i] = fig ? i + 1 : int'($signed(16'($urandom)));
      h[i] = fig ? i + 4 : int'($signed(16'($urandom)));
    end
    for (int t = 0; t < n + m - 1; t++) begin
      y[t] = 0;
      for (int j = 0; j < m; j++) if (t - j >= 0 && t - j < n) y[t] += h[j] * x[t-j];
    end
    @(negedge clk);
    seq_A_no <= 4'(n); seq_B_no <= 4'(m);
    for (int i = 0; i < (n > m ? n : m); i++) begin
      wr_A_en <= (i < n); buf_A_in <= 16'(x[i]);
      wr_B_en <= (i < m); buf_B_in <= 16'(h[i]);
      @(negedge clk);
    end
    wr_A_en <= 0; wr_B_en <= 0;
    lat = 0;   // clock edges after the one that takes the last sample
    while (!rcv_bit && lat < 400) begin @(negedge clk); lat++; end
    checks++;
    if (lat != n * m + 4) begin failures++; $display("FAIL conv latency %0d exp %0d", lat, n * m + 4); end
    for (int t = 0; t < n + m - 1; t++) begin
      checks++;
      if (!rcv_bit || $signed(result) != y[t]) begin
        failures++;
        $display("FAIL conv n=%0d m=%0d y(%0d) got %0d exp %0d", n, m, t, $signed(result), y[t]);
      end
      @(negedge clk);
    end
    checks++;
    if (rcv_bit) begin failures++; $display("FAIL rcv_bit too long"); end
    if (n > 1 && m > 1) n_multi_acc++;
    if (n == 15 && m == 15) n_max_conv++;
    conv_done++;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    fork
      begin
        fft_frame(1, 0, 0); fft_frame(0, 0, 0); fft_frame(1, 0, 1);
        fft_frame(1, N / 2, 1);
        fft_frame(1, 200, 0); fft_frame(1, 0, 1);
      end
      begin
        conv_op(15, 15, 1);
        conv_op(1, 1, 0);
        conv_op(15, 1, 0);
        for (int i = 0; i < 6; i++) conv_op(1 + $urandom_range(14), 1 + $urandom_range(14), 0);
      end
    join
    repeat (300) @(posedge clk);
    checks++;
    if (fft_done != 6 || fq.size() != 0) begin failures++; $display("FAIL %0d FFT frames", fft_done); end
    checks++;
    if (conv_done != 9) begin failures++; $display("FAIL %0d convolutions", conv_done); end
    $display("mechanisms: back-to-back frames %0d, flushes %0d, 16-bit wraps %0d, multi-product arrays %0d, 15x15 convolutions %0d, clocks with both engines busy %0d",
             n_b2b, n_flush, n_wrap, n_multi_acc, n_max_conv, n_both);
    if (n_b2b == 0)       begin failures++; $display("FAIL no back-to-back frames"); end
    if (n_flush == 0)     begin failures++; $display("FAIL no flush"); end
    if (n_wrap == 0)      begin failures++; $display("FAIL no output wrap"); end
    if (n_multi_acc == 0) begin failures++; $display("FAIL no multi-product accumulation"); end
    if (n_max_conv == 0)  begin failures++; $display("FAIL no 15x15 convolution"); end
    if (n_both == 0)      begin failures++; $display("FAIL engines never overlapped"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
