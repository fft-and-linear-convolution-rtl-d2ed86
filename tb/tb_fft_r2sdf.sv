// tb_fft_r2sdf: the 64-point FFT end to end.
// Frames are streamed (three back to back, then frames after gaps of 32 and
// 100 idle clocks). Each output frame must
//   * come out as 64 consecutive valid words, the first one 2N + 11 = 139
//     clocks after the first input of its frame;
//   * equal, bin for bin, a bit-exact fixed-point DIF model (tb_fft_ref_pkg);
//   * for inputs within +-1023, reach an SNR of at least 45 dB against a
//     double-precision DFT.
// Test signals: a unit-amplitude impulse, a single tone, random 12-bit
// full-scale frames (where the 16-bit output may wrap, which the model
// reproduces) and random half-scale frames. The mean SNR of the full-scale
// random frames is printed for comparison with the published 50.95 dB.
module tb_fft_r2sdf;
  import tb_fft_ref_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [11:0] din_r = 0, din_i = 0;
  logic out_valid;
  logic signed [15:0] dout_r, dout_i;
  int checks = 0, failures = 0;

  fft_r2sdf dut (.*);
  always #5 clk = !clk;

  int cyc = 0;
  always @(posedge clk) cyc++;

  typedef struct {
    ivec_t xr, xi;
    int    start;
    bit    snr_chk;
    bit    full_scale;
  } frame_t;
  frame_t fq [$];
  int frames_out = 0;
  real snr_full_sum = 0.0;
  int  snr_full_n = 0;

  // stimulus: a queue of input slots, played one per clock
  typedef struct {
    logic valid;
    int   re, im;
    int   frame;     // index into frames[] for the first sample, else -1
  } slot_t;
  slot_t  slots [$];
  frame_t frames [$];

  task automatic send(int kind, int gap);
    frame_t f;
    slot_t  sl;
    for (int g = 0; g < gap; g++) begin
      sl.valid = 0; sl.re = 0; sl.im = 0; sl.frame = -1;
      slots.push_back(sl);
    end
    for (int t = 0; t < N; t++) begin
      case (kind)
        0: begin f.xr[t] = (t == 0) ? 1000 : 0; f.xi[t] = 0; end
        1: begin f.xr[t] = $rtoi(400.0 * $cos(2.0 * PI * 5 * t / N));
                 f.xi[t] = $rtoi(400.0 * $sin(2.0 * PI * 5 * t / N)); end
        2: begin f.xr[t] = int'($signed(12'($urandom))); f.xi[t] = int'($signed(12'($urandom))); end
        default: begin f.xr[t] = int'($urandom_range(2046)) - 1023; f.xi[t] = int'($urandom_range(2046)) - 1023; end
      endcase
    end
    f.snr_chk    = (kind != 2);
    f.full_scale = (kind == 2);
    f.start      = 0;
    frames.push_back(f);
    for (int t = 0; t < N; t++) begin
      sl.valid = 1; sl.re = f.xr[t]; sl.im = f.xi[t];
      sl.frame = (t == 0) ? frames.size() - 1 : -1;
      slots.push_back(sl);
    end
  endtask

  task automatic play();
    while (slots.size() != 0) begin
      slot_t sl;
      sl = slots.pop_front();
      @(negedge clk);
      in_valid <= sl.valid; din_r <= 12'(sl.re); din_i <= 12'(sl.im);
      if (sl.frame >= 0) begin
        frame_t f;
        f = frames[sl.frame];
        f.start = cyc + 1;          // the coming rising edge takes it
        fq.push_back(f);
      end
    end
    @(negedge clk);
    in_valid <= 0;
  endtask

  // output checker
  int   k = 0;
  ivec_t hr, hi;
  always @(negedge clk) if (rst_n) begin
    if (out_valid) begin
      frame_t f;
      f = fq[0];
      if (k == 0) begin
        checks++;
        if (cyc - f.start != 2 * N + 11) begin
          failures++; $display("FAIL latency %0d", cyc - f.start);
        end
      end
      hr[k] = dout_r; hi[k] = dout_i;
      k++;
      if (k == N) begin
        ivec_t mr, mi;
        rvec_t fr, fi;
        real snr;
        void'(fq.pop_front());
        fixed_fft(N, f.xr, f.xi, mr, mi);
        for (int b = 0; b < N; b++) begin
          checks++;
          if (hr[b] != mr[b] || hi[b] != mi[b]) begin
            failures++;
            if (failures < 10) $display("FAIL frame %0d bin %0d got (%0d,%0d) model (%0d,%0d)",
                                        frames_out, b, hr[b], hi[b], mr[b], mi[b]);
          end
        end
        float_dft(N, f.xr, f.xi, fr, fi);
        snr = snr_db(N, hr, hi, fr, fi);
        if (f.snr_chk) begin
          checks++;
          if (snr < 45.0) begin failures++; $display("FAIL frame %0d SNR %0.2f dB", frames_out, snr); end
        end
        if (f.full_scale) begin snr_full_sum += snr; snr_full_n++; end
        frames_out++;
        k = 0;
      end
    end else if (k != 0) begin
      failures++; $display("FAIL gap inside an output frame"); k = 0;
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    send(0, 0); send(1, 0); send(2, 0);
    send(3, 32);
    send(2, 100);
    for (int i = 0; i < 10; i++) send(2 + (i % 2), 0);
    play();
    repeat (400) @(posedge clk);
    checks++;
    if (frames_out != 15 || fq.size() != 0) begin
      failures++; $display("FAIL %0d frames out", frames_out);
    end
    $display("mean SNR of full-scale random frames: %0.2f dB over %0d frames",
             snr_full_sum / snr_full_n, snr_full_n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
