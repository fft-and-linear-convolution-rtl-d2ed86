// tb_fft_small: the R2SDF FFT at the sizes of the 8-point flow graph that
// illustrates the algorithm (N = 8: three stages with delays 4, 2, 1 and
// twiddles W8^0..3, W8^0/W8^2, W8^0) and at N = 16. For each size, random
// 12-bit frames (back to back and after an N/2-clock gap) are compared bin
// for bin with the bit-exact fixed-point model, and the first output must
// come 2N + 2*log2(N) - 1 clocks after the first input.
module tb_fft_small;
  import tb_fft_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  int cyc = 0;
  always #5 clk = !clk;
  always @(posedge clk) cyc++;

  logic               iv8 = 0, iv16 = 0;
  logic signed [11:0] r8 = 0, i8 = 0, r16 = 0, i16 = 0;
  logic               ov8, ov16;
  logic signed [15:0] or8, oi8, or16, oi16;

  fft_r2sdf #(.N(8))  dut8  (.clk, .rst_n, .in_valid(iv8),  .din_r(r8),  .din_i(i8),
                             .out_valid(ov8),  .dout_r(or8),  .dout_i(oi8));
  fft_r2sdf #(.N(16)) dut16 (.clk, .rst_n, .in_valid(iv16), .din_r(r16), .din_i(i16),
                             .out_valid(ov16), .dout_r(or16), .dout_i(oi16));

  typedef struct { ivec_t xr, xi; int start; } frame_t;
  frame_t q8 [$], q16 [$];
  int done8 = 0, done16 = 0;

  task automatic drive(int n, int nframes);
    for (int f = 0; f < nframes; f++) begin
      frame_t fr;
      if (f == nframes - 1) repeat (n / 2) begin
        @(negedge clk);
        if (n == 8) iv8 <= 0; else iv16 <= 0;
      end
      for (int t = 0; t < n; t++) begin
        fr.xr[t] = int'($signed(12'($urandom))); fr.xi[t] = int'($signed(12'($urandom)));
      end
      for (int t = 0; t < n; t++) begin
        @(negedge clk);
        if (n == 8) begin iv8 <= 1; r8 <= 12'(fr.xr[t]); i8 <= 12'(fr.xi[t]); end
        else        begin iv16 <= 1; r16 <= 12'(fr.xr[t]); i16 <= 12'(fr.xi[t]); end
        if (t == 0) begin
          fr.start = cyc + 1;
          if (n == 8) q8.push_back(fr); else q16.push_back(fr);
        end
      end
    end
    @(negedge clk);
    if (n == 8) iv8 <= 0; else iv16 <= 0;
  endtask

  task automatic check_frame(int n, frame_t f, ivec_t hr, ivec_t hi);
    ivec_t mr, mi;
    fixed_fft(n, f.xr, f.xi, mr, mi);
    for (int b = 0; b < n; b++) begin
      checks++;
      if (hr[b] != mr[b] || hi[b] != mi[b]) begin
        failures++;
        $display("FAIL N=%0d bin %0d got (%0d,%0d) model (%0d,%0d)", n, b, hr[b], hi[b], mr[b], mi[b]);
      end
    end
  endtask

  int k8 = 0, k16 = 0;
  ivec_t h8r, h8i, h16r, h16i;
  always @(negedge clk) if (rst_n) begin
    if (ov8) begin
      if (k8 == 0) begin
        checks++;
        if (cyc - q8[0].start != 2 * 8 + 2 * 3 - 1) begin failures++; $display("FAIL N=8 latency %0d", cyc - q8[0].start); end
      end
      h8r[k8] = or8; h8i[k8] = oi8; k8++;
      if (k8 == 8) begin check_frame(8, q8.pop_front(), h8r, h8i); k8 = 0; done8++; end
    end
    if (ov16) begin
      if (k16 == 0) begin
        checks++;
        if (cyc - q16[0].start != 2 * 16 + 2 * 4 - 1) begin failures++; $display("FAIL N=16 latency %0d", cyc - q16[0].start); end
      end
      h16r[k16] = or16; h16i[k16] = oi16; k16++;
      if (k16 == 16) begin check_frame(16, q16.pop_front(), h16r, h16i); k16 = 0; done16++; end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    fork
      drive(8, 6);
      drive(16, 5);
    join
    repeat (100) @(posedge clk);
    checks++;
    if (done8 != 6 || done16 != 5) begin failures++; $display("FAIL frames %0d %0d", done8, done16); end
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
