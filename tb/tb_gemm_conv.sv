// tb_gemm_conv: end-to-end test of the convolution engine.
//   * the published example: X = 1..15, H = 4..18 (n = m = 15), whose first
//     23 outputs are printed in the published waveform, plus the remaining
//     six from direct convolution;
//   * random signed operations of random lengths 1..15, back to back.
// Every y(t) is compared with a direct convolution computed here, and the
// clocks from the last written sample to y(0) must be n*m + 4.
module tb_gemm_conv;
  logic clk = 0, rst = 1;
  logic signed [15:0] buf_A_in = 0, buf_B_in = 0;
  logic [3:0] seq_A_no = 0, seq_B_no = 0;
  logic wr_A_en = 0, wr_B_en = 0;
  logic [31:0] result;
  logic rcv_bit, busy;
  int checks = 0, failures = 0;

  gemm_conv dut (.*);
  always #5 clk = !clk;

  localparam int FIG [23] = '{4, 13, 28, 50, 80, 119, 168, 228, 300, 385, 484, 598,
                              728, 875, 1040, 1141, 1222, 1282, 1320, 1335, 1326, 1292, 1232};

  int x[15], h[15];

  task automatic run_op(int n, int m, bit check_fig);
    int y [29];
    int lat;
    for (int t = 0; t < n + m - 1; t++) begin
      y[t] = 0;
      for (int j = 0; j < m; j++)
        if (t - j >= 0 && t - j < n) y[t] += h[j] * x[t-j];
    end
    seq_A_no <= 4'(n); seq_B_no <= 4'(m);
    for (int i = 0; i < (n > m ? n : m); i++) begin
      wr_A_en <= (i < n); buf_A_in <= 16'(x[i]);
      wr_B_en <= (i < m); buf_B_in <= 16'(h[i]);
      @(posedge clk);
    end
    wr_A_en <= 0; wr_B_en <= 0;
    lat = 0;
    do begin @(posedge clk); lat++; #1; end while (!rcv_bit && lat < 400);
    checks++;
    if (lat != n * m + 4) begin failures++; $display("FAIL latency %0d exp %0d", lat, n*m+4); end
    for (int t = 0; t < n + m - 1; t++) begin
      checks++;
      if (!rcv_bit || $signed(result) != y[t]) begin
        failures++;
        $display("FAIL n=%0d m=%0d y(%0d) got %0d exp %0d rcv=%b", n, m, t, $signed(result), y[t], rcv_bit);
      end
      if (check_fig && t < 23) begin
        checks++;
        if ($signed(result) != FIG[t]) begin failures++; $display("FAIL published y(%0d)", t); end
      end
      @(posedge clk); #1;
    end
    checks++;
    if (rcv_bit) begin failures++; $display("FAIL rcv_bit too long"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    for (int i = 0; i < 15; i++) begin x[i] = i + 1; h[i] = i + 4; end
    run_op(15, 15, 1);
    for (int k = 0; k < 12; k++) begin
      int n, m;
      n = (k == 0) ? 1 : 1 + $urandom_range(14);
      m = (k == 0) ? 1 : (k == 1) ? 15 : 1 + $urandom_range(14);
      for (int i = 0; i < 15; i++) begin
        x[i] = int'($signed(16'($urandom)));
        h[i] = int'($signed(16'($urandom)));
      end
      run_op(n, m, 0);
    end
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
