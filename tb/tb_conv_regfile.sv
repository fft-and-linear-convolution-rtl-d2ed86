// tb_conv_regfile: accumulates random values into random arrays, flags the
// last one, and checks that t_len sums stream out one per clock with
// rcv_bit, starting two clocks after the last accumulation, and that the
// arrays are cleared for the next operation.
module tb_conv_regfile;
  logic clk = 0, rst_n = 0;
  logic [31:0] din [32];
  logic [31:0] en = 0;
  logic acc_last = 0;
  logic [4:0] t_len = 0;
  logic [31:0] result;
  logic rcv_bit;
  int checks = 0, failures = 0;

  conv_regfile dut (.*);
  always #5 clk = !clk;

  task automatic run_op(int t, int nprod);
    logic [31:0] ref_acc [32];
    for (int k = 0; k < 32; k++) ref_acc[k] = 0;
    t_len <= 5'(t);
    for (int p = 0; p < nprod; p++) begin
      int k;
      logic [31:0] v;
      k = (p == nprod - 1) ? t - 1 : $urandom_range(t - 1);
      v = $urandom;
      for (int q = 0; q < 32; q++) din[q] <= (q == k) ? v : 32'h0;
      en <= 32'h1 << k;
      acc_last <= (p == nprod - 1);
      ref_acc[k] += v;
      @(posedge clk);
    end
    en <= 0; acc_last <= 0;
    for (int q = 0; q < 32; q++) din[q] <= 32'h0;
    @(negedge clk);
    checks++;
    if (rcv_bit) begin failures++; $display("FAIL rcv early"); end
    for (int k = 0; k < t; k++) begin
      @(negedge clk);
      checks++;
      if (!rcv_bit || result != ref_acc[k]) begin
        failures++;
        $display("FAIL y(%0d) got %0d exp %0d rcv=%b", k, result, ref_acc[k], rcv_bit);
      end
    end
    @(negedge clk);
    checks++;
    if (rcv_bit) begin failures++; $display("FAIL rcv too long"); end
  endtask

  initial begin
    for (int q = 0; q < 32; q++) din[q] = 0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_op(29, 225);
    run_op(1, 1);
    run_op(5, 12);
    for (int k = 0; k < 8; k++) run_op(1 + $urandom_range(30), 1 + $urandom_range(100));
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
