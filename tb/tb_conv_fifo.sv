// tb_conv_fifo: loads X and H of random lengths, reads every pair and checks
// the pair order (kernel index fastest), the one-clock read latency, and
// that the buffer is empty and reusable afterwards.
module tb_conv_fifo;
  logic clk = 0, rst_n = 0;
  logic wr_A_en = 0, wr_B_en = 0, assign_read_en = 0;
  logic signed [15:0] buf_A_in = 0, buf_B_in = 0, A_in, B_in;
  logic pair_valid;
  int checks = 0, failures = 0;

  conv_fifo dut (.*);
  always #5 clk = !clk;

  int x[16], h[16];

  task automatic run_op(int n, int m);
    for (int i = 0; i < 15; i++) begin
      x[i] = int'($signed(16'($urandom)));
      h[i] = int'($signed(16'($urandom)));
    end
    for (int i = 0; i < (n > m ? n : m); i++) begin
      wr_A_en <= (i < n); buf_A_in <= 16'(x[i]);
      wr_B_en <= (i < m); buf_B_in <= 16'(h[i]);
      @(posedge clk);
    end
    wr_A_en <= 0; wr_B_en <= 0;
    for (int i = 0; i < n; i++)
      for (int j = 0; j < m; j++) begin
        assign_read_en <= 1;
        @(posedge clk);
        assign_read_en <= 0;
        @(negedge clk);
        checks++;
        if (!pair_valid || A_in != 16'(x[i]) || B_in != 16'(h[j])) begin
          failures++;
          $display("FAIL pair (%0d,%0d) got %0d,%0d v=%b", i, j, A_in, B_in, pair_valid);
        end
        @(posedge clk);
        #1;
        checks++;
        if (pair_valid) begin failures++; $display("FAIL valid held"); end
      end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_op(15, 15);
    run_op(1, 1);
    run_op(3, 7);
    for (int k = 0; k < 10; k++) run_op(1 + $urandom_range(14), 1 + $urandom_range(14));
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
