// tb_conv_assign: for several (n, m) it writes n and m samples and checks
// that assign_read_en rises the clock after loading completes and stays
// high for exactly n*m clocks.
module tb_conv_assign;
  logic clk = 0, rst_n = 0;
  logic [3:0] n = 0, m = 0;
  logic wr_A_en = 0, wr_B_en = 0, assign_read_en, busy;
  int checks = 0, failures = 0;

  conv_assign dut (.*);
  always #5 clk = !clk;

  task automatic run_op(int nn, int mm);
    int high = 0, wait_c = 0;
    n <= 4'(nn); m <= 4'(mm);
    for (int i = 0; i < (nn > mm ? nn : mm); i++) begin
      wr_A_en <= (i < nn); wr_B_en <= (i < mm);
      @(posedge clk);
    end
    wr_A_en <= 0; wr_B_en <= 0;
    @(negedge clk);
    while (!assign_read_en && wait_c < 5) begin wait_c++; @(negedge clk); end
    while (assign_read_en) begin high++; @(negedge clk); end
    checks++;
    if (wait_c != 1) begin failures++; $display("FAIL start delay %0d", wait_c); end
    checks++;
    if (high != nn * mm) begin failures++; $display("FAIL n=%0d m=%0d read_en high %0d", nn, mm, high); end
    repeat (3) @(posedge clk);
    checks++;
    if (assign_read_en) begin failures++; $display("FAIL restarted"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_op(15, 15);
    run_op(1, 1);
    run_op(2, 9);
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
