// tb_conv_select: pulses done_bit n*m times (with random gaps) and checks
// select_out = i + j for each product in issue order, and sel_last only on
// the final one.
module tb_conv_select;
  logic clk = 0, rst_n = 0;
  logic [3:0] n = 0, m = 0;
  logic done_bit = 0;
  logic [4:0] select_out;
  logic sel_valid, sel_last;
  int checks = 0, failures = 0;

  conv_select dut (.*);
  always #5 clk = !clk;

  task automatic run_op(int nn, int mm);
    n <= 4'(nn); m <= 4'(mm);
    @(posedge clk);
    for (int i = 0; i < nn; i++)
      for (int j = 0; j < mm; j++) begin
        if ($urandom_range(3) == 0) begin done_bit <= 0; @(posedge clk); end
        done_bit <= 1;
        @(negedge clk);
        checks++;
        if (select_out != 5'(i + j) || !sel_valid || sel_last != (i == nn-1 && j == mm-1)) begin
          failures++;
          $display("FAIL (%0d,%0d) sel=%0d last=%b", i, j, select_out, sel_last);
        end
        @(posedge clk);
      end
    done_bit <= 0;
    @(negedge clk);
    checks++;
    if (sel_valid || sel_last) begin failures++; $display("FAIL idle valid"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    run_op(15, 15);
    run_op(1, 1);
    run_op(4, 2);
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
