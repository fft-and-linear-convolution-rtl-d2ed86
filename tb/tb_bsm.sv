// tb_bsm: 16-bit bit slicing multiplier. Streams one operand pair per clock
// and checks each product one clock later (the unit's latency): first the
// operand pairs and products printed in the published simulation, then
// corner cases and random signed operands.
module tb_bsm;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [15:0] A_in = 0, B_in = 0;
  logic done;
  logic signed [31:0] mult_out;
  int checks = 0, failures = 0;

  bsm dut (.*);
  always #5 clk = !clk;

  // operand pairs and products read from the published waveform
  localparam int FA [7] = '{6, 24193, 22115, -26227, 21010, -13043, -12995};
  localparam int FB [7] = '{15, 13604, -10743, 31501, -31643, -7423, -3722};
  localparam int FP [7] = '{90, 329121572, -237581445, -826176727, -664819430, 96818189, 48367390};

  int qa[$], qb[$], qp[$];

  task automatic issue(int a, int b, int p);
    A_in <= 16'(a); B_in <= 16'(b); in_valid <= 1;
    qa.push_back(a); qb.push_back(b); qp.push_back(p);
  endtask

  // checker: a product must appear exactly one clock after its operands
  logic v_d;
  int   p_d;
  always @(posedge clk) begin
    if (rst_n) begin
      if (v_d) begin
        checks++;
        if (!done || mult_out != p_d) begin
          failures++;
          $display("FAIL exp %0d got %0d done=%b", p_d, mult_out, done);
        end
      end else if (done) begin
        failures++;
        $display("FAIL done without operands");
      end
      v_d <= in_valid;
      if (in_valid) begin
        p_d <= qp.pop_front();
        void'(qa.pop_front()); void'(qb.pop_front());
      end
    end else v_d <= 0;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < 7; i++) begin
      issue(FA[i], FB[i], FP[i]);
      @(posedge clk);
    end
    in_valid <= 0; @(posedge clk);
    issue(-32768, -32768, 1073741824); @(posedge clk);
    issue(-32768, 32767, -1073709056); @(posedge clk);
    issue(32767, 32767, 1073676289); @(posedge clk);
    issue(-1, -1, 1); @(posedge clk);
    issue(0, -12345, 0); @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      int a, b;
      a = int'($signed(16'($urandom)));
      b = int'($signed(16'($urandom)));
      issue(a, b, a * b);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
