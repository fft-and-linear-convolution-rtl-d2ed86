// tb_conv_demux: every select value with and without valid; exactly the
// selected output carries the data and its enable.
module tb_conv_demux;
  logic [31:0] din;
  logic din_valid;
  logic [4:0] sel;
  logic [31:0] dout [32];
  logic [31:0] en;
  int checks = 0, failures = 0;

  conv_demux dut (.*);

  initial begin
    for (int v = 0; v < 2; v++)
      for (int s = 0; s < 32; s++) begin
        din = $urandom | 32'h1; din_valid = v[0]; sel = 5'(s);
        #1;
        for (int k = 0; k < 32; k++) begin
          logic hit;
          hit = v[0] && (k == s);
          checks++;
          if (en[k] != hit || dout[k] != (hit ? din : 32'h0)) begin
            failures++;
            $display("FAIL sel=%0d k=%0d en=%b", s, k, en[k]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
