// tb_bsm_lut: exhaustive check of the 4x4 slice look-up table in all four
// signedness variants (unsigned/signed slice a, unsigned/signed slice b):
// every slice pair against integer multiplication.
module tb_bsm_lut;
  logic [3:0]  a, b;
  logic [31:0] prod [4];
  int checks = 0, failures = 0;

  bsm_lut #(.A_SIGNED(0), .B_SIGNED(0)) u_uu (.a, .b, .prod(prod[0]));
  bsm_lut #(.A_SIGNED(0), .B_SIGNED(1)) u_us (.a, .b, .prod(prod[1]));
  bsm_lut #(.A_SIGNED(1), .B_SIGNED(0)) u_su (.a, .b, .prod(prod[2]));
  bsm_lut #(.A_SIGNED(1), .B_SIGNED(1)) u_ss (.a, .b, .prod(prod[3]));

  initial begin
    for (int i = 0; i < 256; i++) begin
      {a, b} = 8'(i);
      #1;
      for (int v = 0; v < 4; v++) begin
        int av, bv, exp_v;
        av = v[1] ? int'($signed(a)) : int'(a);
        bv = v[0] ? int'($signed(b)) : int'(b);
        exp_v = av * bv;
        checks++;
        if ($signed(prod[v]) != exp_v) begin
          failures++;
          if (failures < 10) $display("mismatch v=%0d a=%0d b=%0d got %0d exp %0d", v, av, bv, $signed(prod[v]), exp_v);
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
