// bsm_lut: one look-up table of the bit slicing multiplier.
//
// Multiplies two 4-bit slices by table look-up. A slice is unsigned unless
// it is the most significant slice of a two's-complement operand, which the
// A_SIGNED / B_SIGNED parameters mark; the table is indexed by {b, a}
// (256 entries) and holds the exact signed product, which fits in 9 bits. The entry is sign-extended to the 32-bit width the
// shifter stage works on. Purely combinational.
//
// The paper specifies 4-bit slices and one LUT per slice pair; the signed
// top-slice handling (which makes the 16-bit multiplier two's complement,
// as its published simulation shows) is this implementation's choice.
module bsm_lut
  import dsp_pkg::*;
#(
  parameter int P        = BSM_P,
  parameter bit A_SIGNED = 1'b0,
  parameter bit B_SIGNED = 1'b0
) (
  input  logic [P-1:0]        a,
  input  logic [P-1:0]        b,
  output logic [BSM_PW-1:0]   prod
);
  localparam int IDX_W = 2 * P;
  localparam int ENT_W = 2 * P + 1;
  typedef logic signed [ENT_W-1:0] ent_t;
  typedef ent_t table_t [2**IDX_W];

  function automatic table_t build();
    table_t t;
    for (int i = 0; i < 2**IDX_W; i++) begin
      int av, bv;
      av = i % (2**P);
      bv = (i / (2**P)) % (2**P);
      if (A_SIGNED && av >= 2**(P-1)) av -= 2**P;
      if (B_SIGNED && bv >= 2**(P-1)) bv -= 2**P;
      t[i] = ent_t'(av * bv);
    end
    return t;
  endfunction

  localparam table_t LUT = build();

  ent_t entry;
  always_comb begin
    entry = LUT[{b, a}];
    prod  = BSM_PW'(entry);
  end
endmodule
