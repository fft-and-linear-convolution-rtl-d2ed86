// bsm: 16 x 16-bit signed bit slicing multiplier.
//
// A digit slicing decoder cuts each operand into four 4-bit slices. Sixteen
// look-up tables (bsm_lut) form every slice-pair product a_k * b_l in
// parallel; a shifter moves each one left by 4*(k+l) bits, and a 32-bit
// adder sums the sixteen shifted partial products into the result. The most
// significant slice of each operand is taken as signed, so the unit
// multiplies two's-complement numbers exactly (mod 2^32, which never wraps
// for 16-bit operands).
//
// Interface: A_in, B_in with in_valid; mult_out with done one clock later.
// Timing: one register stage at the output, so the product of the operands
// presented in cycle t appears in cycle t+1, a new product every cycle.
// The slice width, the 16 LUTs, the shifters, the 32-bit adder and the
// one-cycle latency follow the published design; the reset value and the
// done flag's name for the valid output follow its convolution block diagram.
module bsm
  import dsp_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [BSM_W-1:0]  A_in,
  input  logic signed [BSM_W-1:0]  B_in,
  output logic                     done,
  output logic signed [BSM_PW-1:0] mult_out
);
  // digit slicing decoder
  logic [BSM_P-1:0] a_sl [BSM_T];
  logic [BSM_P-1:0] b_sl [BSM_T];
  always_comb begin
    for (int k = 0; k < BSM_T; k++) begin
      a_sl[k] = A_in[k*BSM_P +: BSM_P];
      b_sl[k] = B_in[k*BSM_P +: BSM_P];
    end
  end

  // LUTs and shifters
  logic [BSM_PW-1:0] pp      [BSM_NLUT];
  logic [BSM_PW-1:0] pp_shft [BSM_NLUT];
  for (genvar k = 0; k < BSM_T; k++) begin : g_a
    for (genvar l = 0; l < BSM_T; l++) begin : g_b
      bsm_lut #(
        .A_SIGNED (k == BSM_T - 1),
        .B_SIGNED (l == BSM_T - 1)
      ) u_lut (
        .a    (a_sl[k]),
        .b    (b_sl[l]),
        .prod (pp[k*BSM_T + l])
      );
      assign pp_shft[k*BSM_T + l] = pp[k*BSM_T + l] << (BSM_P * (k + l));
    end
  end

  // 32-bit adder
  logic [BSM_PW-1:0] sum;
  always_comb begin
    sum = '0;
    for (int i = 0; i < BSM_NLUT; i++) sum += pp_shft[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mult_out <= '0;
      done     <= 1'b0;
    end else begin
      mult_out <= sum;
      done     <= in_valid;
    end
  end
endmodule
