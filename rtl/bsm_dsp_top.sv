// bsm_dsp_top: the two signal-processing engines built on the bit slicing
// multiplier, side by side on one clock.
//
//   * gemm_conv  - linear convolution of up to 15 x 15 samples (16-bit),
//                  29 results of 32 bits streamed with rcv_bit;
//   * fft_r2sdf  - 64-point radix-2 SDF DIF FFT, 12-bit complex in,
//                  16-bit complex out in natural order.
// The engines are independent: each has its own ports and may run at the
// same time. rst_n (active low) resets both. The ports keep the signal names
// of the published simulation waveforms.
module bsm_dsp_top
  import dsp_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  // convolution
  input  logic signed [CONV_DW-1:0]  buf_A_in,
  input  logic signed [CONV_DW-1:0]  buf_B_in,
  input  logic [CONV_LEN_W-1:0]      seq_A_no,
  input  logic [CONV_LEN_W-1:0]      seq_B_no,
  input  logic                       wr_A_en,
  input  logic                       wr_B_en,
  output logic [CONV_ACC_W-1:0]      result,
  output logic                       rcv_bit,
  output logic                       conv_busy,
  // FFT
  input  logic                       in_valid,
  input  logic signed [FFT_IN_W-1:0] din_r,
  input  logic signed [FFT_IN_W-1:0] din_i,
  output logic                       out_valid,
  output logic signed [FFT_DW-1:0]   dout_r,
  output logic signed [FFT_DW-1:0]   dout_i
);
  gemm_conv u_conv (
    .clk, .rst(!rst_n), .buf_A_in, .buf_B_in, .seq_A_no, .seq_B_no,
    .wr_A_en, .wr_B_en, .result, .rcv_bit, .busy(conv_busy)
  );

  fft_r2sdf u_fft (
    .clk, .rst_n, .in_valid, .din_r, .din_i, .out_valid, .dout_r, .dout_i
  );
endmodule
