// gemm_conv: GEMM linear-convolution engine built around the bit slicing
// multiplier.
//
// Computes y(t) = sum_j H(j) * X(t-j) for an input X of n samples and a
// kernel H of m samples (1 <= n,m <= 15, so at most 29 outputs). Operation:
//   1. load: X is written through buf_A_in/wr_A_en and H through
//      buf_B_in/wr_B_en, one sample per clock, in index order; seq_A_no = n
//      and seq_B_no = m give the lengths;
//   2. multiply: once n and m samples are loaded the assign unit reads all
//      n*m operand pairs from the buffer, one per clock; the bit slicing
//      multiplier forms each product; the select unit and the 1x32
//      demultiplexer steer product X(i)H(j) to register-file array i+j,
//      whose adder accumulates it;
//   3. output: y(0) .. y(n+m-2) leave on result, one per clock, with
//      rcv_bit high.
// Timing: counting the clock edge that writes the last sample as edge 0,
// the n*m operand pairs are read on edges 2 .. n*m+1, and y(0) appears on
// result after edge n*m + 4; the other results follow back to back. Reset (rst) is active high, as in the published waveforms.
// The structure follows the paper's block diagram; the control details
// listed in each sub-block are this implementation's.
module gemm_conv
  import dsp_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic signed [CONV_DW-1:0] buf_A_in,
  input  logic signed [CONV_DW-1:0] buf_B_in,
  input  logic [CONV_LEN_W-1:0]     seq_A_no,
  input  logic [CONV_LEN_W-1:0]     seq_B_no,
  input  logic                      wr_A_en,
  input  logic                      wr_B_en,
  output logic [CONV_ACC_W-1:0]     result,
  output logic                      rcv_bit,
  output logic                      busy
);
  wire rst_n = !rst;

  logic                      assign_read_en;
  logic signed [CONV_DW-1:0] A_in, B_in;
  logic                      pair_valid;
  logic                      done_bit;
  logic signed [BSM_PW-1:0]  result_out;
  logic [CONV_SEL_W-1:0]     select_out;
  logic                      sel_valid, sel_last;
  logic [CONV_ACC_W-1:0]     dmx_out [CONV_NREG];
  logic [CONV_NREG-1:0]      dmx_en;
  logic [CONV_SEL_W-1:0]     t_len;

  assign t_len = CONV_SEL_W'(seq_A_no) + CONV_SEL_W'(seq_B_no) - 1'b1;

  conv_assign u_assign (
    .clk, .rst_n, .n(seq_A_no), .m(seq_B_no), .wr_A_en, .wr_B_en,
    .assign_read_en, .busy
  );

  conv_fifo u_fifo (
    .clk, .rst_n, .wr_A_en, .buf_A_in, .wr_B_en, .buf_B_in,
    .assign_read_en, .A_in, .B_in, .pair_valid
  );

  bsm u_bsm (
    .clk, .rst_n, .in_valid(pair_valid), .A_in, .B_in,
    .done(done_bit), .mult_out(result_out)
  );

  conv_select u_select (
    .clk, .rst_n, .n(seq_A_no), .m(seq_B_no), .done_bit,
    .select_out, .sel_valid, .sel_last
  );

  conv_demux u_demux (
    .din(result_out), .din_valid(sel_valid), .sel(select_out),
    .dout(dmx_out), .en(dmx_en)
  );

  conv_regfile u_regfile (
    .clk, .rst_n, .din(dmx_out), .en(dmx_en), .acc_last(sel_last), .t_len,
    .result, .rcv_bit
  );
endmodule
