// fft_butterfly: radix-2 DIF butterfly of one R2SDF FFT stage.
//
// Works in three steps, as the paper describes:
//   waiting     - during the first half of each 2L-sample group (phase 0)
//                 the incoming samples x[n] are parked in the delay unit;
//   add/sub     - during the second half (phase 1) each incoming x[n+L] meets
//                 its partner x[n] leaving the delay unit; the sum goes on to
//                 the next stage and the difference goes back into the delay
//                 unit;
//   multiply    - during the next first half the differences leave the delay
//                 unit and are rotated by the twiddle factor from the ROM.
// The complex multiply uses four bit slicing multipliers (bsm). Sums pass
// through the same multipliers with the twiddle 1, so both kinds of result
// have the same latency and leave in stream order. Each product is shifted
// right by TW_FRAC bits (truncated) back to the 16-bit sample width.
// Only bits [25:10] of each 32-bit product sum are kept (shift by TW_FRAC,
// wrap to 16 bits); the lint notice about the unused upper and lower bits
// is expected.
// Timing: a sample entering in cycle t leaves (as sum or rotated
// difference) with out.valid in cycle t+2 (bsm register + output register).
module fft_butterfly
  import dsp_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    phase,
  input  tw_t     tw,
  input  cplx_v_t din,       // from the previous stage
  input  cplx_v_t dl_out,    // leaving the delay unit
  output cplx_v_t dl_in,     // into the delay unit
  output cplx_v_t dout       // to the next stage
);
  cplx_v_t opnd;

  always_comb begin
    if (phase) begin
      dl_in.valid = din.valid;
      dl_in.d.re  = dl_out.d.re - din.d.re;
      dl_in.d.im  = dl_out.d.im - din.d.im;
      opnd.valid  = din.valid;
      opnd.d.re   = dl_out.d.re + din.d.re;
      opnd.d.im   = dl_out.d.im + din.d.im;
    end else begin
      dl_in = din;
      opnd  = dl_out;
    end
  end

  logic signed [BSM_W-1:0]  w_re, w_im;
  logic signed [BSM_PW-1:0] p_rr, p_ii, p_ri, p_ir;
  logic                     v_rr, v_ii, v_ri, v_ir;

  assign w_re = BSM_W'(tw.re);
  assign w_im = BSM_W'(tw.im);

  bsm u_rr (.clk, .rst_n, .in_valid(opnd.valid), .A_in(opnd.d.re), .B_in(w_re), .done(v_rr), .mult_out(p_rr));
  bsm u_ii (.clk, .rst_n, .in_valid(opnd.valid), .A_in(opnd.d.im), .B_in(w_im), .done(v_ii), .mult_out(p_ii));
  bsm u_ri (.clk, .rst_n, .in_valid(opnd.valid), .A_in(opnd.d.re), .B_in(w_im), .done(v_ri), .mult_out(p_ri));
  bsm u_ir (.clk, .rst_n, .in_valid(opnd.valid), .A_in(opnd.d.im), .B_in(w_re), .done(v_ir), .mult_out(p_ir));

  logic signed [BSM_PW-1:0] d_re, d_im;
  sample_t                  s_re, s_im;
  assign d_re = p_rr - p_ii;
  assign d_im = p_ri + p_ir;
  assign s_re = d_re[TW_FRAC +: FFT_DW];     // >>> TW_FRAC, truncated
  assign s_im = d_im[TW_FRAC +: FFT_DW];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dout <= '0;
    end else begin
      dout.valid <= v_rr;
      dout.d.re  <= s_re;
      dout.d.im  <= s_im;
    end
  end

  // the four multipliers always run in lock step
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (v_rr == v_ii) && (v_rr == v_ri) && (v_rr == v_ir));
endmodule
