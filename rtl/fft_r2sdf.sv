// fft_r2sdf: 64-point radix-2 single-path delay-feedback (SDF)
// decimation-in-frequency FFT.
//
// Six stages in a row, each a butterfly (fft_butterfly) with its own delay
// unit (fft_delay, 32, 16, 8, 4, 2 and 1 words) and twiddle ROM with
// counter (fft_rom), followed by the sort unit (fft_sort) that restores
// natural bin order. Stage s pairs samples L = N/2^(s+1) apart, the
// decimation-in-frequency split X[2k] / X[2k+1] applied recursively.
//
// Interface: complex 12-bit samples din_r/din_i with in_valid, N of them
// on N consecutive clocks per frame; X[0] .. X[N-1] leave on dout_r/dout_i
// (16 bits, unscaled: X[k] = sum x[n] W_N^{nk}, wrapping on overflow) with
// out_valid on N consecutive clocks. A new frame may follow the previous
// one directly or after at least N/2 idle clocks (an assertion in each
// stage's ROM unit checks this). The pipeline drains by
// itself, no trailing input is needed.
// Timing: counting the clock edge that takes the first input sample as
// edge 0, the last stage delivers its first (bit-reversed) result after edge
// N - 1 + 2*log2(N) (the delays 32+16+..+1 = N-1 plus two register stages
// per butterfly), its last N - 1 edges later, and the sort unit puts X[0]
// out one edge after that: after edge 2N + 2*log2(N) - 1 (139 for N = 64).
// Throughput is one sample per clock. N may be any power of two >= 4.
// Stage structure, the 12-bit input and 16-bit output follow the paper;
// the fixed-point format is described in dsp_pkg.
module fft_r2sdf
  import dsp_pkg::*;
#(
  parameter int N = FFT_N
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic signed [FFT_IN_W-1:0] din_r,
  input  logic signed [FFT_IN_W-1:0] din_i,
  output logic                       out_valid,
  output logic signed [FFT_DW-1:0]   dout_r,
  output logic signed [FFT_DW-1:0]   dout_i
);
  localparam int S = $clog2(N);

  cplx_v_t stg [S+1];

  assign stg[0].valid = in_valid;
  assign stg[0].d.re  = FFT_DW'(din_r);
  assign stg[0].d.im  = FFT_DW'(din_i);

  for (genvar s = 0; s < S; s++) begin : g_stage
    localparam int L = N >> (s + 1);
    cplx_v_t dl_in, dl_out;
    logic    pend, active, phase;
    tw_t     tw;

    fft_rom #(.L(L)) u_rom (
      .clk, .rst_n, .in_valid(stg[s].valid), .pend, .active, .phase, .tw
    );
    fft_delay #(.L(L)) u_delay (
      .clk, .rst_n, .shift(active), .din(dl_in), .dout(dl_out), .pend
    );
    fft_butterfly u_bf (
      .clk, .rst_n, .phase, .tw, .din(stg[s]), .dl_out, .dl_in, .dout(stg[s+1])
    );
  end

  cplx_t sorted;
  fft_sort #(.N(N)) u_sort (
    .clk, .rst_n, .din(stg[S]), .out_valid, .dout(sorted)
  );
  assign dout_r = sorted.re;
  assign dout_i = sorted.im;
endmodule
