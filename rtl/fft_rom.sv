// fft_rom: twiddle ROM and stage controller of one R2SDF FFT stage.
//
// Holds the L twiddle factors W_{2L}^k = exp(-j*2*pi*k/(2L)), k = 0..L-1,
// computed when the design is elaborated. A counter over 2L positions starts
// when a valid sample arrives from the preceding stage and runs while the
// stage is active (a valid input, or valid words still waiting in the delay
// unit); when the stage falls idle it returns to zero. After a frame's
// last input the counter runs through the first half once more, without
// input, so that the differences still in the delay unit are rotated and
// sent on (the flush); it is back at zero when they have all left.
// The counter's top bit is the state control for the butterfly:
//   phase = 0 (first half):  samples fill the delay unit, and the
//                            differences leaving it are multiplied by
//                            W_{2L}^k, k = counter value -> tw;
//   phase = 1 (second half): sum/difference; tw = 1 (no rotation).
// Combinational outputs from the counter register.
// The ROM sizes (32 .. 1 words), the counter started by the valid signal
// and the state-control output follow the paper; the twiddle format is
// described in dsp_pkg.
module fft_rom
  import dsp_pkg::*;
#(
  parameter int L = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic pend,
  output logic active,
  output logic phase,
  output tw_t  tw
);
  localparam int CW = $clog2(2 * L);
  typedef logic [2*TW_W-1:0] rom_t [L];

  function automatic rom_t build();
    rom_t r;
    for (int k = 0; k < L; k++) begin
      real th, c, sn;
      th = 2.0 * PI * real'(k) / real'(2 * L);
      c  = $cos(th) * real'(TW_ONE);
      sn = -$sin(th) * real'(TW_ONE);
      r[k] = {TW_W'($rtoi(c < 0.0 ? c - 0.5 : c + 0.5)),
              TW_W'($rtoi(sn < 0.0 ? sn - 0.5 : sn + 0.5))};
    end
    return r;
  endfunction

  localparam rom_t ROM = build();

  logic [CW-1:0] cnt;

  assign active = in_valid || pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                   cnt <= '0;
    else if (!active || (!in_valid && cnt == CW'(L - 1))) cnt <= '0;   // idle / flush done
    else                                          cnt <= cnt + 1'b1;
  end

  assign phase = cnt[CW-1];

  if (L == 1) begin : g_one
    assign tw = phase ? TW_UNITY : ROM[0];
  end else begin : g_rom
    assign tw = phase ? TW_UNITY : ROM[cnt[CW-2:0]];
  end

  // A frame must start on a group boundary: back to back with the previous
  // frame, or after the previous one has been flushed.
  logic in_valid_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_valid_d <= 1'b0;
    else        in_valid_d <= in_valid;
  end
  always_ff @(posedge clk) begin
    if (rst_n && in_valid && !in_valid_d)
      a_frame_aligned: assert (cnt == '0)
        else $error("fft_rom L=%0d: frame started in the middle of a group", L);
  end
endmodule
