// fft_delay: delay unit of one R2SDF FFT stage.
//
// A shift register (first in, first out) of L complex words, each with a
// valid flag. While the stage is active (shift high) it moves one place per
// clock: din enters, and the word written L shifts earlier leaves on dout.
// pend is high while any word inside is valid, which tells the stage's
// counter that the register still holds work to flush.
// L is 32, 16, 8, 4, 2, 1 for the six stages of the 64-point FFT, as in the
// paper; the valid flags and pend are this implementation's additions.
module fft_delay
  import dsp_pkg::*;
#(
  parameter int L = 32
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    shift,
  input  cplx_v_t din,
  output cplx_v_t dout,
  output logic    pend
);
  cplx_v_t sr [L];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < L; k++) sr[k] <= '0;
    end else if (shift) begin
      sr[0] <= din;
      for (int k = 1; k < L; k++) sr[k] <= sr[k-1];
    end
  end

  assign dout = sr[L-1];

  always_comb begin
    pend = 1'b0;
    for (int k = 0; k < L; k++) pend |= sr[k].valid;
  end
endmodule
