// fft_sort: output reordering (sort) unit of the R2SDF DIF FFT.
//
// A DIF FFT delivers its bins in bit-reversed order. The sort unit writes
// each valid result into an N-word array at the bit-reversed position of
// its arrival count, so the array holds X[0] .. X[N-1] in order, and then
// reads the array out in N clocks, one bin per clock with out_valid high.
// The array is doubled (two banks) so that a new frame can be written while
// the previous one is read out.
// Timing: the first sorted bin appears two clocks after the last bin of the
// frame arrives, and N bins follow back to back.
// Sorting through an array in N cycles follows the paper; the double bank
// is this implementation's choice.
module fft_sort
  import dsp_pkg::*;
#(
  parameter int N = FFT_N
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cplx_v_t din,
  output logic    out_valid,
  output cplx_t   dout
);
  localparam int AW = $clog2(N);

  function automatic logic [AW-1:0] bitrev(logic [AW-1:0] a);
    logic [AW-1:0] r;
    for (int b = 0; b < AW; b++) r[b] = a[AW-1-b];
    return r;
  endfunction

  cplx_t         mem [2][N];
  logic [AW-1:0] widx, ridx;
  logic          wbank, rbank, reading;

  always_ff @(posedge clk) begin
    if (din.valid) mem[wbank][bitrev(widx)] <= din.d;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      widx      <= '0;
      ridx      <= '0;
      wbank     <= 1'b0;
      rbank     <= 1'b0;
      reading   <= 1'b0;
      out_valid <= 1'b0;
      dout      <= '0;
    end else begin
      if (din.valid) begin
        widx <= widx + 1'b1;
        if (widx == AW'(N - 1)) begin
          wbank   <= !wbank;
          rbank   <= wbank;
          reading <= 1'b1;
          ridx    <= '0;
        end
      end
      out_valid <= reading;
      if (reading) begin
        dout <= mem[rbank][ridx];
        ridx <= ridx + 1'b1;
        if (ridx == AW'(N - 1) && !(din.valid && widx == AW'(N - 1)))
          reading <= 1'b0;
      end
    end
  end
endmodule
