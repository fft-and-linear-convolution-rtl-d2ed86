// conv_demux: 1 x 32 demultiplexer of the GEMM convolution engine.
//
// Routes the 32-bit multiplier result to the one of 32 register-file
// arrays chosen by the 5-bit select input: that array gets the data and an
// enable, all others get zero and no enable. Combinational.
// The 1x32 size, the 32-bit data and the 5-bit select follow the paper.
module conv_demux
  import dsp_pkg::*;
#(
  parameter int NOUT = CONV_NREG
) (
  input  logic [CONV_ACC_W-1:0]        din,
  input  logic                         din_valid,
  input  logic [$clog2(NOUT)-1:0]      sel,
  output logic [CONV_ACC_W-1:0]        dout [NOUT],
  output logic [NOUT-1:0]              en
);
  always_comb begin
    for (int k = 0; k < NOUT; k++) begin
      en[k]   = din_valid && (sel == ($clog2(NOUT))'(k));
      dout[k] = en[k] ? din : '0;
    end
  end
endmodule
