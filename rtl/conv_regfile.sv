// conv_regfile: accumulating register file of the GEMM convolution engine.
//
// Thirty-two arrays of 32 bits, each with its own 32-bit adder. An enabled
// array adds its demultiplexer input to what it holds, so array k collects
// y(k) = sum over i+j=k of X(i)*H(j). When the final product has been added
// (acc_last), the file streams y(0) .. y(t_len-1) out on result, one per
// clock, with rcv_bit high, then clears every array for the next operation.
//
// Timing: y(0) appears on result two clocks after the clock that adds the
// last product (one to switch to streaming, one output register); t_len = n + m - 1 results follow back to back.
// Array count, width and the per-array adder follow the paper; the
// streaming order, the clearing and the registered output are this
// implementation's choices.
module conv_regfile
  import dsp_pkg::*;
#(
  parameter int NREG = CONV_NREG
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [CONV_ACC_W-1:0]   din [NREG],
  input  logic [NREG-1:0]         en,
  input  logic                    acc_last,
  input  logic [$clog2(NREG)-1:0] t_len,
  output logic [CONV_ACC_W-1:0]   result,
  output logic                    rcv_bit
);
  localparam int IW = $clog2(NREG);

  logic [CONV_ACC_W-1:0] acc [NREG];
  logic                  streaming;
  logic [IW-1:0]         idx;

  wire stream_end = streaming && (idx == t_len - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NREG; k++) acc[k] <= '0;
      streaming <= 1'b0;
      idx       <= '0;
      result    <= '0;
      rcv_bit   <= 1'b0;
    end else begin
      for (int k = 0; k < NREG; k++) begin
        if (stream_end)  acc[k] <= '0;
        else if (en[k])  acc[k] <= acc[k] + din[k];
      end
      rcv_bit <= streaming;
      if (streaming) begin
        result <= acc[idx];
        idx    <= idx + 1'b1;
        if (stream_end) begin
          streaming <= 1'b0;
          idx       <= '0;
        end
      end else if (acc_last) begin
        streaming <= 1'b1;
        idx       <= '0;
      end
    end
  end
endmodule
