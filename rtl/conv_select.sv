// conv_select: select unit of the GEMM convolution engine.
//
// Tracks which (input, kernel) index pair (i, j) each multiplier result
// belongs to, in the order the input buffer issues them (j fastest, wrapping
// at m). For every result flagged by the multiplier's done bit it drives
// select_out = i + j, the output position y(i+j) the product contributes
// to, together with sel_valid; sel_last marks the product of the final pair
// (i = n-1, j = m-1). Outputs are combinational from the counters and
// done_bit, so they line up with the multiplier result of the same cycle.
//
// The paper gives the unit's name, its done_bit input and its 5-bit
// select_out; the n and m inputs and the sel_last flag are this
// implementation's additions, needed to know where the index wraps.
module conv_select
  import dsp_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [CONV_LEN_W-1:0] n,
  input  logic [CONV_LEN_W-1:0] m,
  input  logic                  done_bit,
  output logic [CONV_SEL_W-1:0] select_out,
  output logic                  sel_valid,
  output logic                  sel_last
);
  logic [CONV_LEN_W-1:0] i, j;

  wire j_wrap = (j == m - 1'b1);
  wire i_wrap = (i == n - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i <= '0;
      j <= '0;
    end else if (done_bit) begin
      if (j_wrap) begin
        j <= '0;
        i <= i_wrap ? '0 : i + 1'b1;
      end else begin
        j <= j + 1'b1;
      end
    end
  end

  assign select_out = CONV_SEL_W'(i) + CONV_SEL_W'(j);
  assign sel_valid  = done_bit;
  assign sel_last   = done_bit && i_wrap && j_wrap;
endmodule
