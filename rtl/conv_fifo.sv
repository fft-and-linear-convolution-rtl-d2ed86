// conv_fifo: synchronous input buffer of the GEMM convolution engine.
//
// Two write ports load the input sequence X (port A) and the kernel H
// (port B), one sample per clock while wr_A_en / wr_B_en is high. Each read
// enable (assign_read_en) presents the next operand pair on A_in / B_in,
// registered, with pair_valid: the kernel is re-read cyclically while the
// input sample stays put, so the pairs come out in the order
// (X[0],H[0]) (X[0],H[1]) ... (X[0],H[m-1]) (X[1],H[0]) ... (X[n-1],H[m-1]).
// That is the sliding of the kernel over the input which the paper
// describes. When the final pair has been read, both buffers are empty
// again (their write counts return to zero) and can be reloaded.
//
// Buffer depth, the read order and the self-emptying behaviour are this
// implementation's choices; the paper gives the block's name, its two
// 16-bit inputs, its two 16-bit outputs and a single read enable.
// Rule: reading an empty buffer is illegal (checked by an assertion);
// writes are expected only while no read sequence is running.
module conv_fifo
  import dsp_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_A_en,
  input  logic signed [CONV_DW-1:0]  buf_A_in,
  input  logic                       wr_B_en,
  input  logic signed [CONV_DW-1:0]  buf_B_in,
  input  logic                       assign_read_en,
  output logic signed [CONV_DW-1:0]  A_in,
  output logic signed [CONV_DW-1:0]  B_in,
  output logic                       pair_valid
);
  localparam int AW = $clog2(DEPTH);

  logic signed [CONV_DW-1:0] x_mem [DEPTH];
  logic signed [CONV_DW-1:0] h_mem [DEPTH];
  logic [AW:0]   x_cnt, h_cnt;       // samples held
  logic [AW-1:0] x_rd, h_rd;         // read pointers

  wire x_last_h = ({1'b0, h_rd} == h_cnt - 1'b1);
  wire last_x   = ({1'b0, x_rd} == x_cnt - 1'b1);

  always_ff @(posedge clk) begin
    if (wr_A_en && x_cnt < (AW+1)'(DEPTH)) x_mem[x_cnt[AW-1:0]] <= buf_A_in;
    if (wr_B_en && h_cnt < (AW+1)'(DEPTH)) h_mem[h_cnt[AW-1:0]] <= buf_B_in;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_cnt      <= '0;
      h_cnt      <= '0;
      x_rd       <= '0;
      h_rd       <= '0;
      A_in       <= '0;
      B_in       <= '0;
      pair_valid <= 1'b0;
    end else begin
      pair_valid <= assign_read_en;
      if (assign_read_en) begin
        A_in <= x_mem[x_rd];
        B_in <= h_mem[h_rd];
        if (x_last_h) begin
          h_rd <= '0;
          if (last_x) begin            // every pair read: buffer empties
            x_rd  <= '0;
            x_cnt <= '0;
            h_cnt <= '0;
          end else begin
            x_rd <= x_rd + 1'b1;
          end
        end else begin
          h_rd <= h_rd + 1'b1;
        end
      end else begin
        if (wr_A_en && x_cnt < (AW+1)'(DEPTH)) x_cnt <= x_cnt + 1'b1;
        if (wr_B_en && h_cnt < (AW+1)'(DEPTH)) h_cnt <= h_cnt + 1'b1;
      end
    end
  end

  a_no_empty_read: assert property (@(posedge clk) disable iff (!rst_n)
    assign_read_en |-> (x_cnt != 0 && h_cnt != 0));
endmodule
