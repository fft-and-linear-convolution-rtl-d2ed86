// conv_assign: assign unit (control) of the GEMM convolution engine.
//
// Takes the input length n and the kernel length m (4 bits each, so at most
// 15 samples, which is where the engine's limit n,m <= 15 comes from). It
// counts the samples written into the input buffer; once exactly n input
// and m kernel samples are there, it holds assign_read_en high for n*m
// consecutive clocks, one clock per product, then returns to idle.
// busy is high from the start of the read sequence to its end.
//
// The paper gives the unit's inputs (n, m), its single read-enable output
// and the length limit; counting the writes to decide when to start is this
// implementation's choice. n and m must be non-zero and stay stable from
// the first write of an operation until its last output.
module conv_assign
  import dsp_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [CONV_LEN_W-1:0] n,
  input  logic [CONV_LEN_W-1:0] m,
  input  logic                  wr_A_en,
  input  logic                  wr_B_en,
  output logic                  assign_read_en,
  output logic                  busy
);
  typedef enum logic {S_LOAD, S_READ} state_t;
  state_t state;

  logic [CONV_LEN_W-1:0]   a_cnt, b_cnt;
  logic [2*CONV_LEN_W-1:0] left;

  wire loaded = (a_cnt == n) && (b_cnt == m) && (n != 0) && (m != 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      a_cnt <= '0;
      b_cnt <= '0;
      left  <= '0;
    end else begin
      unique case (state)
        S_LOAD: begin
          if (wr_A_en && a_cnt != '1) a_cnt <= a_cnt + 1'b1;
          if (wr_B_en && b_cnt != '1) b_cnt <= b_cnt + 1'b1;
          if (loaded) begin
            state <= S_READ;
            left  <= n * m;
            a_cnt <= '0;
            b_cnt <= '0;
          end
        end
        S_READ: begin
          left <= left - 1'b1;
          if (left == 1) state <= S_LOAD;
        end
      endcase
    end
  end

  assign assign_read_en = (state == S_READ);
  assign busy           = (state == S_READ);
endmodule
