// vec_unit: post-processing of one finished ROWS x COLS fp32 tile. On 'capture'
// it applies ReLU when 'relu' is set (negative values, including -0, become +0;
// NaN passes), rounds every element to bf16 with round-to-nearest-even and
// holds the result in an output register with a valid/ready handshake. The
// paper's gemm+relu kernel allows ReLU or GeLU as the tailing activation; only
// ReLU, the activation of both evaluated models, is built here. A capture
// while the previous result has not been taken is a protocol error (asserted).
module vec_unit
  import monde_pkg::*;
#(
  parameter int unsigned ROWS = ARR,
  parameter int unsigned COLS = ARR
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  capture,
  input  logic  relu,
  input  fp32_t acc [ROWS][COLS],
  output logic  out_valid,
  input  logic  out_ready,
  output bf16_t out_c [ROWS][COLS]
);
  function automatic bf16_t to_bf16(fp32_t f, logic do_relu);
    logic [16:0] r;
    if (f[30:23] == 8'hFF && f[22:0] != 0) return 16'h7FC0;          // NaN
    if (do_relu && f[31]) return 16'h0000;
    if (f[30:23] == 8'hFF) return f[31:16];                          // Inf
    r = {1'b0, f[31:16]} + {16'd0, f[15] & ((|f[14:0]) | f[16])};
    return r[15:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < ROWS; i++)
        for (int j = 0; j < COLS; j++) out_c[i][j] <= '0;
    end else begin
      if (capture) begin
        out_valid <= 1'b1;
        for (int i = 0; i < ROWS; i++)
          for (int j = 0; j < COLS; j++) out_c[i][j] <= to_bf16(acc[i][j], relu);
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) capture |-> (!out_valid || out_ready));
endmodule
