// skew_unit: turns one step of operands (an activation column and a weight row
// slice, LANES values each) into the skewed wavefront a systolic array needs:
// lane i of both vectors, and the step flags that travel with the activation
// lane, are delayed by i cycles through a shift register. Lane 0 passes
// straight through. The paper says the tiled operands are reshaped into skewed
// formats before the array; this triangular register structure is the
// simplest way to do it.
module skew_unit
  import monde_pkg::*;
#(
  parameter int unsigned LANES = ARR
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_first,
  input  logic  in_last,
  input  bf16_t in_a [LANES],
  input  bf16_t in_b [LANES],
  output logic  out_valid [LANES],
  output logic  out_first [LANES],
  output logic  out_last  [LANES],
  output bf16_t out_a [LANES],
  output bf16_t out_b [LANES]
);
  typedef struct packed {
    logic  v;
    logic  f;
    logic  l;
    bf16_t a;
    bf16_t b;
  } lane_t;

  // stage[i][d]: lane i after d+1 register stages (only d < i used)
  lane_t stage [LANES][LANES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LANES; i++)
        for (int d = 0; d < LANES; d++) stage[i][d] <= '0;
    end else begin
      for (int i = 1; i < LANES; i++) begin
        stage[i][0] <= '{v: in_valid, f: in_first, l: in_last, a: in_a[i], b: in_b[i]};
        for (int d = 1; d < i; d++) stage[i][d] <= stage[i][d-1];
      end
    end
  end

  always_comb begin
    out_valid[0] = in_valid;
    out_first[0] = in_first;
    out_last[0]  = in_last;
    out_a[0]     = in_a[0];
    out_b[0]     = in_b[0];
    for (int i = 1; i < LANES; i++) begin
      out_valid[i] = stage[i][i-1].v;
      out_first[i] = stage[i][i-1].f;
      out_last[i]  = stage[i][i-1].l;
      out_a[i]     = stage[i][i-1].a;
      out_b[i]     = stage[i][i-1].b;
    end
  end
endmodule
