// mac_array: ROWS x COLS output-stationary systolic array of mac_pe (4 x 4 in
// the paper). Row i receives the skewed activation lane i at its left edge,
// column j the skewed weight lane j at its top edge; activations and step
// flags move right, weights move down, one PE per cycle, so PE(i,j) sees step
// k of both operands at the same cycle and accumulates C[i][j]. The step flags
// are taken from the left edge of each row. 'done' pulses when the bottom-right
// PE has accumulated the last step: all accumulators are then final and stay
// so until the next tile's first step reaches them. A tile of K steps entering
// at one step per cycle raises done K + ROWS + COLS - 2 cycles after the cycle
// in which its first step is presented.
module mac_array
  import monde_pkg::*;
#(
  parameter int unsigned ROWS = ARR,
  parameter int unsigned COLS = ARR
) (
  input  logic  clk,
  input  logic  rst_n,
  input  bf16_t a_in     [ROWS],
  input  logic  v_in     [ROWS],
  input  logic  first_in [ROWS],
  input  logic  last_in  [ROWS],
  input  bf16_t b_in     [COLS],
  output fp32_t acc      [ROWS][COLS],
  output logic  done
);
  bf16_t a_h [ROWS][COLS+1];
  logic  v_h [ROWS][COLS+1];
  logic  f_h [ROWS][COLS+1];
  logic  l_h [ROWS][COLS+1];
  bf16_t b_v [ROWS+1][COLS];
  logic  pe_done [ROWS][COLS];

  for (genvar i = 0; i < ROWS; i++) begin : g_left
    assign a_h[i][0] = a_in[i];
    assign v_h[i][0] = v_in[i];
    assign f_h[i][0] = first_in[i];
    assign l_h[i][0] = last_in[i];
  end
  for (genvar j = 0; j < COLS; j++) begin : g_top
    assign b_v[0][j] = b_in[j];
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      mac_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .a_in     (a_h[i][j]),
        .b_in     (b_v[i][j]),
        .v_in     (v_h[i][j]),
        .first_in (f_h[i][j]),
        .last_in  (l_h[i][j]),
        .a_out    (a_h[i][j+1]),
        .b_out    (b_v[i+1][j]),
        .v_out    (v_h[i][j+1]),
        .first_out(f_h[i][j+1]),
        .last_out (l_h[i][j+1]),
        .acc      (acc[i][j]),
        .done     (pe_done[i][j])
      );
    end
  end

  assign done = pe_done[ROWS-1][COLS-1];
endmodule
