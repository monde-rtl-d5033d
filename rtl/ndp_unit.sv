// ndp_unit: one of the 64 NDP units of the core. It computes one ARR x ARR
// (4 x 4) tile of C = A x B: per k-step it receives an activation column
// (ARR tokens) into its activation buffer and a weight row slice (ARR output
// columns) into its expert buffer. When both buffers hold a step, the step is
// popped into the skew unit and the output-stationary MAC array; the array's
// 'done' makes the vector unit apply the optional ReLU, round to bf16 and
// present the tile on out_c with a valid/ready handshake.
// The buffer-array-vector chain follows the paper's NDP unit figure. The
// buffer depth (8 steps; 64 units x 2 buffers x 8 x 8 bytes = 8 KB, the part
// of the paper's 264 KB of buffers not used by the 256 KB scratchpad) and the
// rule that a unit stops popping after a tile's last step until the finished
// tile has been taken are this design's choices.
// Timing: the first step pops the cycle after it is pushed; a tile of K steps
// pushed back to back is on out_c K + 2*ARR cycles after its first push.
module ndp_unit
  import monde_pkg::*;
#(
  parameter int unsigned OPBUF_DEPTH = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  bf16_t in_a [ARR],
  input  bf16_t in_b [ARR],
  input  logic  in_first,
  input  logic  in_last,
  input  logic  relu,
  output logic  out_valid,
  input  logic  out_ready,
  output bf16_t out_c [ARR][ARR]
);
  localparam int unsigned VW = ARR * 16;

  logic [VW+1:0] act_wdata, act_rdata;
  logic [VW-1:0] exp_wdata, exp_rdata;
  logic          act_full, act_empty, exp_full, exp_empty;
  logic          pop, hold;
  logic [$clog2(OPBUF_DEPTH+1)-1:0] act_count, exp_count;

  bf16_t step_a [ARR];
  bf16_t step_b [ARR];
  logic  sk_v [ARR], sk_f [ARR], sk_l [ARR];
  bf16_t sk_a [ARR], sk_b [ARR];
  fp32_t acc  [ARR][ARR];
  logic  arr_done;

  always_comb begin
    for (int i = 0; i < ARR; i++) begin
      act_wdata[i*16 +: 16] = in_a[i];
      exp_wdata[i*16 +: 16] = in_b[i];
      step_a[i] = act_rdata[i*16 +: 16];
      step_b[i] = exp_rdata[i*16 +: 16];
    end
    act_wdata[VW]   = in_first;
    act_wdata[VW+1] = in_last;
  end

  assign in_ready = !act_full && !exp_full;

  sync_fifo #(.W(VW + 2), .DEPTH(OPBUF_DEPTH)) u_act_buf (
    .clk, .rst_n, .push(in_valid && in_ready), .wdata(act_wdata), .full(act_full),
    .pop(pop), .rdata(act_rdata), .empty(act_empty), .count(act_count)
  );
  sync_fifo #(.W(VW), .DEPTH(OPBUF_DEPTH)) u_exp_buf (
    .clk, .rst_n, .push(in_valid && in_ready), .wdata(exp_wdata), .full(exp_full),
    .pop(pop), .rdata(exp_rdata), .empty(exp_empty), .count(exp_count)
  );

  assign pop = !act_empty && !exp_empty && !hold;

  // hold: set when a tile's last step is popped, cleared when its result leaves
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) hold <= 1'b0;
    else if (pop && act_rdata[VW+1]) hold <= 1'b1;
    else if (out_valid && out_ready) hold <= 1'b0;
  end

  skew_unit #(.LANES(ARR)) u_skew (
    .clk, .rst_n,
    .in_valid(pop), .in_first(act_rdata[VW]), .in_last(act_rdata[VW+1]),
    .in_a(step_a), .in_b(step_b),
    .out_valid(sk_v), .out_first(sk_f), .out_last(sk_l), .out_a(sk_a), .out_b(sk_b)
  );

  mac_array #(.ROWS(ARR), .COLS(ARR)) u_mac (
    .clk, .rst_n,
    .a_in(sk_a), .v_in(sk_v), .first_in(sk_f), .last_in(sk_l),
    .b_in(sk_b), .acc(acc), .done(arr_done)
  );

  vec_unit #(.ROWS(ARR), .COLS(ARR)) u_vec (
    .clk, .rst_n, .capture(arr_done), .relu(relu), .acc(acc),
    .out_valid(out_valid), .out_ready(out_ready), .out_c(out_c)
  );
endmodule
