// ndp_core: the near-data processing core. It joins the SIMD controller, the
// scratchpad and N_UNITS (64) NDP units of 4 x 4 MAC arrays, so that one tile
// of 4 tokens x 256 output columns is computed at one k-step per cycle.
// Interfaces: NDP requests (one per output tile) and a scratchpad write port
// from the NDP controller; a stream of weight beats (row k of the expert
// matrix, 256 bf16); a stream of output-row writes (address + 256 bf16) and a
// tile_done pulse back to the NDP controller. The set of parts follows the
// paper's NDP core figure; their sizes and protocols are described in each
// part.
module ndp_core
  import monde_pkg::*;
#(
  parameter int unsigned N_UNITS     = NUM_UNITS,
  parameter int unsigned OPBUF_DEPTH = 8,
  parameter int unsigned BW          = N_UNITS * ARR * 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  ndp_req_t           req,
  input  logic               spad_we,
  input  logic [SPAD_AW-1:0] spad_waddr,
  input  logic [BW-1:0]      spad_wdata,
  input  logic               b_valid,
  output logic               b_ready,
  input  logic [BW-1:0]      b_data,
  output logic               wr_valid,
  input  logic               wr_ready,
  output logic [ADDR_W-1:0]  wr_addr,
  output logic [BW-1:0]      wr_data,
  output logic               tile_done,
  output logic               busy
);
  logic               spad_re;
  logic [SPAD_AW-1:0] spad_raddr;
  logic [BW-1:0]      spad_rdata;
  logic               unit_valid, unit_first, unit_last, unit_relu, unit_out_ready;
  logic [N_UNITS-1:0] unit_ready, unit_out_valid;
  bf16_t              unit_a [ARR];
  bf16_t              unit_b [N_UNITS][ARR];
  bf16_t              unit_out_c [N_UNITS][ARR][ARR];

  scratchpad #(.DEPTH(SPAD_ENTRIES), .W(BW)) u_spad (
    .clk, .we(spad_we), .waddr(spad_waddr), .wdata(spad_wdata),
    .re(spad_re), .raddr(spad_raddr), .rdata(spad_rdata)
  );

  simd_ctrl #(.N_UNITS(N_UNITS), .BW(BW)) u_simd (
    .clk, .rst_n,
    .req_valid, .req_ready, .req,
    .b_valid, .b_ready, .b_data,
    .spad_re, .spad_raddr, .spad_rdata,
    .unit_valid, .unit_ready, .unit_a, .unit_b, .unit_first, .unit_last, .unit_relu,
    .unit_out_valid, .unit_out_ready, .unit_out_c,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .tile_done, .busy
  );

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    ndp_unit #(.OPBUF_DEPTH(OPBUF_DEPTH)) u_unit (
      .clk, .rst_n,
      .in_valid (unit_valid),
      .in_ready (unit_ready[u]),
      .in_a     (unit_a),
      .in_b     (unit_b[u]),
      .in_first (unit_first),
      .in_last  (unit_last),
      .relu     (unit_relu),
      .out_valid(unit_out_valid[u]),
      .out_ready(unit_out_ready),
      .out_c    (unit_out_c[u])
    );
  end
endmodule
