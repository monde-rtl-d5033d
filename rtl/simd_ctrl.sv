// simd_ctrl: the SIMD controller of the NDP core. It executes one NDP request
// (one 4 x 256 output tile, C[m0..m0+3][n0..n0+255]) at a time and drives all
// NDP units in lockstep:
//  * per 256-element segment of K it waits for the first weight beat of the
//    segment (weights arrive after the activations were written, so the
//    scratchpad then holds them), reads the 4 activation rows of the segment
//    from the scratchpad (one wait cycle, then 4 reads in 5 cycles) into a segment register;
//  * it then streams 256 k-steps: each accepted weight beat (row k of B,
//    256 bf16) is cut into 64 slices of 4 columns, one per unit, and the
//    activation column k (4 tokens, rows outside row_mask forced to zero) is
//    broadcast to every unit; first/last mark the tile's first and last step;
//  * after the last step it waits until all units hold their 4 x 4 results,
//    writes the output tile to memory one 512-byte row per cycle (rows outside
//    row_mask are skipped), releases the units and pulses tile_done.
// A step is accepted only when every unit can take it (b_valid and all
// unit_ready). The paper gives the SIMD-controlled 64 units and the 4 x 256
// tile-by-tile output-stationary order; the sequencing above is this design's.
// Throughput: one k-step per cycle, plus 6 idle cycles per 256-step segment
// (2.3 %) and the drain at the end of a tile.
module simd_ctrl
  import monde_pkg::*;
#(
  parameter int unsigned N_UNITS = NUM_UNITS,
  parameter int unsigned BW      = N_UNITS * ARR * 16,
  parameter int unsigned SEG     = N_UNITS * ARR
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // NDP requests from the NDP controller
  input  logic                  req_valid,
  output logic                  req_ready,
  input  ndp_req_t              req,
  // weight beats (rows of B)
  input  logic                  b_valid,
  output logic                  b_ready,
  input  logic [BW-1:0]         b_data,
  // scratchpad read port
  output logic                  spad_re,
  output logic [SPAD_AW-1:0]    spad_raddr,
  input  logic [BW-1:0]         spad_rdata,
  // broadcast to the NDP units
  output logic                  unit_valid,
  input  logic [N_UNITS-1:0]    unit_ready,
  output bf16_t                 unit_a [ARR],
  output bf16_t                 unit_b [N_UNITS][ARR],
  output logic                  unit_first,
  output logic                  unit_last,
  output logic                  unit_relu,
  input  logic [N_UNITS-1:0]    unit_out_valid,
  output logic                  unit_out_ready,
  input  bf16_t                 unit_out_c [N_UNITS][ARR][ARR],
  // output tile writes
  output logic                  wr_valid,
  input  logic                  wr_ready,
  output logic [ADDR_W-1:0]     wr_addr,
  output logic [BW-1:0]         wr_data,
  output logic                  tile_done,
  output logic                  busy
);
  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_RD, S_STREAM, S_DRAIN, S_WRITE, S_RELEASE} state_e;
  state_e state;

  ndp_req_t             cur;
  logic [6:0]           seg;
  logic [$clog2(SEG)-1:0] kk;
  logic [2:0]           rcnt;
  logic [1:0]           wrow;
  logic [BW-1:0]        seg_reg [ARR];
  logic                 fire;

  assign req_ready  = (state == S_IDLE);
  assign busy       = (state != S_IDLE);
  assign fire       = (state == S_STREAM) && b_valid && (&unit_ready);
  assign b_ready    = fire;
  assign unit_valid = fire;
  assign unit_first = (seg == 7'd0) && (kk == '0);
  assign unit_last  = (seg == cur.nseg - 7'd1) && (kk == $clog2(SEG)'(SEG - 1));
  assign unit_relu  = cur.relu;
  assign unit_out_ready = (state == S_RELEASE);
  assign tile_done  = (state == S_RELEASE);

  assign spad_re    = (state == S_RD) && (rcnt < 3'd4);
  assign spad_raddr = {cur.half, seg[5:0], rcnt[1:0]};

  always_comb begin
    for (int r = 0; r < ARR; r++)
      unit_a[r] = cur.row_mask[r] ? seg_reg[r][kk*16 +: 16] : 16'h0000;
    for (int u = 0; u < N_UNITS; u++)
      for (int j = 0; j < ARR; j++)
        unit_b[u][j] = b_data[(u*ARR + j)*16 +: 16];
    for (int u = 0; u < N_UNITS; u++)
      for (int j = 0; j < ARR; j++)
        wr_data[(u*ARR + j)*16 +: 16] = unit_out_c[u][wrow][j];
  end

  assign wr_valid = (state == S_WRITE) && cur.row_mask[wrow];
  assign wr_addr  = cur.c_addr + ADDR_W'(wrow) * ADDR_W'({cur.n, 1'b0});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cur   <= '0;
      seg   <= '0;
      kk    <= '0;
      rcnt  <= '0;
      wrow  <= '0;
      for (int r = 0; r < ARR; r++) seg_reg[r] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin
          cur   <= req;
          seg   <= '0;
          kk    <= '0;
          state <= S_WAIT;
        end
        S_WAIT: if (b_valid) begin
          rcnt  <= '0;
          state <= S_RD;
        end
        S_RD: begin
          rcnt <= rcnt + 3'd1;
          if (rcnt != 3'd0) seg_reg[2'(rcnt - 3'd1)] <= spad_rdata;
          if (rcnt == 3'd4) state <= S_STREAM;
        end
        S_STREAM: if (fire) begin
          kk <= kk + 1'b1;
          if (kk == $clog2(SEG)'(SEG - 1)) begin
            if (seg == cur.nseg - 7'd1) state <= S_DRAIN;
            else begin
              seg   <= seg + 7'd1;
              state <= S_WAIT;
            end
          end
        end
        S_DRAIN: if (&unit_out_valid) begin
          wrow  <= '0;
          state <= S_WRITE;
        end
        S_WRITE: if (!cur.row_mask[wrow] || wr_ready) begin
          wrow <= wrow + 2'd1;
          if (wrow == 2'(ARR - 1)) state <= S_RELEASE;
        end
        S_RELEASE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_req_legal: assert property (@(posedge clk) disable iff (!rst_n)
                                (req_valid && req_ready) |-> (req.nseg != 0 && req.nseg <= 7'(MAX_SEGS)));
endmodule
