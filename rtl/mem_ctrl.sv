// mem_ctrl: the device-side memory controller front end for the 8 LPDDR
// channels. Device byte addresses are mapped ro-ba-bg-ra-co-ch (row, bank,
// bank group, rank, column, channel from the most significant bits down)
// above a 3-bit offset inside an 8-byte channel word, so a 512-byte beat
// covers 8 consecutive columns in each of the 8 channels. Each request (one
// beat) is sent to all channels at once as a 64-byte burst; write data is cut
// into the channels' columns and a per-column mask is taken from the request's
// 64-byte line mask. Read responses come back from each channel in order, are
// buffered per channel and reassembled into the beat; a credit counter keeps
// the number of outstanding reads within the response buffers, so the
// channels need no backpressure on read data. Writes need no credit and get
// no response.
// The address order, 8 channels and ~64 bytes per channel per 1 GHz cycle
// (68 GB/s per channel in the paper) follow the paper. DRAM command
// scheduling, refresh and timing are not modelled here: each channel port is a
// simple in-order column-burst interface.
module mem_ctrl
  import monde_pkg::*;
#(
  parameter int unsigned RSP_DEPTH = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  mem_req_t             req,
  input  logic [BEAT_BITS-1:0] req_wdata,
  output logic                 rsp_valid,
  input  logic                 rsp_ready,
  output logic [BEAT_BITS-1:0] rsp_rdata,
  // channel ports
  output logic                 ch_req_valid [NCH],
  input  logic                 ch_req_ready [NCH],
  output logic                 ch_req_we    [NCH],
  output dram_addr_t           ch_req_addr  [NCH],
  output logic [CH_BITS-1:0]   ch_req_wdata [NCH],
  output logic [COLS_PER_BEAT-1:0] ch_req_wmask [NCH],
  input  logic                 ch_rsp_valid [NCH],
  input  logic [CH_BITS-1:0]   ch_rsp_rdata [NCH]
);
  localparam int unsigned CW = $clog2(RSP_DEPTH + 1);

  dev_addr_t        da;
  logic             all_ready, accept, rd_accept, rsp_fire;
  logic [CW-1:0]    outstanding;
  logic [NCH-1:0]   f_empty, f_full;
  logic [CH_BITS-1:0] f_data [NCH];

  assign da = dev_addr_t'(req.addr);

  always_comb begin
    all_ready = 1'b1;
    for (int c = 0; c < NCH; c++) all_ready &= ch_req_ready[c];
  end

  assign req_ready = all_ready && (req.we || outstanding < CW'(RSP_DEPTH));
  assign accept    = req_valid && req_ready;
  assign rd_accept = accept && !req.we;
  assign rsp_valid = (f_empty == '0);
  assign rsp_fire  = rsp_valid && rsp_ready;

  always_comb begin
    for (int c = 0; c < NCH; c++) begin
      ch_req_valid[c] = req_valid && req_ready;
      ch_req_we[c]    = req.we;
      ch_req_addr[c]  = '{ro: da.ro, ba: da.ba, bg: da.bg, ra: da.ra, co: {da.co[9:3], 3'b000}};
      for (int j = 0; j < COLS_PER_BEAT; j++) begin
        ch_req_wdata[c][j*64 +: 64] = req_wdata[j*512 + c*64 +: 64];
        ch_req_wmask[c][j]          = req.line_mask[j];
        rsp_rdata[j*512 + c*64 +: 64] = f_data[c][j*64 +: 64];
      end
    end
  end

  for (genvar c = 0; c < NCH; c++) begin : g_rsp
    logic [CW-1:0] cnt;
    sync_fifo #(.W(CH_BITS), .DEPTH(RSP_DEPTH)) u_rsp_fifo (
      .clk, .rst_n, .push(ch_rsp_valid[c]), .wdata(ch_rsp_rdata[c]), .full(f_full[c]),
      .pop(rsp_fire), .rdata(f_data[c]), .empty(f_empty[c]), .count(cnt)
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) outstanding <= '0;
    else outstanding <= outstanding + CW'(rd_accept) - CW'(rsp_fire);
  end

  a_aligned: assert property (@(posedge clk) disable iff (!rst_n) req_valid |-> (req.addr[8:0] == 0));
endmodule
