// ndp_controller: the NDP controller. Instructions forwarded by the CXL
// controller are queued in the instruction buffer and decoded. A sequencer
// then walks the GEMM C[m x n] = A[m x k] * B[k x n] tile by tile, for each
// group of 4 token rows (M tile):
//  1. it queues memory reads of the 4 activation rows (k/256 beats each) into
//     one half of the scratchpad (halves alternate between M tiles; rows past
//     m are not read and the core treats them as zero);
//  2. for each 256-column block (N tile) it queues one NDP request for the
//     core and then memory reads of the k weight-row slices of that block,
//     which are streamed to the core.
// When the core has reported every tile of the kernel, the done register in
// mmap_regs is set. Memory requests from three sources share the memory
// controller with fixed priority: output-row writes from the core first, then
// host accesses from the regular DRAM buffer, then the sequencer's reads from
// the memory request queue. Every read pushes a tag (destination: host,
// scratchpad entry, or core) into a tag queue; responses arrive in order and
// are routed by the oldest tag. Correct ordering relies on this in-order
// return: activation rows reach the scratchpad before the first weight row of
// their tile reaches the core.
// The paper gives the parts (instruction buffer, decoder, NDP request queue,
// memory request queue, regular DRAM buffer, mmap registers) and their roles;
// queue depths, the tiling order, arbitration and the tag mechanism are this
// design's choices. The sequencer issues at most one request per cycle and
// finishes a kernel (waits for its last tile) before it decodes the next.
module ndp_controller
  import monde_pkg::*;
#(
  parameter int unsigned INST_DEPTH = 16,
  parameter int unsigned MREQ_DEPTH = 8,
  parameter int unsigned NREQ_DEPTH = 4,
  parameter int unsigned HBUF_DEPTH = 4,
  parameter int unsigned TAG_DEPTH  = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // instruction, register and host memory traffic from the CXL controller
  input  logic                 inst_valid,
  output logic                 inst_ready,
  input  logic [511:0]         inst,
  input  logic                 mmio_valid,
  input  logic                 mmio_we,
  input  logic [7:0]           mmio_addr,
  input  logic [63:0]          mmio_wdata,
  output logic [63:0]          mmio_rdata,
  input  logic                 hmem_valid,
  output logic                 hmem_ready,
  input  logic                 hmem_we,
  input  logic [ADDR_W-1:0]    hmem_addr,
  input  logic [LINE_BITS-1:0] hmem_wdata,
  output logic                 hmem_rsp_valid,
  output logic [LINE_BITS-1:0] hmem_rsp_data,
  // memory controller
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output mem_req_t             mem_req,
  output logic [BEAT_BITS-1:0] mem_wdata,
  input  logic                 mem_rsp_valid,
  output logic                 mem_rsp_ready,
  input  logic [BEAT_BITS-1:0] mem_rsp_rdata,
  // NDP core
  output logic                 core_req_valid,
  input  logic                 core_req_ready,
  output ndp_req_t             core_req,
  output logic                 spad_we,
  output logic [SPAD_AW-1:0]   spad_waddr,
  output logic [BEAT_BITS-1:0] spad_wdata,
  output logic                 b_valid,
  input  logic                 b_ready,
  output logic [BEAT_BITS-1:0] b_data,
  input  logic                 core_wr_valid,
  output logic                 core_wr_ready,
  input  logic [ADDR_W-1:0]    core_wr_addr,
  input  logic [BEAT_BITS-1:0] core_wr_data,
  input  logic                 tile_done,
  output logic                 done
);
  // ---------------- instruction buffer and decoder ----------------
  logic [511:0] ib_rdata;
  logic         ib_empty, ib_full, ib_pop;
  logic [$clog2(INST_DEPTH+1)-1:0] ib_count;
  gemm_job_t    dec_job;
  logic         dec_legal;

  assign inst_ready = !ib_full;

  sync_fifo #(.W(512), .DEPTH(INST_DEPTH)) u_inst_buf (
    .clk, .rst_n, .push(inst_valid && inst_ready), .wdata(inst), .full(ib_full),
    .pop(ib_pop), .rdata(ib_rdata), .empty(ib_empty), .count(ib_count)
  );

  inst_decoder u_dec (.inst(ndp_inst_t'(ib_rdata)), .job(dec_job), .legal(dec_legal));

  // ---------------- memory request queue (sequencer reads) ----------------
  typedef struct packed {
    logic [ADDR_W-1:0]  addr;
    dest_e              dest;
    logic [SPAD_AW-1:0] spad_addr;
  } mq_entry_t;

  mq_entry_t mq_wdata, mq_rdata;
  logic      mq_push, mq_full, mq_empty, mq_pop;
  logic [$clog2(MREQ_DEPTH+1)-1:0] mq_count;

  sync_fifo #(.W($bits(mq_entry_t)), .DEPTH(MREQ_DEPTH)) u_mem_req_queue (
    .clk, .rst_n, .push(mq_push), .wdata(mq_wdata), .full(mq_full),
    .pop(mq_pop), .rdata(mq_rdata), .empty(mq_empty), .count(mq_count)
  );

  // ---------------- NDP request queue ----------------
  ndp_req_t nq_wdata;
  logic     nq_push, nq_full, nq_empty;
  logic [$clog2(NREQ_DEPTH+1)-1:0] nq_count;

  sync_fifo #(.W($bits(ndp_req_t)), .DEPTH(NREQ_DEPTH)) u_ndp_req_queue (
    .clk, .rst_n, .push(nq_push), .wdata(nq_wdata), .full(nq_full),
    .pop(core_req_valid && core_req_ready), .rdata(core_req), .empty(nq_empty), .count(nq_count)
  );
  assign core_req_valid = !nq_empty;

  // ---------------- regular DRAM buffer (host accesses) ----------------
  typedef struct packed {
    logic                 we;
    logic [ADDR_W-1:0]    addr;
    logic [LINE_BITS-1:0] data;
  } hb_entry_t;

  hb_entry_t hb_rdata;
  logic      hb_full, hb_empty, hb_pop;
  logic [$clog2(HBUF_DEPTH+1)-1:0] hb_count;

  assign hmem_ready = !hb_full;
  sync_fifo #(.W($bits(hb_entry_t)), .DEPTH(HBUF_DEPTH)) u_regular_dram_buf (
    .clk, .rst_n, .push(hmem_valid && hmem_ready), .wdata({hmem_we, hmem_addr, hmem_wdata}),
    .full(hb_full), .pop(hb_pop), .rdata(hb_rdata), .empty(hb_empty), .count(hb_count)
  );

  // ---------------- sequencer ----------------
  typedef enum logic [2:0] {Q_IDLE, Q_ALOAD, Q_TILE, Q_BLOAD, Q_WAIT} seq_e;
  seq_e      sq;
  gemm_job_t job;
  logic [15:0] mt, nt, kcnt, mtiles, ntiles;
  logic [6:0]  nseg, scnt;
  logic [2:0]  rows, rcnt;
  logic [31:0] tiles_total, tiles_done;
  logic        kernel_done, kernel_reject;

  always_comb begin
    logic [18:0] left;
    left = {3'b000, job.m} - {1'b0, mt, 2'b00};
    rows = (left >= 19'd4) ? 3'd4 : left[2:0];
  end

  always_comb begin
    mq_push  = 1'b0;
    mq_wdata = '0;
    nq_push  = 1'b0;
    nq_wdata = '0;
    unique case (sq)
      Q_ALOAD: begin
        mq_push  = !mq_full;
        mq_wdata.addr = job.a_addr +
          ADDR_W'((((48'(mt) * 48'd4 + 48'(rcnt)) * 48'(job.k)) + (48'(scnt) * TILE_N)) * 2);
        mq_wdata.dest = DST_SPAD;
        mq_wdata.spad_addr = {mt[0], scnt[5:0], rcnt[1:0]};
      end
      Q_TILE: begin
        nq_push           = !nq_full;
        nq_wdata.half     = mt[0];
        nq_wdata.nseg     = nseg;
        nq_wdata.relu     = job.relu;
        nq_wdata.row_mask = 4'((5'd1 << rows) - 5'd1);
        nq_wdata.c_addr   = job.c_addr +
          ADDR_W'((48'(mt) * 48'd4 * 48'(job.n) + 48'(nt) * TILE_N) * 2);
        nq_wdata.n        = job.n;
      end
      Q_BLOAD: begin
        mq_push  = !mq_full;
        mq_wdata.addr = job.b_addr + ADDR_W'((48'(kcnt) * 48'(job.n) + 48'(nt) * TILE_N) * 2);
        mq_wdata.dest = DST_CORE;
      end
      default: ;
    endcase
  end

  assign ib_pop        = (sq == Q_IDLE) && !ib_empty;
  assign kernel_reject = ib_pop && !dec_legal;
  assign kernel_done   = (sq == Q_WAIT) && (tiles_done == tiles_total);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sq <= Q_IDLE;
      job <= '0;
      {mt, nt, kcnt, mtiles, ntiles} <= '0;
      nseg <= '0; scnt <= '0; rcnt <= '0;
      tiles_total <= '0;
      tiles_done  <= '0;
    end else begin
      if (tile_done) tiles_done <= tiles_done + 32'd1;
      unique case (sq)
        Q_IDLE: if (!ib_empty && dec_legal) begin
          job         <= dec_job;
          mt          <= '0;
          nt          <= '0;
          rcnt        <= '0;
          scnt        <= '0;
          nseg        <= 7'(dec_job.k >> 8);
          mtiles      <= 16'(({1'b0, dec_job.m} + 17'd3) >> 2);
          ntiles      <= dec_job.n >> 8;
          tiles_total <= 32'(17'(({1'b0, dec_job.m} + 17'd3) >> 2)) * 32'(dec_job.n >> 8);
          tiles_done  <= tile_done ? 32'd1 : 32'd0;
          sq          <= Q_ALOAD;
        end
        Q_ALOAD: if (mq_push) begin
          if (scnt == nseg - 7'd1) begin
            scnt <= '0;
            if (rcnt == rows - 3'd1) begin
              rcnt <= '0;
              nt   <= '0;
              sq   <= Q_TILE;
            end else rcnt <= rcnt + 3'd1;
          end else scnt <= scnt + 7'd1;
        end
        Q_TILE: if (nq_push) begin
          kcnt <= '0;
          sq   <= Q_BLOAD;
        end
        Q_BLOAD: if (mq_push) begin
          kcnt <= kcnt + 16'd1;
          if (kcnt == job.k - 16'd1) begin
            if (nt == ntiles - 16'd1) begin
              if (mt == mtiles - 16'd1) sq <= Q_WAIT;
              else begin
                mt <= mt + 16'd1;
                sq <= Q_ALOAD;
              end
            end else begin
              nt <= nt + 16'd1;
              sq <= Q_TILE;
            end
          end
        end
        Q_WAIT: if (kernel_done) sq <= Q_IDLE;
        default: sq <= Q_IDLE;
      endcase
    end
  end

  // ---------------- memory arbitration ----------------
  typedef struct packed {
    dest_e              dest;
    logic [SPAD_AW-1:0] spad_addr;
    logic [2:0]         line;
  } tag_t;

  tag_t tag_wdata, tag_rdata;
  logic tag_full, tag_empty, tag_push, tag_pop;
  logic [$clog2(TAG_DEPTH+1)-1:0] tag_count;
  logic sel_core, sel_host, sel_ndp;

  assign sel_core = core_wr_valid;
  assign sel_host = !sel_core && !hb_empty && (hb_rdata.we || !tag_full);
  assign sel_ndp  = !sel_core && !sel_host && !mq_empty && !tag_full;

  always_comb begin
    mem_req_valid = sel_core || sel_host || sel_ndp;
    mem_req       = '0;
    mem_wdata     = core_wr_data;
    tag_wdata     = '0;
    if (sel_core) begin
      mem_req = '{we: 1'b1, addr: core_wr_addr, line_mask: 8'hFF};
    end else if (sel_host) begin
      mem_req   = '{we: hb_rdata.we, addr: {hb_rdata.addr[ADDR_W-1:9], 9'd0},
                    line_mask: 8'(1 << hb_rdata.addr[8:6])};
      mem_wdata = {8{hb_rdata.data}};
      tag_wdata = '{dest: DST_HOST, spad_addr: '0, line: hb_rdata.addr[8:6]};
    end else if (sel_ndp) begin
      mem_req   = '{we: 1'b0, addr: mq_rdata.addr, line_mask: 8'hFF};
      tag_wdata = '{dest: mq_rdata.dest, spad_addr: mq_rdata.spad_addr, line: 3'd0};
    end
  end

  assign core_wr_ready = sel_core && mem_req_ready;
  assign hb_pop        = sel_host && mem_req_ready;
  assign mq_pop        = sel_ndp && mem_req_ready;
  assign tag_push      = mem_req_valid && mem_req_ready && !mem_req.we;

  sync_fifo #(.W($bits(tag_t)), .DEPTH(TAG_DEPTH)) u_tag_queue (
    .clk, .rst_n, .push(tag_push), .wdata(tag_wdata), .full(tag_full),
    .pop(tag_pop), .rdata(tag_rdata), .empty(tag_empty), .count(tag_count)
  );

  // ---------------- response routing ----------------
  assign mem_rsp_ready  = !tag_empty && ((tag_rdata.dest != DST_CORE) || b_ready);
  assign tag_pop        = mem_rsp_valid && mem_rsp_ready;
  assign hmem_rsp_valid = tag_pop && (tag_rdata.dest == DST_HOST);
  assign hmem_rsp_data  = mem_rsp_rdata[tag_rdata.line*LINE_BITS +: LINE_BITS];
  assign spad_we        = tag_pop && (tag_rdata.dest == DST_SPAD);
  assign spad_waddr     = tag_rdata.spad_addr;
  assign spad_wdata     = mem_rsp_rdata;
  assign b_valid        = mem_rsp_valid && !tag_empty && (tag_rdata.dest == DST_CORE);
  assign b_data         = mem_rsp_rdata;

  // ---------------- memory-mapped registers ----------------
  mmap_regs u_mmap (
    .clk, .rst_n,
    .kernel_done   (kernel_done),
    .kernel_reject (kernel_reject),
    .busy          ((sq != Q_IDLE) || !ib_empty),
    .inst_count    (8'(ib_count)),
    .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rdata,
    .done
  );

  a_rsp_has_tag: assert property (@(posedge clk) disable iff (!rst_n) mem_rsp_valid |-> !tag_empty);
endmodule
