// tb_ndp_controller: tests the NDP controller with the real memory
// controller and eight channel models below it, and a behavioural model of
// the NDP core above it.
// The core model accepts a tile request, consumes the weight stream (beat by
// beat, with random backpressure in the first kernel and none in the second),
// and checks
//   * every weight beat against the weight row and column tile that the
//     request's output address implies,
//   * when the first beat of each K segment arrives, that the scratchpad
//     already holds the matching activation rows in the right half,
// then writes one output row per valid row of the tile and pulses tile_done.
// Memory contents are a fixed function of the byte address, preloaded
// through the backdoor, so expected data needs no model of the controller.
// The test also covers host line writes and reads interleaved with a running
// kernel, a rejected instruction, the DONE/COMPLETED/ERRORS registers, and
// checks that with no backpressure the weight stream runs at one beat per
// cycle apart from a short start-up per tile.
module tb_ndp_controller;
  import monde_pkg::*;

  logic clk = 0, rst_n = 0;
  always #0.5 clk = ~clk;

  logic inst_valid, inst_ready, mmio_valid, mmio_we, done;
  logic [511:0] inst;
  logic [7:0] mmio_addr;
  logic [63:0] mmio_wdata, mmio_rdata;
  logic hmem_valid, hmem_ready, hmem_we, hmem_rsp_valid;
  logic [ADDR_W-1:0] hmem_addr;
  logic [LINE_BITS-1:0] hmem_wdata, hmem_rsp_data;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  mem_req_t mem_req;
  logic [BEAT_BITS-1:0] mem_wdata, mem_rsp_rdata;
  logic core_req_valid, core_req_ready, spad_we, b_valid, b_ready;
  logic core_wr_valid, core_wr_ready, tile_done;
  ndp_req_t core_req;
  logic [SPAD_AW-1:0] spad_waddr;
  logic [BEAT_BITS-1:0] spad_wdata, b_data, core_wr_data;
  logic [ADDR_W-1:0] core_wr_addr;
  logic ch_req_valid [NCH], ch_req_ready [NCH], ch_req_we [NCH], ch_rsp_valid [NCH];
  dram_addr_t ch_req_addr [NCH];
  logic [CH_BITS-1:0] ch_req_wdata [NCH], ch_rsp_rdata [NCH];
  logic [COLS_PER_BEAT-1:0] ch_req_wmask [NCH];

  int checks = 0, failures = 0;

  ndp_controller dut (.*);

  mem_ctrl u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .req_wdata(mem_wdata), .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready),
    .rsp_rdata(mem_rsp_rdata), .ch_req_valid, .ch_req_ready, .ch_req_we, .ch_req_addr,
    .ch_req_wdata, .ch_req_wmask, .ch_rsp_valid, .ch_rsp_rdata
  );

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    lpddr_channel_model u_ch (
      .clk, .rst_n, .req_valid(ch_req_valid[c]), .req_ready(ch_req_ready[c]),
      .req_we(ch_req_we[c]), .req_addr(ch_req_addr[c]), .req_wdata(ch_req_wdata[c]),
      .req_wmask(ch_req_wmask[c]), .rsp_valid(ch_rsp_valid[c]), .rsp_rdata(ch_rsp_rdata[c])
    );
  end

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- memory image ----------------
  function automatic logic [63:0] word_of(longint a);
    logic [31:0] w;
    w = 32'(a >> 3);
    return {w ^ 32'h5A5A_A5A5, w};
  endfunction
  function automatic logic [BEAT_BITS-1:0] beat_of(longint a);
    logic [BEAT_BITS-1:0] b;
    for (int w = 0; w < BEAT_BITS / 64; w++) b[w*64 +: 64] = word_of(a + w * 8);
    return b;
  endfunction
  function automatic logic [32:0] key_of(longint a);
    logic [15:0] ro; logic [1:0] ba, bg; logic [2:0] ra; logic [9:0] co;
    co = 10'(a >> 6); ra = 3'(a >> 16); bg = 2'(a >> 19); ba = 2'(a >> 21); ro = 16'(a >> 23);
    return {ro, ba, bg, ra, co};
  endfunction
  task automatic poke64(longint a, logic [63:0] d);
    case (int'((a >> 3) & 7))
      0: g_ch[0].u_ch.poke(key_of(a), d);
      1: g_ch[1].u_ch.poke(key_of(a), d);
      2: g_ch[2].u_ch.poke(key_of(a), d);
      3: g_ch[3].u_ch.poke(key_of(a), d);
      4: g_ch[4].u_ch.poke(key_of(a), d);
      5: g_ch[5].u_ch.poke(key_of(a), d);
      6: g_ch[6].u_ch.poke(key_of(a), d);
      default: g_ch[7].u_ch.poke(key_of(a), d);
    endcase
  endtask
  function automatic logic [63:0] peek64(longint a);
    case (int'((a >> 3) & 7))
      0: return g_ch[0].u_ch.peek(key_of(a));
      1: return g_ch[1].u_ch.peek(key_of(a));
      2: return g_ch[2].u_ch.peek(key_of(a));
      3: return g_ch[3].u_ch.peek(key_of(a));
      4: return g_ch[4].u_ch.peek(key_of(a));
      5: return g_ch[5].u_ch.peek(key_of(a));
      6: return g_ch[6].u_ch.peek(key_of(a));
      default: return g_ch[7].u_ch.peek(key_of(a));
    endcase
  endfunction

  // ---------------- current job, seen by the core model ----------------
  longint ja, jb, jc;
  int jm, jk, jn;
  bit stall_b;
  int tiles_seen = 0, partial_seen = 0, half_seen [2] = '{0, 0}, b_stalls = 0, slow_tiles = 0;

  logic [BEAT_BITS-1:0] spad [SPAD_ENTRIES];
  always @(posedge clk) if (spad_we) spad[spad_waddr] <= spad_wdata;
  always @(posedge clk) if (b_valid && !b_ready) b_stalls++;

  // core model
  initial begin
    core_req_ready = 0; b_ready = 0; core_wr_valid = 0; core_wr_addr = '0; core_wr_data = '0;
    tile_done = 0;
    @(posedge rst_n);
    forever begin
      ndp_req_t r;
      longint off, first_beat, last_beat, cyc;
      int mt, nt, rows;
      @(negedge clk);
      core_req_ready = 1;
      @(posedge clk);
      while (!core_req_valid) @(posedge clk);
      r = core_req;
      @(negedge clk);
      core_req_ready = 0;
      off = (longint'(r.c_addr) - jc) / 2;
      mt = int'(off / (4 * jn));
      nt = int'((off % (4 * jn)) / TILE_N);
      rows = 0;
      for (int i = 0; i < ARR; i++) if (r.row_mask[i]) rows++;
      tiles_seen++;
      if (rows != ARR) partial_seen++;
      half_seen[r.half]++;
      checks++;
      if (r.nseg != 7'(jk / TILE_N) || r.n != 16'(jn) || r.half != 1'(mt) ||
          rows != ((jm - mt * 4 >= 4) ? 4 : jm - mt * 4) || r.row_mask != 4'((1 << rows) - 1) ||
          off % TILE_N != 0) begin
        failures++;
        $display("bad tile request mt=%0d nt=%0d nseg=%0d mask=%b", mt, nt, r.nseg, r.row_mask);
      end
      cyc = 0;
      first_beat = -1;
      for (int kk = 0; kk < jk; kk++) begin
        b_ready = stall_b ? ($urandom % 4 != 0) : 1'b1;
        @(posedge clk);
        cyc++;
        while (!(b_valid && b_ready)) begin
          @(negedge clk);
          b_ready = stall_b ? ($urandom % 4 != 0) : 1'b1;
          @(posedge clk);
          cyc++;
        end
        if (first_beat < 0) first_beat = cyc;
        last_beat = cyc;
        checks++;
        if (b_data !== beat_of(jb + longint'(kk * jn + nt * TILE_N) * 2)) begin
          failures++;
          if (failures < 10) $display("weight beat %0d of tile (%0d,%0d) wrong", kk, mt, nt);
        end
        if (kk % TILE_N == 0)
          for (int row = 0; row < rows; row++) begin
            checks++;
            if (spad[{r.half, 6'(kk / TILE_N), 2'(row)}] !==
                beat_of(ja + longint'((mt * 4 + row) * jk + kk) * 2)) begin
              failures++;
              if (failures < 10) $display("scratchpad row %0d seg %0d of tile (%0d,%0d) not ready", row, kk / TILE_N, mt, nt);
            end
          end
        @(negedge clk);
      end
      b_ready = 0;
      if (!stall_b && last_beat - first_beat > jk - 1 + 6) begin
        slow_tiles++;
        $display("tile (%0d,%0d): %0d beats took %0d cycles", mt, nt, jk, last_beat - first_beat + 1);
      end
      // write the output rows
      for (int row = 0; row < rows; row++) begin
        longint a;
        a = longint'(r.c_addr) + longint'(row * jn * 2);
        core_wr_valid = 1;
        core_wr_addr = ADDR_W'(a);
        core_wr_data = ~beat_of(a);
        @(posedge clk);
        while (!core_wr_ready) @(posedge clk);
        @(negedge clk);
        core_wr_valid = 0;
      end
      tile_done = 1;
      @(negedge clk);
      tile_done = 0;
    end
  end

  // ---------------- host side ----------------
  task automatic mmio_rd(logic [7:0] a, output logic [63:0] d);
    @(negedge clk);
    mmio_valid = 1; mmio_we = 0; mmio_addr = a;
    #0.1 d = mmio_rdata;
    @(negedge clk);
    mmio_valid = 0;
  endtask
  task automatic mmio_wr(logic [7:0] a, logic [63:0] d);
    @(negedge clk);
    mmio_valid = 1; mmio_we = 1; mmio_addr = a; mmio_wdata = d;
    @(negedge clk);
    mmio_valid = 0; mmio_we = 0;
  endtask
  task automatic hmem(logic we, longint a, logic [LINE_BITS-1:0] wd, output logic [LINE_BITS-1:0] rd);
    @(negedge clk);
    hmem_valid = 1; hmem_we = we; hmem_addr = ADDR_W'(a); hmem_wdata = wd;
    @(posedge clk);
    while (!hmem_ready) @(posedge clk);
    @(negedge clk);
    hmem_valid = 0;
    rd = '0;
    if (!we) begin   // only reads are answered; writes are posted
      while (!hmem_rsp_valid) @(negedge clk);
      rd = hmem_rsp_data;
    end
  endtask
  task automatic send_inst(int m, int k, int n, logic relu, longint a, longint b, longint c);
    ndp_inst_t i;
    i = '0;
    i.opcode = relu ? OP_GEMM_RELU : OP_GEMM;
    i.act_in = '{addr: 64'(a), size: 64'(m * k * 2)};
    i.wgt = '{addr: 64'(b), size: 64'(k * n * 2)};
    i.act_out = '{addr: 64'(c), size: 64'(m * n * 2)};
    i.aux.is_ndp = 1; i.aux.m_dim = 16'(m); i.aux.k_dim = 16'(k); i.aux.n_dim = 16'(n);
    @(negedge clk);
    inst_valid = 1; inst = 512'(i);
    @(posedge clk);
    while (!inst_ready) @(posedge clk);
    @(negedge clk);
    inst_valid = 0;
  endtask

  task automatic run_kernel(int m, int k, int n, longint a, longint b, longint c, bit stall,
                            int expect_done);
    logic [63:0] d;
    logic [LINE_BITS-1:0] line, rd;
    int bad;
    ja = a; jb = b; jc = c; jm = m; jk = k; jn = n; stall_b = stall;
    for (longint x = 0; x < m * k * 2; x += 8) poke64(a + x, word_of(a + x));
    for (longint x = 0; x < k * n * 2; x += 8) poke64(b + x, word_of(b + x));
    send_inst(m, k, n, 1'b0, a, b, c);
    // host line traffic while the first kernel runs (the second measures the
    // weight stream rate undisturbed)
    for (int t = 0; t < (stall ? 6 : 0); t++) begin
      longint ha;
      ha = 64'h40_0000 + longint'(t * 64);
      for (int e = 0; e < LINE_BITS / 32; e++) line[e*32 +: 32] = $urandom;
      hmem(1'b1, ha, line, rd);
      hmem(1'b0, ha, '0, rd);
      checks++;
      if (rd !== line) begin failures++; $display("host line %0d read back wrong", t); end
    end
    do mmio_rd(REG_COMPLETED, d); while (d != 64'(expect_done));
    mmio_rd(REG_DONE, d);
    checks++; if (d != 1 || !done) begin failures++; $display("DONE not set"); end
    mmio_wr(REG_DONE, 64'd0);
    mmio_rd(REG_DONE, d);
    checks++; if (d != 0 || done) begin failures++; $display("DONE not cleared"); end
    bad = 0;
    for (int r = 0; r < m; r++)
      for (longint x = 0; x < n * 2; x += 8) begin
        longint ca;
        ca = c + longint'(r * n * 2) + x;
        checks++;
        if (peek64(ca) !== ~word_of(ca)) begin failures++; bad++; end
      end
    $display("kernel %0dx%0dx%0d: %0d output words wrong", m, k, n, bad);
  endtask

  initial begin
    logic [63:0] d;
    inst_valid = 0; inst = '0; mmio_valid = 0; mmio_we = 0; mmio_addr = 0; mmio_wdata = 0;
    hmem_valid = 0; hmem_we = 0; hmem_addr = '0; hmem_wdata = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // 6 tokens: two token tiles, the second with 2 rows; 2 K segments; 2 column tiles
    run_kernel(6, 512, 512, 64'h20_0000, 64'h00_0000, 64'h60_0000, 1'b1, 1);
    // an instruction with K = 100 is rejected
    send_inst(4, 100, 256, 1'b0, 64'h20_0000, 64'h00_0000, 64'h60_0000);
    repeat (5) @(negedge clk);
    mmio_rd(REG_ERRORS, d);
    checks++; if (d != 1) begin failures++; $display("ERRORS = %0d", d); end
    // 9 tokens: three token tiles reuse scratchpad half 0; no backpressure
    run_kernel(9, 256, 256, 64'h22_0000, 64'h80_0000, 64'h62_0000, 1'b0, 2);
    mmio_rd(REG_STATUS, d);
    checks++; if (d[0] != 0 || d[15:8] != 0) begin failures++; $display("STATUS = %h", d); end

    $display("tiles=%0d partial=%0d half0=%0d half1=%0d b_stalls=%0d slow_tiles=%0d",
             tiles_seen, partial_seen, half_seen[0], half_seen[1], b_stalls, slow_tiles);
    checks++; if (tiles_seen != 4 + 3) failures++;
    checks++; if (partial_seen != 2 + 1) failures++;
    checks++; if (half_seen[0] == 0 || half_seen[1] == 0) failures++;
    checks++; if (b_stalls == 0) failures++;
    checks++; if (slow_tiles != 0) begin failures++; $display("weight stream below one beat per cycle"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
