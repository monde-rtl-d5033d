// tb_monde_device: end-to-end test of the device at its default size (64 NDP
// units, 8 channels), acting as host and device driver.
//  * Expert weights are preloaded into the channel models (even banks), as
//    the driver does when an MoE layer is initialised; the address mapping
//    used for that is written out here independently of the RTL.
//  * Input activations are written over the host port (odd banks).
//  * Three instructions are queued back to back: a gemm of 5 tokens x
//    512 x 512 (two token tiles, the second partial; two column tiles; two
//    K segments), an illegal one (K not a multiple of 256) and a gemm+relu of
//    2 tokens x 256 x 256.
//  * The host polls the COMPLETED register, checks and clears DONE, checks
//    ERRORS, reads both outputs back over the host port and compares every
//    element with integer reference products rounded to bf16.
// It counts how often each mechanism of the design happened and fails if
// one never did.
module tb_monde_device;
  import monde_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic m2s_valid, m2s_ready, m2s_ndp, s2m_valid, s2m_ready, done;
  m2s_op_e m2s_op;
  s2m_op_e s2m_op;
  logic [63:0] m2s_addr;
  logic [LINE_BITS-1:0] m2s_data, s2m_data;
  logic ch_req_valid [NCH], ch_req_ready [NCH], ch_req_we [NCH], ch_rsp_valid [NCH];
  dram_addr_t ch_req_addr [NCH];
  logic [CH_BITS-1:0] ch_req_wdata [NCH], ch_rsp_rdata [NCH];
  logic [COLS_PER_BEAT-1:0] ch_req_wmask [NCH];
  int checks = 0, failures = 0;
  longint cyc = 0;

  monde_device dut (.*);

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    lpddr_channel_model u_ch (
      .clk, .rst_n,
      .req_valid(ch_req_valid[c]), .req_ready(ch_req_ready[c]), .req_we(ch_req_we[c]),
      .req_addr(ch_req_addr[c]), .req_wdata(ch_req_wdata[c]), .req_wmask(ch_req_wmask[c]),
      .rsp_valid(ch_rsp_valid[c]), .rsp_rdata(ch_rsp_rdata[c])
    );
  end

  always #0.5 clk = ~clk;   // 1 GHz
  always @(posedge clk) cyc++;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_ndp_inst = 0, n_mmio = 0, n_host_wr = 0, n_host_rd = 0, n_reject = 0, n_kernel_done = 0;
  int n_tiles = 0, n_partial_tiles = 0, n_half1 = 0, n_multiseg = 0, n_b_stall = 0;
  int n_wr_priority = 0, n_relu_tiles = 0, n_seg_switch = 0;
  always @(posedge clk) if (rst_n) begin
    if (m2s_valid && m2s_ready && m2s_ndp) n_ndp_inst++;
    if (m2s_valid && m2s_ready && m2s_addr >= MMIO_BASE) n_mmio++;
    if (dut.u_cxl.hmem_valid && dut.u_cxl.hmem_ready) begin
      if (dut.u_cxl.hmem_we) n_host_wr++; else n_host_rd++;
    end
    if (dut.u_ctrl.kernel_reject) n_reject++;
    if (dut.u_ctrl.kernel_done) n_kernel_done++;
    if (dut.u_core.req_valid && dut.u_core.req_ready) begin
      n_tiles++;
      if (dut.u_core.req.row_mask != 4'hF) n_partial_tiles++;
      if (dut.u_core.req.half) n_half1++;
      if (dut.u_core.req.nseg > 1) n_multiseg++;
      if (dut.u_core.req.relu) n_relu_tiles++;
    end
    if (dut.u_core.b_valid && !dut.u_core.b_ready) n_b_stall++;
    if (dut.u_ctrl.sel_core && !dut.u_ctrl.mq_empty) n_wr_priority++;
    if (dut.u_core.u_simd.state == dut.u_core.u_simd.S_WAIT && dut.u_core.u_simd.seg != 0) n_seg_switch++;
  end

  // ---------------- host transactions ----------------
  task automatic host_req(m2s_op_e op, logic [63:0] addr, logic [LINE_BITS-1:0] data, logic ndp,
                          output logic [LINE_BITS-1:0] rdata);
    @(negedge clk);
    m2s_valid = 1; m2s_op = op; m2s_addr = addr; m2s_data = data; m2s_ndp = ndp;
    @(posedge clk);
    while (!m2s_ready) @(posedge clk);
    @(negedge clk);
    m2s_valid = 0; m2s_ndp = 0;
    while (!s2m_valid) @(negedge clk);
    checks++;
    if (s2m_op != ((op == M2S_MEM_WR) ? S2M_NDR : S2M_DRS)) begin failures++; $display("wrong response type"); end
    rdata = s2m_data;
    s2m_ready = 1;
    @(negedge clk);
    s2m_ready = 0;
  endtask

  task automatic host_wr(logic [63:0] addr, logic [LINE_BITS-1:0] data, logic ndp = 0);
    logic [LINE_BITS-1:0] d;
    host_req(M2S_MEM_WR, addr, data, ndp, d);
  endtask

  task automatic host_rd(logic [63:0] addr, output logic [LINE_BITS-1:0] data);
    host_req(M2S_MEM_RD, addr, '0, 0, data);
  endtask

  // ---------------- address map reference ----------------
  // byte address -> channel and {row, bank, bank group, rank, column} key
  function automatic int ch_of(longint a);
    return int'((a >> 3) & 7);
  endfunction
  function automatic logic [32:0] key_of(longint a);
    logic [15:0] ro; logic [1:0] ba, bg; logic [2:0] ra; logic [9:0] co;
    co = 10'(a >> 6); ra = 3'(a >> 16); bg = 2'(a >> 19); ba = 2'(a >> 21); ro = 16'(a >> 23);
    return {ro, ba, bg, ra, co};
  endfunction

  task automatic poke64(longint a, logic [63:0] d);
    case (ch_of(a))
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

  // ---------------- workloads ----------------
  typedef struct {
    int m, k, n;
    logic relu;
    longint a_addr, b_addr, c_addr;
  } job_t;

  int A1 [][], B1 [][], A2 [][], B2 [][];

  function automatic ndp_inst_t make_inst(job_t j, logic is_ndp);
    ndp_inst_t i;
    i = '0;
    i.opcode       = j.relu ? OP_GEMM_RELU : OP_GEMM;
    i.act_in.addr  = 64'(j.a_addr);  i.act_in.size  = 64'(j.m * j.k * 2);
    i.wgt.addr     = 64'(j.b_addr);  i.wgt.size     = 64'(j.k * j.n * 2);
    i.act_out.addr = 64'(j.c_addr);  i.act_out.size = 64'(j.m * j.n * 2);
    i.aux.is_ndp   = is_ndp;
    i.aux.m_dim = 16'(j.m); i.aux.k_dim = 16'(j.k); i.aux.n_dim = 16'(j.n);
    return i;
  endfunction

  task automatic load_job(job_t j, ref int A [][], ref int B [][]);
    logic [LINE_BITS-1:0] line;
    A = new[j.m];
    foreach (A[r]) begin
      A[r] = new[j.k];
      foreach (A[r][k]) A[r][k] = int'($urandom % 9) - 4;
    end
    B = new[j.k];
    foreach (B[k]) begin
      B[k] = new[j.n];
      foreach (B[k][c]) B[k][c] = int'($urandom % 9) - 4;
    end
    // weights: backdoor, 4 bf16 per 8-byte word
    for (int k = 0; k < j.k; k++)
      for (int c = 0; c < j.n; c += 4) begin
        logic [63:0] w;
        for (int e = 0; e < 4; e++) w[e*16 +: 16] = int_to_bf16(B[k][c+e]);
        poke64(j.b_addr + longint'((k * j.n + c) * 2), w);
      end
    // activations: host writes of 64-byte lines (32 bf16)
    for (int r = 0; r < j.m; r++)
      for (int k = 0; k < j.k; k += 32) begin
        for (int e = 0; e < 32; e++) line[e*16 +: 16] = int_to_bf16(A[r][k+e]);
        host_wr(64'(j.a_addr + longint'((r * j.k + k) * 2)), line);
      end
  endtask

  task automatic check_job(job_t j, ref int A [][], ref int B [][], input string name);
    logic [LINE_BITS-1:0] line;
    int bad = 0, clamped = 0;
    for (int r = 0; r < j.m; r++)
      for (int c = 0; c < j.n; c += 32) begin
        host_rd(64'(j.c_addr + longint'((r * j.n + c) * 2)), line);
        for (int e = 0; e < 32; e++) begin
          longint s;
          bf16_t ex;
          s = 0;
          for (int k = 0; k < j.k; k++) s += A[r][k] * B[k][c+e];
          ex = (j.relu && s < 0) ? 16'h0 : int_to_bf16(s);
          if (j.relu && s < 0) clamped++;
          checks++;
          if (line[e*16 +: 16] !== ex && !(s == 0 && line[e*16 + 14 -: 15] == 0)) begin
            failures++; bad++;
            if (bad < 10) $display("%s C[%0d][%0d] = %h expected %h (%0d)", name, r, c+e, line[e*16 +: 16], ex, s);
          end
        end
      end
    $display("%s: %0d x %0d outputs checked, %0d wrong, %0d clamped by ReLU", name, j.m, j.n, bad, clamped);
    if (j.relu) begin
      checks++;
      if (clamped == 0) begin failures++; $display("ReLU never clamped"); end
    end
  endtask

  initial begin
    job_t j1, j2, jbad;
    logic [LINE_BITS-1:0] rd;
    longint t_start, t_end;
    m2s_valid = 0; m2s_op = M2S_MEM_RD; m2s_addr = 0; m2s_data = 0; m2s_ndp = 0; s2m_ready = 0;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // weights in even banks (ba[0] = address bit 21 clear), activations in odd banks
    j1 = '{m: 5, k: 512, n: 512, relu: 1'b0, a_addr: 64'h20_0000, b_addr: 64'h00_0000, c_addr: 64'h60_0000};
    j2 = '{m: 2, k: 256, n: 256, relu: 1'b1, a_addr: 64'h22_0000, b_addr: 64'h80_0000, c_addr: 64'h62_0000};
    jbad = '{m: 4, k: 100, n: 256, relu: 1'b0, a_addr: 64'h20_0000, b_addr: 64'h00_0000, c_addr: 64'h64_0000};
    checks++;
    if (key_of(j1.b_addr) >> 21 != 0 || ((j1.a_addr >> 21) & 1) != 1 || ((j1.c_addr >> 21) & 1) != 1) failures++;

    load_job(j1, A1, B1);
    load_job(j2, A2, B2);
    $display("operands loaded at cycle %0d", cyc);

    // queue three instructions (isNDP set in the flag and in aux)
    t_start = cyc;
    host_wr(64'h0, 512'(make_inst(j1, 1'b1)), 1'b1);
    host_wr(64'h0, 512'(make_inst(jbad, 1'b1)), 1'b1);
    host_wr(64'h0, 512'(make_inst(j2, 1'b1)), 1'b1);

    // poll COMPLETED until both legal kernels are done
    do begin
      host_rd(MMIO_BASE + 64'(REG_COMPLETED), rd);
    end while (rd[63:0] < 2 && cyc < 1000000);
    t_end = cyc;
    $display("kernels completed after %0d cycles", t_end - t_start);
    checks++;
    if (rd[63:0] != 2) begin failures++; $display("COMPLETED = %0d", rd[63:0]); end
    // j1: 2 x 2 tiles of (512 steps + 2 segment gaps); j2: 1 tile of 256 steps.
    // At one weight beat per cycle the core needs at least 4*512 + 256 cycles;
    // each of the 5 tiles adds memory latency, array fill/drain and the output
    // write, and the host polls in between: allow 100 cycles per tile.
    checks++;
    if (t_end - t_start < 4 * 512 + 256 || t_end - t_start > 4 * 512 + 256 + 5 * 100) begin
      failures++; $display("kernel time %0d cycles out of range", t_end - t_start);
    end

    host_rd(MMIO_BASE + 64'(REG_DONE), rd);
    checks++; if (rd[0] !== 1'b1 || !done) begin failures++; $display("DONE not set"); end
    host_wr(MMIO_BASE + 64'(REG_DONE), '0);
    host_rd(MMIO_BASE + 64'(REG_DONE), rd);
    checks++; if (rd[0] !== 1'b0) begin failures++; $display("DONE not cleared"); end
    host_rd(MMIO_BASE + 64'(REG_ERRORS), rd);
    checks++; if (rd[63:0] != 1) begin failures++; $display("ERRORS = %0d", rd[63:0]); end
    host_rd(MMIO_BASE + 64'(REG_STATUS), rd);
    checks++; if (rd[0] !== 1'b0) begin failures++; $display("still busy"); end

    check_job(j1, A1, B1, "gemm 5x512x512");
    check_job(j2, A2, B2, "gemm+relu 2x256x256");

    $display("mechanisms: ndp_inst=%0d mmio=%0d host_wr=%0d host_rd=%0d reject=%0d kernels=%0d tiles=%0d partial=%0d half1=%0d multiseg=%0d relu_tiles=%0d seg_switch=%0d b_stall=%0d wr_priority=%0d",
             n_ndp_inst, n_mmio, n_host_wr, n_host_rd, n_reject, n_kernel_done, n_tiles, n_partial_tiles,
             n_half1, n_multiseg, n_relu_tiles, n_seg_switch, n_b_stall, n_wr_priority);
    checks++; if (n_ndp_inst != 3) failures++;
    checks++; if (n_mmio == 0) failures++;
    checks++; if (n_host_wr == 0 || n_host_rd == 0) failures++;
    checks++; if (n_reject != 1) failures++;
    checks++; if (n_kernel_done != 2) failures++;
    checks++; if (n_tiles != 5) begin failures++; $display("tiles %0d", n_tiles); end
    checks++; if (n_partial_tiles != 3) begin failures++; $display("partial tiles %0d", n_partial_tiles); end
    checks++; if (n_half1 == 0) failures++;
    checks++; if (n_multiseg == 0 || n_seg_switch == 0) failures++;
    checks++; if (n_relu_tiles != 1) failures++;
    checks++; if (n_b_stall == 0) begin failures++; $display("weight stream never stalled"); end
    checks++; if (n_wr_priority == 0) begin failures++; $display("write priority never used"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
