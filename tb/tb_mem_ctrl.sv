// tb_mem_ctrl: checks the memory controller front end against eight channel
// models that drop their request ready at random. Random 512-byte beats are
// written at random beat-aligned addresses, with either a full line mask or a
// single 64-byte line, and read back in random order while the consumer
// drops rsp_ready at random. A byte-level reference kept here (independent
// of the channel mapping) gives the expected read data; read data must come
// back in request order. A second phase with no stalls checks that a stream
// of reads is accepted and answered at one beat per cycle.
module tb_mem_ctrl;
  import monde_pkg::*;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, rsp_valid, rsp_ready;
  mem_req_t req;
  logic [BEAT_BITS-1:0] req_wdata, rsp_rdata;
  logic ch_req_valid [NCH], ch_req_ready [NCH], ch_req_we [NCH], ch_rsp_valid [NCH];
  dram_addr_t ch_req_addr [NCH];
  logic [CH_BITS-1:0] ch_req_wdata [NCH], ch_rsp_rdata [NCH];
  logic [COLS_PER_BEAT-1:0] ch_req_wmask [NCH];
  logic stall_ch [NCH];
  logic ch_ready_model [NCH];
  bit   stall_on;
  int checks = 0, failures = 0;

  mem_ctrl dut (.*);

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    lpddr_channel_model u_ch (
      .clk, .rst_n, .req_valid(ch_req_valid[c]), .req_ready(ch_ready_model[c]),
      .req_we(ch_req_we[c]), .req_addr(ch_req_addr[c]), .req_wdata(ch_req_wdata[c]),
      .req_wmask(ch_req_wmask[c]), .rsp_valid(ch_rsp_valid[c]), .rsp_rdata(ch_rsp_rdata[c])
    );
    always @(negedge clk) stall_ch[c] <= stall_on && ($urandom % 8 == 0);
    assign ch_req_ready[c] = ch_ready_model[c] && !stall_ch[c];
  end

  always #0.5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: 64-byte lines keyed by line address
  logic [LINE_BITS-1:0] ref_mem [longint];
  logic [BEAT_BITS-1:0] expq [$];
  longint n_rsp = 0;
  int bad = 0;

  function automatic logic [BEAT_BITS-1:0] ref_beat(longint a);
    logic [BEAT_BITS-1:0] b;
    for (int l = 0; l < 8; l++)
      b[l*LINE_BITS +: LINE_BITS] = ref_mem.exists(a + l * 64) ? ref_mem[a + l * 64] : '0;
    return b;
  endfunction

  always @(negedge clk) rsp_ready <= stall_on ? ($urandom % 3 != 0) : 1'b1;

  always @(posedge clk) if (rst_n && rsp_valid && rsp_ready) begin
    n_rsp++;
    checks++;
    if (expq.size() == 0) begin failures++; $display("unexpected response"); end
    else if (rsp_rdata !== expq.pop_front()) begin
      failures++; bad++;
      if (bad < 10) $display("read data %0d wrong", n_rsp);
    end
  end

  task automatic issue(logic we, longint a, logic [7:0] mask, logic [BEAT_BITS-1:0] d);
    @(negedge clk);
    req_valid = 1; req = '{we: we, addr: ADDR_W'(a), line_mask: mask}; req_wdata = d;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    if (we) begin
      for (int l = 0; l < 8; l++) if (mask[l]) ref_mem[a + l * 64] = d[l*LINE_BITS +: LINE_BITS];
    end else expq.push_back(ref_beat(a));
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    longint addrs [64];
    logic [BEAT_BITS-1:0] d;
    longint t0, t1, n0;
    req_valid = 0; req = '0; req_wdata = '0; stall_on = 1;
    repeat (4) @(posedge clk);
    rst_n = 1;
    // beat addresses spread over channels' rows, banks, bank groups and ranks
    foreach (addrs[i]) addrs[i] = longint'({$urandom % 32'h3FFF_FFFF, 9'd0}) & ((64'd1 << ADDR_W) - 1);
    for (int t = 0; t < 1500; t++) begin
      int i;
      i = int'($urandom % 64);
      if ($urandom % 2) begin
        for (int w = 0; w < BEAT_BITS / 32; w++) d[w*32 +: 32] = $urandom;
        issue(1'b1, addrs[i], ($urandom % 2) ? 8'hFF : 8'(1 << ($urandom % 8)), d);
      end else issue(1'b0, addrs[i], 8'hFF, '0);
    end
    while (expq.size() != 0) @(posedge clk);
    // rate: 200 back-to-back reads with nothing stalling
    stall_on = 0;
    repeat (4) @(posedge clk);
    n0 = n_rsp;
    @(negedge clk);
    t0 = $time;
    req_valid = 1;
    for (int t = 0; t < 200; t++) begin
      req = '{we: 1'b0, addr: ADDR_W'(addrs[t % 64]), line_mask: 8'hFF};
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      expq.push_back(ref_beat(addrs[t % 64]));
      @(negedge clk);
    end
    req_valid = 0;
    t1 = $time;
    while (expq.size() != 0) @(posedge clk);
    $display("200 reads accepted in %0d cycles, %0d responses in all", t1 - t0, n_rsp);
    checks++;
    if (t1 - t0 > 200 + 2) begin failures++; $display("read rate below one beat per cycle"); end
    checks++;
    if (n_rsp - n0 != 200) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
