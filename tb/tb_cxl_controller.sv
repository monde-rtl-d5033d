// tb_cxl_controller: drives the host side of the CXL controller with random
// memory reads and writes, MMIO register reads and writes, and NDP
// instruction writes (write with the NDP flag), against simple models of the
// NDP controller side that stall at random. It checks that each request is
// routed to exactly one destination with the right address and data
// (instructions by the flag, addresses at or above the MMIO base to the
// registers, everything else to memory, line-aligned), that each gets one
// response of the right kind (NDR for writes, DRS with data for reads) and
// that the response waits for the host's s2m_ready.
module tb_cxl_controller;
  import monde_pkg::*;

  logic clk = 0, rst_n = 0;
  logic m2s_valid, m2s_ready, m2s_ndp, s2m_valid, s2m_ready;
  m2s_op_e m2s_op;
  s2m_op_e s2m_op;
  logic [63:0] m2s_addr;
  logic [LINE_BITS-1:0] m2s_data, s2m_data;
  logic inst_valid, inst_ready, mmio_valid, mmio_we, hmem_valid, hmem_ready, hmem_we, hmem_rsp_valid;
  logic [511:0] inst;
  logic [7:0] mmio_addr;
  logic [63:0] mmio_wdata, mmio_rdata;
  logic [ADDR_W-1:0] hmem_addr;
  logic [LINE_BITS-1:0] hmem_wdata, hmem_rsp_data;
  int checks = 0, failures = 0;

  cxl_controller dut (.*);

  always #0.5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LINE_BITS-1:0] mem_data(logic [ADDR_W-1:0] a);
    return {16{32'(a) ^ 32'hDEAD_0000}};
  endfunction

  // destination models
  int n_inst = 0, n_mmio = 0, n_hmem = 0;
  logic [511:0] last_inst;
  logic [7:0] last_mmio_addr;
  logic last_mmio_we;
  logic [63:0] last_mmio_wdata;
  logic [ADDR_W-1:0] last_hmem_addr;
  logic last_hmem_we;
  logic [LINE_BITS-1:0] last_hmem_wdata;
  int rd_delay = -1;
  logic [ADDR_W-1:0] rd_addr;

  assign mmio_rdata = {56'h0123_4567_89AB_CD, mmio_addr};
  always @(negedge clk) begin
    inst_ready <= ($urandom % 3) == 0;
    hmem_ready <= ($urandom % 3) == 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (inst_valid && inst_ready) begin n_inst++; last_inst = inst; end
    if (mmio_valid) begin
      n_mmio++; last_mmio_addr = mmio_addr; last_mmio_we = mmio_we; last_mmio_wdata = mmio_wdata;
    end
    if (hmem_valid && hmem_ready) begin
      n_hmem++; last_hmem_addr = hmem_addr; last_hmem_we = hmem_we; last_hmem_wdata = hmem_wdata;
      if (!hmem_we) begin rd_delay = 1 + int'($urandom % 10); rd_addr = hmem_addr; end
    end
  end
  always @(negedge clk) begin
    hmem_rsp_valid <= 1'b0;
    if (rd_delay == 0) begin
      hmem_rsp_valid <= 1'b1;
      hmem_rsp_data  <= mem_data(rd_addr);
    end
    if (rd_delay >= 0) rd_delay--;
  end

  initial begin
    int kinds [4] = '{0, 0, 0, 0};
    m2s_valid = 0; m2s_op = M2S_MEM_RD; m2s_addr = 0; m2s_data = 0; m2s_ndp = 0; s2m_ready = 0;
    hmem_rsp_valid = 0; hmem_rsp_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      int kind, i0, m0, h0, wait_cyc;
      logic [63:0] a;
      logic [LINE_BITS-1:0] d;
      m2s_op_e op;
      kind = int'($urandom % 4);   // 0 inst, 1 mmio, 2 memory write, 3 memory read
      kinds[kind]++;
      for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom;
      case (kind)
        0: begin op = M2S_MEM_WR; a = 64'($urandom); end
        1: begin op = ($urandom % 2) ? M2S_MEM_WR : M2S_MEM_RD; a = MMIO_BASE + 64'($urandom % 4 * 8); end
        2: begin op = M2S_MEM_WR; a = {25'd0, $urandom % 32'h7FFF_FFFF, 7'($urandom)}; end
        default: begin op = M2S_MEM_RD; a = {25'd0, $urandom % 32'h7FFF_FFFF, 7'($urandom)}; end
      endcase
      i0 = n_inst; m0 = n_mmio; h0 = n_hmem;
      @(negedge clk);
      m2s_valid = 1; m2s_op = op; m2s_addr = a; m2s_data = d; m2s_ndp = (kind == 0);
      @(posedge clk);
      while (!m2s_ready) @(posedge clk);
      @(negedge clk);
      m2s_valid = 0; m2s_ndp = 0;
      while (!s2m_valid) @(negedge clk);
      // hold off the response a few cycles: it must stay put
      wait_cyc = int'($urandom % 3);
      repeat (wait_cyc) begin
        @(negedge clk);
        checks++;
        if (!s2m_valid) begin failures++; $display("response dropped before s2m_ready"); end
      end
      checks++;
      if ((n_inst - i0) + (n_mmio - m0) + (n_hmem - h0) != 1) begin
        failures++; $display("request %0d routed %0d/%0d/%0d times", t, n_inst - i0, n_mmio - m0, n_hmem - h0);
      end
      checks++;
      case (kind)
        0: if (n_inst == i0 || last_inst !== d || s2m_op != S2M_NDR) begin failures++; $display("instruction wrong"); end
        1: if (n_mmio == m0 || last_mmio_addr !== a[7:0] || last_mmio_we !== (op == M2S_MEM_WR) ||
               (op == M2S_MEM_WR && last_mmio_wdata !== d[63:0]) ||
               s2m_op != ((op == M2S_MEM_WR) ? S2M_NDR : S2M_DRS) ||
               (op == M2S_MEM_RD && s2m_data !== {448'd0, 56'h0123_4567_89AB_CD, a[7:0]})) begin
             failures++; $display("mmio access wrong");
           end
        2: if (n_hmem == h0 || !last_hmem_we || last_hmem_addr !== {a[ADDR_W-1:6], 6'd0} ||
               last_hmem_wdata !== d || s2m_op != S2M_NDR) begin failures++; $display("memory write wrong"); end
        default: if (n_hmem == h0 || last_hmem_we || last_hmem_addr !== {a[ADDR_W-1:6], 6'd0} ||
               s2m_op != S2M_DRS || s2m_data !== mem_data({a[ADDR_W-1:6], 6'd0})) begin
             failures++; $display("memory read wrong");
           end
      endcase
      s2m_ready = 1;
      @(negedge clk);
      s2m_ready = 0;
    end
    $display("instructions=%0d mmio=%0d memory writes=%0d memory reads=%0d", kinds[0], kinds[1], kinds[2], kinds[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
