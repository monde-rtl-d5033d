// tb_simd_ctrl: the SIMD controller with 2 units (segments of 8 k-steps)
// against a scratchpad model and a model of the units. Every broadcast step
// is checked against the activation column the scratchpad holds (masked rows
// must read zero), the weight slices of the current beat and the first/last
// flags; units stall at random. The model units then return random results,
// and the output writes (address per row, data, skipped rows) and the
// tile_done pulse are checked. Also checks one step per cycle while nothing
// stalls (6 idle cycles between segments).
module tb_simd_ctrl;
  import monde_pkg::*;
  localparam int NU = 2, BW = NU * ARR * 16, SEG = NU * ARR;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, b_valid, b_ready, spad_re;
  ndp_req_t req;
  logic [BW-1:0] b_data, spad_rdata, wr_data;
  logic [SPAD_AW-1:0] spad_raddr;
  logic unit_valid, unit_first, unit_last, unit_relu, unit_out_ready;
  logic [NU-1:0] unit_ready, unit_out_valid;
  bf16_t unit_a [ARR];
  bf16_t unit_b [NU][ARR];
  bf16_t unit_out_c [NU][ARR][ARR];
  logic wr_valid, wr_ready, tile_done, busy;
  logic [ADDR_W-1:0] wr_addr;
  int checks = 0, failures = 0, stall_cycles = 0;
  logic [BW-1:0] spad [512];
  logic stall_en;

  simd_ctrl #(.N_UNITS(NU)) dut (.*);
  always #5 clk = ~clk;

  always_ff @(posedge clk) if (spad_re) spad_rdata <= spad[spad_raddr];

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nseg, K, step, wrows, t0, t1;
    logic [BW-1:0] beats [$];
    req_valid = 0; b_valid = 0; b_data = 0; unit_ready = '1; unit_out_valid = '0; wr_ready = 0;
    stall_en = 0;
    for (int u = 0; u < NU; u++) for (int i = 0; i < ARR; i++) for (int j = 0; j < ARR; j++) unit_out_c[u][i][j] = 0;
    for (int a = 0; a < 512; a++) for (int w = 0; w < BW / 32; w++) spad[a][w*32 +: 32] = $urandom;
    req = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      nseg = 1 + int'($urandom % 3);
      K = nseg * SEG;
      stall_en = (t % 2 == 1);
      @(negedge clk);
      req.half = 1'($urandom); req.nseg = 7'(nseg); req.relu = 1'($urandom);
      req.row_mask = (t == 0) ? 4'hF : 4'($urandom) | 4'h1;
      req.c_addr = ADDR_W'({$urandom, 9'd0}) & 39'h7F_FFFF_FE00; req.n = 16'(SEG * (1 + $urandom % 4));
      req_valid = 1;
      #1;
      checks++; if (!req_ready) begin failures++; $display("req not accepted when idle"); end
      @(posedge clk);
      @(negedge clk); req_valid = 0;
      beats.delete();
      for (int k = 0; k < K; k++) begin
        logic [BW-1:0] bb;
        for (int w = 0; w < BW / 32; w++) bb[w*32 +: 32] = $urandom;
        beats.push_back(bb);
      end
      step = 0; t0 = -1; t1 = 0;
      while (step < K) begin
        b_valid = 1; b_data = beats[step];
        unit_ready = (stall_en && $urandom % 4 == 0) ? '0 : '1;
        #1;
        if (unit_valid) begin
          int s, kk;
          s = step / SEG; kk = step % SEG;
          if (t0 < 0) t0 = t1;
          checks++;
          if (!b_ready || unit_first != (step == 0) || unit_last != (step == K - 1) || unit_relu != req.relu) begin
            failures++; $display("tile %0d step %0d flags wrong", t, step);
          end
          for (int r = 0; r < ARR; r++) begin
            bf16_t e;
            e = req.row_mask[r] ? spad[{req.half, 6'(s), 2'(r)}][kk*16 +: 16] : 16'h0;
            checks++;
            if (unit_a[r] !== e) begin failures++; $display("tile %0d step %0d a[%0d]=%h expected %h", t, step, r, unit_a[r], e); end
          end
          for (int u = 0; u < NU; u++) for (int j = 0; j < ARR; j++) begin
            checks++;
            if (unit_b[u][j] !== beats[step][(u*ARR+j)*16 +: 16]) begin failures++; $display("b slice wrong"); end
          end
          step++;
        end else if (b_ready) begin
          failures++; $display("b_ready without a step");
        end
        if (unit_ready == '0) stall_cycles++;
        @(negedge clk); t1++;
      end
      b_valid = 0;
      // without stalls: K steps plus 6 cycles (wait + scratchpad reads) per segment after the first
      if (!stall_en) begin
        checks++;
        if (t1 - t0 != K + 6 * (nseg - 1)) begin failures++; $display("tile %0d stream took %0d cycles, expected %0d", t, t1 - t0, K + 6*(nseg-1)); end
      end
      // units finish at random
      repeat (1 + $urandom % 5) begin
        unit_out_valid = NU'($urandom);
        if (unit_out_valid == '1) unit_out_valid[0] = 1'b0;
        @(negedge clk);
        checks++; if (wr_valid && unit_out_valid != '1) begin failures++; $display("write before all units done"); end
      end
      unit_out_valid = '1;
      for (int u = 0; u < NU; u++) for (int i = 0; i < ARR; i++) for (int j = 0; j < ARR; j++) unit_out_c[u][i][j] = 16'($urandom);
      wrows = 0;
      for (int c = 0; c < 40 && !tile_done; c++) begin
        wr_ready = 1'($urandom);
        #1;
        if (wr_valid && wr_ready) begin
          int r;
          logic found;
          found = 0; r = 0;
          for (int rr = 0; rr < ARR; rr++)
            if (wr_addr == req.c_addr + ADDR_W'(rr * req.n * 2)) begin r = rr; found = 1; end
          checks++;
          if (!found || !req.row_mask[r]) begin failures++; $display("bad write address %h", wr_addr); end
          for (int u = 0; u < NU; u++) for (int j = 0; j < ARR; j++) begin
            checks++;
            if (wr_data[(u*ARR+j)*16 +: 16] !== unit_out_c[u][r][j]) begin failures++; $display("write data wrong"); end
          end
          wrows++;
        end
        @(negedge clk);
      end
      checks++;
      if (wrows != $countones(req.row_mask)) begin failures++; $display("tile %0d wrote %0d rows, mask %b", t, wrows, req.row_mask); end
      checks++;
      if (!tile_done || !unit_out_ready) begin failures++; $display("no tile_done"); end
      @(negedge clk);
      unit_out_valid = '0; wr_ready = 0;
      checks++; if (busy) begin failures++; $display("still busy"); end
    end
    checks++;
    if (stall_cycles == 0) begin failures++; $display("no stalls exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
