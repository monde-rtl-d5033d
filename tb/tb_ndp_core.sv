// tb_ndp_core: the NDP core with 4 units (tiles of 4 x 16, segments of 16
// k-steps). For each tile the testbench writes an integer-valued activation
// tile into the scratchpad half named by the request, streams the weight rows
// with random gaps, collects the output-row writes and compares every element
// with the integer product rounded to bf16 (ReLU applied where requested).
// Partial tiles (row_mask) must write only their rows.
module tb_ndp_core;
  import monde_pkg::*;
  import tb_fp_pkg::*;
  localparam int NU = 4, BW = NU * ARR * 16, SEG = NU * ARR;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, spad_we, b_valid, b_ready, wr_valid, wr_ready, tile_done, busy;
  ndp_req_t req;
  logic [SPAD_AW-1:0] spad_waddr;
  logic [BW-1:0] spad_wdata, b_data, wr_data;
  logic [ADDR_W-1:0] wr_addr;
  int checks = 0, failures = 0, relu_clamped = 0, b_stalls = 0;

  ndp_core #(.N_UNITS(NU)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int A [ARR][$];
  int B [$][SEG];

  initial begin
    int nseg, K, rows;
    req_valid = 0; spad_we = 0; b_valid = 0; wr_ready = 0; req = '0; spad_waddr = 0; spad_wdata = 0; b_data = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      nseg = 1 + int'($urandom % 3);
      K = nseg * SEG;
      // activation tile into the scratchpad
      for (int r = 0; r < ARR; r++) begin
        A[r].delete();
        for (int k = 0; k < K; k++) A[r].push_back(int'($urandom % 21) - 10);
      end
      req = '0;
      req.half = 1'(t % 2); req.nseg = 7'(nseg); req.relu = 1'(t % 3 == 2);
      req.row_mask = (t < 3) ? 4'hF : 4'($urandom) | 4'h1;
      req.c_addr = 39'h1_0000 * t; req.n = 16'(SEG * 2);
      for (int s = 0; s < nseg; s++)
        for (int r = 0; r < ARR; r++) begin
          @(negedge clk);
          spad_we = 1; spad_waddr = {req.half, 6'(s), 2'(r)};
          for (int e = 0; e < SEG; e++) spad_wdata[e*16 +: 16] = int_to_bf16(A[r][s*SEG + e]);
        end
      @(negedge clk); spad_we = 0;
      B.delete();
      for (int k = 0; k < K; k++) begin
        int row [SEG];
        for (int j = 0; j < SEG; j++) row[j] = int'($urandom % 21) - 10;
        B.push_back(row);
      end
      req_valid = 1;
      @(posedge clk); @(negedge clk); req_valid = 0;
      fork
        begin
          for (int k = 0; k < K; k++) begin
            while ($urandom % 5 == 0) begin b_valid = 0; @(negedge clk); end
            b_valid = 1;
            for (int j = 0; j < SEG; j++) b_data[j*16 +: 16] = int_to_bf16(B[k][j]);
            #1;
            while (!b_ready) begin b_stalls++; @(negedge clk); #1; end
            @(negedge clk);
          end
          b_valid = 0;
        end
        begin
          rows = 0;
          while (!tile_done) begin
            @(negedge clk);
            wr_ready = 1'($urandom);
            #1;
            if (wr_valid && wr_ready) begin
              int r;
              r = int'((wr_addr - req.c_addr) / (2 * req.n));
              checks++;
              if (r >= ARR || !req.row_mask[r]) begin failures++; $display("write to row %0d not in mask", r); r = 0; end
              for (int j = 0; j < SEG; j++) begin
                longint s;
                bf16_t e;
                s = 0;
                for (int k = 0; k < K; k++) s += A[r][k] * B[k][j];
                e = (req.relu && s < 0) ? 16'h0 : int_to_bf16(s);
                if (req.relu && s < 0) relu_clamped++;
                checks++;
                if (wr_data[j*16 +: 16] !== e && !(s == 0 && wr_data[j*16 + 14 -: 15] == 0)) begin
                  failures++; $display("tile %0d C[%0d][%0d]=%h expected %h", t, r, j, wr_data[j*16 +: 16], e);
                end
              end
              rows++;
            end
          end
          wr_ready = 0;
          checks++;
          if (rows != $countones(req.row_mask)) begin failures++; $display("tile %0d: %0d rows written", t, rows); end
        end
      join
      @(negedge clk);
    end
    checks++;
    if (relu_clamped == 0 || b_stalls == 0) begin failures++; $display("relu or stall not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
