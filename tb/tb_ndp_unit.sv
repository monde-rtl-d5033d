// tb_ndp_unit: pushes random integer-valued 4 x K activation and K x 4 weight
// tiles through one NDP unit, with random input gaps and random output-ready
// delays, with and without ReLU. The expected bf16 outputs are integer dot
// products rounded by the reference. With no gaps, the result must appear
// K + 2*ARR cycles after the first step is pushed.
module tb_ndp_unit;
  import monde_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, in_first, in_last, relu, out_valid, out_ready;
  bf16_t in_a [ARR], in_b [ARR];
  bf16_t out_c [ARR][ARR];
  int checks = 0, failures = 0, stalls = 0;

  ndp_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int A [ARR][$];
  int B [$][ARR];

  initial begin
    int K, cyc, t_first, lat, gaps;
    in_valid = 0; in_first = 0; in_last = 0; relu = 0; out_ready = 0;
    for (int i = 0; i < ARR; i++) begin in_a[i] = 0; in_b[i] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 16; t++) begin
      K    = 1 + int'($urandom % 60);
      gaps = (t % 2);
      relu = 1'(t % 3 == 1);
      for (int i = 0; i < ARR; i++) begin
        A[i].delete();
        for (int k = 0; k < K; k++) A[i].push_back(int'($urandom % 41) - 20);
      end
      B.delete();
      for (int k = 0; k < K; k++) begin
        int row [ARR];
        for (int j = 0; j < ARR; j++) row[j] = int'($urandom % 41) - 20;
        B.push_back(row);
      end
      fork
        begin : drive
          for (int k = 0; k < K; k++) begin
            @(negedge clk);
            while (gaps && ($urandom % 3 == 0)) begin in_valid = 0; @(negedge clk); end
            in_valid = 1; in_first = (k == 0); in_last = (k == K - 1);
            for (int i = 0; i < ARR; i++) in_a[i] = int_to_bf16(A[i][k]);
            for (int j = 0; j < ARR; j++) in_b[j] = int_to_bf16(B[k][j]);
            #1;
            while (!in_ready) begin stalls++; @(negedge clk); #1; end
            @(posedge clk);
          end
          @(negedge clk); in_valid = 0;
        end
        begin : watch
          cyc = 0; t_first = -1;
          @(negedge clk);     // the push of step 0 happens at the next posedge
          @(posedge clk);
          while (!out_valid) begin
            @(negedge clk); cyc++;
          end
        end
      join
      lat = cyc;
      if (!gaps) begin
        checks++;
        if (lat != K + 2 * ARR) begin failures++; $display("tile %0d latency %0d expected %0d", t, lat, K + 2*ARR); end
      end
      repeat ($urandom % 4) @(negedge clk);
      for (int i = 0; i < ARR; i++)
        for (int j = 0; j < ARR; j++) begin
          longint s;
          bf16_t e;
          s = 0;
          for (int k = 0; k < K; k++) s += A[i][k] * B[k][j];
          e = (relu && s < 0) ? 16'h0 : int_to_bf16(s);
          checks++;
          if (out_c[i][j] !== e && !(s == 0 && out_c[i][j][14:0] == 0)) begin
            failures++; $display("tile %0d C[%0d][%0d]=%h expected %h", t, i, j, out_c[i][j], e);
          end
        end
      @(negedge clk); out_ready = 1; @(negedge clk); out_ready = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
