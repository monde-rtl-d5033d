// tb_mac_array: the testbench itself skews integer-valued 4 x K and K x 4
// operand tiles (lane i delayed i cycles), feeds them to the array and checks
// all 16 accumulators bit for bit against integer dot products, and that
// 'done' is high K + ROWS + COLS - 2 cycles after the cycle in which the first
// step is presented.
module tb_mac_array;
  import monde_pkg::*;
  import tb_fp_pkg::*;
  localparam int R = 4, C = 4;
  logic clk = 0, rst_n = 0;
  bf16_t a_in [R], b_in [C];
  logic v_in [R], first_in [R], last_in [R];
  fp32_t acc [R][C];
  logic done;
  int checks = 0, failures = 0;

  mac_array #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int A [R][$];
  int B [$][C];

  initial begin
    int K, t0, tdone;
    for (int i = 0; i < R; i++) begin a_in[i] = 0; v_in[i] = 0; first_in[i] = 0; last_in[i] = 0; end
    for (int j = 0; j < C; j++) b_in[j] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      K = 1 + int'($urandom % 70);
      for (int i = 0; i < R; i++) begin
        A[i].delete();
        for (int k = 0; k < K; k++) A[i].push_back(int'($urandom % 31) - 15);
      end
      B.delete();
      for (int k = 0; k < K; k++) begin
        int row [C];
        for (int j = 0; j < C; j++) row[j] = int'($urandom % 31) - 15;
        B.push_back(row);
      end
      tdone = -1;
      for (int c = 0; c < K + R + C + 4; c++) begin
        @(negedge clk);
        if (done && tdone < 0) tdone = c;
        for (int i = 0; i < R; i++) begin
          int k;
          k = c - i;
          v_in[i] = (k >= 0 && k < K);
          first_in[i] = (k == 0);
          last_in[i] = (k == K - 1);
          a_in[i] = v_in[i] ? int_to_bf16(A[i][k]) : 16'h0;
        end
        for (int j = 0; j < C; j++) begin
          int k;
          k = c - j;
          b_in[j] = (k >= 0 && k < K) ? int_to_bf16(B[k][j]) : 16'h0;
        end
      end
      // first step entered at c = 0; done is sampled at negedge of cycle c
      checks++;
      if (tdone != K + R + C - 2) begin
        failures++; $display("tile %0d: done at %0d, expected %0d", t, tdone, K + R + C - 2);
      end
      for (int i = 0; i < R; i++)
        for (int j = 0; j < C; j++) begin
          longint s;
          s = 0;
          for (int k = 0; k < K; k++) s += A[i][k] * B[k][j];
          checks++;
          if (acc[i][j] !== int_to_fp32(s) && !(s == 0 && acc[i][j][30:0] == 0)) begin
            failures++; $display("tile %0d C[%0d][%0d]=%h expected %h", t, i, j, acc[i][j], int_to_fp32(s));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
