// tb_vec_unit: random fp32 tiles through the vector unit with and without
// ReLU; the expected bf16 is computed by rounding the real value of each input
// with the reference integer rounding on its significand. Also checks the
// valid/ready hold behaviour.
module tb_vec_unit;
  import monde_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic capture, relu, out_valid, out_ready;
  fp32_t acc [4][4];
  bf16_t out_c [4][4];
  int checks = 0, failures = 0;
  int relu_zeroed = 0;

  vec_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // expected bf16 of a normal fp32: round its 24-bit significand to 8 bits
  function automatic bf16_t ref_bf16(fp32_t f, logic r);
    logic [15:0] h;
    longint sig;
    if (r && f[31]) return 16'h0;
    sig = longint'({1'b1, f[22:0]});
    h = int_to_bf16(f[31] ? -sig : sig);         // value sig * 2^0, exponent 127+23
    h[14:7] = h[14:7] + f[30:23] - 8'd150;        // rescale to the real exponent
    return h;
  endfunction

  initial begin
    capture = 0; relu = 0; out_ready = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          acc[i][j] = {1'($urandom), 8'(100 + $urandom % 50), 23'($urandom)};
          if ($urandom % 8 == 0) acc[i][j][15:0] = 16'h8000;   // exact ties
        end
      relu = 1'($urandom);
      capture = 1;
      @(negedge clk);
      capture = 0;
      repeat ($urandom % 3) begin
        @(negedge clk);
      end
      checks++;
      if (!out_valid) begin failures++; $display("valid dropped before ready"); end
      for (int i = 0; i < 4; i++)
        for (int j = 0; j < 4; j++) begin
          checks++;
          if (out_c[i][j] !== ref_bf16(acc[i][j], relu)) begin
            failures++; $display("t%0d [%0d][%0d] %h -> %h expected %h", t, i, j, acc[i][j], out_c[i][j], ref_bf16(acc[i][j], relu));
          end
          if (relu && acc[i][j][31]) relu_zeroed++;
        end
      out_ready = 1;
      @(negedge clk);
      out_ready = 0;
      checks++;
      if (out_valid) begin failures++; $display("valid not cleared"); end
    end
    checks++;
    if (relu_zeroed == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
