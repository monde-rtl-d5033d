// tb_scratchpad: random writes and reads against an associative-array model,
// checking one-cycle read latency and that a read without 're' holds rdata.
module tb_scratchpad;
  localparam int D = 512, W = 4096;
  logic clk = 0;
  logic we, re;
  logic [8:0] waddr, raddr;
  logic [W-1:0] wdata, rdata, model [int];
  logic [W-1:0] exp_q;
  logic exp_v;
  int checks = 0, failures = 0;

  scratchpad #(.DEPTH(D), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0; exp_v = 0;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 9'(a);
      for (int w = 0; w < W / 32; w++) wdata[w*32 +: 32] = $urandom;
      model[a] = wdata;
    end
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      if (exp_v) begin
        checks++;
        if (rdata !== exp_q) begin failures++; $display("read mismatch at cycle %0d", c); end
      end
      we = 1'($urandom); waddr = 9'($urandom);
      for (int w = 0; w < W / 32; w++) wdata[w*32 +: 32] = $urandom;
      re = 1'($urandom % 4 != 0); raddr = 9'($urandom);
      if (re) begin exp_q = model[int'(raddr)]; exp_v = 1; end
      if (we) model[int'(waddr)] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
