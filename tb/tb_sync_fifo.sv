// tb_sync_fifo: random push/pop traffic against a queue reference model;
// checks data order, full/empty/count, and simultaneous push and pop when full.
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  logic push, pop, full, empty;
  logic [15:0] wdata, rdata;
  logic [3:0] count;
  int checks = 0, failures = 0;
  logic [15:0] q[$];
  int full_seen = 0, both_when_full = 0;

  sync_fifo #(.W(16), .DEPTH(5)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    push = 0; pop = 0; wdata = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int c = 0; c < 4000; c++) begin
      @(negedge clk);
      checks++;
      if (count != q.size() || empty != (q.size() == 0) || full != (q.size() == 5)) begin
        failures++; $display("flags: count=%0d model=%0d", count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (rdata !== q[0]) begin failures++; $display("data %h vs %h", rdata, q[0]); end
      end
      // bias towards filling in the first half, draining in the second
      push  = ($urandom % 100) < ((c % 400) < 200 ? 80 : 30);
      pop   = ($urandom % 100) < ((c % 400) < 200 ? 30 : 80);
      if (q.size() == 0) pop = 0;
      if (q.size() == 5 && !pop) push = 0;
      wdata = 16'($urandom);
      if (full) full_seen++;
      if (full && push && pop) both_when_full++;
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push) q.push_back(wdata);
    end
    checks++;
    if (full_seen == 0 || both_when_full == 0) begin failures++; $display("full cases not reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
