// tb_mmap_regs: exercises the memory-mapped register block the host polls.
// A reference model kept here tracks DONE (set by a finished kernel, cleared
// by a host write of 0 to bit 0, with a finishing kernel winning over a
// clear in the same cycle), COMPLETED and ERRORS (counters) and STATUS
// ({instruction count, busy}). Random kernel_done, kernel_reject, busy and
// count inputs and random register reads and writes run for several thousand
// cycles; reads are combinational and are checked in the same cycle,
// DONE's output and the counters one cycle after each event.
module tb_mmap_regs;
  import monde_pkg::*;

  logic clk = 0, rst_n = 0;
  logic kernel_done, kernel_reject, busy, mmio_valid, mmio_we, done;
  logic [7:0] inst_count, mmio_addr;
  logic [63:0] mmio_wdata, mmio_rdata;
  int checks = 0, failures = 0;

  mmap_regs dut (.*);

  always #0.5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic m_done;
    longint m_completed, m_errors;
    logic [63:0] expect_rd;
    logic [7:0] addrs [5];
    int n_clear = 0, n_collide = 0;
    addrs = '{REG_DONE, REG_STATUS, REG_COMPLETED, REG_ERRORS, 8'h20};
    {kernel_done, kernel_reject, busy, mmio_valid, mmio_we} = '0;
    inst_count = 0; mmio_addr = 0; mmio_wdata = 0;
    m_done = 0; m_completed = 0; m_errors = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      kernel_done   = ($urandom % 10) == 0;
      kernel_reject = ($urandom % 15) == 0;
      busy          = $urandom;
      inst_count    = 8'($urandom % 17);
      mmio_valid    = $urandom;
      mmio_we       = ($urandom % 3) == 0;
      mmio_addr     = addrs[$urandom % 5];
      mmio_wdata    = {$urandom, $urandom};
      if (($urandom % 2) == 0) mmio_wdata[0] = 1'b0;
      #0.1;
      case (mmio_addr)
        REG_DONE:      expect_rd = {63'd0, m_done};
        REG_STATUS:    expect_rd = {48'd0, inst_count, 7'd0, busy};
        REG_COMPLETED: expect_rd = 64'(m_completed);
        REG_ERRORS:    expect_rd = 64'(m_errors);
        default:       expect_rd = '0;
      endcase
      checks++;
      if (mmio_rdata !== expect_rd) begin
        failures++;
        if (failures < 10) $display("read %h = %h expected %h", mmio_addr, mmio_rdata, expect_rd);
      end
      checks++;
      if (done !== m_done) begin failures++; $display("done output wrong"); end
      // model update at the coming edge
      if (kernel_done) begin
        m_done = 1;
        m_completed++;
        if (mmio_valid && mmio_we && mmio_addr == REG_DONE && !mmio_wdata[0]) n_collide++;
      end else if (mmio_valid && mmio_we && mmio_addr == REG_DONE && !mmio_wdata[0]) begin
        m_done = 0;
        n_clear++;
      end
      if (kernel_reject) m_errors++;
    end
    $display("clears=%0d clear/done collisions=%0d completed=%0d errors=%0d", n_clear, n_collide, m_completed, m_errors);
    checks++; if (n_clear == 0 || n_collide == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
