// mmap_regs: the memory-mapped registers of the NDP controller that the host
// reads over CXL. DONE (offset 0x00) bit 0 is set each time a kernel finishes
// and is cleared by a host write with bit 0 = 0; COMPLETED (0x10) and ERRORS
// (0x18) count finished and rejected instructions; STATUS (0x08) shows the
// busy flag in bit 0 and the instruction-buffer fill level in bits 15:8.
// Register reads are combinational, writes take effect at the clock edge.
// The paper gives only the done register; the others and the offsets are this
// design's.
module mmap_regs
  import monde_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        kernel_done,
  input  logic        kernel_reject,
  input  logic        busy,
  input  logic [7:0]  inst_count,
  input  logic        mmio_valid,
  input  logic        mmio_we,
  input  logic [7:0]  mmio_addr,
  input  logic [63:0] mmio_wdata,
  output logic [63:0] mmio_rdata,
  output logic        done
);
  logic [63:0] completed, errors;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done      <= 1'b0;
      completed <= '0;
      errors    <= '0;
    end else begin
      if (kernel_done) begin
        done      <= 1'b1;
        completed <= completed + 64'd1;
      end else if (mmio_valid && mmio_we && mmio_addr == REG_DONE && !mmio_wdata[0]) begin
        done <= 1'b0;
      end
      if (kernel_reject) errors <= errors + 64'd1;
    end
  end

  always_comb begin
    unique case (mmio_addr)
      REG_DONE:      mmio_rdata = {63'd0, done};
      REG_STATUS:    mmio_rdata = {48'd0, inst_count, 7'd0, busy};
      REG_COMPLETED: mmio_rdata = completed;
      REG_ERRORS:    mmio_rdata = errors;
      default:       mmio_rdata = '0;
    endcase
  end
endmodule
