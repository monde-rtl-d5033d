// monde_device: top level of the near-data MoE expert device. The host sends
// CXL.mem requests: 64-byte writes and reads of device memory (input
// activations in, output activations out), 64-byte NDP instructions marked
// with the NDP flag, and accesses to the memory-mapped registers (the done
// register). The CXL controller routes them; the NDP controller queues and
// decodes instructions, generates the memory reads that fill the scratchpad
// with activation tiles and stream expert weight rows, and issues one NDP
// request per 4 x 256 output tile to the NDP core (64 units of 4 x 4 bf16 MAC
// arrays), whose output rows it writes back before raising done. The memory
// controller spreads each 512-byte beat over the 8 DRAM channels, whose ports
// are brought out: the LPDDR devices themselves are outside the design.
// Port timing: every host request gets exactly one response; channel ports
// take a request when valid and ready are both high and return read data in
// order, one 64-byte burst per request, without backpressure.
module monde_device
  import monde_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // host (CXL.mem level)
  input  logic                 m2s_valid,
  output logic                 m2s_ready,
  input  m2s_op_e              m2s_op,
  input  logic [63:0]          m2s_addr,
  input  logic [LINE_BITS-1:0] m2s_data,
  input  logic                 m2s_ndp,
  output logic                 s2m_valid,
  input  logic                 s2m_ready,
  output s2m_op_e              s2m_op,
  output logic [LINE_BITS-1:0] s2m_data,
  output logic                 done,
  // DRAM channels
  output logic                 ch_req_valid [NCH],
  input  logic                 ch_req_ready [NCH],
  output logic                 ch_req_we    [NCH],
  output dram_addr_t           ch_req_addr  [NCH],
  output logic [CH_BITS-1:0]   ch_req_wdata [NCH],
  output logic [COLS_PER_BEAT-1:0] ch_req_wmask [NCH],
  input  logic                 ch_rsp_valid [NCH],
  input  logic [CH_BITS-1:0]   ch_rsp_rdata [NCH]
);
  logic                 inst_valid, inst_ready;
  logic [511:0]         inst;
  logic                 mmio_valid, mmio_we;
  logic [7:0]           mmio_addr;
  logic [63:0]          mmio_wdata, mmio_rdata;
  logic                 hmem_valid, hmem_ready, hmem_we, hmem_rsp_valid;
  logic [ADDR_W-1:0]    hmem_addr;
  logic [LINE_BITS-1:0] hmem_wdata, hmem_rsp_data;

  logic                 mem_req_valid, mem_req_ready, mem_rsp_valid, mem_rsp_ready;
  mem_req_t             mem_req;
  logic [BEAT_BITS-1:0] mem_wdata, mem_rsp_rdata;

  logic                 core_req_valid, core_req_ready;
  ndp_req_t             core_req;
  logic                 spad_we;
  logic [SPAD_AW-1:0]   spad_waddr;
  logic [BEAT_BITS-1:0] spad_wdata, b_data, core_wr_data;
  logic                 b_valid, b_ready, core_wr_valid, core_wr_ready, tile_done, core_busy;
  logic [ADDR_W-1:0]    core_wr_addr;

  cxl_controller u_cxl (
    .clk, .rst_n,
    .m2s_valid, .m2s_ready, .m2s_op, .m2s_addr, .m2s_data, .m2s_ndp,
    .s2m_valid, .s2m_ready, .s2m_op, .s2m_data,
    .inst_valid, .inst_ready, .inst,
    .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rdata,
    .hmem_valid, .hmem_ready, .hmem_we, .hmem_addr, .hmem_wdata,
    .hmem_rsp_valid, .hmem_rsp_data
  );

  ndp_controller u_ctrl (
    .clk, .rst_n,
    .inst_valid, .inst_ready, .inst,
    .mmio_valid, .mmio_we, .mmio_addr, .mmio_wdata, .mmio_rdata,
    .hmem_valid, .hmem_ready, .hmem_we, .hmem_addr, .hmem_wdata,
    .hmem_rsp_valid, .hmem_rsp_data,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_wdata,
    .mem_rsp_valid, .mem_rsp_ready, .mem_rsp_rdata,
    .core_req_valid, .core_req_ready, .core_req,
    .spad_we, .spad_waddr, .spad_wdata,
    .b_valid, .b_ready, .b_data,
    .core_wr_valid, .core_wr_ready, .core_wr_addr, .core_wr_data,
    .tile_done, .done
  );

  ndp_core u_core (
    .clk, .rst_n,
    .req_valid(core_req_valid), .req_ready(core_req_ready), .req(core_req),
    .spad_we, .spad_waddr, .spad_wdata,
    .b_valid, .b_ready, .b_data,
    .wr_valid(core_wr_valid), .wr_ready(core_wr_ready), .wr_addr(core_wr_addr), .wr_data(core_wr_data),
    .tile_done, .busy(core_busy)
  );

  mem_ctrl u_mem (
    .clk, .rst_n,
    .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req), .req_wdata(mem_wdata),
    .rsp_valid(mem_rsp_valid), .rsp_ready(mem_rsp_ready), .rsp_rdata(mem_rsp_rdata),
    .ch_req_valid, .ch_req_ready, .ch_req_we, .ch_req_addr, .ch_req_wdata, .ch_req_wmask,
    .ch_rsp_valid, .ch_rsp_rdata
  );
endmodule
