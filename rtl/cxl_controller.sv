// cxl_controller: the device end of the host link, at the level of CXL.mem
// requests and responses (link and transaction layers, flit packing and
// credits are outside this block). It serves one host request at a time:
//  * a write (request with data, RwD) whose NDP flag is set carries a 64-byte
//    NDP instruction: it is queued in the NDP controller's instruction buffer;
//  * any access at or above MMIO_BASE goes to the memory-mapped registers;
//  * every other read or write is a 64-byte access to device memory through
//    the regular DRAM buffer.
// Writes are completed with a no-data response (NDR), reads with a data
// response (DRS). The NDP flag is a separate input standing for the reserved
// flit bits the paper uses; which bits those are is not given. Identifying NDP
// instructions by that flag and forwarding them to the instruction buffer
// follows the paper; the register window and the one-request-at-a-time
// service are this design's choices.
module cxl_controller
  import monde_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // host side
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
  // to the NDP controller
  output logic                 inst_valid,
  input  logic                 inst_ready,
  output logic [511:0]         inst,
  output logic                 mmio_valid,
  output logic                 mmio_we,
  output logic [7:0]           mmio_addr,
  output logic [63:0]          mmio_wdata,
  input  logic [63:0]          mmio_rdata,
  output logic                 hmem_valid,
  input  logic                 hmem_ready,
  output logic                 hmem_we,
  output logic [ADDR_W-1:0]    hmem_addr,
  output logic [LINE_BITS-1:0] hmem_wdata,
  input  logic                 hmem_rsp_valid,
  input  logic [LINE_BITS-1:0] hmem_rsp_data
);
  typedef enum logic [2:0] {C_IDLE, C_INST, C_MMIO, C_MEM, C_MEMRD, C_RESP} cstate_e;
  cstate_e     st;
  m2s_op_e     op;
  logic [63:0] addr;
  logic [LINE_BITS-1:0] data;

  assign m2s_ready  = (st == C_IDLE);
  assign inst_valid = (st == C_INST);
  assign inst       = data;
  assign mmio_valid = (st == C_MMIO);
  assign mmio_we    = (op == M2S_MEM_WR);
  assign mmio_addr  = addr[7:0];
  assign mmio_wdata = data[63:0];
  assign hmem_valid = (st == C_MEM);
  assign hmem_we    = (op == M2S_MEM_WR);
  assign hmem_addr  = {addr[ADDR_W-1:6], 6'd0};
  assign hmem_wdata = data;
  assign s2m_valid  = (st == C_RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= C_IDLE;
      op       <= M2S_MEM_RD;
      addr     <= '0;
      data     <= '0;
      s2m_op   <= S2M_NDR;
      s2m_data <= '0;
    end else begin
      unique case (st)
        C_IDLE: if (m2s_valid) begin
          op   <= m2s_op;
          addr <= m2s_addr;
          data <= m2s_data;
          if (m2s_op == M2S_MEM_WR && m2s_ndp) st <= C_INST;
          else if (m2s_addr >= MMIO_BASE)      st <= C_MMIO;
          else                                  st <= C_MEM;
        end
        C_INST: if (inst_ready) begin
          s2m_op <= S2M_NDR;
          st     <= C_RESP;
        end
        C_MMIO: begin
          s2m_op   <= (op == M2S_MEM_WR) ? S2M_NDR : S2M_DRS;
          s2m_data <= {448'd0, mmio_rdata};
          st       <= C_RESP;
        end
        C_MEM: if (hmem_ready) begin
          if (op == M2S_MEM_WR) begin
            s2m_op <= S2M_NDR;
            st     <= C_RESP;
          end else st <= C_MEMRD;
        end
        C_MEMRD: if (hmem_rsp_valid) begin
          s2m_op   <= S2M_DRS;
          s2m_data <= hmem_rsp_data;
          st       <= C_RESP;
        end
        C_RESP: if (s2m_ready) st <= C_IDLE;
        default: st <= C_IDLE;
      endcase
    end
  end
endmodule
