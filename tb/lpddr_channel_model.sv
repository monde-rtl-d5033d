// lpddr_channel_model: behavioural model of one LPDDR memory channel, for
// simulation only (not synthesizable). It stores 8-byte column words sparsely
// in an associative array indexed by {row, bank, bank group, rank, column}.
// A request moves 8 consecutive columns (64 bytes) starting at req_addr.co;
// writes update the columns whose mask bit is set, reads are evaluated when
// accepted and their data returns LAT cycles later, in order, without
// backpressure. With STALL set, req_ready drops at random. Timing parameters
// of real LPDDR (activate, precharge, refresh) are not modelled. Tasks
// poke/peek give backdoor access for preloading and checking.
module lpddr_channel_model
  import monde_pkg::*;
#(
  parameter int LAT   = 20,
  parameter bit STALL = 1'b0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     req_valid,
  output logic                     req_ready,
  input  logic                     req_we,
  input  dram_addr_t               req_addr,
  input  logic [CH_BITS-1:0]       req_wdata,
  input  logic [COLS_PER_BEAT-1:0] req_wmask,
  output logic                     rsp_valid,
  output logic [CH_BITS-1:0]       rsp_rdata
);
  typedef struct {
    longint             due;
    logic [CH_BITS-1:0] data;
  } pend_t;

  logic [63:0] mem [logic [32:0]];
  pend_t       pend [$];
  longint      cycle = 0;
  int          reads = 0, writes = 0;

  function automatic logic [63:0] peek(logic [32:0] key);
    return mem.exists(key) ? mem[key] : 64'd0;
  endfunction

  task automatic poke(logic [32:0] key, logic [63:0] data);
    mem[key] = data;
  endtask

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
      req_ready <= 1'b1;
      pend.delete();
    end else begin
      pend_t p;
      cycle++;
      rsp_valid <= 1'b0;
      if (pend.size() > 0 && pend[0].due <= cycle) begin
        rsp_valid <= 1'b1;
        rsp_rdata <= pend[0].data;
        void'(pend.pop_front());
      end
      if (req_valid && req_ready) begin
        logic [32:0] base;
        base = req_addr;
        if (req_we) begin
          writes++;
          for (int j = 0; j < COLS_PER_BEAT; j++)
            if (req_wmask[j]) mem[base + 33'(j)] = req_wdata[j*64 +: 64];
        end else begin
          reads++;
          p.due = cycle + LAT;
          for (int j = 0; j < COLS_PER_BEAT; j++) p.data[j*64 +: 64] = peek(base + 33'(j));
          pend.push_back(p);
        end
      end
      req_ready <= STALL ? ($urandom % 4 != 0) : 1'b1;
    end
  end
endmodule
