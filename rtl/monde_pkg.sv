// monde_pkg: sizes, types and encodings shared by the near-data MoE expert
// accelerator. The core is 64 NDP units of 4x4 bf16 MAC arrays, which together
// produce a 4 x 256 output tile; one weight row slice of that tile (256 bf16,
// 512 bytes) is one device-memory beat, spread over 8 DRAM channels of 64 bytes.
// Unit count, array size, bf16 data, 8 channels and the 64-byte instruction with
// a 4-bit opcode and three (64-bit address, 64-bit size) operand fields follow the
// paper. The order of the instruction fields in the 512-bit word, the opcode
// values, the layout of the 124-bit auxiliary field, the DRAM field widths and
// the memory-mapped register map are this design's own choices.
package monde_pkg;

  // ---------------- NDP core geometry ----------------
  localparam int unsigned NUM_UNITS  = 64;              // NDP units (4x4 arrays)
  localparam int unsigned ARR        = 4;               // array rows = cols
  localparam int unsigned TILE_N     = NUM_UNITS * ARR; // 256 output columns per tile
  localparam int unsigned BEAT_BYTES = TILE_N * 2;      // 512 bytes of bf16
  localparam int unsigned BEAT_BITS  = BEAT_BYTES * 8;  // 4096

  // ---------------- scratchpad ----------------
  // 256 KB: 512 entries of one beat. Two halves (ping-pong between M tiles);
  // each half holds ARR rows x up to 64 segments of 256 elements (K <= 16384).
  localparam int unsigned SPAD_ENTRIES = 512;
  localparam int unsigned SPAD_AW      = 9;
  localparam int unsigned MAX_SEGS     = SPAD_ENTRIES / 2 / ARR; // 64
  localparam int unsigned MAX_K        = MAX_SEGS * TILE_N;      // 16384

  // ---------------- device memory ----------------
  localparam int unsigned NCH       = 8;     // memory channels
  localparam int unsigned CH_BITS   = BEAT_BITS / NCH; // 512 bits per channel per beat
  localparam int unsigned COLS_PER_BEAT = 8; // 8-byte columns per channel per beat
  localparam int unsigned ADDR_W    = 39;    // 512 GB device byte address
  localparam int unsigned LINE_BITS = 512;   // 64-byte host line

  // Device address map ro-ba-bg-ra-co-ch (msb to lsb) above a 3-bit byte offset
  // within the 8-byte channel word. 16+2+2+3+10+3+3 = 39 bits.
  typedef struct packed {
    logic [15:0] ro;
    logic [1:0]  ba;
    logic [1:0]  bg;
    logic [2:0]  ra;
    logic [9:0]  co;
    logic [2:0]  ch;
    logic [2:0]  off;
  } dev_addr_t;

  // Address of one 8-byte column inside one channel.
  typedef struct packed {
    logic [15:0] ro;
    logic [1:0]  ba;
    logic [1:0]  bg;
    logic [2:0]  ra;
    logic [9:0]  co;
  } dram_addr_t;

  // ---------------- number formats ----------------
  typedef logic [15:0] bf16_t;
  typedef logic [31:0] fp32_t;

  // ---------------- 64-byte NDP instruction ----------------
  typedef enum logic [3:0] {
    OP_NOP       = 4'h0,
    OP_GEMM      = 4'h1,
    OP_GEMM_RELU = 4'h2
  } opcode_e;

  typedef struct packed {
    logic [63:0] addr;   // device byte address
    logic [63:0] size;   // bytes
  } operand_t;

  typedef struct packed {
    logic        is_ndp; // must be 1 for an NDP instruction
    logic [15:0] m_dim;  // tokens routed to the expert (rows of A and C)
    logic [15:0] k_dim;  // inner dimension
    logic [15:0] n_dim;  // output width
    logic [74:0] rsvd;
  } aux_t;

  typedef struct packed {
    opcode_e  opcode;    // [511:508]
    operand_t act_in;    // [507:380]
    operand_t wgt;       // [379:252]
    operand_t act_out;   // [251:124]
    aux_t     aux;       // [123:0]
  } ndp_inst_t;

  // Decoded GEMM job: C[m x n] = A[m x k] * B[k x n], all row-major bf16.
  typedef struct packed {
    logic              relu;
    logic [ADDR_W-1:0] a_addr;
    logic [ADDR_W-1:0] b_addr;
    logic [ADDR_W-1:0] c_addr;
    logic [15:0]       m;
    logic [15:0]       k;
    logic [15:0]       n;
  } gemm_job_t;

  // One NDP request = one 4 x 256 output tile.
  typedef struct packed {
    logic              half;     // scratchpad half that holds the A tile
    logic [6:0]        nseg;     // K / 256
    logic              relu;
    logic [ARR-1:0]    row_mask; // rows of the tile that exist (M not a multiple of 4)
    logic [ADDR_W-1:0] c_addr;   // address of C[m0][n0]
    logic [15:0]       n;        // row stride of C in elements
  } ndp_req_t;

  // Request to the memory controller: one 512-byte beat. line_mask selects
  // which 64-byte lines of the beat a write updates (reads return all).
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;     // beat aligned (addr[8:0] == 0)
    logic [7:0]        line_mask;
  } mem_req_t;

  typedef enum logic [1:0] {
    DST_HOST = 2'd0,
    DST_SPAD = 2'd1,
    DST_CORE = 2'd2
  } dest_e;

  // ---------------- host side ----------------
  typedef enum logic [0:0] { M2S_MEM_RD = 1'b0, M2S_MEM_WR = 1'b1 } m2s_op_e;
  typedef enum logic [0:0] { S2M_NDR = 1'b0, S2M_DRS = 1'b1 } s2m_op_e;

  // Memory-mapped registers live above the 512 GB of DRAM.
  localparam logic [63:0] MMIO_BASE = 64'h0000_0080_0000_0000;
  localparam logic [7:0]  REG_DONE      = 8'h00; // bit0 set per finished kernel, write 0 clears
  localparam logic [7:0]  REG_STATUS    = 8'h08; // {inst buf count, busy}
  localparam logic [7:0]  REG_COMPLETED = 8'h10; // kernels completed
  localparam logic [7:0]  REG_ERRORS    = 8'h18; // instructions rejected by the decoder

endpackage
