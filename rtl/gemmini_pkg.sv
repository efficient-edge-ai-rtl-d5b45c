// gemmini_pkg: types and constants shared by the accelerator.
//
// The sizes are those of the FPGA configuration: a 32x32 array of 8-bit
// processing elements (mapped two per DSP slice), 18-bit partial sums in the
// array, a 512 KiB scratchpad of 32-byte rows with an 8-cycle read delay, a
// 128 KiB accumulator of 32 x 32-bit rows and up to 32 memory requests in
// flight. The 32-bit accumulator element, the command set and its field
// layout, and the 16-entry reorder buffer are this design's own choices.
//
// Commands (one per cmd_t):
//   CONFIG_LD  stride                  -> load controller
//   CONFIG_ST  stride, scale, act, relu6_max -> store controller
//   MVIN       dram_addr, local.row, rows     DRAM -> scratchpad
//   MVOUT      dram_addr, local, rows         accumulator (scaled) or scratchpad -> DRAM
//   COMPUTE    a_addr, b_addr, local(acc row, accumulate), rows, preload
//              C[local.row + j] (+)= A[a_addr + j] x W, j < rows, where W is
//              the DIM x DIM tile at scratchpad rows b_addr.. when preload is
//              set, else the tile already held in the array.
// A CISC-type loop_cmd_t (tiled matrix multiplication) is expanded into these
// commands by loop_matmul.
package gemmini_pkg;

  parameter int DIM             = 32;     // PEs per side
  parameter int IN_W            = 8;      // input element bits
  parameter int SA_OUT_W        = 18;     // partial-sum bits in the array
  parameter int ACC_W           = 32;     // accumulator element bits
  parameter int SPAD_ROWS       = 16384;  // 512 KiB / 32 B
  parameter int ACC_ROWS        = 1024;   // 128 KiB / 128 B
  parameter int SPAD_READ_DELAY = 8;
  parameter int MAX_INFLIGHT    = 32;
  parameter int ROB_ENTRIES     = 16;

  parameter int ROW_W     = DIM * IN_W;   // one scratchpad row / memory beat
  parameter int LROW_W    = 14;           // local row index bits
  parameter int ADDR_W    = 32;           // DRAM byte address bits
  parameter int ROWS_W    = 6;            // row count, 1..DIM

  typedef enum logic [2:0] {
    OP_CONFIG_LD = 3'd0,
    OP_CONFIG_ST = 3'd1,
    OP_MVIN      = 3'd2,
    OP_MVOUT     = 3'd3,
    OP_COMPUTE   = 3'd4
  } opcode_e;

  typedef enum logic [1:0] {
    ACT_NONE  = 2'd0,
    ACT_RELU  = 2'd1,
    ACT_RELU6 = 2'd2
  } act_e;

  typedef struct packed {
    logic              is_acc;      // row is in the accumulator
    logic              accumulate;  // accumulator write adds instead of overwriting
    logic [LROW_W-1:0] row;
  } local_addr_t;

  typedef struct packed {
    opcode_e           op;
    logic [ADDR_W-1:0] dram_addr;
    local_addr_t       local_addr;
    logic [ROWS_W-1:0] rows;
    logic [LROW_W-1:0] a_addr;
    logic [LROW_W-1:0] b_addr;
    logic              preload;
    logic [ADDR_W-1:0] stride;
    logic [15:0]       scale;       // IEEE binary16
    act_e              act;
    logic [IN_W-1:0]   relu6_max;
  } cmd_t;

  // CISC-type tiled matrix multiplication C = act(scale * (A x B)), expanded
  // by loop_matmul into the commands above. Sizes are in DIM x DIM tiles;
  // strides are the DRAM row pitches of A, B and C in bytes.
  parameter int TILES_W = 4;
  typedef struct packed {
    logic [ADDR_W-1:0]  a_addr;
    logic [ADDR_W-1:0]  b_addr;
    logic [ADDR_W-1:0]  c_addr;
    logic [ADDR_W-1:0]  a_stride;
    logic [ADDR_W-1:0]  b_stride;
    logic [ADDR_W-1:0]  c_stride;
    logic [TILES_W-1:0] m_tiles;    // 1..15
    logic [TILES_W-1:0] n_tiles;
    logic [TILES_W-1:0] k_tiles;
    logic [15:0]        scale;
    act_e               act;
    logic [IN_W-1:0]    relu6_max;
  } loop_cmd_t;

endpackage
