// diva_pkg: configuration constants and command formats of the DiVa
// accelerator.
//
// The array size (128 x 128 PEs), the number of rows drained per clock (R = 8)
// and the 16 MB of on-chip SRAM follow the published configuration. The split
// of the SRAM (4 MB LHS, 4 MB RHS, 8 MB output), the DRAM beat width and the
// command encoding are this design's own choices.
package diva_pkg;

  localparam int unsigned DEF_PE_H  = 128;   // PE array height
  localparam int unsigned DEF_PE_W  = 128;   // PE array width
  localparam int unsigned DEF_R     = 8;     // output rows drained per clock
  localparam int unsigned DEF_IB_DEPTH = 16384; // lines per input buffer (4 MB)
  localparam int unsigned DEF_OB_ROWS  = 16384; // FP32 rows in the output buffer (8 MB)
  localparam int unsigned DEF_QDEPTH = 4;    // vector queue depth
  localparam int unsigned ADDR_W    = 16;    // on-chip buffer address field
  localparam int unsigned DADDR_W   = 32;    // DRAM beat address

  typedef enum logic [2:0] {
    OP_LOAD_LHS  = 3'd0,  // DRAM -> LHS input buffer
    OP_LOAD_RHS  = 3'd1,  // DRAM -> RHS input buffer
    OP_STORE     = 3'd2,  // output buffer -> DRAM
    OP_GEMM      = 3'd3,  // one outer-product tile
    OP_NORM_WR   = 3'd4   // write the PPU's squared norm into the output buffer
  } diva_op_e;

  // One command. Fields not used by an opcode are ignored.
  typedef struct packed {
    diva_op_e              op;
    logic [DADDR_W-1:0]    dram_addr;  // LOAD/STORE: first DRAM beat
    logic [ADDR_W-1:0]     buf_addr;   // LOAD: first input-buffer line; STORE: first output row
    logic [ADDR_W-1:0]     len;        // LOAD: lines; STORE: output rows
    logic [ADDR_W-1:0]     lhs_base;   // GEMM: first LHS line
    logic [ADDR_W-1:0]     rhs_base;   // GEMM: first RHS line
    logic [ADDR_W-1:0]     k;          // GEMM: outer-product steps (K)
    logic                  lhs_tr;     // GEMM: LHS stored row-major, transpose it
    logic [ADDR_W-1:0]     lhs_rows;   // GEMM: lines to read into the LHS transposer
    logic                  rhs_tr;     // GEMM: RHS stored column-major, transpose it
    logic [ADDR_W-1:0]     rhs_rows;   // GEMM: lines to read into the RHS transposer
    logic                  to_ppu;     // GEMM: drain into the PPU instead of the output buffer
    logic                  norm_clear; // GEMM: this tile starts a new norm accumulation
    logic                  k_continue; // GEMM: add onto the accumulators left by the previous GEMM
    logic                  no_drain;   // GEMM: leave the results in the array (more K to come)
    logic [ADDR_W-1:0]     out_base;   // GEMM / NORM_WR: output buffer row (multiple of R)
  } diva_cmd_t;

  // DMA descriptor, issued by the control unit.
  typedef struct packed {
    logic                  store;      // 1: output buffer -> DRAM, 0: DRAM -> input buffer
    logic                  to_rhs;     // load target: 0 LHS, 1 RHS
    logic [DADDR_W-1:0]    dram_addr;
    logic [ADDR_W-1:0]     buf_addr;
    logic [ADDR_W-1:0]     len;
  } dma_cmd_t;

endpackage
