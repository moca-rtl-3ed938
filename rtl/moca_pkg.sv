// moca_pkg: sizes, instruction encoding and bus types shared by the MoCA
// accelerator tiles and the shared memory.
//
// The array size (16x16), scratchpad (128 KiB), accumulator (64 KiB), tile
// count (8) and shared L2 (2 MB in 8 banks) are the evaluated SoC
// configuration. Everything else here is this design's own choice: 8-bit
// inputs and weights with 32-bit accumulation, one 16-byte memory line per
// scratchpad row, a 256 MB DRAM address space (24-bit line address), the
// instruction format and the memory port. The same port type (mem_req_t /
// mem_resp_t) is used between a tile and the shared cache and between the
// cache and DRAM.
package moca_pkg;

  // ---- sizes of the evaluated configuration ----
  localparam int unsigned DIM          = 16;          // systolic array is DIM x DIM
  localparam int unsigned N_TILES      = 8;           // accelerator tiles
  localparam int unsigned SP_BYTES     = 128 * 1024;  // scratchpad per tile
  localparam int unsigned ACC_BYTES    = 64 * 1024;   // accumulator per tile
  localparam int unsigned L2_BYTES     = 2 * 1024 * 1024;
  localparam int unsigned L2_BANKS     = 8;

  // ---- data widths (own choice: int8 in, int32 accumulate) ----
  localparam int unsigned IN_W    = 8;
  localparam int unsigned ACC_W   = 32;
  localparam int unsigned LINE_W  = DIM * IN_W;            // 128-bit memory line
  localparam int unsigned LINE_B  = LINE_W / 8;            // 16 bytes

  localparam int unsigned SP_ROWS  = SP_BYTES / LINE_B;            // 8192
  localparam int unsigned ACC_ROWS = ACC_BYTES / (DIM * ACC_W / 8); // 1024
  localparam int unsigned L2_LINES = L2_BYTES / LINE_B;            // 131072

  localparam int unsigned SP_AW  = $clog2(SP_ROWS);
  localparam int unsigned ACC_AW = $clog2(ACC_ROWS);
  localparam int unsigned MEM_AW = 24;                 // line address: 256 MB of DRAM
  localparam int unsigned ROWS_W = 16;                 // row count of one instruction
  localparam int unsigned CFG_W  = 32;                 // window / threshold_load width

  typedef logic signed [IN_W-1:0]  elem_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef elem_t [DIM-1:0]         line_t;     // one scratchpad row / memory line
  typedef acc_t  [DIM-1:0]         acc_row_t;  // one accumulator row

  // ---- instructions from the controlling core ----
  typedef enum logic [2:0] {
    OP_CONFIG_MOCA = 3'd0,  // set window and threshold_load
    OP_CONFIG_ST   = 3'd1,  // set post-processing shift / ReLU
    OP_LOAD        = 3'd2,  // shared memory -> scratchpad, `rows` lines
    OP_STORE       = 3'd3,  // accumulator -> post-proc -> shared memory, `rows` lines
    OP_PRELOAD     = 3'd4,  // scratchpad rows sp_addr..+DIM-1 -> array weights
    OP_COMPUTE     = 3'd5,  // stream `rows` IA rows through the array into accumulator
    OP_FENCE       = 3'd6   // wait until all queues and engines are idle
  } opcode_e;

  typedef struct packed {
    opcode_e                 op;
    logic [MEM_AW-1:0]       mem_addr;   // line address in shared memory
    logic [SP_AW-1:0]        sp_addr;
    logic [ACC_AW-1:0]       acc_addr;
    logic [ROWS_W-1:0]       rows;
    logic                    accumulate; // COMPUTE: add to accumulator
    logic [CFG_W-1:0]        window;     // CONFIG_MOCA
    logic [CFG_W-1:0]        threshold;  // CONFIG_MOCA: threshold_load
    logic [4:0]              shift;      // CONFIG_ST
    logic                    relu;       // CONFIG_ST
  } inst_t;

  // ---- one memory request (one line): entry of the ld and st queues ----
  typedef struct packed {
    logic                    is_store;
    logic [MEM_AW-1:0]       mem_addr;
    logic [SP_AW-1:0]        local_addr; // scratchpad row (load) or accumulator row (store)
  } memcmd_t;

  // ---- one execute command: entry of the exe queue ----
  typedef struct packed {
    logic                    is_compute; // 0: preload weights
    logic [SP_AW-1:0]        sp_addr;
    logic [ACC_AW-1:0]       acc_addr;
    logic [ROWS_W-1:0]       rows;
    logic                    accumulate;
  } execmd_t;

  // ---- tile <-> shared memory port (valid/ready request, fixed-latency response) ----
  typedef struct packed {
    logic                    valid;
    logic                    write;
    logic [MEM_AW-1:0]       addr;
    line_t                   wdata;
  } mem_req_t;

  typedef struct packed {
    logic                    valid;
    line_t                   rdata;
  } mem_resp_t;

endpackage
