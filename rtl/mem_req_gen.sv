// mem_req_gen: the tile's Memory Requests Generator (its DMA).
//
// Receives one-line commands (memcmd_t) that have already passed the
// Thresholding Module and been counted by the Access Counter, and turns them
// into requests on the tile's shared-memory port:
//   load  - a read request for mem_addr is issued in the cycle the command
//           is accepted; the scratchpad row is remembered in a small FIFO of
//           outstanding reads, and the returning line is written to it.
//           One load per cycle when the memory port is ready.
//   store - the accumulator row is read (1 cycle), passed through the
//           post-processing unit (outside this module, st_line), held, and
//           sent as a write request; a store occupies the engine for at
//           least 3 cycles.
// `idle` is high when no store is in progress and no read is outstanding.
// The memory port is valid/ready on requests; read data comes back in
// order with resp.valid. Its role comes from the paper (the MoCA hardware
// lives in the accelerator's DMA); its insides are this design's.
module mem_req_gen
  import moca_pkg::*;
#(
  parameter int unsigned OUTSTANDING = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  // commands
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  memcmd_t   cmd,
  // shared memory port
  output mem_req_t  mem_req,
  input  logic      mem_ready,
  input  mem_resp_t mem_resp,
  // scratchpad write
  output logic              sp_wr_en,
  output logic [SP_AW-1:0]  sp_wr_addr,
  output line_t             sp_wr_data,
  // accumulator read, post-processed line back
  output logic              acc_rd_en,
  output logic [ACC_AW-1:0] acc_rd_addr,
  input  line_t             st_line,
  output logic              idle
);
  typedef enum logic [1:0] {S_IDLE, S_READ, S_WRITE} state_e;
  state_e              state;
  logic [MEM_AW-1:0]   st_addr;
  line_t               st_buf;

  // outstanding read tags (scratchpad rows), in order
  localparam int unsigned TW = $clog2(OUTSTANDING);
  logic [SP_AW-1:0]    tag_q [OUTSTANDING];
  logic [TW-1:0]       tag_wr, tag_rd;
  logic [TW:0]         tag_cnt;
  logic                tag_full;
  logic                ld_fire, st_accept;

  assign tag_full  = (tag_cnt == (TW+1)'(OUTSTANDING));
  assign ld_fire   = (state == S_IDLE) && cmd_valid && !cmd.is_store && mem_ready && !tag_full;
  assign st_accept = (state == S_IDLE) && cmd_valid &&  cmd.is_store;
  assign cmd_ready = ld_fire || st_accept;

  always_comb begin
    mem_req = '0;
    if (state == S_WRITE) begin
      mem_req.valid = 1'b1;
      mem_req.write = 1'b1;
      mem_req.addr  = st_addr;
      mem_req.wdata = st_buf;
    end else if (state == S_IDLE && cmd_valid && !cmd.is_store && !tag_full) begin
      mem_req.valid = 1'b1;
      mem_req.addr  = cmd.mem_addr;
    end
  end

  assign acc_rd_en   = st_accept;
  assign acc_rd_addr = cmd.local_addr[ACC_AW-1:0];

  assign sp_wr_en    = mem_resp.valid;
  assign sp_wr_addr  = tag_q[tag_rd];
  assign sp_wr_data  = mem_resp.rdata;

  assign idle = (state == S_IDLE) && (tag_cnt == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      st_addr <= '0;
      st_buf  <= '0;
      tag_wr  <= '0;
      tag_rd  <= '0;
      tag_cnt <= '0;
    end else begin
      unique case (state)
        S_IDLE:  if (st_accept) begin
                   st_addr <= cmd.mem_addr;
                   state   <= S_READ;
                 end
        S_READ:  begin
                   st_buf <= st_line;
                   state  <= S_WRITE;
                 end
        S_WRITE: if (mem_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      if (ld_fire)        tag_wr <= (tag_wr == TW'(OUTSTANDING-1)) ? '0 : tag_wr + 1'b1;
      if (mem_resp.valid) tag_rd <= (tag_rd == TW'(OUTSTANDING-1)) ? '0 : tag_rd + 1'b1;
      tag_cnt <= tag_cnt + (TW+1)'(ld_fire) - (TW+1)'(mem_resp.valid);
    end
  end

  always_ff @(posedge clk) begin
    if (ld_fire) tag_q[tag_wr] <= cmd.local_addr;
  end

  // Read data must only return for a read that was issued.
  always_ff @(posedge clk) if (rst_n && mem_resp.valid) assert (tag_cnt != '0);
endmodule
