// scratchpad: the tile's Weight & IA buffer.
//
// A single-clock memory of ROWS lines of DIM int8 elements (128 KiB at the
// default 8192 x 16 bytes, the evaluated per-tile scratchpad size). One
// write port, filled by the memory request generator with data returning
// from shared memory, and one read port, used by the execute controller to
// fetch weights and input activations. Reads are synchronous: rd_data holds
// the line addressed in the previous cycle with rd_en. A read and a write to
// the same row in one cycle return the old contents. The size is the
// paper's; the port arrangement and read latency are this design's choice.
module scratchpad
  import moca_pkg::*;
#(
  parameter int unsigned ROWS = SP_ROWS
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_addr,
  input  line_t                   wr_data,
  input  logic                    rd_en,
  input  logic [$clog2(ROWS)-1:0] rd_addr,
  output line_t                   rd_data
);
  line_t mem [ROWS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
