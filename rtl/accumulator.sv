// accumulator: the tile's Accum Buffer for output activations.
//
// ROWS rows of DIM 32-bit sums (64 KiB at the default 1024 x 64 bytes, the
// evaluated per-tile accumulator size). The write port either overwrites a
// row or adds the incoming row to it element by element (wr_acc), which is
// how partial products of successive matrix tiles are summed. The read port
// feeds the post-processing unit on the way to memory and is synchronous:
// rd_data holds the row addressed with rd_en in the previous cycle. The size
// is the paper's; the read-modify-write port and latency are this design's
// choice.
module accumulator
  import moca_pkg::*;
#(
  parameter int unsigned ROWS = ACC_ROWS
) (
  input  logic                    clk,
  input  logic                    wr_en,
  input  logic                    wr_acc,
  input  logic [$clog2(ROWS)-1:0] wr_addr,
  input  acc_row_t                wr_data,
  input  logic                    rd_en,
  input  logic [$clog2(ROWS)-1:0] rd_addr,
  output acc_row_t                rd_data
);
  acc_row_t mem [ROWS];
  acc_row_t sum;

  always_comb begin
    for (int n = 0; n < DIM; n++) begin
      sum[n] = wr_acc ? mem[wr_addr][n] + wr_data[n] : wr_data[n];
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= sum;
    if (rd_en) rd_data <= mem[rd_addr];
  end
endmodule
