// cmd_queue: the command FIFO used for the tile's Ld, St and Exe queues.
//
// A synchronous FIFO of DEPTH entries of type T with valid/ready on both
// sides. The head entry is presented combinationally (first-word
// fall-through), so an entry written in cycle t can leave in cycle t+1.
// A push and a pop may happen in the same cycle, including when full, if the
// consumer takes the head. The queues and their decoupling role come from
// the accelerator the design builds on; depth and handshake are this
// design's choice (DEPTH 8 for the Ld and Exe queues, 2 for the St queue).
module cmd_queue #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic empty
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                mem [DEPTH];
  logic [PW-1:0]   rd_ptr, wr_ptr;
  logic [PW:0]     count;
  logic            push, pop;

  assign out_valid = (count != 0);
  assign in_ready  = (count != (PW+1)'(DEPTH)) || out_ready;
  assign out_data  = mem[rd_ptr];
  assign empty     = (count == 0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [PW-1:0] incr(logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  // A consumer must never see more entries leave than entered.
  always_ff @(posedge clk) if (rst_n) assert (count <= (PW+1)'(DEPTH));
endmodule
