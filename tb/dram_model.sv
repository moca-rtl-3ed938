// dram_model: behavioural DRAM behind the shared cache, for simulation only.
//
// Accepts one 16-byte line request per cycle at most (16 GB/s at a 1 GHz
// clock), with `ready` high in all cycles but a random 1 in SLOW when SLOW
// is non-zero. Read data returns in order LAT cycles after the request was
// accepted. Contents are held sparsely; a line never written reads as
// init_line(addr), so a testbench can predict it. The bandwidth follows the
// evaluated system's DRAM; the latency and the initial contents are this
// model's own choice.
module dram_model
  import moca_pkg::*;
#(
  parameter int unsigned LAT  = 40,
  parameter int unsigned SLOW = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  mem_req_t  req,
  output logic      ready,
  output mem_resp_t resp
);
  line_t store [logic [MEM_AW-1:0]];
  line_t       q_data [$];
  longint      q_due  [$];
  longint      cyc;
  int unsigned reads, writes;

  function automatic line_t init_line(logic [MEM_AW-1:0] a);
    line_t l;
    for (int n = 0; n < DIM; n++) l[n] = elem_t'((a * 7 + n * 13 + (a >> 8)) ^ (a >> 3));
    return l;
  endfunction

  function automatic line_t peek(logic [MEM_AW-1:0] a);
    return store.exists(a) ? store[a] : init_line(a);
  endfunction

  task automatic poke(logic [MEM_AW-1:0] a, line_t d);
    store[a] = d;
  endtask

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc = 0; reads = 0; writes = 0;
      q_data.delete(); q_due.delete();
      ready <= 1'b0;
      resp  <= '0;
    end else begin
      cyc++;
      resp <= '0;
      if (q_due.size() > 0 && q_due[0] <= cyc) begin
        resp <= '{valid: 1'b1, rdata: q_data.pop_front()};
        void'(q_due.pop_front());
      end
      if (req.valid && ready) begin
        if (req.write) begin store[req.addr] = req.wdata; writes++; end
        else begin
          q_data.push_back(peek(req.addr));
          q_due.push_back(cyc + LAT - 1);
          reads++;
        end
      end
      ready <= (SLOW == 0) || ($urandom % SLOW) != 0;
    end
  end
endmodule
