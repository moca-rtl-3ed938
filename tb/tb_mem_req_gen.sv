// tb_mem_req_gen: self-checking test of the memory request generator (DMA).
// A behavioural memory in the testbench accepts requests with random ready
// and returns read data one cycle after accepting a read. The testbench
// sends a random mix of one-line load and store commands and checks that
// every load writes the right memory line into the right scratchpad row,
// every store reads the named accumulator row and writes its post-processed
// line (modelled here as a function of the row number) to the right memory
// line, that back-to-back loads issue one per cycle, and that idle is
// reported only when nothing is left in flight.
module tb_mem_req_gen;
  import moca_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_ready, mem_ready, sp_wr_en, acc_rd_en, idle;
  memcmd_t cmd;
  mem_req_t mem_req;
  mem_resp_t mem_resp;
  logic [SP_AW-1:0] sp_wr_addr;
  line_t sp_wr_data, st_line;
  logic [ACC_AW-1:0] acc_rd_addr;
  int checks = 0, failures = 0;

  mem_req_gen dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic line_t pattern(int a, int salt);
    line_t l;
    for (int n = 0; n < DIM; n++) l[n] = elem_t'(a * 7 + n * 13 + salt);
    return l;
  endfunction

  // behavioural memory: 256 lines
  line_t mem [256];
  always @(posedge clk) begin
    mem_resp.valid <= 1'b0;
    if (rst_n && mem_req.valid && mem_ready) begin
      if (mem_req.write) mem[mem_req.addr[7:0]] <= mem_req.wdata;
      else begin
        mem_resp.valid <= 1'b1;
        mem_resp.rdata <= mem[mem_req.addr[7:0]];
      end
    end
  end
  // behavioural accumulator + post-processing: row a reads as pattern(a, 99)
  always @(posedge clk) if (acc_rd_en) st_line <= pattern(int'(acc_rd_addr), 99);

  // scratchpad writes expected in load order
  int exp_row [$];
  line_t exp_line [$];
  always @(posedge clk) if (rst_n && sp_wr_en) begin
    check(exp_row.size() != 0, "unexpected scratchpad write");
    if (exp_row.size() != 0) begin
      check(int'(sp_wr_addr) == exp_row.pop_front() && sp_wr_data == exp_line.pop_front(),
            "load data to scratchpad");
    end
  end

  int n_loads = 0, n_stores = 0, b2b = 0;
  int store_at [int];   // memory line -> accumulator row stored there
  logic prev_fire_ld;
  always @(posedge clk) begin
    prev_fire_ld <= cmd_valid && cmd_ready && !cmd.is_store;
    if (prev_fire_ld && cmd_valid && cmd_ready && !cmd.is_store) b2b++;
  end

  initial begin
    cmd_valid = 0; cmd = '0; mem_ready = 0;
    for (int a = 0; a < 256; a++) mem[a] = pattern(a, 1);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 600; k++) begin
      memcmd_t c;
      c.is_store = (k >= 100) && (($urandom % 3) == 0);
      c.mem_addr = c.is_store ? MEM_AW'(128 + ($urandom % 128)) : MEM_AW'($urandom % 128);
      c.local_addr = c.is_store ? SP_AW'($urandom % ACC_ROWS) : SP_AW'($urandom % SP_ROWS);
      cmd = c; cmd_valid = 1;
      mem_ready = (k < 100) ? 1'b1 : (($urandom % 4) != 0);
      #1;
      while (!cmd_ready) begin
        @(negedge clk);
        mem_ready = (k < 100) ? 1'b1 : (($urandom % 4) != 0);
        #1;
      end
      if (c.is_store) begin
        n_stores++;
        store_at[int'(c.mem_addr)] = int'(c.local_addr);
      end else begin
        n_loads++;
        exp_row.push_back(int'(c.local_addr));
        exp_line.push_back(pattern(int'(c.mem_addr), 1));
      end
      @(negedge clk);
      cmd_valid = 0;
      // keep memory ready random while waiting
      mem_ready = ($urandom % 4) != 0;
    end
    mem_ready = 1;
    repeat (10) @(negedge clk);
    check(idle, "idle at the end");
    check(exp_row.size() == 0, "all loads returned");
    foreach (store_at[a]) check(mem[a] == pattern(store_at[a], 99), "store data in memory");
    // back-to-back loads: one per cycle with memory always ready
    for (int k = 0; k < 20; k++) begin
      cmd = '{is_store: 1'b0, mem_addr: MEM_AW'(k), local_addr: SP_AW'(k)};
      cmd_valid = 1;
      exp_row.push_back(k); exp_line.push_back(pattern(k, 1));
      #1;
      check(cmd_ready, "load accepted every cycle");
      @(negedge clk);
    end
    cmd_valid = 0;
    repeat (4) @(negedge clk);
    check(exp_row.size() == 0 && idle, "burst complete");
    check(n_stores > 50 && n_loads > 200, "mix exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
