// tb_shared_memory: self-checking test of the shared cache and its DRAM
// port, run at a reduced size (4 ports, 4 banks, 1024 lines) to keep it
// short, against the behavioural DRAM (latency 20, random back-pressure).
// Each port issues random reads and writes over 8192 lines - eight times
// the cache - holding a request until ready, so there are many misses and
// dirty write-backs. Checks: every read returns, one cycle after it was
// granted, the data of the latest write to that line, or the DRAM's initial
// contents if it was never written (reference model); at most one request
// per bank is granted per cycle; a port that keeps asking is served within
// PORTS round-robin turns of at most two DRAM round trips each; the
// conflict counter matches the number of waiting request-cycles seen;
// requests to different banks proceed in parallel; misses, write-backs and
// hits all occur.
module tb_shared_memory;
  import moca_pkg::*;
  localparam int PORTS = 4, BANKS = 4, LINES = 1024, SPAN = 8192, LAT = 20;
  logic clk = 0, rst_n = 0;
  mem_req_t  req   [PORTS];
  logic      ready [PORTS];
  mem_resp_t resp  [PORTS];
  logic [31:0] conflicts;
  mem_req_t  dram_req;
  logic      dram_ready;
  mem_resp_t dram_resp;
  int checks = 0, failures = 0;

  shared_memory #(.PORTS(PORTS), .BANKS(BANKS), .LINES(LINES)) dut (.*);
  dram_model #(.LAT(LAT), .SLOW(4)) u_dram (
    .clk, .rst_n, .req(dram_req), .ready(dram_ready), .resp(dram_resp)
  );

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

  line_t model [logic [MEM_AW-1:0]];   // lines written since reset
  bit    pend_rd [PORTS];
  line_t pend_data [PORTS];
  int    wait_cnt [PORTS];
  int    waited = 0, parallel = 0, hits = 0, done_cnt = 0;

  // at each edge: check responses of last cycle's reads, then apply grants
  always @(posedge clk) if (rst_n) begin
    int granted_bank [BANKS];
    int ngrant;
    for (int b = 0; b < BANKS; b++) granted_bank[b] = 0;
    ngrant = 0;
    for (int p = 0; p < PORTS; p++) begin
      check(resp[p].valid == pend_rd[p], "read response valid");
      if (pend_rd[p]) check(resp[p].rdata == pend_data[p], "read data");
    end
    for (int p = 0; p < PORTS; p++) begin
      pend_rd[p] = 0;
      if (req[p].valid && ready[p]) begin
        granted_bank[int'(req[p].addr) % BANKS]++;
        ngrant++;
        if (!req[p].write) begin
          pend_rd[p] = 1;
          pend_data[p] = model.exists(req[p].addr) ? model[req[p].addr] : u_dram.init_line(req[p].addr);
        end
      end else if (req[p].valid) waited++;
    end
    for (int p = 0; p < PORTS; p++)
      if (req[p].valid && ready[p] && req[p].write) begin
        model[req[p].addr] = req[p].wdata;
      end
    for (int b = 0; b < BANKS; b++) check(granted_bank[b] <= 1, "one grant per bank");
    if (ngrant > 1) parallel++;
  end

  for (genvar p = 0; p < PORTS; p++) begin : g_drv
    initial begin
      req[p] = '0;
      wait_cnt[p] = 0;
      @(posedge rst_n);
      for (int k = 0; k < 400; k++) begin
        @(negedge clk);
        req[p].valid = 1;
        req[p].write = (k < 40) ? 1'b1 : (($urandom % 2) == 0);
        // first phase: all ports hammer bank 0; then random lines
        req[p].addr  = (k < 40) ? MEM_AW'(BANKS * ((p * 40 + k) % (LINES / BANKS)))
                                : MEM_AW'($urandom % SPAN);
        for (int n = 0; n < DIM; n++) req[p].wdata[n] = elem_t'($urandom);
        wait_cnt[p] = 0;
        #1;
        while (!ready[p]) begin
          @(negedge clk); #1;
          wait_cnt[p]++;
        end
        check(wait_cnt[p] <= PORTS * 2 * (LAT + 12) + (k == 0 ? LINES / BANKS : 0), "round-robin bound on waiting");
      end
      @(negedge clk);
      req[p].valid = 0;
      done_cnt++;
    end
  end

  initial begin
    for (int p = 0; p < PORTS; p++) pend_rd[p] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done_cnt == PORTS);
    repeat (4) @(negedge clk);
    check(conflicts == 32'(waited), "conflict counter");
    check(waited > 50 && parallel > 10, "contention and parallel banks exercised");
    check(u_dram.reads > 500 && u_dram.writes > 200, "misses and dirty write-backs exercised");
    $display("DRAM reads %0d, writes %0d, waiting request-cycles %0d", u_dram.reads, u_dram.writes, waited);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
