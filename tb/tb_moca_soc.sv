// tb_moca_soc: end-to-end test of the full MoCA SoC at its default size
// (8 tiles of 16x16, 128 KiB scratchpad and 64 KiB accumulator each, 2 MB
// shared cache in 8 banks) in front of the behavioural DRAM (40-cycle
// latency). The testbench plays the tiles' controlling cores and runtime;
// input data is put into the DRAM model directly, and results are read
// from the cache's copy of a line if it holds one, else from DRAM.
// Phase 1, co-running layers: every tile loads its own weights and 64
// activation rows, computes them (even tiles compute twice, accumulating),
// and stores the post-processed result; tiles 4-7 run throttled (window 64,
// threshold_load 1). Every stored line is compared with a reference.
// Phase 2, memory partitioning: all tiles stream 512-line loads (all cache
// misses) at once with no throttle, then again with tiles 1-7 throttled to
// one line per 100 cycles while tile 0 runs free; the throttled tiles must
// respect their limit, and tile 0's time in both runs is printed.
// Phase 3, runtime update: a tile held by its throttle gets CONFIG_MOCA(0,0)
// and must resume within 10 cycles.
// Phase 4, write-back: tile 0 loads lines that evict its dirty results, and
// the results are checked again, now in DRAM.
// Each mechanism is counted (bank conflicts, cache misses and write-backs,
// throttle alerts, bubbles, alerts ended by a new window, alerts ended by
// reconfiguration, accumulation, ReLU, saturation) and a mechanism that
// never happened counts as a failure.
module tb_moca_soc;
  import moca_pkg::*;
  localparam int T = N_TILES;
  localparam int R = 64;
  logic clk = 0, rst_n = 0;
  logic        inst_valid [T];
  logic        inst_ready [T];
  inst_t       inst       [T];
  logic        idle       [T];
  logic        alert      [T];
  logic [31:0] bubbles    [T];
  logic [CFG_W-1:0] access_count [T];
  logic [CFG_W-1:0] window_cycle [T];
  logic [31:0] bank_conflicts;
  mem_req_t    dram_req;
  logic        dram_ready;
  mem_resp_t   dram_resp;
  int checks = 0, failures = 0;

  moca_soc dut (.*);
  dram_model #(.LAT(40)) u_dram (
    .clk, .rst_n, .req(dram_req), .ready(dram_ready), .resp(dram_resp)
  );

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ---- direct access to memory: DRAM contents, or the cache's copy if it holds the line ----
  localparam int BL = L2_LINES / L2_BANKS;
  task automatic wr_line(int a, line_t d);
    u_dram.poke(MEM_AW'(a), d);
  endtask
  function automatic line_t rd_line(int a);
    logic [MEM_AW-1:0] tag;
    logic [MEM_AW+1:0] m;
    line_t c;
    int idx;
    idx = (a / 8) % BL;
    tag = MEM_AW'(a / 8 / BL);
    case (a % 8)
      0: begin m = MEM_AW'(dut.u_mem.g_bank[0].meta[idx]); c = dut.u_mem.g_bank[0].mem[idx]; end
      1: begin m = MEM_AW'(dut.u_mem.g_bank[1].meta[idx]); c = dut.u_mem.g_bank[1].mem[idx]; end
      2: begin m = MEM_AW'(dut.u_mem.g_bank[2].meta[idx]); c = dut.u_mem.g_bank[2].mem[idx]; end
      3: begin m = MEM_AW'(dut.u_mem.g_bank[3].meta[idx]); c = dut.u_mem.g_bank[3].mem[idx]; end
      4: begin m = MEM_AW'(dut.u_mem.g_bank[4].meta[idx]); c = dut.u_mem.g_bank[4].mem[idx]; end
      5: begin m = MEM_AW'(dut.u_mem.g_bank[5].meta[idx]); c = dut.u_mem.g_bank[5].mem[idx]; end
      6: begin m = MEM_AW'(dut.u_mem.g_bank[6].meta[idx]); c = dut.u_mem.g_bank[6].mem[idx]; end
      default: begin m = MEM_AW'(dut.u_mem.g_bank[7].meta[idx]); c = dut.u_mem.g_bank[7].mem[idx]; end
    endcase
    // meta = {valid, dirty, tag}; the tag is MEM_AW - 3 - log2(BL) bits
    if (m[MEM_AW - 3 - $clog2(BL) + 1] && (m & ((1 << (MEM_AW - 3 - $clog2(BL))) - 1)) == (MEM_AW+2)'(tag))
      return c;
    return u_dram.peek(MEM_AW'(a));
  endfunction

  // ---- instruction helpers ----
  function automatic inst_t mk(opcode_e op, int mem_a, int sp, int acc, int rows, bit accum = 0);
    inst_t i = '0;
    i.op = op; i.mem_addr = MEM_AW'(mem_a); i.sp_addr = SP_AW'(sp);
    i.acc_addr = ACC_AW'(acc); i.rows = ROWS_W'(rows); i.accumulate = accum;
    return i;
  endfunction
  function automatic inst_t mk_cfg(int w, int th);
    inst_t i = mk(OP_CONFIG_MOCA, 0, 0, 0, 0);
    i.window = w; i.threshold = th;
    return i;
  endfunction
  task automatic send(int t, inst_t i);
    @(negedge clk);
    inst[t] = i; inst_valid[t] = 1;
    do @(posedge clk); while (!inst_ready[t]);
    #1 inst_valid[t] = 0;
  endtask
  task automatic fence(int t);
    send(t, mk(OP_FENCE, 0, 0, 0, 0));
    @(negedge clk);
    while (!idle[t]) @(negedge clk);
  endtask

  function automatic int post(int v, int sh, bit relu);
    int q = v >>> sh;
    if (relu && q < 0) q = 0;
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return q;
  endfunction

  // ---- mechanism counters ----
  int n_alert = 0, n_window_end = 0, n_reconfig_lift = 0;
  int n_accum = 0, n_relu = 0, n_sat = 0;
  int n_done = 0;     // forked tile programs finished
  int cfg_sent [T];   // cycles left in which a falling alert is put down to a new configuration
  logic alert_q [T];
  always @(posedge clk) if (rst_n) begin
    for (int t = 0; t < T; t++) begin
      if (alert[t] && !alert_q[t]) n_alert++;
      if (!alert[t] && alert_q[t]) begin
        if (cfg_sent[t] > 0) n_reconfig_lift++; else n_window_end++;
      end
      alert_q[t] <= alert[t];
      if (cfg_sent[t] > 0) cfg_sent[t]--;
    end
  end

  // ---- phase 1 program of one tile ----
  localparam int REGION = L2_LINES / T;     // lines per tile region
  task automatic run_layer(int t);
    int base = t * REGION;
    inst_t i;
    if (t >= 4) send(t, mk_cfg(64, 1)); else send(t, mk_cfg(0, 0));
    i = mk(OP_CONFIG_ST, 0, 0, 0, 0); i.shift = 5'(4 + t % 3); i.relu = (t % 2) == 1; send(t, i);
    send(t, mk(OP_LOAD, base, 0, 0, DIM));
    send(t, mk(OP_LOAD, base + DIM, 64, 0, R));
    fence(t);
    send(t, mk(OP_PRELOAD, 0, 0, 0, 0));
    send(t, mk(OP_COMPUTE, 0, 64, 100, R, 0));
    if (t % 2 == 0) send(t, mk(OP_COMPUTE, 0, 64, 100, R, 1));
    fence(t);
    send(t, mk(OP_STORE, base + 4096, 0, 100, R));
    fence(t);
  endtask

  task automatic check_layer(int t);
    int base = t * REGION;
    int B [DIM][DIM], A [DIM];
    line_t l;
    for (int k = 0; k < DIM; k++) begin
      l = rd_line(base + k);
      for (int n = 0; n < DIM; n++) B[k][n] = int'(l[n]);
    end
    for (int r = 0; r < R; r++) begin
      line_t got;
      l = rd_line(base + DIM + r);
      for (int k = 0; k < DIM; k++) A[k] = int'(l[k]);
      got = rd_line(base + 4096 + r);
      for (int n = 0; n < DIM; n++) begin
        int s, e;
        s = 0;
        for (int k = 0; k < DIM; k++) s += A[k] * B[k][n];
        if (t % 2 == 0) begin s = 2 * s; n_accum++; end
        e = post(s, 5'(4 + t % 3), (t % 2) == 1);
        if ((t % 2) == 1 && (s >>> (4 + t % 3)) < 0) n_relu++;
        if (e == 127 || e == -128) n_sat++;
        check(int'(got[n]) == e, $sformatf("tile %0d row %0d col %0d", t, r, n));
      end
    end
  endtask

  // ---- phase 2: one tile's 512-line stream, returns cycles ----
  int stream_cycles [T];
  task automatic run_stream(int t, bit throttle, int offset);
    int t0;
    if (throttle) begin cfg_sent[t] = 12; send(t, mk_cfg(100, 1)); end
    else begin cfg_sent[t] = 12; send(t, mk_cfg(0, 0)); end
    t0 = int'($time);
    send(t, mk(OP_LOAD, t * REGION + 8192 + offset, 2048, 0, 512));
    fence(t);
    stream_cycles[t] = (int'($time) - t0) / 10;
  endtask

  initial begin
    int free_t0, part_t0, c0, b0, lift;
    line_t l;
    for (int t = 0; t < T; t++) begin
      inst_valid[t] = 0; inst[t] = '0; cfg_sent[t] = 0; alert_q[t] = 0;
    end
    // data: weights and activations of every tile, stream source lines
    for (int t = 0; t < T; t++)
      for (int a = 0; a < DIM + R; a++) begin
        for (int n = 0; n < DIM; n++) l[n] = elem_t'($urandom);
        wr_line(t * REGION + a, l);
      end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- phase 1 ----
    for (int t = 0; t < T; t++) fork
      automatic int tt = t;
      begin run_layer(tt); n_done++; end
    join_none
    wait (n_done == T);
    n_done = 0;
    for (int t = 0; t < T; t++) check_layer(t);
    for (int t = 4; t < T; t++) check(bubbles[t] > 0, "throttled tiles were held back");
    $display("phase 1 done at cycle %0d, bank conflicts %0d", $time / 10, bank_conflicts);

    // ---- phase 2: everyone free, then tile 0 protected ----
    c0 = int'(bank_conflicts);
    for (int t = 0; t < T; t++) fork
      automatic int tt = t;
      begin run_stream(tt, 1'b0, 0); n_done++; end
    join_none
    wait (n_done == T);
    n_done = 0;
    free_t0 = stream_cycles[0];
    check(int'(bank_conflicts) > c0, "tiles contended for banks");
    for (int t = 0; t < T; t++) fork
      automatic int tt = t;
      begin run_stream(tt, tt != 0, 1024); n_done++; end
    join_none
    wait (n_done == T);
    part_t0 = stream_cycles[0];
    $display("tile 0 512-line load: %0d cycles with free co-runners, %0d with throttled co-runners", free_t0, part_t0);
    for (int t = 1; t < T; t++) check(stream_cycles[t] >= (512 - 1) * 100, "throttled tile kept to its rate");

    // ---- phase 3: lift a throttle through the runtime ----
    send(1, mk_cfg(1000000, 3));
    send(1, mk(OP_LOAD, REGION + 8192 + 2048, 2048, 0, 64));
    repeat (400) @(negedge clk);
    check(alert[1], "tile 1 held by its throttle");
    b0 = int'(bubbles[1]);
    cfg_sent[1] = 12;
    send(1, mk_cfg(0, 0));
    lift = 0;
    while (alert[1]) begin @(negedge clk); lift++; end
    check(lift <= 10, "throttle lifted within 10 cycles");
    fence(1);

    // ---- phase 4: evict tile 0's results (dirty lines) and check them in DRAM ----
    send(0, mk(OP_LOAD, 4096 + L2_LINES, 2048, 0, R));
    fence(0);
    check(u_dram.writes >= R, "dirty results written back on eviction");
    check_layer(0);

    // ---- mechanisms ----
    $display("DRAM reads %0d, writes %0d", u_dram.reads, u_dram.writes);
    $display("mechanisms: conflicts=%0d alerts=%0d window_ends=%0d reconfig_lifts=%0d bubbles(t7)=%0d accum=%0d relu=%0d sat=%0d",
             bank_conflicts, n_alert, n_window_end, n_reconfig_lift, bubbles[7], n_accum, n_relu, n_sat);
    check(bank_conflicts > 0, "mechanism: bank contention");
    check(u_dram.reads > 0 && u_dram.writes > 0, "mechanism: cache misses and write-backs");
    check(n_alert > 0, "mechanism: throttle alert");
    check(n_window_end > 0, "mechanism: alert ended by a new window");
    check(n_reconfig_lift > 0, "mechanism: alert ended by reconfiguration");
    check(bubbles[7] > 0, "mechanism: bubbles");
    check(n_accum > 0 && n_relu > 0 && n_sat > 0, "mechanism: accumulate, ReLU, saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
