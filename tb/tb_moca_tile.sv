// tb_moca_tile: end-to-end test of one MoCA tile against a behavioural
// shared-memory port in the testbench (random ready, read data one cycle
// after a read is accepted).
// Part 1, a layer: loads a 16x16 weight matrix B and R=40 activation rows A
// into the scratchpad, preloads B, computes A*B twice into the accumulator
// (the second time accumulating), stores the result through post-processing
// (shift 3, ReLU) and compares the stored lines with post(2*A*B) computed
// here.
// Part 2, throttling: with window 60 and threshold_load 8, a 240-line load
// must never put more than 8 requests into one window, must produce bubbles
// and must take at least (240/8 - 1) windows; the same load with the
// throttle off (0, 0) must run at close to one line per cycle.
// Part 3, reconfiguration: a new CONFIG_MOCA must lift an active alert within
// 10 cycles of the instruction being accepted.
module tb_moca_tile;
  import moca_pkg::*;
  localparam int R = 40;
  logic clk = 0, rst_n = 0;
  logic inst_valid, inst_ready, mem_ready, idle, alert;
  inst_t inst;
  mem_req_t mem_req;
  mem_resp_t mem_resp;
  logic [31:0] bubbles;
  logic [CFG_W-1:0] access_count, window_cycle;
  int checks = 0, failures = 0;

  moca_tile dut (.*);

  always #5 clk = ~clk;

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL @%0t: %s", $time, what); end
  endtask

  // behavioural shared memory port
  line_t mem [4096];
  bit    rand_ready = 1;
  int    req_fires = 0;
  always @(negedge clk) mem_ready <= rand_ready ? (($urandom % 4) != 0) : 1'b1;
  always @(posedge clk) begin
    mem_resp.valid <= 1'b0;
    if (rst_n && mem_req.valid && mem_ready) begin
      req_fires++;
      if (mem_req.write) mem[mem_req.addr[11:0]] <= mem_req.wdata;
      else begin
        mem_resp.valid <= 1'b1;
        mem_resp.rdata <= mem[mem_req.addr[11:0]];
      end
    end
  end

  task automatic send(inst_t i);
    @(negedge clk);
    inst = i; inst_valid = 1;
    do @(posedge clk); while (!inst_ready);
    #1 inst_valid = 0;
  endtask

  function automatic inst_t mk(opcode_e op, int mem_a, int sp, int acc, int rows, bit accum = 0);
    inst_t i = '0;
    i.op = op; i.mem_addr = MEM_AW'(mem_a); i.sp_addr = SP_AW'(sp);
    i.acc_addr = ACC_AW'(acc); i.rows = ROWS_W'(rows); i.accumulate = accum;
    return i;
  endfunction

  // FENCE, then wait until the tile has finished everything
  task automatic fence();
    send(mk(OP_FENCE, 0, 0, 0, 0));
    @(negedge clk);
    while (!idle) @(negedge clk);
  endtask

  task automatic config_moca(int w, int t);
    inst_t i = mk(OP_CONFIG_MOCA, 0, 0, 0, 0);
    i.window = w; i.threshold = t;
    send(i);
  endtask

  typedef int row_t [DIM];
  function automatic row_t unpack(line_t l);
    row_t v;
    for (int n = 0; n < DIM; n++) v[n] = int'(l[n]);
    return v;
  endfunction

  function automatic int post(int v, int sh, bit relu);
    int q = v >>> sh;
    if (relu && q < 0) q = 0;
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return q;
  endfunction

  // per-window request monitor (windows as the tile counts them)
  int win_reqs = 0, win_max = 0;
  bit monitor = 0;
  always @(posedge clk) if (monitor) begin
    if (window_cycle == 0) win_reqs = 0;
    if (mem_req.valid && mem_ready) win_reqs++;
    if (win_reqs > win_max) win_max = win_reqs;
  end

  initial begin
    int A [R][DIM], B [DIM][DIM];
    int t0, t_thr, t_free, b0;
    int got [DIM];
    inst_t i;
    inst_valid = 0; inst = '0;
    for (int a = 0; a < 4096; a++) for (int n = 0; n < DIM; n++) mem[a][n] = elem_t'($urandom);
    for (int k = 0; k < DIM; k++) B[k] = unpack(mem[k]);
    for (int r = 0; r < R; r++) A[r] = unpack(mem[16 + r]);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // ---- part 1: one layer ----
    i = mk(OP_CONFIG_ST, 0, 0, 0, 0); i.shift = 3; i.relu = 1; send(i);
    send(mk(OP_LOAD, 0, 100, 0, DIM));
    send(mk(OP_LOAD, 16, 200, 0, R));
    send(mk(OP_FENCE, 0, 0, 0, 0));
    send(mk(OP_PRELOAD, 0, 100, 0, 0));
    send(mk(OP_COMPUTE, 0, 200, 5, R, 0));
    send(mk(OP_COMPUTE, 0, 200, 5, R, 1));
    send(mk(OP_FENCE, 0, 0, 0, 0));
    send(mk(OP_STORE, 1024, 0, 5, R));
    fence();
    check(idle, "tile idle after layer");
    for (int r = 0; r < R; r++)
      for (int n = 0; n < DIM; n++) begin
        int s;
        s = 0;
        for (int k = 0; k < DIM; k++) s += A[r][k] * B[k][n];
        got = unpack(mem[1024 + r]);
        check(got[n] == post(2 * s, 3, 1), "layer result");
      end

    // ---- part 2: throttled vs. free load ----
    rand_ready = 0;
    config_moca(60, 8);
    b0 = int'(bubbles);
    monitor = 1; win_max = 0;
    t0 = int'($time);
    send(mk(OP_LOAD, 2000, 1000, 0, 240));
    fence();
    t_thr = (int'($time) - t0) / 10;
    monitor = 0;
    check(win_max <= 8, "at most threshold_load requests per window");
    check(win_max == 8, "window filled to threshold");
    check(int'(bubbles) > b0, "bubbles inserted");
    check(t_thr >= (240 / 8 - 1) * 60, "throttled load slowed to threshold rate");
    config_moca(0, 0);
    t0 = int'($time);
    send(mk(OP_LOAD, 2000, 1000, 0, 240));
    fence();
    t_free = (int'($time) - t0) / 10;
    check(t_free <= 240 + 20, "unthrottled load at one line per cycle");
    $display("throttled load: %0d cycles, free load: %0d cycles", t_thr, t_free);

    // ---- part 3: reconfiguration latency ----
    config_moca(100000, 4);
    send(mk(OP_LOAD, 2000, 1000, 0, 16));
    repeat (20) @(negedge clk);
    check(alert, "alert raised");
    @(negedge clk);
    i = mk(OP_CONFIG_MOCA, 0, 0, 0, 0); i.window = 0; i.threshold = 0;
    inst = i; inst_valid = 1;
    t0 = int'($time);
    do @(posedge clk); while (!inst_ready);
    #1 inst_valid = 0;
    while (alert) @(negedge clk);
    check((int'($time) - t0) / 10 <= 10, "reconfiguration within 10 cycles");
    fence();
    check(idle, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
