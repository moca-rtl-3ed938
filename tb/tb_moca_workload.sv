// tb_moca_workload: a light and a heavy tenant co-running on the full-size
// MoCA SoC (default parameters), with the heavy ones rate-limited.
//
// Tile 0 (light, latency-critical) runs one pointwise-convolution layer of
// a keyword-spotting CNN: 25x5 = 125 positions, 64 input and 64 output
// channels, i.e. C[125x64] = A[125x64] * B[64x64] (a typical layer shape of
// such a network, not a size taken from the evaluation). It is tiled for
// the 16x16 array: A is loaded once as 4 column blocks of 125 rows; for each
// of the 4 output blocks, the 4 weight blocks are loaded, preloaded and
// computed in turn, accumulating over K in the accumulator; each output
// block is then stored with shift 8 and ReLU. Every output is compared with
// a reference computed here.
// Tiles 1-7 (heavy) each stream 1024 lines of weights, as a large fully
// connected layer would, throttled to 2 lines per 100-cycle window.
// Checks: tile 0's results; the heavy tiles keep to their rate
// ((1024/2 - 1) * 100 cycles at least) and are held back (bubbles); tile 0
// runs unthrottled (no bubbles). Tile 0's layer time is printed.
module tb_moca_workload;
  import moca_pkg::*;
  localparam int T = N_TILES;
  localparam int M = 125, K = 64, N = 64;
  localparam int KB = K / DIM, NB = N / DIM;
  localparam int A_BASE = 0, B_BASE = 1024, C_BASE = 2048;
  localparam int HEAVY_LINES = 1024;
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

  // ---- results: the cache's copy of a line if it holds one, else DRAM ----
  localparam int BL = L2_LINES / L2_BANKS;
  localparam int TW = MEM_AW - 3 - $clog2(BL);
  function automatic line_t rd_line(int a);
    logic [MEM_AW+1:0] m;
    line_t c;
    int idx;
    idx = (a / 8) % BL;
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
    // meta = {valid, dirty, tag}
    if (m[TW + 1] && (m & ((1 << TW) - 1)) == (MEM_AW+2)'(a / 8 / BL)) return c;
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

  // ---- data ----
  int A [M][K];
  int W [K][N];

  // A column block kb, row r -> line A_BASE + kb*128 + r
  // W block (kb, nb), row k  -> line B_BASE + (kb*NB + nb)*16 + k
  // C block nb, row r        -> line C_BASE + nb*128 + r
  task automatic light_layer();
    inst_t i;
    send(0, mk_cfg(0, 0));
    i = mk(OP_CONFIG_ST, 0, 0, 0, 0); i.shift = 5'd8; i.relu = 1'b1; send(0, i);
    for (int kb = 0; kb < KB; kb++) send(0, mk(OP_LOAD, A_BASE + kb * 128, 64 + kb * 128, 0, M));
    for (int nb = 0; nb < NB; nb++) begin
      for (int kb = 0; kb < KB; kb++) begin
        send(0, mk(OP_LOAD, B_BASE + (kb * NB + nb) * DIM, 0, 0, DIM));
        fence(0);
        send(0, mk(OP_PRELOAD, 0, 0, 0, 0));
        send(0, mk(OP_COMPUTE, 0, 64 + kb * 128, nb * 128, M, kb > 0));
      end
      fence(0);
      send(0, mk(OP_STORE, C_BASE + nb * 128, 0, nb * 128, M));
    end
    fence(0);
  endtask

  int heavy_cycles [T];
  int n_done = 0;
  task automatic heavy_stream(int t);
    int t0;
    send(t, mk_cfg(100, 2));
    t0 = int'($time);
    send(t, mk(OP_LOAD, t * 16384, 0, 0, HEAVY_LINES));
    fence(t);
    heavy_cycles[t] = (int'($time) - t0) / 10;
  endtask

  initial begin
    int light_cycles, t0;
    line_t l;
    for (int t = 0; t < T; t++) begin inst_valid[t] = 0; inst[t] = '0; end
    for (int r = 0; r < M; r++) for (int k = 0; k < K; k++) A[r][k] = int'(elem_t'($urandom));
    for (int k = 0; k < K; k++) for (int n = 0; n < N; n++) W[k][n] = int'(elem_t'($urandom));
    for (int kb = 0; kb < KB; kb++)
      for (int r = 0; r < M; r++) begin
        for (int c = 0; c < DIM; c++) l[c] = elem_t'(A[r][kb * DIM + c]);
        u_dram.poke(MEM_AW'(A_BASE + kb * 128 + r), l);
      end
    for (int kb = 0; kb < KB; kb++)
      for (int nb = 0; nb < NB; nb++)
        for (int k = 0; k < DIM; k++) begin
          for (int c = 0; c < DIM; c++) l[c] = elem_t'(W[kb * DIM + k][nb * DIM + c]);
          u_dram.poke(MEM_AW'(B_BASE + (kb * NB + nb) * DIM + k), l);
        end
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int t = 1; t < T; t++) fork
      automatic int tt = t;
      begin heavy_stream(tt); n_done++; end
    join_none
    t0 = int'($time);
    light_layer();
    light_cycles = (int'($time) - t0) / 10;
    wait (n_done == T - 1);

    // ---- results of the light tenant ----
    for (int nb = 0; nb < NB; nb++)
      for (int r = 0; r < M; r++) begin
        l = rd_line(C_BASE + nb * 128 + r);
        for (int c = 0; c < DIM; c++) begin
          int s, e;
          s = 0;
          for (int k = 0; k < K; k++) s += A[r][k] * W[k][nb * DIM + c];
          e = s >>> 8;
          if (e < 0) e = 0;
          if (e > 127) e = 127;
          check(int'(l[c]) == e, $sformatf("C[%0d][%0d]", r, nb * DIM + c));
        end
      end
    $display("light layer (125x64x64) on tile 0: %0d cycles; heavy tiles: %0d cycles for %0d lines",
             light_cycles, heavy_cycles[1], HEAVY_LINES);
    for (int t = 1; t < T; t++) begin
      check(heavy_cycles[t] >= (HEAVY_LINES / 2 - 1) * 100, "heavy tile kept to its rate");
      check(bubbles[t] > 0, "heavy tile held back");
    end
    check(bubbles[0] == 0, "light tile never throttled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
