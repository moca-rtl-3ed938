// tb_decoder: self-checking test of the decode stage.
// Sends LOAD, STORE, PRELOAD, COMPUTE, CONFIG_MOCA, CONFIG_ST and FENCE
// instructions and checks what reaches each queue: one Ld/St entry per line
// with consecutive addresses, whole Exe commands, the configuration pulse
// (and that it arrives within 10 cycles of the instruction, the paper's
// bound on reconfiguring a tile's issue rate), and that FENCE holds off the
// next instruction until the tile reports idle, and that CONFIG_MOCA is taken
// even while a LOAD is stuck on a full Ld queue. Queue ready is randomised.
module tb_decoder;
  import moca_pkg::*;
  logic clk = 0, rst_n = 0;
  logic inst_valid, inst_ready;
  inst_t inst;
  logic ld_valid, ld_ready, st_valid, st_ready, ex_valid, ex_ready;
  memcmd_t ld_data, st_data;
  execmd_t ex_data;
  logic cfg_moca_valid, st_relu, tile_idle, busy;
  logic [CFG_W-1:0] cfg_window, cfg_threshold;
  logic [4:0] st_shift;
  int checks = 0, failures = 0;
  memcmd_t ld_seen [$], st_seen [$];
  execmd_t ex_seen [$];
  int cfg_seen = 0, cfg_cycle = -1, cyc = 0;
  bit block_ld = 0;

  decoder dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  // random ready, collect outputs
  always @(negedge clk) begin
    ld_ready <= !block_ld && (($urandom % 3) != 0);
    st_ready <= ($urandom % 3) != 0;
    ex_ready <= ($urandom % 3) != 0;
  end
  always @(posedge clk) if (rst_n) begin
    if (ld_valid && ld_ready) ld_seen.push_back(ld_data);
    if (st_valid && st_ready) st_seen.push_back(st_data);
    if (ex_valid && ex_ready) ex_seen.push_back(ex_data);
    if (cfg_moca_valid) begin
      cfg_seen++; cfg_cycle = cyc;
      check(cfg_window == 32'd1234 && cfg_threshold == 32'd17, "config values");
    end
  end

  task automatic send(inst_t i);
    @(negedge clk);
    inst = i; inst_valid = 1;
    do @(posedge clk); while (!inst_ready);
    #1 inst_valid = 0;
  endtask

  function automatic inst_t mk(opcode_e op, int mem, int sp, int acc, int rows);
    inst_t i = '0;
    i.op = op; i.mem_addr = MEM_AW'(mem); i.sp_addr = SP_AW'(sp);
    i.acc_addr = ACC_AW'(acc); i.rows = ROWS_W'(rows);
    return i;
  endfunction

  initial begin
    inst_t i;
    int sent_cycle;
    inst_valid = 0; inst = '0; tile_idle = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    send(mk(OP_LOAD, 1000, 50, 0, 7));
    send(mk(OP_STORE, 2000, 0, 30, 5));
    i = mk(OP_COMPUTE, 0, 64, 9, 33); i.accumulate = 1; send(i);
    send(mk(OP_PRELOAD, 0, 80, 0, 0));
    i = mk(OP_CONFIG_MOCA, 0, 0, 0, 0); i.window = 1234; i.threshold = 17;
    sent_cycle = cyc;
    send(i);
    i = mk(OP_CONFIG_ST, 0, 0, 0, 0); i.shift = 5'd9; i.relu = 1; send(i);
    repeat (20) @(negedge clk);
    check(ld_seen.size() == 7, "7 load lines");
    foreach (ld_seen[k]) check(!ld_seen[k].is_store && ld_seen[k].mem_addr == MEM_AW'(1000 + k) &&
                               ld_seen[k].local_addr == SP_AW'(50 + k), "load line addresses");
    check(st_seen.size() == 5, "5 store lines");
    foreach (st_seen[k]) check(st_seen[k].is_store && st_seen[k].mem_addr == MEM_AW'(2000 + k) &&
                               st_seen[k].local_addr == SP_AW'(30 + k), "store line addresses");
    check(ex_seen.size() == 2, "2 exe commands");
    if (ex_seen.size() == 2) begin
      check(ex_seen[0].is_compute && ex_seen[0].sp_addr == 64 && ex_seen[0].acc_addr == 9 &&
            ex_seen[0].rows == 33 && ex_seen[0].accumulate, "compute command");
      check(!ex_seen[1].is_compute && ex_seen[1].sp_addr == 80, "preload command");
    end
    check(cfg_seen == 1, "one config pulse");
    check(cfg_cycle - sent_cycle <= 10, "config within 10 cycles");
    check(st_shift == 9 && st_relu, "post-processing config");
    // FENCE waits for tile_idle
    tile_idle = 0;
    send(mk(OP_FENCE, 0, 0, 0, 0));
    repeat (15) @(negedge clk);
    check(busy && !inst_ready, "fence holds while tile busy");
    tile_idle = 1;
    repeat (2) @(negedge clk);
    check(!busy && inst_ready, "fence released");
    // CONFIG_MOCA bypasses a LOAD that is stuck on a full Ld queue
    block_ld = 1;
    send(mk(OP_LOAD, 300, 300, 0, 4));
    repeat (5) @(negedge clk);
    check(busy, "load stuck");
    i = mk(OP_CONFIG_MOCA, 0, 0, 0, 0); i.window = 1234; i.threshold = 17;
    sent_cycle = cyc;
    send(i);
    repeat (3) @(negedge clk);
    check(cfg_seen == 2 && cfg_cycle - sent_cycle <= 3, "config bypasses stuck load");
    block_ld = 0;
    repeat (20) @(negedge clk);
    check(ld_seen.size() == 11 && !busy, "stuck load completes");
    for (int k = 7; k < 11; k++) if (k < ld_seen.size()) check(ld_seen[k].mem_addr == MEM_AW'(300 + k - 7), "stuck load lines");
    // zero-row load produces nothing
    send(mk(OP_LOAD, 5, 5, 0, 0));
    repeat (5) @(negedge clk);
    check(ld_seen.size() == 11 && !busy, "zero-row load");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
