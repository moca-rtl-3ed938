// decoder: the Decode stage of one accelerator tile.
//
// Takes instructions (moca_pkg::inst_t) from the controlling RISC-V core
// with a valid/ready handshake and steers them:
//   LOAD / STORE  -> expanded into one Ld / St queue entry per memory line,
//                    so every queue entry is exactly one memory request;
//   PRELOAD / COMPUTE -> one Exe queue entry;
//   CONFIG_MOCA   -> a one-cycle cfg_valid pulse with window/threshold_load
//                    for the Access Counter (the runtime's ConfigureHW).
//                    It is accepted even while an earlier instruction is
//                    still being expanded (for instance a LOAD held up by
//                    the throttle), so a new access-rate limit reaches the
//                    hardware within a few cycles, as the paper requires
//                    (5-10 cycles), instead of waiting behind queued work;
//   CONFIG_ST     -> post-processing shift and ReLU registers;
//   FENCE         -> waits until the whole tile is idle.
// Decode and its three output queues are named in the paper's tile figure;
// the instruction set, the line-by-line expansion and the fence are this
// design's own choices (the base accelerator tracks dependencies between
// the queues in hardware; here software orders them with FENCE).
//
// Timing: an instruction is accepted when the decoder is idle (CONFIG_MOCA:
// always), and is worked on from the next cycle; a LOAD/STORE of R lines
// takes R cycles when the queue is not full. CONFIG_MOCA reaches the counter
// 1 cycle after it is accepted, so a new window/threshold is in force 2
// cycles after acceptance.
module decoder
  import moca_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // from the core
  input  logic    inst_valid,
  output logic    inst_ready,
  input  inst_t   inst,
  // Ld / St / Exe queues
  output logic    ld_valid,
  input  logic    ld_ready,
  output memcmd_t ld_data,
  output logic    st_valid,
  input  logic    st_ready,
  output memcmd_t st_data,
  output logic    ex_valid,
  input  logic    ex_ready,
  output execmd_t ex_data,
  // configuration
  output logic             cfg_moca_valid,
  output logic [CFG_W-1:0] cfg_window,
  output logic [CFG_W-1:0] cfg_threshold,
  output logic [4:0]       st_shift,
  output logic             st_relu,
  // status
  input  logic    tile_idle,     // queues empty and engines idle
  output logic    busy
);
  inst_t             cur;
  logic              have;       // cur holds an instruction being worked on
  logic [ROWS_W-1:0] row;        // next line of a LOAD/STORE
  logic              done;       // cur finishes this cycle

  logic              is_cfg;     // incoming instruction is CONFIG_MOCA
  logic              cfg_q;
  logic [CFG_W-1:0]  win_q, thr_q;

  assign is_cfg     = (inst.op == OP_CONFIG_MOCA);
  assign busy       = have;
  assign inst_ready = !have || is_cfg;
  assign cfg_moca_valid = cfg_q;
  assign cfg_window     = win_q;
  assign cfg_threshold  = thr_q;

  always_comb begin
    ld_valid = 1'b0; st_valid = 1'b0; ex_valid = 1'b0;
    done = 1'b0;
    ld_data = '{is_store: 1'b0, mem_addr: cur.mem_addr + MEM_AW'(row),
                local_addr: cur.sp_addr + SP_AW'(row)};
    st_data = '{is_store: 1'b1, mem_addr: cur.mem_addr + MEM_AW'(row),
                local_addr: SP_AW'(cur.acc_addr + ACC_AW'(row))};
    ex_data = '{is_compute: (cur.op == OP_COMPUTE), sp_addr: cur.sp_addr,
                acc_addr: cur.acc_addr, rows: cur.rows, accumulate: cur.accumulate};
    if (have) begin
      unique case (cur.op)
        OP_LOAD: begin
          ld_valid = (cur.rows != '0);
          done     = (cur.rows == '0) || (ld_ready && row == cur.rows - 1'b1);
        end
        OP_STORE: begin
          st_valid = (cur.rows != '0);
          done     = (cur.rows == '0) || (st_ready && row == cur.rows - 1'b1);
        end
        OP_PRELOAD, OP_COMPUTE: begin
          ex_valid = 1'b1;
          done     = ex_ready;
        end
        OP_CONFIG_ST: done = 1'b1;
        OP_FENCE:     done = tile_idle;
        default:      done = 1'b1;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have     <= 1'b0;
      row      <= '0;
      cur      <= '0;
      st_shift <= '0;
      st_relu  <= 1'b0;
      cfg_q    <= 1'b0;
      win_q    <= '0;
      thr_q    <= '0;
    end else begin
      cfg_q <= inst_valid && is_cfg;
      if (inst_valid && is_cfg) begin
        win_q <= inst.window;
        thr_q <= inst.threshold;
      end
      if (!have && inst_valid && !is_cfg) begin
        cur  <= inst;
        have <= 1'b1;
        row  <= '0;
      end else if (have) begin
        if ((ld_valid && ld_ready) || (st_valid && st_ready)) row <= row + 1'b1;
        if (cur.op == OP_CONFIG_ST) begin
          st_shift <= cur.shift;
          st_relu  <= cur.relu;
        end
        if (done) have <= 1'b0;
      end
    end
  end
endmodule
