// moca_tile: one MoCA accelerator tile.
//
// Instructions from the tile's controlling core are decoded into three
// command queues. The Exe queue drives the execute controller and the
// weight-stationary systolic array, which reads weights and input
// activations from the scratchpad and writes results into the accumulator.
// The Ld and St queues hold one entry per memory line; their entries pass
// through the MoCA Thresholding Module and the Access Counter before the
// Memory Requests Generator turns them into shared-memory requests. Stores
// read the accumulator and go through the post-processing unit. The Access
// Counter counts requests in a window of `window` cycles; once the count
// reaches `threshold_load` it raises an alert, and the Thresholding Module
// holds the Ld and St queues back (bubbles) until the window ends or the
// core writes a new configuration (CONFIG_MOCA). Compute keeps running while
// memory requests are throttled. This block structure is the paper's tile
// figure; see each submodule for what is the paper's and what is this
// design's own.
//
// Status outputs: `idle` (decoder, queues and engines all empty), the
// bubble count, the requests counted in the current window, the cycle
// reached in that window, and `alert`.
module moca_tile
  import moca_pkg::*;
#(
  parameter int unsigned LD_DEPTH = 8,
  parameter int unsigned ST_DEPTH = 2,
  parameter int unsigned EX_DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inst_valid,
  output logic        inst_ready,
  input  inst_t       inst,
  output mem_req_t    mem_req,
  input  logic        mem_ready,
  input  mem_resp_t   mem_resp,
  output logic        idle,
  output logic        alert,
  output logic [31:0] bubbles,
  output logic [CFG_W-1:0] access_count,
  output logic [CFG_W-1:0] window_cycle
);
  // decoder -> queues
  logic    dld_v, dld_r, dst_v, dst_r, dex_v, dex_r;
  memcmd_t dld_d, dst_d;
  execmd_t dex_d;
  // queues -> engines
  logic    qld_v, qld_r, qst_v, qst_r, qex_v, qex_r;
  memcmd_t qld_d, qst_d;
  execmd_t qex_d;
  logic    ld_empty, st_empty, ex_empty;
  // config
  logic             cfg_v;
  logic [CFG_W-1:0] cfg_win, cfg_thr;
  logic [4:0]       st_shift;
  logic             st_relu;
  logic             dec_busy;
  // thresholding -> request generator
  logic    t_v, t_r;
  memcmd_t t_d;
  // engines
  logic              dma_idle, exe_idle;
  logic              sp_we, sp_re;
  logic [SP_AW-1:0]  sp_wa, sp_ra;
  line_t             sp_wd, sp_rd;
  logic              acc_we, acc_wacc, acc_re;
  logic [ACC_AW-1:0] acc_wa, acc_ra;
  acc_row_t          acc_wd, acc_rd;
  line_t             st_line;
  logic                   w_en, a_v, r_v, arr_busy;
  logic [$clog2(DIM)-1:0] w_row;
  line_t                  w_d, a_d;
  logic [ACC_AW:0]        a_tag, r_tag;
  acc_row_t               r_d;

  logic tile_idle;
  assign tile_idle = ld_empty && st_empty && ex_empty && dma_idle && exe_idle;
  assign idle      = tile_idle && !dec_busy;

  decoder u_dec (
    .clk, .rst_n,
    .inst_valid, .inst_ready, .inst,
    .ld_valid(dld_v), .ld_ready(dld_r), .ld_data(dld_d),
    .st_valid(dst_v), .st_ready(dst_r), .st_data(dst_d),
    .ex_valid(dex_v), .ex_ready(dex_r), .ex_data(dex_d),
    .cfg_moca_valid(cfg_v), .cfg_window(cfg_win), .cfg_threshold(cfg_thr),
    .st_shift, .st_relu,
    .tile_idle, .busy(dec_busy)
  );

  cmd_queue #(.T(memcmd_t), .DEPTH(LD_DEPTH)) u_ldq (
    .clk, .rst_n, .in_valid(dld_v), .in_ready(dld_r), .in_data(dld_d),
    .out_valid(qld_v), .out_ready(qld_r), .out_data(qld_d), .empty(ld_empty));
  cmd_queue #(.T(memcmd_t), .DEPTH(ST_DEPTH)) u_stq (
    .clk, .rst_n, .in_valid(dst_v), .in_ready(dst_r), .in_data(dst_d),
    .out_valid(qst_v), .out_ready(qst_r), .out_data(qst_d), .empty(st_empty));
  cmd_queue #(.T(execmd_t), .DEPTH(EX_DEPTH)) u_exq (
    .clk, .rst_n, .in_valid(dex_v), .in_ready(dex_r), .in_data(dex_d),
    .out_valid(qex_v), .out_ready(qex_r), .out_data(qex_d), .empty(ex_empty));

  thresholding_module u_thr (
    .clk, .rst_n, .alert,
    .ld_valid(qld_v), .ld_ready(qld_r), .ld_data(qld_d),
    .st_valid(qst_v), .st_ready(qst_r), .st_data(qst_d),
    .out_valid(t_v), .out_ready(t_r), .out_data(t_d),
    .bubbles
  );

  access_counter u_cnt (
    .clk, .rst_n,
    .cfg_valid(cfg_v), .cfg_window(cfg_win), .cfg_threshold(cfg_thr),
    .req_fire(t_v && t_r),
    .alert, .access_count, .window_cycle
  );

  mem_req_gen u_dma (
    .clk, .rst_n,
    .cmd_valid(t_v), .cmd_ready(t_r), .cmd(t_d),
    .mem_req, .mem_ready, .mem_resp,
    .sp_wr_en(sp_we), .sp_wr_addr(sp_wa), .sp_wr_data(sp_wd),
    .acc_rd_en(acc_re), .acc_rd_addr(acc_ra), .st_line,
    .idle(dma_idle)
  );

  scratchpad u_sp (
    .clk, .wr_en(sp_we), .wr_addr(sp_wa), .wr_data(sp_wd),
    .rd_en(sp_re), .rd_addr(sp_ra), .rd_data(sp_rd));

  accumulator u_acc (
    .clk, .wr_en(acc_we), .wr_acc(acc_wacc), .wr_addr(acc_wa), .wr_data(acc_wd),
    .rd_en(acc_re), .rd_addr(acc_ra), .rd_data(acc_rd));

  post_proc u_pp (.in_row(acc_rd), .shift(st_shift), .relu(st_relu), .out_line(st_line));

  exec_ctrl u_exe (
    .clk, .rst_n,
    .cmd_valid(qex_v), .cmd_ready(qex_r), .cmd(qex_d),
    .sp_rd_en(sp_re), .sp_rd_addr(sp_ra), .sp_rd_data(sp_rd),
    .w_en, .w_row, .w_data(w_d),
    .a_valid(a_v), .a_data(a_d), .a_tag,
    .arr_busy, .r_valid(r_v), .r_data(r_d), .r_tag,
    .acc_wr_en(acc_we), .acc_wr_acc(acc_wacc), .acc_wr_addr(acc_wa), .acc_wr_data(acc_wd),
    .idle(exe_idle)
  );

  systolic_array u_sa (
    .clk, .rst_n,
    .w_en, .w_row, .w_data(w_d),
    .in_valid(a_v), .in_a(a_d), .in_tag(a_tag),
    .out_valid(r_v), .out_c(r_d), .out_tag(r_tag),
    .busy(arr_busy)
  );
endmodule
