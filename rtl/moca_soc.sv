// moca_soc: the MoCA multi-tenant accelerator - N_TILES tiles sharing one
// banked last-level cache in front of DRAM.
//
// Each tile runs its own DNN layer, driven by its own controlling core
// through its instruction port (the cores are outside this module). All
// tiles issue their memory requests to the same shared cache, where they
// contend for banks, and the cache's misses contend for the one DRAM port,
// which is brought out to the DRAM outside the chip. Per-tile MoCA state -
// alert, bubble count, requests counted in the current window and the cycle
// reached in that window - is brought out so the runtime on the cores can
// observe it; the runtime limits each tile's memory access rate by sending
// it CONFIG_MOCA instructions (window, threshold_load). Tile count (8),
// array size (16x16), buffer sizes and cache size/banks are the evaluated
// configuration; the DRAM port takes at most one 16-byte line per cycle.
module moca_soc
  import moca_pkg::*;
#(
  parameter int unsigned TILES = N_TILES,
  parameter int unsigned LINES = L2_LINES,
  parameter int unsigned BANKS = L2_BANKS
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        inst_valid [TILES],
  output logic        inst_ready [TILES],
  input  inst_t       inst       [TILES],
  output logic        idle       [TILES],
  output logic        alert      [TILES],
  output logic [31:0] bubbles    [TILES],
  output logic [CFG_W-1:0] access_count [TILES],
  output logic [CFG_W-1:0] window_cycle [TILES],
  output logic [31:0] bank_conflicts,
  // DRAM port of the shared cache (the DRAM is outside the chip)
  output mem_req_t    dram_req,
  input  logic        dram_ready,
  input  mem_resp_t   dram_resp
);
  mem_req_t  req   [TILES];
  logic      ready [TILES];
  mem_resp_t resp  [TILES];

  for (genvar t = 0; t < TILES; t++) begin : g_tile
    moca_tile u_tile (
      .clk, .rst_n,
      .inst_valid(inst_valid[t]), .inst_ready(inst_ready[t]), .inst(inst[t]),
      .mem_req(req[t]), .mem_ready(ready[t]), .mem_resp(resp[t]),
      .idle(idle[t]), .alert(alert[t]), .bubbles(bubbles[t]),
      .access_count(access_count[t]), .window_cycle(window_cycle[t])
    );
  end

  shared_memory #(.PORTS(TILES), .BANKS(BANKS), .LINES(LINES)) u_mem (
    .clk, .rst_n, .req, .ready, .resp, .conflicts(bank_conflicts),
    .dram_req, .dram_ready, .dram_resp
  );
endmodule
