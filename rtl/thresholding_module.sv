// thresholding_module: the MoCA Thresholding Module of one accelerator tile.
//
// Sits between the Ld and St queues and the memory request path. It picks
// one request per cycle from the two queues (round-robin when both have
// one) and passes it on, except while the Access Counter's `alert` is high:
// then it inserts bubbles, holding both queues back so no further memory
// request leaves the tile until the alert drops (the window ends or the
// runtime writes a new configuration). `bubbles` counts the cycles in which
// a request was waiting but was held back by the alert. Following the paper:
// both queues feed this module, and requests are blocked while the counter
// exceeds its target. This design's choice: round-robin merge, and gating
// both loads and stores (the paper's threshold_load is computed from the
// total of loads and stores).
//
// Timing: combinational from inputs to out_valid / ready; no added latency.
module thresholding_module
  import moca_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    alert,
  // Ld queue
  input  logic    ld_valid,
  output logic    ld_ready,
  input  memcmd_t ld_data,
  // St queue
  input  logic    st_valid,
  output logic    st_ready,
  input  memcmd_t st_data,
  // towards the access counter and memory request generator
  output logic    out_valid,
  input  logic    out_ready,
  output memcmd_t out_data,
  output logic [31:0] bubbles
);
  logic pick_st;      // which queue wins this cycle
  logic last_st_q;    // last granted queue was St

  always_comb begin
    if (ld_valid && st_valid) pick_st = !last_st_q;
    else                      pick_st = st_valid;
  end

  assign out_valid = !alert && (ld_valid || st_valid);
  assign out_data  = pick_st ? st_data : ld_data;
  assign ld_ready  = !alert && out_ready && !pick_st;
  assign st_ready  = !alert && out_ready &&  pick_st;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_st_q <= 1'b0;
      bubbles   <= '0;
    end else begin
      if (out_valid && out_ready) last_st_q <= pick_st;
      if (alert && (ld_valid || st_valid)) bubbles <= bubbles + 1'b1;
    end
  end

  // No request may leave while the alert is raised.
  always_ff @(posedge clk) if (rst_n && alert) assert (!out_valid);
endmodule
