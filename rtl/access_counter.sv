// access_counter: the MoCA Access Counter of one accelerator tile.
//
// Counts the memory requests the tile issues (req_fire) during a monitored
// window of `window` cycles, and raises `alert` while that count has
// reached `threshold_load`. At the end of each window both the cycle count
// and the access count restart from zero, so the alert lasts at most until
// the window ends; writing a new configuration (cfg_valid) also restarts
// both. window == 0 or threshold_load == 0 means "no throttling": the
// runtime writes zeros when it detects no contention, and alert then stays
// low. Following the paper: the window/threshold_load pair written by the
// runtime, counting requests within the window, alert when the target is
// reached. This design's choices: ">=" as the alert condition, restart at
// the window boundary, 32-bit counters, and counting a request in the cycle
// it is handed to the memory request generator.
//
// Timing: alert is registered state; a request fired in cycle t is counted
// from cycle t+1. A configuration takes effect in the cycle after cfg_valid.
module access_counter
  import moca_pkg::*;
#(
  parameter int unsigned W = CFG_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         cfg_valid,
  input  logic [W-1:0] cfg_window,
  input  logic [W-1:0] cfg_threshold,
  input  logic         req_fire,     // a request passed to the request generator
  output logic         alert,
  output logic [W-1:0] access_count, // requests in the current window
  output logic [W-1:0] window_cycle  // cycles elapsed in the current window
);
  logic [W-1:0] window_q, threshold_q;
  logic         enabled;

  assign enabled = (window_q != '0) && (threshold_q != '0);
  assign alert   = enabled && (access_count >= threshold_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      window_q     <= '0;
      threshold_q  <= '0;
      access_count <= '0;
      window_cycle <= '0;
    end else if (cfg_valid) begin
      window_q     <= cfg_window;
      threshold_q  <= cfg_threshold;
      access_count <= '0;
      window_cycle <= '0;
    end else if (enabled && window_cycle == window_q - 1'b1) begin
      // window ends: start a new one (a request in this cycle opens it)
      access_count <= W'(req_fire);
      window_cycle <= '0;
    end else begin
      window_cycle <= enabled ? window_cycle + 1'b1 : '0;
      if (req_fire && access_count != '1) access_count <= access_count + 1'b1;
    end
  end
endmodule
