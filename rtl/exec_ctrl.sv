// exec_ctrl: execute controller between the Exe queue and the systolic array.
//
// PRELOAD: reads DIM consecutive scratchpad rows (sp_addr .. sp_addr+DIM-1)
// and writes them as weight rows 0..DIM-1 of the array, one per cycle. It
// waits until no earlier row is still in the array, so rows in flight always
// see the weights they were issued with.
// COMPUTE: reads `rows` consecutive scratchpad rows of input activations,
// one per cycle, and streams them into the array; each result row is written
// (or, with `accumulate`, added) to accumulator row acc_addr + r.
// Scratchpad reads take one cycle, so a PRELOAD takes DIM+1 cycles and a
// COMPUTE of R rows occupies the controller R+1 cycles, its last result
// reaching the accumulator 2*DIM-1 cycles later. `idle` covers all of it.
// The paper shows only the Exe queue feeding the array; this controller is
// the simplest that does that.
module exec_ctrl
  import moca_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  execmd_t           cmd,
  // scratchpad read
  output logic              sp_rd_en,
  output logic [SP_AW-1:0]  sp_rd_addr,
  input  line_t             sp_rd_data,
  // systolic array
  output logic                       w_en,
  output logic [$clog2(DIM)-1:0]     w_row,
  output line_t                      w_data,
  output logic                       a_valid,
  output line_t                      a_data,
  output logic [ACC_AW:0]            a_tag,    // {accumulate, acc row}
  input  logic                       arr_busy,
  input  logic                       r_valid,
  input  acc_row_t                   r_data,
  input  logic [ACC_AW:0]            r_tag,
  // accumulator write
  output logic              acc_wr_en,
  output logic              acc_wr_acc,
  output logic [ACC_AW-1:0] acc_wr_addr,
  output acc_row_t          acc_wr_data,
  output logic              idle
);
  typedef enum logic [1:0] {E_IDLE, E_PRELOAD, E_COMPUTE} state_e;
  state_e            state;
  execmd_t           cur;
  logic [ROWS_W-1:0] cnt;
  logic              last;

  // scratchpad read issued last cycle: what its data is for
  logic              rv_q, rv_pre_q;
  logic [ACC_AW-1:0] rcnt_q;   // row index of that read

  assign cmd_ready = (state == E_IDLE) && !rv_q &&
                     (!cmd.is_compute ? !arr_busy : 1'b1);

  assign sp_rd_en   = (state != E_IDLE);
  assign sp_rd_addr = cur.sp_addr + SP_AW'(cnt);
  assign last       = (state == E_PRELOAD) ? (cnt == ROWS_W'(DIM - 1))
                                           : (cnt == cur.rows - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= E_IDLE;
      cur      <= '0;
      cnt      <= '0;
      rv_q     <= 1'b0;
      rv_pre_q <= 1'b0;
      rcnt_q   <= '0;
    end else begin
      rv_q     <= sp_rd_en;
      rv_pre_q <= (state == E_PRELOAD);
      rcnt_q   <= ACC_AW'(cnt);
      unique case (state)
        E_IDLE: if (cmd_valid && cmd_ready) begin
          cur <= cmd;
          cnt <= '0;
          if (!cmd.is_compute)        state <= E_PRELOAD;
          else if (cmd.rows != '0)    state <= E_COMPUTE;
        end
        default: begin
          cnt <= cnt + 1'b1;
          if (last) state <= E_IDLE;
        end
      endcase
    end
  end

  assign w_en    = rv_q && rv_pre_q;
  assign w_row   = rcnt_q[$clog2(DIM)-1:0];
  assign w_data  = sp_rd_data;
  assign a_valid = rv_q && !rv_pre_q;
  assign a_data  = sp_rd_data;
  assign a_tag   = {cur.accumulate, cur.acc_addr + rcnt_q};

  assign acc_wr_en   = r_valid;
  assign acc_wr_acc  = r_tag[ACC_AW];
  assign acc_wr_addr = r_tag[ACC_AW-1:0];
  assign acc_wr_data = r_data;

  assign idle = (state == E_IDLE) && !rv_q && !arr_busy;
endmodule
