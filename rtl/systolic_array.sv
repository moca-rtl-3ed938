// systolic_array: the DIM x DIM weight-stationary systolic array of a tile.
//
// PE (k, n) holds weight W[k][n]. A row vector x of DIM int8 activations
// enters with in_valid; element x[k] is delayed k cycles and enters row k
// from the left, travelling right one PE per cycle, while partial sums flow
// down each column. Column n therefore produces y[n] = sum_k x[k] * W[k][n];
// the column outputs are re-aligned (column n delayed DIM-1-n cycles) so a
// whole result row leaves together, LAT = 2*DIM-1 cycles after its input
// row entered. A new row may enter every cycle. `in_tag` travels alongside
// each row and comes out with its result (the execute controller puts the
// accumulator address there). Weights are written a row at a time with
// w_en / w_row / w_data; they must not change while rows are in flight
// (`busy`). 16x16 and weight-stationary are the paper's; the skewing,
// direct weight write and tag pipeline are this design's choices.
module systolic_array
  import moca_pkg::*;
#(
  parameter int unsigned N     = DIM,
  parameter int unsigned TAG_W = ACC_AW + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   w_en,
  input  logic [$clog2(N)-1:0]   w_row,
  input  elem_t [N-1:0]          w_data,
  input  logic                   in_valid,
  input  elem_t [N-1:0]          in_a,
  input  logic [TAG_W-1:0]       in_tag,
  output logic                   out_valid,
  output acc_t  [N-1:0]          out_c,
  output logic [TAG_W-1:0]       out_tag,
  output logic                   busy
);
  localparam int unsigned LAT = 2 * N - 1;

  elem_t a_h   [N][N+1];  // activation entering PE (k, n) from the left
  acc_t  p_v   [N+1][N];  // partial sum entering PE (k, n) from above
  elem_t skew  [N][N];    // input skew: skew[k][d], row k delayed d+1 cycles
  acc_t  dsk   [N][N];    // output deskew: column n delayed

  // input skew
  always_ff @(posedge clk) begin
    for (int k = 0; k < N; k++) begin
      skew[k][0] <= in_a[k];
      for (int d = 1; d < N; d++) skew[k][d] <= skew[k][d-1];
    end
  end

  for (genvar k = 0; k < N; k++) begin : g_row
    if (k == 0) begin : g_nodelay
      assign a_h[k][0] = in_a[0];
    end else begin : g_delay
      assign a_h[k][0] = skew[k][k-1];
    end
    for (genvar n = 0; n < N; n++) begin : g_col
      pe u_pe (
        .clk     (clk),
        .w_en    (w_en && w_row == k),
        .w_in    (w_data[n]),
        .a_in    (a_h[k][n]),
        .psum_in (p_v[k][n]),
        .a_out   (a_h[k][n+1]),
        .psum_out(p_v[k+1][n])
      );
    end
  end

  for (genvar n = 0; n < N; n++) begin : g_top
    assign p_v[0][n] = '0;
  end

  // output deskew: column n leaves the array at LAT - (N-1-n) cycles, so it
  // is delayed N-1-n more cycles
  always_ff @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      dsk[n][0] <= p_v[N][n];
      for (int d = 1; d < N; d++) dsk[n][d] <= dsk[n][d-1];
    end
  end

  for (genvar n = 0; n < N; n++) begin : g_out
    if (n == N - 1) begin : g_nodelay
      assign out_c[n] = p_v[N][n];
    end else begin : g_delay
      assign out_c[n] = dsk[n][N-2-n];
    end
  end

  // valid and tag pipeline
  logic [LAT-1:0]   v_q;
  logic [TAG_W-1:0] t_q [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_q <= '0;
    else        v_q <= {v_q[LAT-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    t_q[0] <= in_tag;
    for (int i = 1; i < LAT; i++) t_q[i] <= t_q[i-1];
  end

  assign out_valid = v_q[LAT-1];
  assign out_tag   = t_q[LAT-1];
  assign busy      = |v_q;
endmodule
