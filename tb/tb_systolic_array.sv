// tb_systolic_array: self-checking test of the 16x16 weight-stationary array.
// Loads a random int8 weight matrix W, streams random int8 rows x (one per
// cycle, with gaps) and compares every result row with y = x * W computed
// here, the tag returned with it, and the latency: each result must appear
// exactly 2*16-1 = 31 cycles after its row entered. Then reloads the weights
// and repeats.
module tb_systolic_array;
  import moca_pkg::*;
  localparam int LAT = 2 * DIM - 1;
  logic clk = 0, rst_n = 0;
  logic w_en, in_valid, out_valid, busy;
  logic [$clog2(DIM)-1:0] w_row;
  line_t w_data, in_a;
  logic [ACC_AW:0] in_tag, out_tag;
  acc_row_t out_c;
  int checks = 0, failures = 0, cyc = 0;
  int W [DIM][DIM];
  acc_row_t exp_q [$];
  int tag_q [$], time_q [$];

  systolic_array dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL unexpected output"); end
    else begin
      acc_row_t e;
      int t, c;
      e = exp_q.pop_front();
      t = tag_q.pop_front();
      c = time_q.pop_front();
      if (out_c !== e || out_tag != (ACC_AW+1)'(t) || (int'($time) - c - 5) / 10 != LAT) begin
        failures++;
        $display("FAIL row: tag %0d/%0d latency %0d", out_tag, t, (int'($time) - c - 5) / 10);
      end
    end
  end

  task automatic load_weights();
    for (int k = 0; k < DIM; k++) begin
      @(negedge clk);
      w_en = 1; w_row = k[$clog2(DIM)-1:0];
      for (int n = 0; n < DIM; n++) begin
        W[k][n] = int'($urandom % 256) - 128;
        w_data[n] = elem_t'(W[k][n]);
      end
    end
    @(negedge clk); w_en = 0;
  endtask

  task automatic stream(int rows);
    for (int r = 0; r < rows; r++) begin
      acc_row_t e;
      int x [DIM];
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      if (in_valid) begin
        for (int k = 0; k < DIM; k++) begin
          x[k] = (r < 2) ? ((r == 0) ? 127 : -128) : int'($urandom % 256) - 128;
          in_a[k] = elem_t'(x[k]);
        end
        for (int n = 0; n < DIM; n++) begin
          int s = 0;
          for (int k = 0; k < DIM; k++) s += x[k] * W[k][n];
          e[n] = acc_t'(s);
        end
        in_tag = (ACC_AW+1)'($urandom);
        exp_q.push_back(e); tag_q.push_back(int'(in_tag)); time_q.push_back(int'($time));
      end else begin
        for (int k = 0; k < DIM; k++) in_a[k] = elem_t'($urandom);
      end
    end
    @(negedge clk); in_valid = 0;
    while (busy) @(negedge clk);
  endtask

  initial begin
    w_en = 0; in_valid = 0; w_row = 0; w_data = '0; in_a = '0; in_tag = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_weights();
    stream(200);
    load_weights();
    stream(100);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
