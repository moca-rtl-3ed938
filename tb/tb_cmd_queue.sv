// tb_cmd_queue: self-checking test of the command FIFO.
// Pushes a random byte stream with random valid and pops with random ready,
// comparing every popped entry with a reference queue; checks that in_ready
// drops exactly when the FIFO is full and not being popped, and that empty
// tracks the reference occupancy.
module tb_cmd_queue;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, empty;
  logic [7:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [7:0] model [$];

  cmd_queue #(.T(logic [7:0]), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      @(negedge clk);
      in_valid  = ($urandom % 3) != 0;
      in_data   = 8'($urandom);
      out_ready = (cyc < 300) ? (($urandom % 4) == 0) : (($urandom % 2) == 0);
      #1;
      check(empty == (model.size() == 0), "empty flag");
      check(out_valid == (model.size() != 0), "out_valid");
      check(in_ready == (model.size() < DEPTH || out_ready), "in_ready");
      if (out_valid && out_ready) begin
        check(model.size() != 0 && out_data == model[0], "data order");
        void'(model.pop_front());
      end
      if (in_valid && in_ready) model.push_back(in_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
