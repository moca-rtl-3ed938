// tb_accumulator: self-checking test of the accumulator buffer.
// Overwrites random rows, then adds further random rows into some of them
// (wr_acc), and reads every touched row back one cycle after the request,
// comparing with a reference that sums in 32-bit two's complement.
module tb_accumulator;
  import moca_pkg::*;
  logic clk = 0;
  logic wr_en, wr_acc, rd_en;
  logic [ACC_AW-1:0] wr_addr, rd_addr;
  acc_row_t wr_data, rd_data;
  int checks = 0, failures = 0;
  acc_row_t model [int];

  accumulator dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic acc_row_t rnd();
    acc_row_t r;
    for (int n = 0; n < DIM; n++) r[n] = acc_t'($urandom);
    return r;
  endfunction

  initial begin
    int a;
    wr_en = 0; wr_acc = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    @(negedge clk);
    for (int k = 0; k < 1500; k++) begin
      a = (k < 300) ? k * 3 % ACC_ROWS : (k == 300 ? ACC_ROWS - 1 : ($urandom % 300) * 3 % ACC_ROWS);
      wr_en = 1; wr_data = rnd(); wr_addr = ACC_AW'(a);
      wr_acc = (k >= 300) && model.exists(a);
      if (wr_acc) for (int n = 0; n < DIM; n++) model[a][n] = model[a][n] + wr_data[n];
      else model[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    foreach (model[k]) begin
      rd_en = 1; rd_addr = ACC_AW'(k);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== model[k]) begin failures++; $display("FAIL row %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
