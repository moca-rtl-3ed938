// tb_scratchpad: self-checking test of the scratchpad (default 8192 lines).
// Writes random lines to random rows, reads them back one cycle later and
// compares with a reference copy; checks the first and last row and that a
// read in the same cycle as a write to that row returns the old line.
module tb_scratchpad;
  import moca_pkg::*;
  logic clk = 0;
  logic wr_en, rd_en;
  logic [SP_AW-1:0] wr_addr, rd_addr;
  line_t wr_data, rd_data;
  int checks = 0, failures = 0;
  line_t model [int];

  scratchpad dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic line_t rnd();
    line_t l;
    for (int n = 0; n < DIM; n++) l[n] = elem_t'($urandom);
    return l;
  endfunction

  initial begin
    int a;
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = '0;
    @(negedge clk);
    for (int k = 0; k < 600; k++) begin
      a = (k == 0) ? 0 : (k == 1) ? SP_ROWS - 1 : $urandom % SP_ROWS;
      wr_en = 1; wr_addr = SP_AW'(a); wr_data = rnd(); model[a] = wr_data;
      @(negedge clk);
    end
    wr_en = 0;
    foreach (model[k]) begin
      rd_en = 1; rd_addr = SP_AW'(k);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== model[k]) begin failures++; $display("FAIL row %0d", k); end
    end
    // read-during-write returns old data
    rd_en = 1; rd_addr = 0; wr_en = 1; wr_addr = 0; wr_data = ~model[0];
    @(negedge clk);
    rd_en = 0; wr_en = 0;
    checks++; if (rd_data !== model[0]) begin failures++; $display("FAIL rdw old"); end
    rd_en = 1; @(negedge clk); rd_en = 0;
    checks++; if (rd_data !== ~model[0]) begin failures++; $display("FAIL rdw new"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
