// tb_thresholding_module: self-checking test of the MoCA thresholding module.
// Checks that nothing leaves while alert is high and both queues are held,
// that loads and stores alternate when both wait, that a lone queue is
// passed straight through, and that bubbles counts the held cycles.
module tb_thresholding_module;
  import moca_pkg::*;
  logic clk = 0, rst_n = 0;
  logic alert, ld_valid, ld_ready, st_valid, st_ready, out_valid, out_ready;
  memcmd_t ld_data, st_data, out_data;
  logic [31:0] bubbles;
  int checks = 0, failures = 0;
  int held = 0, last_st = -1;

  thresholding_module dut (.*);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  initial begin
    alert = 0; ld_valid = 0; st_valid = 0; out_ready = 0;
    ld_data = '0; st_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      alert     = ($urandom % 4) == 0;
      ld_valid  = ($urandom % 3) != 0;
      st_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 5) != 0;
      ld_data   = '{is_store: 1'b0, mem_addr: MEM_AW'($urandom), local_addr: SP_AW'($urandom)};
      st_data   = '{is_store: 1'b1, mem_addr: MEM_AW'($urandom), local_addr: SP_AW'($urandom)};
      #1;
      if (alert) begin
        check(!out_valid && !ld_ready && !st_ready, "held while alert");
        if (ld_valid || st_valid) held++;
      end else begin
        check(out_valid == (ld_valid || st_valid), "pass when not alerted");
        if (ld_valid && !st_valid) check(!out_data.is_store && out_data == ld_data && ld_ready == out_ready && !st_ready, "lone load");
        if (st_valid && !ld_valid) check(out_data.is_store && out_data == st_data && st_ready == out_ready && !ld_ready, "lone store");
        if (ld_valid && st_valid) begin
          if (last_st != -1) check(out_data.is_store == (last_st == 0), "round-robin");
          check(out_data == (out_data.is_store ? st_data : ld_data), "data of winner");
        end
        if (out_valid && out_ready) last_st = out_data.is_store;
      end
    end
    @(negedge clk);
    check(bubbles == held, "bubble count");
    check(held > 100, "alert exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
