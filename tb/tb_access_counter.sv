// tb_access_counter: self-checking test of the MoCA access counter.
// Directed part: window 10, threshold_load 3 - the alert rises in the cycle
// after the third request, stays up while the window lasts and drops when a
// new window starts; threshold_load 0 or window 0 disables the alert; a new
// configuration restarts the count. Random part: random requests and
// occasional reconfiguration compared against a cycle-level reference.
module tb_access_counter;
  logic clk = 0, rst_n = 0;
  logic cfg_valid, req_fire, alert;
  logic [31:0] cfg_window, cfg_threshold, access_count, window_cycle;
  int checks = 0, failures = 0;

  access_counter dut (.*);

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

  task automatic configure(int w, int t);
    @(negedge clk); cfg_valid = 1; cfg_window = w; cfg_threshold = t;
    @(negedge clk); cfg_valid = 0;
  endtask

  // reference
  int m_win, m_thr, m_cnt, m_cyc;
  bit m_alert;

  initial begin
    cfg_valid = 0; req_fire = 0; cfg_window = 0; cfg_threshold = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // after reset: disabled
    req_fire = 1; repeat (20) @(negedge clk); req_fire = 0;
    check(!alert, "no alert after reset (threshold 0)");

    // directed: window 10, threshold 3
    configure(10, 3);
    // the configuration was taken at the last edge: window cycle 0 now
    check(window_cycle == 0 && access_count == 0, "window restarted by config");
    req_fire = 1;
    @(negedge clk); check(!alert && access_count == 1, "1 request, no alert");
    @(negedge clk); check(!alert && access_count == 2, "2 requests, no alert");
    @(negedge clk); check(alert && access_count == 3, "3 requests, alert");
    req_fire = 0;
    check(window_cycle == 3, "window cycle 3");
    for (int i = 3; i < 10; i++) begin
      check(alert, "alert held during window");
      @(negedge clk);
    end
    check(!alert && window_cycle == 0 && access_count == 0, "alert drops at new window");

    // window 0 disables
    configure(0, 3);
    req_fire = 1; repeat (10) @(negedge clk); req_fire = 0;
    check(!alert, "window 0: no throttling");

    // reconfiguration clears an active alert
    configure(100, 2);
    req_fire = 1; repeat (3) @(negedge clk); req_fire = 0;
    check(alert, "alert with threshold 2");
    configure(100, 5);
    check(!alert && access_count == 0, "reconfig clears alert");

    // random against reference
    m_win = 100; m_thr = 5; m_cnt = 0; m_cyc = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      @(negedge clk);
      cfg_valid = (($urandom % 300) == 0);
      cfg_window = 1 + ($urandom % 40);
      cfg_threshold = $urandom % 8;
      req_fire = ($urandom % 3) == 0;
      m_alert = (m_win != 0 && m_thr != 0 && m_cnt >= m_thr);
      check(alert == m_alert && access_count == m_cnt, "random vs reference");
      // reference update at the coming edge
      if (cfg_valid) begin
        m_win = cfg_window; m_thr = cfg_threshold; m_cnt = 0; m_cyc = 0;
      end else if (m_win != 0 && m_thr != 0 && m_cyc == m_win - 1) begin
        m_cnt = req_fire; m_cyc = 0;
      end else begin
        m_cyc = (m_win != 0 && m_thr != 0) ? m_cyc + 1 : 0;
        if (req_fire) m_cnt++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
