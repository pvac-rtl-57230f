// tb_abo_ctrl -- directed walk through the Alert Back-Off sequence with
// NMit = 4 (default) and NMit = 1: ALERT_n on a pending NBO crossing, ALERT_n
// held until the first RFM, NMit RFMs, ABO_Delay = NMit ACTs of hold-off in
// which a still-pending request raises no alert, the alert right after the
// hold-off, and the flag for a controller that issues more than ABO_ACT = 3
// ACTs before the first RFM.
module tb_abo_ctrl;
  timeunit 1ns; timeprecision 10ps;

  logic clk = 0, rst_n = 0;
  logic req = 0, act = 0, rfm = 0;
  logic alert_n4, rec4, viol4, alert_n1, rec1, viol1;
  logic [1:0] st4, st1;
  int unsigned checks = 0, failures = 0;

  abo_ctrl dut4 (.clk(clk), .rst_n(rst_n), .alert_req(req), .act_seen(act), .rfm_seen(rfm),
                 .alert_n(alert_n4), .in_recovery(rec4), .abo_act_violation(viol4), .state_o(st4));
  abo_ctrl #(.NMIT(1)) dut1 (.clk(clk), .rst_n(rst_n), .alert_req(req), .act_seen(act), .rfm_seen(rfm),
                 .alert_n(alert_n1), .in_recovery(rec1), .abo_act_violation(viol1), .state_o(st1));

  always #0.5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse_act(); @(negedge clk); act = 1; @(negedge clk); act = 0; endtask
  task automatic pulse_rfm(); @(negedge clk); rfm = 1; @(negedge clk); rfm = 0; endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);
    check(alert_n4 && alert_n1, "no alert without request");
    // ---- request: both assert ALERT_n one cycle later ----
    req = 1;
    @(negedge clk);
    check(!alert_n4 && !alert_n1, "alert asserted");
    // three ACTs allowed within tABO_ACT
    repeat (3) pulse_act();
    check(!alert_n4 && !viol4, "alert held through 3 ACTs, no violation");
    repeat (5) @(negedge clk);
    check(!alert_n4, "alert held until RFM");
    // ---- RFMs ----
    pulse_rfm();
    check(alert_n4 && rec4, "NMit=4: alert released by first RFM, still recovering");
    check(alert_n1 && !rec1, "NMit=1: one RFM ends recovery");
    // NMit=1 now waits one ACT; request is still pending
    repeat (2) pulse_rfm();
    check(rec4, "NMit=4: 3 RFMs seen, still recovering");
    pulse_rfm();
    check(!rec4 && alert_n4, "NMit=4: recovery over after 4 RFMs");
    // hold-off: 3 ACTs -> still no alert for NMit=4, NMit=1 re-alerts after 1
    pulse_act();
    @(negedge clk);
    check(!alert_n1, "NMit=1: re-alert after ABO_Delay = 1 ACT");
    pulse_act(); pulse_act();
    repeat (3) @(negedge clk);
    check(alert_n4, "NMit=4: no alert during ABO_Delay");
    pulse_act();
    @(negedge clk);
    check(!alert_n4, "NMit=4: re-alert after ABO_Delay = 4 ACTs");
    // ---- violation: 4 ACTs before the RFM ----
    repeat (4) pulse_act();
    check(viol4, "violation flagged after 4 ACTs");
    req = 0;
    repeat (4) pulse_rfm();
    repeat (4) pulse_act();
    repeat (3) @(negedge clk);
    check(alert_n4 && st4 == 2'd0, "back to idle with no request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
