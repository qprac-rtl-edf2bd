// tb_qprac_abo_ctrl -- self-checking test of the Alert Back-Off controller.
//
// Two instances are tested side by side, PRAC-1 (1 RFM per Alert, ABO_Delay 1)
// and PRAC-4 (4 RFMs per Alert, ABO_Delay 4). A memory-controller model,
// reacting to the Alert output, answers every Alert with 0..ABO_ACT activations followed by N_MIT RFMs, and
// otherwise issues random ACTs and the odd unsolicited RFM. A reference model
// written in the testbench predicts Alert each cycle. Beyond the cycle-by-cycle
// comparison it checks that Alert rises exactly one cycle after a request,
// stays low for ABO_Delay ACTs after the last RFM, and that every kind of
// event (Alert, Alert held off by the delay window) occurred.
module tb_qprac_abo_ctrl;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [1:0] req, act, rfm, alert, alert_n, in_delay;
  int         n_alerts [2];
  int         n_held_off [2];
  int         late_rise [2];

  qprac_abo_ctrl #(.N_MIT(1)) dut1 (.clk, .rst_n, .alert_req(req[0]), .act(act[0]),
    .rfm(rfm[0]), .alert(alert[0]), .alert_n(alert_n[0]), .in_delay(in_delay[0]));
  qprac_abo_ctrl #(.N_MIT(4)) dut4 (.clk, .rst_n, .alert_req(req[1]), .act(act[1]),
    .rfm(rfm[1]), .alert(alert[1]), .alert_n(alert_n[1]), .in_delay(in_delay[1]));

  for (genvar g = 0; g < 2; g++) begin : g_ch
    localparam int NMIT = (g == 0) ? 1 : 4;
    // reference model state
    logic r_alert = 1'b0;
    int   r_rfms_left = 0;
    int   r_delay_left = 0;
    // memory controller model state
    int   acts_budget = 0;
    int   rfm_sent = 0;

    initial begin
      req[g] = 0; act[g] = 0; rfm[g] = 0;
      n_alerts[g] = 0; n_held_off[g] = 0;
      wait (rst_n);
      for (int cyc = 0; cyc < 20000; cyc++) begin
        @(negedge clk);
        // compare with the reference
        check("alert", int'(alert[g]), int'(r_alert));
        check("alert_n", int'(alert_n[g]), int'(!r_alert));
        check("in_delay", int'(in_delay[g]), int'(!r_alert && r_delay_left > 0));
        // new stimulus
        if ($urandom_range(15) == 0) req[g] = !req[g];
        act[g] = 0; rfm[g] = 0;
        // the controller model reacts to the Alert pin it sees
        if (alert[g]) begin
          if (rfm_sent == 0 && acts_budget > 0 && $urandom_range(1) == 1) begin
            act[g] = 1; acts_budget--;
          end else if ($urandom_range(2) == 0) begin
            rfm[g] = 1; rfm_sent++;
          end
        end else begin
          acts_budget = $urandom_range(3);
          rfm_sent = 0;
          act[g] = ($urandom_range(2) == 0);
          rfm[g] = !act[g] && ($urandom_range(200) == 0);
        end
        // reference update for the coming clock edge
        if (r_alert) begin
          if (rfm[g]) begin
            r_rfms_left--;
            if (r_rfms_left == 0) begin r_alert = 0; r_delay_left = NMIT; end
          end
        end else if (r_delay_left > 0) begin
          if (req[g]) n_held_off[g]++;
          if (act[g]) r_delay_left--;
        end else if (req[g]) begin
          r_alert = 1; r_rfms_left = NMIT; n_alerts[g]++;
        end
      end
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (20010) @(negedge clk);
    for (int g = 0; g < 2; g++) begin
      check("alerts happened", int'(n_alerts[g] > 20), 1);
      check("delay window held an alert off", int'(n_held_off[g] > 0), 1);
      $display("channel %0d: %0d alerts, %0d cycles held off by ABO_Delay", g, n_alerts[g], n_held_off[g]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
