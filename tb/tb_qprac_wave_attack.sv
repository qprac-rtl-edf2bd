// tb_qprac_wave_attack -- the wave (feinting) attack against QPRAC-1, -2, -4.
//
// Three devices run side by side with 1, 2 and 4 RFMs per Alert (ABO_Delay
// equal to that number), N_BO 32, a 5-entry PSQ and no REF at all (so no
// proactive mitigation: the pessimistic case of the security analysis). Two
// more QPRAC-1 devices get a REF every 67 ACTs: one mitigates its PSQ head on
// every REF (QPRAC+Proactive), one only when the head count is at least
// N_BO/2 (QPRAC+Proactive-EA). Victim refreshes are tracked from the vref
// outputs, because a proactive mitigation may pick a victim row. Two last
// QPRAC-1 devices without REF use N_BO 16 and 64, as points of the N_BO sweep
// (N_BO above about 88 would overflow the 7-bit counters). Each
// is attacked in one bank with a pool of R1 rows, spaced 5 rows apart so that
// victim refreshes never land on pool rows:
//   setup  -- every pool row is activated N_BO-1 times (no Alert may occur);
//   online -- rounds that activate each remaining row once; on Alert the
//             attacker spends the ABO_ACT activations allowed after an Alert
//             on the round, then the controller sends N_MIT RFMs; mitigated
//             rows leave the pool; when one row is left it is hammered alone
//             until it is mitigated.
// The highest count any row reaches must not exceed the analytical bound
// N_BO + N_online with N_online = NR + ABO_ACT + ABO_Delay + BR, where NR is
// the number of rounds from the recurrence
// R(n) = R(n-1) - floor(N_MIT * (R(n-1) - BR) / (ABO_ACT + ABO_Delay)).
// The counter seen through the debug port must agree with the attacker's own
// count of every activation, and every pool row must end up mitigated.
module tb_qprac_wave_attack;
  import qprac_pkg::*;

  localparam int R1      = 8000;
  localparam int ROWS    = 65536;
  localparam int BR      = 2;
  localparam int ABO_ACT = 3;
  localparam int ACTS_PER_REF = 67;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  int   checks = 0, failures = 0;
  int   done = 0;

  always #5 clk = ~clk;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // configurations 0..2: QPRAC-1/2/4 without REF; 3: QPRAC-1+Proactive
  // (every REF); 4: QPRAC-1+Proactive-EA (REF mitigates only at N_PRO = 16);
  // 5, 6: QPRAC-1 without REF at N_BO 16 and 64
  localparam int NCFG = 7;
  for (genvar g = 0; g < NCFG; g++) begin : g_prac
    localparam int  N_BO  = (g == 5) ? 16 : (g == 6) ? 64 : 32;
    localparam int  NMIT  = (g < 3) ? (1 << g) : 1;
    localparam bit  PRO   = (g == 3 || g == 4);
    localparam int  NPRO  = (g == 3) ? 0 : N_BO / 2;

    dram_cmd_e  cmd;
    logic       cmd_bank, dbg_bank;
    row_t       cmd_row, dbg_row;
    logic       ready, alert_n, alert, abo_delay;
    logic       vref_valid [1];
    row_t       vref_row   [1];
    logic       mit_valid  [1];
    row_t       mit_row    [1];
    cnt_t       mit_cnt    [1];
    mit_kind_e  mit_kind   [1];
    psq_entry_t psq_head   [1];
    cnt_t       dbg_cnt;

    qprac_top #(.NUM_BANKS(1), .ROWS(ROWS), .PSQ_N(5), .N_BO(N_BO), .BR(BR),
                .N_MIT(NMIT), .ABO_ACT(ABO_ACT), .ABO_DELAY(NMIT),
                .N_PRO(NPRO), .PROACTIVE_EN(PRO)) dut (.*);

    int  cnt [int];       // attacker's own count per row
    bit  in_pool [int];
    int  max_seen = 0;
    int  n_alerts = 0, n_mitigated = 0, n_pro = 0;
    int  acts_since_ref = 0;

    // victim refreshes also count as activations in the device
    always @(negedge clk) begin
      int v;
      if (rst_n && vref_valid[0]) begin
        v = int'(vref_row[0]);
        cnt[v] = cnt.exists(v) ? cnt[v] + 1 : 1;
      end
    end

    function automatic int bound();
      int r = R1, nr = 0;
      while (r > 1) begin
        int drop = (NMIT * (r - BR)) / (ABO_ACT + NMIT);
        if (drop < 1) drop = 1;
        r -= drop;
        nr++;
      end
      return N_BO + nr + ABO_ACT + NMIT + BR;
    endfunction

    // Drive one command at this falling edge, then leave a NOP cycle so that
    // an Alert caused by it is visible when the task returns.
    task automatic issue(dram_cmd_e c, int r);
      while (!ready) @(negedge clk);
      cmd = c; cmd_row = row_t'(r);
      #1;
      if (mit_valid[0] && mit_kind[0] == MIT_PROACTIVE) n_pro++;
      if (c == CMD_ACT) begin
        acts_since_ref++;
        cnt[r] = cnt.exists(r) ? cnt[r] + 1 : 1;
        if (cnt[r] > max_seen) max_seen = cnt[r];
      end
      if (mit_valid[0]) begin
        int a = int'(mit_row[0]);
        check("mitigated count matches attacker's count", int'(mit_cnt[0]),
              cnt.exists(a) ? cnt[a] : 0);
        cnt[a] = 0;
        if (in_pool.exists(a)) begin in_pool.delete(a); n_mitigated++; end
      end
      @(negedge clk);
      cmd = CMD_NOP;
      @(negedge clk);
    endtask

    // One attacker ACT, with the controller's reaction to Alert around it.
    int abo_left = -1;
    task automatic attack_act(int r);
      if (alert && abo_left < 0) begin abo_left = ABO_ACT; n_alerts++; end
      if (alert && abo_left == 0) begin
        for (int k = 0; k < NMIT; k++) issue(CMD_RFM_AB, 0);
        abo_left = -1;
      end
      if (abo_left > 0) abo_left--;
      // with proactive mitigation the controller also refreshes every 67 ACTs
      if (PRO && acts_since_ref >= ACTS_PER_REF && !alert) begin
        issue(CMD_REF, 0);
        acts_since_ref = 0;
      end
      issue(CMD_ACT, r);
    endtask

    initial begin
      int pool [$];
      string tag;
      cmd = CMD_NOP; cmd_bank = 1'b0; cmd_row = '0; dbg_bank = 1'b0; dbg_row = '0;
      wait (rst_n);
      @(negedge clk);
      while (!ready) @(negedge clk);
      for (int i = 0; i < R1; i++) begin pool.push_back(8 + 5 * i); in_pool[8 + 5 * i] = 1; end
      // setup phase
      for (int k = 0; k < N_BO - 1; k++)
        foreach (pool[i]) begin
          if (in_pool.exists(pool[i])) attack_act(pool[i]);
          if (alert) check("no Alert during setup", 1, 0);
        end
      // online phase
      while (in_pool.num() > 1) begin
        int round [$];
        foreach (pool[i]) if (in_pool.exists(pool[i])) round.push_back(pool[i]);
        pool = round;
        foreach (round[i]) if (in_pool.exists(round[i])) attack_act(round[i]);
      end
      // final round: hammer the last row until it is mitigated
      if (in_pool.num() == 1) begin
        int last;
        void'(in_pool.first(last));
        while (in_pool.exists(last)) begin
          dbg_row = row_t'(last);
          #1;
          check("device counter = attacker's count", int'(dbg_cnt), cnt[last]);
          attack_act(last);
        end
      end
      check("whole pool mitigated", n_mitigated, R1);
      check("max activations within bound", int'(max_seen <= bound()), 1);
      check("attack reached N_BO", int'(max_seen >= N_BO), 1);
      if (PRO) check("proactive mitigations happened", int'(n_pro > 0), 1);
      tag = (g == 3) ? "+Proactive" : (g == 4) ? "+Proactive-EA" : "";
      $display("QPRAC-%0d%0s at N_BO %0d: R1=%0d, %0d Alerts, %0d proactive mitigations, max activations on a row %0d, bound without proactive mitigation N_BO+N_online = %0d",
               NMIT, tag, N_BO, R1, n_alerts, n_pro,
               max_seen, bound());
      done++;
    end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    wait (done == NCFG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
