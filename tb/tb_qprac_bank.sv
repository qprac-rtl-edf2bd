// tb_qprac_bank -- self-checking test of one QPRAC bank slice.
//
// Drives a mix of activations (mostly to a few hot rows, so that counts reach
// N_BO), RFMs and REFs into a bank of 64 rows and compares, cycle by cycle,
// with the transaction-level reference model: the full PSQ contents, the
// alert request, each mitigation (row, count, kind), each victim refresh, and
// randomly chosen PRAC counters through the debug port. It also checks the
// ACT-to-PSQ latency (visible the next cycle) and the busy time of a
// mitigation (2*BR cycles), and counts that insertions, evictions, hits,
// rejections, victim insertions, alert requests, RFM and proactive
// mitigations and skipped proactive slots all occurred.
module tb_qprac_bank;
  import qprac_pkg::*;
  import qprac_ref_pkg::*;

  localparam int unsigned ROWS  = 64;
  localparam int unsigned PSQ_N = 5;
  localparam int unsigned N_BO  = 32;
  localparam int unsigned N_PRO = 16;
  localparam int unsigned BR    = 2;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       act, rfm, ref_cmd, ready, alert_req, vref_valid, mit_valid;
  row_t       act_row, vref_row, mit_row, dbg_row;
  cnt_t       mit_cnt, dbg_cnt;
  mit_kind_e  mit_kind;
  psq_entry_t psq_head;
  psq_entry_t psq_entries [PSQ_N];
  int         checks = 0, failures = 0;
  int         n_alert_req = 0, n_rfm_mit = 0, n_pro_mit = 0, n_pro_skip = 0;

  always #5 clk = ~clk;

  qprac_bank #(.ROWS(ROWS), .PSQ_N(PSQ_N), .N_BO(N_BO), .N_PRO(N_PRO), .BR(BR),
               .PROACTIVE_EN(1'b1)) dut (.*);

  qprac_bank_ref m;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic compare_state();
    for (int i = 0; i < int'(PSQ_N); i++) begin
      check("psq valid", int'(psq_entries[i].valid), int'(i < m.q_row.size()));
      if (i < m.q_row.size()) begin
        check("psq row", int'(psq_entries[i].row), m.q_row[i]);
        check("psq cnt", int'(psq_entries[i].cnt), m.q_cnt[i]);
      end
    end
    check("alert_req", int'(alert_req), int'(m.alert_req()));
    dbg_row = row_t'($urandom_range(ROWS - 1));
    #1;
    check("counter", int'(dbg_cnt), m.get_cnt(int'(dbg_row)));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hot [4];
    m = new(ROWS, PSQ_N, N_BO, N_PRO, BR, 1'b1);
    act = 0; rfm = 0; ref_cmd = 0; act_row = '0; dbg_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (!ready) @(negedge clk);
    compare_state();
    foreach (hot[i]) hot[i] = $urandom_range(ROWS - 1);

    for (int it = 0; it < 6000; it++) begin
      int sel;
      sel = $urandom_range(99);
      @(negedge clk);
      while (!ready) @(negedge clk);  // the controller obeys ready
      if (m.alert_req()) n_alert_req++;
      if (sel < 90) begin
        int r;
        r = ($urandom_range(2) == 0) ? int'($urandom_range(ROWS - 1))
                                     : hot[$urandom_range(3)];
        act = 1; act_row = row_t'(r);
        m.act(r);
        @(negedge clk);
        act = 0;
        compare_state();
      end else begin
        int aggr, acnt;
        int vic [$];
        bit is_rfm, did;
        is_rfm = (sel < 95) || m.alert_req();
        rfm = is_rfm; ref_cmd = !is_rfm;
        did = m.mitigate(is_rfm, aggr, acnt, vic);
        #1;
        check("mit_valid", int'(mit_valid), int'(did));
        if (did) begin
          check("mit_row", int'(mit_row), aggr);
          check("mit_cnt", int'(mit_cnt), acnt);
          check("mit_kind", int'(mit_kind), is_rfm ? int'(MIT_RFM) : int'(MIT_PROACTIVE));
          if (is_rfm) n_rfm_mit++; else n_pro_mit++;
        end else if (!is_rfm) n_pro_skip++;
        @(negedge clk);
        rfm = 0; ref_cmd = 0;
        foreach (vic[k]) begin
          #1;
          check("ready low while mitigating", int'(ready), 0);
          check("vref_valid", int'(vref_valid), int'(vic[k] >= 0));
          if (vic[k] >= 0) check("vref_row", int'(vref_row), vic[k]);
          m.victim(vic[k]);
          @(negedge clk);
        end
        #1;
        check("ready after 2*BR cycles", int'(ready), 1);
        compare_state();
        if (did && acnt >= 0) hot[$urandom_range(3)] = $urandom_range(ROWS - 1);
      end
    end
    $display("insert %0d evict %0d hit %0d reject %0d victim-insert %0d",
             m.n_insert, m.n_evict, m.n_hit, m.n_reject, m.n_victim_insert);
    $display("alert-req cycles %0d, rfm mitigations %0d, proactive %0d, proactive skipped %0d",
             n_alert_req, n_rfm_mit, n_pro_mit, n_pro_skip);
    check("insertions seen", int'(m.n_insert > 0), 1);
    check("evictions seen", int'(m.n_evict > 0), 1);
    check("hits seen", int'(m.n_hit > 0), 1);
    check("rejections seen", int'(m.n_reject > 0), 1);
    check("victim insertions seen", int'(m.n_victim_insert > 0), 1);
    check("alert requests seen", int'(n_alert_req > 0), 1);
    check("rfm mitigations seen", int'(n_rfm_mit > 0), 1);
    check("proactive mitigations seen", int'(n_pro_mit > 0), 1);
    check("proactive skips seen", int'(n_pro_skip > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
