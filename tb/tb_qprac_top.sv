// tb_qprac_top -- end-to-end test of the QPRAC device logic at full size.
//
// The top is instantiated with its default parameters: 32 banks of 128K rows,
// 5-entry PSQs, N_BO 32, N_PRO 16, BR 2, one RFM per Alert. After the counter
// init sweep (checked to take exactly 128K cycles), a memory-controller model
// issues a mix of traffic phases -- single-row hammering (also at the edges
// of a bank), wave-like round robins over a few rows, and random activations
// over the whole device -- with a REF every 67 ACTs (the number of ACTs per
// tREFI), and answers every Alert with up to ABO_ACT (3) activations and then
// an all-bank RFM.
//
// Every cycle the outputs are compared with the transaction-level reference
// model: Alert, ready, every bank's PSQ head, every mitigation report, every
// victim refresh, and a randomly chosen row counter. Each mechanism -- PSQ
// insertion, eviction and rejection, Alert, ABO_ACT activations after an
// Alert, ABO_Delay holding an Alert off, Alert-driven and opportunistic
// mitigations on RFM, proactive mitigations on REF and proactive slots
// skipped below N_PRO, victims entering the PSQ, and victims outside the
// bank -- is counted and must occur at least once. Finally the highest count
// any row reached must stay below 71, the Rowhammer threshold the QPRAC-1
// configuration at N_BO 32 is designed to withstand.
module tb_qprac_top;
  import qprac_pkg::*;
  import qprac_ref_pkg::*;

  localparam int NB      = 32;
  localparam int ROWS    = 131072;
  localparam int PSQ_N   = 5;
  localparam int N_BO    = 32;
  localparam int N_PRO   = 16;
  localparam int BR      = 2;
  localparam int N_MIT   = 1;
  localparam int ABO_ACT = 3;
  localparam int ACTS_PER_REF = 67;
  localparam int N_CMDS  = 60000;
  localparam int TRH     = 71;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  dram_cmd_e  cmd;
  logic [4:0] cmd_bank, dbg_bank;
  row_t       cmd_row, dbg_row;
  logic       ready, alert_n, alert, abo_delay;
  logic       vref_valid [NB];
  row_t       vref_row   [NB];
  logic       mit_valid  [NB];
  row_t       mit_row    [NB];
  cnt_t       mit_cnt    [NB];
  mit_kind_e  mit_kind   [NB];
  psq_entry_t psq_head   [NB];
  cnt_t       dbg_cnt;

  always #5 clk = ~clk;

  qprac_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    repeat (ROWS + 8 * N_CMDS) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  qprac_bank_ref m [NB];
  int pend [NB][$];

  // reference ABO state
  typedef enum {A_IDLE, A_ALERT, A_DELAY} abo_e;
  abo_e a_state = A_IDLE;
  int   a_rfms = 0, a_acts = 0;

  // mechanism counters
  int n_alerts = 0, n_abo_acts = 0, n_held_off = 0, n_alert_mit = 0, n_opp_mit = 0;
  int n_pro_mit = 0, n_pro_skip = 0, n_edge_skip = 0, n_acts = 0, n_refs = 0, n_rfms = 0;
  int max_cnt = 0;

  function automatic bit ref_ready();
    foreach (pend[b]) if (pend[b].size() > 0) return 0;
    return 1;
  endfunction

  function automatic bit ref_alert_req();
    foreach (m[b]) if (m[b].alert_req()) return 1;
    return 0;
  endfunction

  task automatic compare_registered();
    check("alert", int'(alert), int'(a_state == A_ALERT));
    check("alert_n", int'(alert_n), int'(a_state != A_ALERT));
    check("abo_delay", int'(abo_delay), int'(a_state == A_DELAY));
    check("ready", int'(ready), int'(ref_ready()));
    for (int b = 0; b < NB; b++) begin
      check("head valid", int'(psq_head[b].valid), int'(m[b].q_row.size() > 0));
      if (m[b].q_row.size() > 0) begin
        check("head row", int'(psq_head[b].row), m[b].q_row[0]);
        check("head cnt", int'(psq_head[b].cnt), m[b].q_cnt[0]);
      end
    end
  endtask

  task automatic spot_check_counter(int b, int r);
    dbg_bank = 5'(b); dbg_row = row_t'(r);
    #1;
    check("counter", int'(dbg_cnt), m[b].get_cnt(r));
  endtask

  // phase state of the controller model
  int phase = 0, ph_bank = 0, ph_row = 0, ph_len = 0, rr = 0;
  int acts_since_ref = 0, abo_budget = 0;
  int last_act_bank = 0, last_act_row = 0;

  task automatic pick_act(output int b, output int r);
    if (ph_len == 0) begin
      phase  = $urandom_range(2);
      ph_bank = $urandom_range(NB - 1);
      case ($urandom_range(4))
        0: ph_row = 0;
        1: ph_row = ROWS - 1;
        2: ph_row = 1;
        default: ph_row = $urandom_range(ROWS - 1);
      endcase
      ph_len = $urandom_range(50, 400);
    end
    ph_len--;
    b = ph_bank;
    case (phase)
      0: r = ph_row;                                         // hammer one row
      1: begin r = (ph_row + 5 * (rr % 6)) % ROWS; rr++; end // wave over 6 rows
      default: begin b = $urandom_range(NB - 1); r = $urandom_range(ROWS - 1); end
    endcase
    if ($urandom_range(9) == 0) begin b = $urandom_range(NB - 1); r = $urandom_range(ROWS - 1); end
  endtask

  initial begin
    int cyc;
    for (int b = 0; b < NB; b++) m[b] = new(ROWS, PSQ_N, N_BO, N_PRO, BR, 1'b1);
    cmd = CMD_NOP; cmd_bank = '0; cmd_row = '0; dbg_bank = '0; dbg_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    cyc = 0;
    while (!ready) begin @(negedge clk); cyc++; end
    check("init sweep takes ROWS cycles", cyc, ROWS);

    for (int n = 0; n < N_CMDS; ) begin
      bit req_before, is_act, is_rfm;
      dram_cmd_e c;
      int b, r;
      // 1. registered outputs against the reference
      compare_registered();
      spot_check_counter(last_act_bank, last_act_row);
      spot_check_counter($urandom_range(NB - 1), $urandom_range(ROWS - 1));
      req_before = ref_alert_req();

      // 2. the controller's choice
      c = CMD_NOP; b = 0; r = 0;
      // the controller model obeys the device's ready and Alert outputs
      if (ready) begin
        if (alert) begin
          if (a_acts == 0 && a_rfms == 0 && abo_budget < 0) abo_budget = $urandom_range(ABO_ACT);
          if (abo_budget > 0) begin
            c = CMD_ACT; pick_act(b, r); abo_budget--; n_abo_acts++;
          end else begin
            c = CMD_RFM_AB; abo_budget = -1;
          end
        end else if (acts_since_ref >= ACTS_PER_REF) begin
          c = CMD_REF;
        end else begin
          c = ($urandom_range(19) == 0) ? CMD_PRE : CMD_ACT;
          if (c == CMD_ACT) pick_act(b, r);
        end
        n++;
      end
      cmd = c; cmd_bank = 5'(b); cmd_row = row_t'(r);
      is_act = (c == CMD_ACT);
      is_rfm = (c == CMD_RFM_AB);

      // 3. reference update and combinational outputs
      #1;
      if (is_act) begin
        m[b].act(r);
        if (m[b].get_cnt(r) > max_cnt) max_cnt = m[b].get_cnt(r);
        acts_since_ref++; n_acts++;
        last_act_bank = b; last_act_row = r;
      end
      for (int k = 0; k < NB; k++) begin
        if (c == CMD_REF || is_rfm) begin
          int aggr, acnt;
          int vic [$];
          bit did;
          did = m[k].mitigate(is_rfm, aggr, acnt, vic);
          check("mit_valid", int'(mit_valid[k]), int'(did));
          if (did) begin
            check("mit_row", int'(mit_row[k]), aggr);
            check("mit_cnt", int'(mit_cnt[k]), acnt);
            check("mit_kind", int'(mit_kind[k]), is_rfm ? int'(MIT_RFM) : int'(MIT_PROACTIVE));
            if (is_rfm && acnt >= N_BO) n_alert_mit++;
            else if (is_rfm) n_opp_mit++;
            else n_pro_mit++;
            pend[k] = vic;
          end else if (c == CMD_REF && m[k].q_row.size() > 0) n_pro_skip++;
          check("no victim in command cycle", int'(vref_valid[k]), 0);
        end else if (pend[k].size() > 0) begin
          int v;
          v = pend[k].pop_front();
          check("vref_valid", int'(vref_valid[k]), int'(v >= 0));
          if (v >= 0) begin
            check("vref_row", int'(vref_row[k]), v);
            if (m[k].get_cnt(v) + 1 > max_cnt) max_cnt = m[k].get_cnt(v) + 1;
          end else n_edge_skip++;
          m[k].victim(v);
        end else begin
          check("quiet bank", int'(mit_valid[k] || vref_valid[k]), 0);
        end
      end
      if (c == CMD_REF) begin acts_since_ref = 0; n_refs++; end
      if (is_rfm) n_rfms++;

      // 4. reference ABO step
      case (a_state)
        A_IDLE:  if (req_before) begin a_state = A_ALERT; a_rfms = 0; a_acts = 0; n_alerts++; end
        A_ALERT: begin
          if (is_act) a_acts++;
          if (is_rfm) begin
            a_rfms++;
            if (a_rfms >= N_MIT) begin a_state = A_DELAY; a_acts = 0; end
          end
        end
        A_DELAY: begin
          if (req_before) n_held_off++;
          if (is_act) begin
            a_acts++;
            if (a_acts >= N_MIT) a_state = A_IDLE;
          end
        end
      endcase
      @(negedge clk);
    end
    cmd = CMD_NOP;

    $display("ACT %0d REF %0d RFMab %0d", n_acts, n_refs, n_rfms);
    $display("Alerts %0d, ABO_ACT activations %0d, alerts held off by ABO_Delay %0d cycles",
             n_alerts, n_abo_acts, n_held_off);
    $display("mitigations: alert-driven %0d opportunistic %0d proactive %0d, proactive skipped %0d",
             n_alert_mit, n_opp_mit, n_pro_mit, n_pro_skip);
    begin
      automatic int ins = 0, ev = 0, rej = 0, vins = 0;
      foreach (m[b]) begin ins += m[b].n_insert; ev += m[b].n_evict; rej += m[b].n_reject; vins += m[b].n_victim_insert; end
      $display("PSQ: insert %0d evict %0d reject %0d victim-insert %0d; victims outside bank %0d; max count %0d",
               ins, ev, rej, vins, n_edge_skip, max_cnt);
      check("PSQ insertions", int'(ins > 0), 1);
      check("PSQ evictions", int'(ev > 0), 1);
      check("PSQ rejections", int'(rej > 0), 1);
      check("victim insertions", int'(vins > 0), 1);
    end
    check("alerts", int'(n_alerts > 0), 1);
    check("ABO_ACT activations", int'(n_abo_acts > 0), 1);
    check("ABO_Delay hold-off", int'(n_held_off > 0), 1);
    check("alert-driven mitigations", int'(n_alert_mit > 0), 1);
    check("opportunistic mitigations", int'(n_opp_mit > 0), 1);
    check("proactive mitigations", int'(n_pro_mit > 0), 1);
    check("proactive skips", int'(n_pro_skip > 0), 1);
    check("victims outside the bank", int'(n_edge_skip > 0), 1);
    check("max count below T_RH", int'(max_cnt < TRH), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
