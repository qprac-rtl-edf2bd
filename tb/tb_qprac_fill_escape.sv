// tb_qprac_fill_escape -- the Fill+Escape pattern against QPRAC's PSQ.
//
// The pattern defeats a FIFO service queue: the queue is filled with rows
// near the threshold, an Alert is provoked, and the attacker spends the
// ABO_ACT activations the controller may still issue after an Alert on a
// target row X, which a full FIFO cannot accept. Here the queue is the
// 5-entry PSQ. Rows A..E and X are activated N_BO-1 times each, round robin
// (the PSQ is then full with A..E and X is left out), then A once more: it
// reaches N_BO and Alert rises. X is then activated ABO_ACT (3) times, to
// N_BO+2. The testbench checks that X, though the PSQ was full, is inserted
// as soon as its count beats the lowest entry, that it is at the PSQ head,
// that the first RFM mitigates X, that the next Alert (after the ABO_Delay
// activation) mitigates A, and that no row exceeds N_BO+2 activations.
module tb_qprac_fill_escape;
  import qprac_pkg::*;

  localparam int N_BO    = 32;
  localparam int ABO_ACT = 3;
  localparam int Q       = 5;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
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
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  qprac_top #(.NUM_BANKS(1), .ROWS(1024), .PROACTIVE_EN(1'b0)) dut (.*);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cnt [int];
  int max_seen = 0;
  int last_mit = -1;

  task automatic issue(dram_cmd_e c, int r);
    while (!ready) @(negedge clk);
    cmd = c; cmd_row = row_t'(r);
    #1;
    if (c == CMD_ACT) begin
      cnt[r] = cnt.exists(r) ? cnt[r] + 1 : 1;
      if (cnt[r] > max_seen) max_seen = cnt[r];
    end
    if (mit_valid[0]) begin
      last_mit = int'(mit_row[0]);
      cnt[last_mit] = 0;
    end else last_mit = -1;
    @(negedge clk);
    cmd = CMD_NOP;
    @(negedge clk);
  endtask

  initial begin
    automatic int rows [Q] = '{10, 20, 30, 40, 50};
    automatic int x = 100;
    automatic int n_rfm = 0;
    cmd = CMD_NOP; cmd_bank = 1'b0; cmd_row = '0; dbg_bank = 1'b0; dbg_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (!ready) @(negedge clk);

    for (int k = 0; k < N_BO - 1; k++) begin
      foreach (rows[i]) issue(CMD_ACT, rows[i]);
      issue(CMD_ACT, x);
    end
    check("no Alert below N_BO", int'(alert), 0);
    check("PSQ full before the attack", int'(psq_head[0].valid), 1);
    dbg_row = row_t'(x); #1;
    check("X at N_BO-1 in DRAM", int'(dbg_cnt), N_BO - 1);
    issue(CMD_ACT, rows[0]);
    check("Alert once A reaches N_BO", int'(alert), 1);
    for (int k = 0; k < ABO_ACT; k++) issue(CMD_ACT, x);
    check("X reached N_BO+2", cnt[x], N_BO + ABO_ACT - 1);
    check("X at the PSQ head", int'(psq_head[0].row), x);
    check("X's count in the PSQ", int'(psq_head[0].cnt), N_BO + ABO_ACT - 1);
    issue(CMD_RFM_AB, 0);
    n_rfm++;
    check("first RFM mitigates X", last_mit, x);
    dbg_row = row_t'(x); #1;
    check("X counter cleared", int'(dbg_cnt), 0);
    check("Alert released after the RFM", int'(alert), 0);
    issue(CMD_ACT, 500);          // the ABO_Delay activation, on a cold row
    check("second Alert for A", int'(alert), 1);
    issue(CMD_RFM_AB, 0);
    n_rfm++;
    check("second RFM mitigates A", last_mit, rows[0]);
    for (int i = 0; i < 4; i++) issue(CMD_ACT, 500);
    check("no further Alert", int'(alert), 0);
    check("no row above N_BO+2", int'(max_seen <= N_BO + ABO_ACT - 1), 1);
    $display("Fill+Escape on QPRAC: target reached %0d activations and was mitigated by the first of %0d RFMs",
             N_BO + ABO_ACT - 1, n_rfm);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
