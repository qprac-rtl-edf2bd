// tb_qprac_bank_mitigator -- self-checking test of the per-bank mitigation
// sequencer.
//
// The PSQ head is driven directly. For RFMs and REFs with heads above and
// below N_PRO, with an empty PSQ, and with aggressors at both edges of the
// bank, the testbench checks cycle by cycle: the pop / counter-clear /
// mitigation report in the command's cycle, then the 2*BR victim refreshes
// (row-BR..row-1, row+1..row+BR, rows outside the bank skipped), the busy
// time of exactly 2*BR cycles, and the mitigation kind.
module tb_qprac_bank_mitigator;
  import qprac_pkg::*;

  localparam int unsigned ROWS  = 100;
  localparam int unsigned BR    = 2;
  localparam int unsigned N_PRO = 16;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       rfm, ref_cmd, busy, psq_pop, psq_upd, ctr_clr, ctr_inc;
  logic       vref_valid, mit_valid;
  psq_entry_t head;
  row_t       ctr_row, vref_row, mit_row;
  cnt_t       mit_cnt;
  mit_kind_e  mit_kind;
  int         checks = 0, failures = 0;

  always #5 clk = ~clk;

  qprac_bank_mitigator #(.ROWS(ROWS), .BR(BR), .N_PRO(N_PRO), .PROACTIVE_EN(1'b1)) dut (.*);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Issue one command with the given head and check the whole sequence.
  task automatic run(logic is_rfm, logic valid, int row, int cnt);
    logic expect_mit;
    int   offs [4] = '{-2, -1, 1, 2};
    @(negedge clk);
    while (busy) @(negedge clk);  // the controller obeys busy
    head = '{valid: valid, row: row_t'(row), cnt: cnt_t'(cnt)};
    rfm = is_rfm; ref_cmd = !is_rfm;
    #1;
    expect_mit = valid && (is_rfm || cnt >= int'(N_PRO));
    check("mit_valid", int'(mit_valid), int'(expect_mit));
    check("psq_pop", int'(psq_pop), int'(expect_mit));
    check("ctr_clr", int'(ctr_clr), int'(expect_mit));
    check("no victim in cmd cycle", int'(ctr_inc || psq_upd || vref_valid), 0);
    if (expect_mit) begin
      check("ctr_row = aggressor", int'(ctr_row), row);
      check("mit_row", int'(mit_row), row);
      check("mit_cnt", int'(mit_cnt), cnt);
      check("mit_kind", int'(mit_kind), is_rfm ? int'(MIT_RFM) : int'(MIT_PROACTIVE));
    end
    @(negedge clk);
    rfm = 0; ref_cmd = 0;
    head = '0;   // the PSQ has popped; the sequencer must use its own copy
    if (expect_mit) begin
      foreach (offs[k]) begin
        int v = row + offs[k];
        logic ok = (v >= 0) && (v < int'(ROWS));
        #1;
        check("busy during victims", int'(busy), 1);
        check("vref_valid", int'(vref_valid), int'(ok));
        check("ctr_inc", int'(ctr_inc), int'(ok));
        check("psq_upd", int'(psq_upd), int'(ok));
        if (ok) begin
          check("vref_row", int'(vref_row), v);
          check("ctr_row = victim", int'(ctr_row), v);
        end
        @(negedge clk);
      end
    end
    #1;
    check("idle after", int'(busy), 0);
    check("no event after", int'(mit_valid || vref_valid), 0);
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rfm = 0; ref_cmd = 0; head = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    run(1, 1, 50, 33);   // alert-driven RFM
    run(1, 1, 51, 3);    // opportunistic: low count still mitigated on RFM
    run(1, 0, 52, 40);   // empty PSQ: nothing
    run(0, 1, 53, 15);   // REF below N_PRO: skipped (energy-aware)
    run(0, 1, 54, 16);   // REF at N_PRO: proactive
    run(0, 1, 55, 90);   // REF well above
    run(1, 1, 0, 40);    // bottom edge
    run(1, 1, 1, 40);
    run(1, 1, 99, 40);   // top edge
    run(0, 1, 98, 20);
    for (int i = 0; i < 40; i++)
      run(logic'($urandom_range(1)), logic'($urandom_range(3) != 0),
          $urandom_range(ROWS - 1), $urandom_range(127));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
