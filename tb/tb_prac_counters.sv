// tb_prac_counters -- self-checking test of the per-row PRAC counters.
//
// Checks the init sweep (exactly ROWS cycles, all rows zero), then drives
// random increments, clears and idle cycles against a reference array kept in
// the testbench, comparing `new_cnt` in the cycle of the operation and the
// debug read port afterwards. One row is incremented past the counter's
// maximum to check saturation.
module tb_prac_counters;
  import qprac_pkg::*;

  localparam int unsigned ROWS = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic init_done, inc_en, clr_en;
  row_t row, dbg_row;
  cnt_t new_cnt, dbg_cnt;
  int   checks = 0, failures = 0;
  int   ref_cnt [ROWS];

  always #5 clk = ~clk;

  prac_counters #(.ROWS(ROWS)) dut (.*);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    inc_en = 0; clr_en = 0; row = '0; dbg_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    cyc = 0;
    while (!init_done) begin @(negedge clk); cyc++; end
    check("init cycles", cyc, ROWS);
    for (int r = 0; r < int'(ROWS); r++) begin
      ref_cnt[r] = 0;
      dbg_row = row_t'(r); #1;
      check("zero after init", int'(dbg_cnt), 0);
    end

    // random operations
    for (int i = 0; i < 3000; i++) begin
      int r, op;
      @(negedge clk);
      r  = $urandom_range(ROWS - 1);
      op = $urandom_range(9);
      row = row_t'(r);
      inc_en = (op < 7);
      clr_en = (op == 7);
      #1;
      if (clr_en) ref_cnt[r] = 0;
      else if (inc_en && ref_cnt[r] < 127) ref_cnt[r]++;
      check("new_cnt", int'(new_cnt), ref_cnt[r]);
    end
    @(negedge clk); inc_en = 0; clr_en = 0;

    // saturation on row 5
    row = row_t'(5);
    clr_en = 1; @(negedge clk); clr_en = 0;
    for (int i = 0; i < 140; i++) begin inc_en = 1; @(negedge clk); end
    inc_en = 0;
    ref_cnt[5] = 127;

    for (int r = 0; r < int'(ROWS); r++) begin
      dbg_row = row_t'(r); #1;
      check("final value", int'(dbg_cnt), ref_cnt[r]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
