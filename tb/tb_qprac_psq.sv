// tb_qprac_psq -- self-checking test of the priority-based service queue.
//
// First replays the insertion and hit examples used to explain the PSQ (a
// queue holding X:31, Y:25, Z:1; ACT-A with count 4 evicts Z; a hit on X with
// count 32 updates it in place and raises the alert request). Then drives
// thousands of random updates and pops over a small pool of rows, checking
// after each cycle, against a reference kept in the testbench, that the queue
// holds exactly the expected rows and counts, in descending count order, and
// that `alert_req` matches the head's count against N_BO. Where several
// entries share a count the reference accepts the DUT's choice among them.
module tb_qprac_psq;
  import qprac_pkg::*;

  localparam int unsigned N    = 5;
  localparam int unsigned N_BO = 32;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       upd_en, pop_en, alert_req;
  row_t       upd_row;
  cnt_t       upd_cnt;
  psq_entry_t head;
  psq_entry_t entries [N];
  int         checks = 0, failures = 0;

  // reference: rows and counts currently held (unordered)
  int ref_row [$];
  int ref_cnt [$];

  always #5 clk = ~clk;

  qprac_psq #(.N(N), .N_BO(N_BO)) dut (.*);

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int ref_min();
    int m = 1000;
    foreach (ref_cnt[i]) if (ref_cnt[i] < m) m = ref_cnt[i];
    return m;
  endfunction
  function automatic int ref_max();
    int m = -1;
    foreach (ref_cnt[i]) if (ref_cnt[i] > m) m = ref_cnt[i];
    return m;
  endfunction
  function automatic int ref_find(int r);
    foreach (ref_row[i]) if (ref_row[i] == r) return i;
    return -1;
  endfunction

  // Apply one cycle of pop/update to the reference (before the clock edge, so
  // that the DUT's current state can name which of equal entries goes).
  task automatic ref_step(logic pop, logic upd, int r, int c);
    if (pop && ref_row.size() > 0) begin
      int k;
      check("pop takes the max", int'(head.cnt), ref_max());
      k = ref_find(int'(head.row));
      check("popped row held", int'(k >= 0), 1);
      if (k >= 0) begin ref_row.delete(k); ref_cnt.delete(k); end
    end
    if (upd) begin
      int k = ref_find(r);
      if (k >= 0) ref_cnt[k] = c;
      else if (ref_row.size() < int'(N)) begin ref_row.push_back(r); ref_cnt.push_back(c); end
      else if (c > ref_min()) begin
        // the queue is full (so nothing was popped): the tail is evicted
        int tail_row, j;
        tail_row = int'(entries[N-1].row);
        j = ref_find(tail_row);
        check("evicted row has min count", (j >= 0) ? ref_cnt[j] : -1, ref_min());
        if (j >= 0) begin ref_row.delete(j); ref_cnt.delete(j); end
        ref_row.push_back(r); ref_cnt.push_back(c);
      end
    end
  endtask

  task automatic compare();
    int n_valid = 0;
    for (int i = 0; i < int'(N); i++) begin
      if (entries[i].valid) begin
        int k;
        n_valid++;
        k = ref_find(int'(entries[i].row));
        check("entry row expected", int'(k >= 0), 1);
        if (k >= 0) check("entry count", int'(entries[i].cnt), ref_cnt[k]);
        if (i > 0) check("descending order", int'(entries[i-1].valid && entries[i-1].cnt >= entries[i].cnt), 1);
      end
    end
    check("occupancy", n_valid, ref_row.size());
    check("alert_req", int'(alert_req), int'(ref_row.size() > 0 && ref_max() >= int'(N_BO)));
    if (ref_row.size() > 0) check("head is max", int'(head.cnt), ref_max());
  endtask

  task automatic drive(logic pop, logic upd, int r, int c);
    @(negedge clk);
    pop_en = pop; upd_en = upd; upd_row = row_t'(r); upd_cnt = cnt_t'(c);
    ref_step(pop, upd, r, c);
    @(negedge clk);
    pop_en = 0; upd_en = 0;
    compare();
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ctr [16];
  initial begin
    upd_en = 0; pop_en = 0; upd_row = '0; upd_cnt = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    compare();

    // worked example (rows X=10, Y=11, Z=12, A=13)
    drive(0, 1, 12, 1);
    drive(0, 1, 11, 25);
    drive(0, 1, 10, 31);
    check("alert below N_BO", int'(alert_req), 0);
    drive(0, 1, 13, 4);                // fills slot 4
    drive(0, 1, 14, 2);                // fills slot 5 (queue now full)
    drive(0, 1, 15, 1);                // 1 is not above the min (1): no insert
    check("no insert on tie", ref_find(15), -1);
    check("dut no insert on tie", int'(entries[N-1].row == row_t'(15)), 0);
    drive(0, 1, 15, 3);                // beats Z:1, Z evicted
    check("Z evicted", int'(entries[N-1].row == row_t'(14)), 1);
    drive(0, 1, 10, 32);               // hit on X, count in place
    check("X at head", int'(head.row), 10);
    check("alert at N_BO", int'(alert_req), 1);
    drive(1, 0, 0, 0);                 // mitigate X
    check("Y at head", int'(head.row), 11);
    check("alert cleared", int'(alert_req), 0);
    // pop and update in the same cycle
    drive(1, 1, 3, 9);
    // drain
    for (int i = 0; i < 6; i++) drive(1, 0, 0, 0);
    check("empty after drain", int'(head.valid), 0);

    // random traffic over 16 rows with per-row counters like PRAC's
    foreach (ctr[i]) ctr[i] = 0;
    for (int i = 0; i < 5000; i++) begin
      int r, c; logic pop, upd;
      r   = $urandom_range(15);
      pop = ($urandom_range(9) == 0);
      upd = ($urandom_range(9) != 0);
      if ($urandom_range(3) == 0) ctr[r] = $urandom_range(60);
      else if (ctr[r] < 127) ctr[r]++;
      c = ctr[r];
      drive(pop, upd, r, c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
