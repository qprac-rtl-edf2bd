// qprac_psq -- Priority-based Service Queue (PSQ) of one DRAM bank.
//
// The PSQ is a small content-addressable queue of <RowID, activation count>
// entries, kept sorted by count in descending order, so that entry 0 (the
// head) is always the most activated row the bank knows of and entry N-1 (the
// tail) the least. Unlike a FIFO it never refuses a row for being full: it is
// meant to be full all the time and to hold the highest-count rows.
//
// Update (an ACT, or a victim refresh, of row R whose PRAC counter is now C):
//   * hit  -- R is in the queue: its count becomes C in place;
//   * miss -- R is inserted only if a slot is still empty or C is strictly
//             higher than the tail's count; the tail entry is then evicted.
// Pop: the head is removed (it has just been mitigated) and the rest move up.
// After either, the queue is re-sorted by an odd-even transposition network of
// N stages with strict comparisons, so equal counts keep their order. The head
// drives `alert_req` when its count is at or above N_BO.
//
// Follows the paper: the entry format, sorted order, insertion/eviction and
// hit rules, and the alert test. This design's own choices: valid bits for the
// empty slots after reset, the sorting network, and allowing a pop and an
// update in the same cycle (the pop is applied first).
//
// Timing: `head`, `entries` and `alert_req` are registered; an update or pop
// presented in cycle t is visible from cycle t+1. One update per cycle.
module qprac_psq
  import qprac_pkg::*;
#(
  parameter int unsigned N    = 5,   // PSQ entries per bank
  parameter int unsigned N_BO = 32   // Back-Off threshold
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       upd_en,
  input  row_t       upd_row,
  input  cnt_t       upd_cnt,
  input  logic       pop_en,
  output psq_entry_t head,
  output psq_entry_t entries [N],
  output logic       alert_req
);

  psq_entry_t q_r [N];
  psq_entry_t after_pop [N];
  psq_entry_t after_upd [N];
  psq_entry_t stage [N+1][N];

  // "a sorts strictly before b": valid before empty, then larger count.
  function automatic logic ranks_above(logic a_valid, cnt_t a_cnt,
                                       logic b_valid, cnt_t b_cnt);
    if (a_valid != b_valid) return a_valid;
    return a_valid && (a_cnt > b_cnt);
  endfunction

  logic hit;

  always_comb begin
    hit = 1'b0;
    for (int s = 0; s <= int'(N); s++)
      for (int i = 0; i < int'(N); i++) stage[s][i] = '0;

    // 1. pop the head
    for (int i = 0; i < int'(N); i++) begin
      if (pop_en) after_pop[i] = (i + 1 < int'(N)) ? q_r[i+1] : '0;
      else        after_pop[i] = q_r[i];
    end

    // 2. update: hit in place, or insert at the tail
    for (int i = 0; i < int'(N); i++) after_upd[i] = after_pop[i];
    if (upd_en) begin
      for (int i = 0; i < int'(N); i++) begin
        if (after_pop[i].valid && after_pop[i].row == upd_row) begin
          after_upd[i].cnt = upd_cnt;
          hit = 1'b1;
        end
      end
      if (!hit && (!after_pop[N-1].valid || upd_cnt > after_pop[N-1].cnt)) begin
        after_upd[N-1] = '{valid: 1'b1, row: upd_row, cnt: upd_cnt};
      end
    end

    // 3. re-sort: odd-even transposition, N stages
    for (int i = 0; i < int'(N); i++) stage[0][i] = after_upd[i];
    for (int s = 0; s < int'(N); s++) begin
      for (int i = 0; i < int'(N); i++) stage[s+1][i] = stage[s][i];
      for (int i = s % 2; i + 1 < int'(N); i += 2) begin
        if (ranks_above(stage[s][i+1].valid, stage[s][i+1].cnt,
                        stage[s][i].valid, stage[s][i].cnt)) begin
          stage[s+1][i]   = stage[s][i+1];
          stage[s+1][i+1] = stage[s][i];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) q_r[i] <= '0;
    end else if (upd_en || pop_en) begin
      for (int i = 0; i < int'(N); i++) q_r[i] <= stage[N][i];
    end
  end

  assign head      = q_r[0];
  assign entries   = q_r;
  assign alert_req = q_r[0].valid && (32'(q_r[0].cnt) >= N_BO);

endmodule
