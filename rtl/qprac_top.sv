// qprac_top -- QPRAC Rowhammer mitigation logic of one DDR5 device.
//
// The device has NUM_BANKS banks (4 banks x 8 bank groups = 32). Each bank
// has its own PRAC per-row counters, priority-based service queue (PSQ) and
// mitigation sequencer (qprac_bank). One Alert Back-Off controller per device
// (qprac_abo_ctrl) raises Alert when any bank's PSQ head reaches N_BO.
//
// Command interface, one command per cycle, accepted only while `ready`:
//   CMD_ACT    <bank,row> -- counts the activation and updates that bank's PSQ;
//   CMD_REF               -- all-bank refresh: each bank proactively mitigates
//                            its PSQ head if the head's count >= N_PRO;
//   CMD_RFM_AB            -- all-bank RFM: every bank mitigates its PSQ head
//                            (Alert-driven in the bank that needed it,
//                            opportunistic in the others);
//   CMD_PRE, CMD_NOP      -- no QPRAC action.
// Outputs: `alert_n` (active low, to the Alert_n pin; `alert` is the same
// level active high, `abo_delay` marks the post-RFM ABO_Delay window), the per-bank victim
// refresh requests for the DRAM array (`vref_*`), which this logic does not
// contain, per-bank mitigation reports (`mit_*`), the PSQ heads, and a debug
// read of any row's counter.
//
// Timing: an ACT updates the counter and PSQ in its own cycle (results visible
// next cycle). REF/RFM start every bank's mitigation in the same cycle; banks
// that mitigate are busy for 2*BR further cycles, during which `ready` is low.
// After reset `ready` stays low for ROWS cycles while the counters are
// cleared. The organisation, thresholds and sizes are the paper's defaults
// (N_BO 32, N_PRO = N_BO/2, 5-entry PSQ, BR 2, 1 RFM per Alert, 128K rows);
// the command encoding and cycle-level timing are this design's own.
// Lint notes that `rst_n` is both an asynchronous reset and a synchronous
// term: the synchronous use is only the `disable iff` of the assertions,
// which generates no hardware, so the reset network itself is clean.
module qprac_top
  import qprac_pkg::*;
#(
  parameter int unsigned NUM_BANKS    = 32,
  parameter int unsigned ROWS         = 131072,
  parameter int unsigned PSQ_N        = 5,
  parameter int unsigned N_BO         = 32,
  parameter int unsigned N_PRO        = N_BO / 2,
  parameter int unsigned BR           = 2,
  parameter int unsigned N_MIT        = 1,
  parameter int unsigned ABO_ACT      = 3,
  parameter int unsigned ABO_DELAY    = N_MIT,
  parameter bit          PROACTIVE_EN = 1'b1,
  localparam int unsigned BANK_W      = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  dram_cmd_e         cmd,
  input  logic [BANK_W-1:0] cmd_bank,
  input  row_t              cmd_row,
  output logic              ready,
  output logic              alert_n,
  output logic              alert,
  output logic              abo_delay,
  output logic              vref_valid [NUM_BANKS],
  output row_t              vref_row   [NUM_BANKS],
  output logic              mit_valid  [NUM_BANKS],
  output row_t              mit_row    [NUM_BANKS],
  output cnt_t              mit_cnt    [NUM_BANKS],
  output mit_kind_e         mit_kind   [NUM_BANKS],
  output psq_entry_t        psq_head   [NUM_BANKS],
  input  logic [BANK_W-1:0] dbg_bank,
  input  row_t              dbg_row,
  output cnt_t              dbg_cnt
);

  logic [NUM_BANKS-1:0] bank_ready;
  logic [NUM_BANKS-1:0] bank_alert_req;
  cnt_t                 bank_dbg_cnt [NUM_BANKS];

  logic is_act, is_ref, is_rfm;
  assign is_act = (cmd == CMD_ACT);
  assign is_ref = (cmd == CMD_REF);
  assign is_rfm = (cmd == CMD_RFM_AB);

  for (genvar b = 0; b < int'(NUM_BANKS); b++) begin : g_bank
    psq_entry_t entries_unused [PSQ_N];
    qprac_bank #(
      .ROWS(ROWS), .PSQ_N(PSQ_N), .N_BO(N_BO), .N_PRO(N_PRO), .BR(BR),
      .PROACTIVE_EN(PROACTIVE_EN)
    ) u_bank (
      .clk, .rst_n,
      .act        (is_act && (32'(cmd_bank) == b)),
      .act_row    (cmd_row),
      .rfm        (is_rfm),
      .ref_cmd    (is_ref),
      .ready      (bank_ready[b]),
      .alert_req  (bank_alert_req[b]),
      .psq_head   (psq_head[b]),
      .psq_entries(entries_unused),
      .vref_valid (vref_valid[b]),
      .vref_row   (vref_row[b]),
      .mit_valid  (mit_valid[b]),
      .mit_row    (mit_row[b]),
      .mit_cnt    (mit_cnt[b]),
      .mit_kind   (mit_kind[b]),
      .dbg_row,
      .dbg_cnt    (bank_dbg_cnt[b])
    );
  end

  assign ready   = &bank_ready;
  assign dbg_cnt = bank_dbg_cnt[dbg_bank];

  qprac_abo_ctrl #(.N_MIT(N_MIT), .ABO_ACT(ABO_ACT), .ABO_DELAY(ABO_DELAY)) u_abo (
    .clk, .rst_n,
    .alert_req(|bank_alert_req),
    .act      (is_act),
    .rfm      (is_rfm),
    .alert,
    .alert_n,
    .in_delay (abo_delay)
  );

  // Configuration rules: PRAC allows 1, 2 or 4 RFMs per Alert. The security
  // argument needs N_MIT + 1 PSQ entries with proactive mitigation; smaller
  // queues still work (they are studied for performance) but are flagged.
  if (!(N_MIT == 1 || N_MIT == 2 || N_MIT == 4)) begin : g_bad_n_mit
    $error("N_MIT must be 1, 2 or 4");
  end
  if (PSQ_N < 1) begin : g_bad_psq_n
    $error("PSQ_N must be at least 1");
  end
  if (PSQ_N < N_MIT + (PROACTIVE_EN ? 1 : 0)) begin : g_small_psq
    $warning("PSQ_N is below N_MIT (+1 with proactive mitigation): not covered by the security bound");
  end

  a_bank_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    is_act |-> (32'(cmd_bank) < NUM_BANKS));

endmodule
