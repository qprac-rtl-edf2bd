// qprac_bank -- the QPRAC logic of one DRAM bank.
//
// Ties together the bank's PRAC per-row counters, its priority-based service
// queue (PSQ) and its mitigation sequencer. On an ACT the row's counter is
// incremented and, in the same cycle, the row and its new count are offered to
// the PSQ (hit: count updated in place; miss: inserted if it beats the
// lowest entry). On RFMab or REF the sequencer mitigates the PSQ head and
// refreshes its victims, whose counters and PSQ entries are updated through
// the same path an ACT uses. `alert_req` tells the device-level Alert
// Back-Off controller that the PSQ head is at or above N_BO.
//
// Interface: `act`/`act_row`, `rfm`, `ref_cmd` are one-cycle command strobes.
// `ready` is low during the counter init sweep after reset and while a
// mitigation is in progress; commands must wait for it. Victim refreshes
// leave on `vref_valid`/`vref_row`, mitigations are reported on `mit_*`.
// The structure (counters -> PSQ -> mitigation) follows the paper's overview;
// the single shared counter/PSQ update path is this design's choice.
module qprac_bank
  import qprac_pkg::*;
#(
  parameter int unsigned ROWS         = 131072,
  parameter int unsigned PSQ_N        = 5,
  parameter int unsigned N_BO         = 32,
  parameter int unsigned N_PRO        = 16,
  parameter int unsigned BR           = 2,
  parameter bit          PROACTIVE_EN = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       act,
  input  row_t       act_row,
  input  logic       rfm,
  input  logic       ref_cmd,
  output logic       ready,
  output logic       alert_req,
  output psq_entry_t psq_head,
  output psq_entry_t psq_entries [PSQ_N],
  output logic       vref_valid,
  output row_t       vref_row,
  output logic       mit_valid,
  output row_t       mit_row,
  output cnt_t       mit_cnt,
  output mit_kind_e  mit_kind,
  input  row_t       dbg_row,
  output cnt_t       dbg_cnt
);

  logic init_done, busy;
  logic m_pop, m_upd, m_clr, m_inc;
  row_t m_row;
  logic ctr_inc, ctr_clr;
  row_t ctr_row;
  cnt_t new_cnt;
  logic psq_upd;

  assign ready = init_done && !busy;

  // Shared update path: the sequencer owns it while mitigating, ACTs otherwise.
  logic act_ok;
  assign act_ok  = act && init_done && !busy;
  assign ctr_inc = act_ok || m_inc;
  assign ctr_clr = m_clr;
  assign ctr_row = act_ok ? act_row : m_row;
  assign psq_upd = act_ok || m_upd;

  prac_counters #(.ROWS(ROWS)) u_ctr (
    .clk, .rst_n, .init_done,
    .inc_en (ctr_inc),
    .clr_en (ctr_clr),
    .row    (ctr_row),
    .new_cnt(new_cnt),
    .dbg_row, .dbg_cnt
  );

  qprac_psq #(.N(PSQ_N), .N_BO(N_BO)) u_psq (
    .clk, .rst_n,
    .upd_en (psq_upd),
    .upd_row(ctr_row),
    .upd_cnt(new_cnt),
    .pop_en (m_pop),
    .head   (psq_head),
    .entries(psq_entries),
    .alert_req
  );

  qprac_bank_mitigator #(
    .ROWS(ROWS), .BR(BR), .N_PRO(N_PRO), .PROACTIVE_EN(PROACTIVE_EN)
  ) u_mit (
    .clk, .rst_n,
    .rfm    (rfm && init_done),
    .ref_cmd(ref_cmd && init_done),
    .head   (psq_head),
    .busy,
    .psq_pop(m_pop),
    .psq_upd(m_upd),
    .ctr_clr(m_clr),
    .ctr_inc(m_inc),
    .ctr_row(m_row),
    .vref_valid, .vref_row,
    .mit_valid, .mit_row, .mit_cnt, .mit_kind
  );

  a_cmd_when_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (act || rfm || ref_cmd) |-> ready);
  a_one_cmd: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({act, rfm, ref_cmd}));

endmodule
