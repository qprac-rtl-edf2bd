// qprac_bank_mitigator -- mitigation sequencer of one DRAM bank.
//
// A mitigation takes the row at the head of the bank's PSQ (its highest
// activated row, the aggressor), removes it from the PSQ, clears its PRAC
// counter (the DRAM does this by activating the row) and refreshes the BR rows
// on each side of it (the victims). Each victim refresh also increments the
// victim's own PRAC counter and offers the victim to the PSQ, so rows hammered
// indirectly through mitigations (Half-Double) are tracked too.
//
// Two commands start a mitigation:
//   * RFMab (`rfm`): every bank mitigates its PSQ head whatever its count.
//     For the bank that raised the Alert this is the Alert-driven mitigation,
//     for all others it is the opportunistic mitigation.
//   * REF (`ref_cmd`): proactive mitigation, energy-aware: only when
//     PROACTIVE_EN is set and the head's count is at or above N_PRO (default
//     N_BO/2). N_PRO = 0 gives a proactive mitigation on every REF.
// With an empty PSQ, or a head below N_PRO on REF, nothing happens.
//
// Timing: in the cycle the command arrives the aggressor is popped, its
// counter cleared and `mit_valid` pulses. Then one victim per cycle, in the
// order row-BR .. row-1, row+1 .. row+BR, for 2*BR cycles, with `busy` high;
// `vref_valid`/`vref_row` ask the DRAM array to refresh that row. Victims
// outside 0..ROWS-1 are skipped (their cycle is still spent). No command may
// reach the bank while `busy` is high (checked by an assertion).
// `mit_row`/`mit_cnt` are the PSQ head itself, valid in the `mit_valid`
// cycle; outside that cycle they simply follow the head and carry no event.
// The sequence of actions follows the paper; the one-victim-per-cycle
// schedule, the victim order and the edge-of-bank rule are this design's.
module qprac_bank_mitigator
  import qprac_pkg::*;
#(
  parameter int unsigned ROWS         = 131072,
  parameter int unsigned BR           = 2,    // blast radius
  parameter int unsigned N_PRO        = 16,   // proactive threshold (N_BO/2)
  parameter bit          PROACTIVE_EN = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rfm,
  input  logic       ref_cmd,
  input  psq_entry_t head,
  output logic       busy,
  // to the PSQ
  output logic       psq_pop,
  output logic       psq_upd,
  // to the PRAC counters (the PSQ update count comes from the counters)
  output logic       ctr_clr,
  output logic       ctr_inc,
  output row_t       ctr_row,
  // victim refresh requests to the DRAM array
  output logic       vref_valid,
  output row_t       vref_row,
  // mitigation event
  output logic       mit_valid,
  output row_t       mit_row,
  output cnt_t       mit_cnt,
  output mit_kind_e  mit_kind
);

  localparam int unsigned NV    = (2 * BR > 0) ? 2 * BR : 1;
  localparam int unsigned VIC_W = (NV > 1) ? $clog2(NV) : 1;

  typedef enum logic {S_IDLE, S_VICTIM} state_e;

  state_e           state;
  row_t             aggr;
  logic [VIC_W-1:0] vic;

  logic start_rfm, start_pro, start;
  assign start_rfm = (state == S_IDLE) && rfm && head.valid;
  assign start_pro = (state == S_IDLE) && ref_cmd && !rfm && PROACTIVE_EN &&
                     head.valid && (32'(head.cnt) >= N_PRO);
  assign start     = start_rfm || start_pro;

  // Victim row for the current step, and whether it lies inside the bank.
  logic signed [ROW_W+1:0] vic_off;
  logic signed [ROW_W+1:0] vic_addr;
  logic                    vic_ok;
  always_comb begin
    if (32'(vic) < BR) vic_off = (ROW_W+2)'(signed'(32'(vic) - 32'(BR)));
    else               vic_off = (ROW_W+2)'(32'(vic) - 32'(BR) + 1);
    vic_addr = signed'({2'b00, aggr}) + vic_off;
    vic_ok   = (vic_addr >= 0) && (vic_addr < (ROW_W+2)'(ROWS));
  end

  assign busy       = (state == S_VICTIM);
  assign psq_pop    = start;
  assign ctr_clr    = start;
  assign vref_valid = busy && vic_ok;
  assign vref_row   = vic_addr[ROW_W-1:0];
  assign ctr_inc    = vref_valid;
  assign psq_upd    = vref_valid;
  assign ctr_row    = start ? head.row : vref_row;

  assign mit_valid = start;
  assign mit_row   = head.row;
  assign mit_cnt   = head.cnt;
  assign mit_kind  = start_rfm ? MIT_RFM : (start_pro ? MIT_PROACTIVE : MIT_NONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      aggr  <= '0;
      vic   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start && BR > 0) begin
          state <= S_VICTIM;
          aggr  <= head.row;
          vic   <= '0;
        end
        S_VICTIM: begin
          if (32'(vic) == NV - 1) state <= S_IDLE;
          vic <= vic + 1'b1;
        end
      endcase
    end
  end

  a_no_cmd_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(rfm || ref_cmd));

endmodule
