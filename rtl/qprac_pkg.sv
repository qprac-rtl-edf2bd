// qprac_pkg -- types and constants shared by the QPRAC blocks.
//
// QPRAC tracks, per DRAM bank, the rows with the highest PRAC activation
// counts in a small priority-based service queue (PSQ). Every block uses the
// same row-address width, counter width and PSQ entry layout, defined here.
// Widths follow the published sizing: a 17-bit RowID (128K rows per bank) and
// a 7-bit activation counter per row and per PSQ entry. The DRAM command
// encoding below is a simplified view of the DDR5 commands QPRAC reacts to;
// its numeric codes are this design's own choice.
package qprac_pkg;

  // Row address and activation-counter widths (per bank).
  localparam int unsigned ROW_W = 17;
  localparam int unsigned CNT_W = 7;

  typedef logic [ROW_W-1:0] row_t;
  typedef logic [CNT_W-1:0] cnt_t;

  localparam cnt_t CNT_MAX = '1;

  // One PSQ entry: <RowID, activation count>, plus a valid bit for the few
  // cycles after reset before the queue has filled up.
  typedef struct packed {
    logic valid;
    row_t row;
    cnt_t cnt;
  } psq_entry_t;

  // DRAM commands seen by the QPRAC logic of one device.
  typedef enum logic [2:0] {
    CMD_NOP    = 3'd0,
    CMD_ACT    = 3'd1,  // activate <bank,row>
    CMD_PRE    = 3'd2,  // precharge (no QPRAC action)
    CMD_REF    = 3'd3,  // all-bank refresh: proactive mitigation slot
    CMD_RFM_AB = 3'd4   // all-bank refresh management: ABO / opportunistic
  } dram_cmd_e;

  // Kind of mitigation a bank performs.
  typedef enum logic [1:0] {
    MIT_NONE      = 2'd0,
    MIT_RFM       = 2'd1,  // on RFMab (alert-driven or opportunistic)
    MIT_PROACTIVE = 2'd2   // on REF, energy-aware threshold N_PRO
  } mit_kind_e;

  // Saturating increment of an activation counter.
  function automatic cnt_t cnt_inc(cnt_t c);
    return (c == CNT_MAX) ? c : c + cnt_t'(1);
  endfunction

endpackage
