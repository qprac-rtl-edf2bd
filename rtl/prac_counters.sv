// prac_counters -- the PRAC per-row activation counters of one DRAM bank.
//
// PRAC stores an activation counter next to every DRAM row. This block keeps
// those counters as an array of ROWS words of CNT_W bits and performs the
// three operations QPRAC needs on them:
//   * increment, when the row is activated (ACT) or when it is refreshed as
//     a victim of a mitigation (the transitive, Half-Double protection);
//   * clear to 0, when the row is mitigated as an aggressor;
//   * read, through a side port, for observation.
// The increment saturates at the counter's maximum. The paper sizes the
// counters so that they never overflow; saturation is this design's guard.
//
// Interface: one operation per cycle on `row`. With `inc_en` the counter is
// incremented; with `clr_en` (which wins over `inc_en`) it is cleared. The
// value the counter takes after the operation is on `new_cnt` in the same
// cycle, combinationally (the PSQ needs it in that cycle); the array is
// written on the next rising clock edge.
//
// Reset: real PRAC counters are initialised by the DRAM; here an init sweep
// clears one row per cycle after reset and raises `init_done` when all ROWS
// rows are zero (ROWS cycles). Operations must wait for `init_done`. The sweep
// is this design's own choice.
module prac_counters
  import qprac_pkg::*;
#(
  parameter int unsigned ROWS = 131072  // rows per bank (128K)
) (
  input  logic clk,
  input  logic rst_n,
  output logic init_done,
  input  logic inc_en,
  input  logic clr_en,
  input  row_t row,
  output cnt_t new_cnt,
  input  row_t dbg_row,
  output cnt_t dbg_cnt
);

  localparam int unsigned IDX_W = (ROWS > 1) ? $clog2(ROWS) : 1;

  cnt_t             mem [ROWS];
  logic [IDX_W-1:0] init_idx;
  logic             init_busy;

  logic [IDX_W-1:0] idx;
  logic [IDX_W-1:0] dbg_idx;
  assign idx     = row[IDX_W-1:0];
  assign dbg_idx = dbg_row[IDX_W-1:0];

  assign init_done = !init_busy;

  always_comb begin
    if (clr_en)      new_cnt = '0;
    else if (inc_en) new_cnt = cnt_inc(mem[idx]);
    else             new_cnt = mem[idx];
  end

  assign dbg_cnt = mem[dbg_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_idx  <= '0;
    end else if (init_busy) begin
      if (init_idx == IDX_W'(ROWS - 1)) init_busy <= 1'b0;
      init_idx <= init_idx + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (init_busy)             mem[init_idx] <= '0;
    else if (clr_en || inc_en) mem[idx]      <= new_cnt;
  end

  // The row must lie inside the bank.
  a_row_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    (inc_en || clr_en) |-> (32'(row) < ROWS));
  a_no_op_during_init: assert property (@(posedge clk) disable iff (!rst_n)
    init_busy |-> !(inc_en || clr_en));

endmodule
