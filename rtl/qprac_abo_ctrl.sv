// qprac_abo_ctrl -- Alert Back-Off (ABO) protocol engine of one DRAM device.
//
// When any bank's PSQ head has reached the Back-Off threshold N_BO
// (`alert_req`), the device asserts Alert towards the memory controller. The
// controller may still issue up to ABO_ACT activations, then sends N_MIT
// all-bank RFMs, each of which lets every bank mitigate its PSQ head. Once the
// N_MIT-th RFM has been received Alert is released, and it may not be raised
// again until ABO_DELAY further activations have been seen. After that a new
// Alert follows as soon as some PSQ head is still at or above N_BO.
//
// States: IDLE (Alert low, watching alert_req) -> ALERT (Alert high, counting
// RFMs) -> DELAY (Alert low, counting ACTs) -> IDLE. Alert rises one cycle
// after alert_req. `alert_n` is the active-low level for the Alert_n pin.
// The protocol and its parameters (N_MIT 1/2/4, ABO_ACT 3, ABO_DELAY = N_MIT)
// follow the paper's description of the DDR5 PRAC specification. Releasing
// Alert on the last RFM (rather than on a pulse-width timer) and counting
// ACTs to any bank are this design's choices. The ABO_ACT limit binds the
// memory controller; an assertion reports a controller that exceeds it.
module qprac_abo_ctrl #(
  parameter int unsigned N_MIT     = 1,      // RFMs per Alert
  parameter int unsigned ABO_ACT   = 3,      // max ACTs from Alert to RFM
  parameter int unsigned ABO_DELAY = N_MIT   // min ACTs from RFM to next Alert
) (
  input  logic clk,
  input  logic rst_n,
  input  logic alert_req,
  input  logic act,
  input  logic rfm,
  output logic alert,
  output logic alert_n,
  output logic in_delay
);

  typedef enum logic [1:0] {S_IDLE, S_ALERT, S_DELAY} state_e;

  state_e     state;
  logic [7:0] rfm_cnt;
  logic [7:0] act_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      rfm_cnt <= '0;
      act_cnt <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          rfm_cnt <= '0;
          act_cnt <= '0;
          if (alert_req) state <= S_ALERT;
        end
        S_ALERT: begin
          if (act && !rfm) act_cnt <= act_cnt + 1'b1;
          if (rfm) begin
            rfm_cnt <= rfm_cnt + 1'b1;
            act_cnt <= '0;
            if (32'(rfm_cnt) + 1 >= N_MIT)
              state <= (ABO_DELAY == 0) ? S_IDLE : S_DELAY;
          end
        end
        S_DELAY: begin
          if (act) begin
            act_cnt <= act_cnt + 1'b1;
            if (32'(act_cnt) + 1 >= ABO_DELAY) state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign alert    = (state == S_ALERT);
  assign alert_n  = !alert;
  assign in_delay = (state == S_DELAY);

  // The controller may issue at most ABO_ACT ACTs between Alert and the first RFM.
  a_abo_act_limit: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_ALERT && rfm_cnt == 0 && 32'(act_cnt) == ABO_ACT) |-> !act);

endmodule
