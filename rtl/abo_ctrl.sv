// abo_ctrl -- Alert Back-Off (ABO) control of one DRAM device.
//
// When some bank holds a victim counter at or above the back-off threshold
// NBO (alert_req), the device pulls ALERT_n low. The memory controller may
// still issue up to ABO_ACT activations (within tABO_ACT), then it must send
// NMIT RFM commands, during which the banks refresh their most hammered
// rows. After the last RFM, a new alert may only be raised once ABO_DELAY
// further ACTs have been issued. The sequence and the constants follow the
// DDR5 ABO protocol as the paper summarises it (NMit RFMs, ABO_ACT = 3,
// ABO_Delay = NMit).
//
// This design's choices: ALERT_n is held low from the alert until the first
// RFM; alert_req is a level (the bank queue heads are compared with NBO), so
// a counter that crosses NBO during the hold-off still raises an alert once
// the hold-off ends; ACTs to any bank count towards ABO_DELAY; an MC that
// issues more than ABO_ACT ACTs between ALERT_n and the first RFM is flagged
// on abo_act_violation (sticky until reset).
//
// Timing: all inputs are sampled at the clock edge; alert_n is registered.
// state_o exposes the protocol phase for observation.
module abo_ctrl #(
  parameter int unsigned NMIT      = 4,
  parameter int unsigned ABO_ACT   = 3,
  parameter int unsigned ABO_DELAY = NMIT
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       alert_req,
  input  logic       act_seen,
  input  logic       rfm_seen,
  output logic       alert_n,
  output logic       in_recovery,   // between ALERT_n and the last RFM
  output logic       abo_act_violation,
  output logic [1:0] state_o
);
  typedef enum logic [1:0] {A_IDLE, A_ALERT, A_RFM, A_DELAY} abo_state_e;

  abo_state_e state;
  logic [3:0] n_rfm;
  logic [3:0] n_act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state             <= A_IDLE;
      n_rfm             <= '0;
      n_act             <= '0;
      abo_act_violation <= 1'b0;
    end else begin
      case (state)
        A_IDLE: begin
          n_act <= '0;
          n_rfm <= '0;
          if (alert_req) state <= A_ALERT;
        end
        A_ALERT: begin
          if (rfm_seen) begin
            n_rfm <= 4'd1;
            state <= (NMIT == 1) ? A_DELAY : A_RFM;
            n_act <= '0;
          end else if (act_seen) begin
            n_act <= n_act + 4'd1;
            if (n_act >= 4'(ABO_ACT)) abo_act_violation <= 1'b1;
          end
        end
        A_RFM: begin
          if (rfm_seen) begin
            n_rfm <= n_rfm + 4'd1;
            if (n_rfm + 4'd1 >= 4'(NMIT)) state <= A_DELAY;
          end
        end
        A_DELAY: begin
          if (act_seen) begin
            n_act <= n_act + 4'd1;
            if (n_act + 4'd1 >= 4'(ABO_DELAY)) state <= A_IDLE;
          end
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  assign alert_n     = (state != A_ALERT);
  assign in_recovery = (state == A_ALERT) || (state == A_RFM);
  assign state_o     = state;
endmodule
