// pvac_chip -- PVAC RowHammer mitigation for one DDR5 sub-channel of a
// device: NUM_BANKS banks of PVAC logic and the shared Alert Back-Off
// control driving ALERT_n.
//
// The memory controller's command stream enters here. ACT, PRE, RD and WR
// go to the bank named by cmd_bank; REF and RFM are all-bank commands and
// reach every bank. Each bank keeps per-row hammered counts in its counter
// subarrays, updates them on every activation and refresh, tracks its most
// hammered rows in a priority queue and performs proactive mitigation on REF
// and reactive mitigation on RFM (see pvac_bank). When any bank's queue head
// reaches NBO, abo_ctrl pulls alert_n low; the controller answers with NMIT
// RFMs after at most ABO_ACT further ACTs.
//
// The data subarrays themselves (user data, sense amplifiers, row buffers)
// are ordinary DRAM and are not part of this RTL: dsa_ref_* tells them, per
// bank, which rows to refresh for normal refresh and for mitigation.
// Thirty-two banks per sub-channel is the paper's configuration; treating
// REF and RFM as all-bank commands is this design's choice.
//
// Timing: a command is taken when cmd_valid and cmd_ready are both high;
// the controller may hold cmd_valid while cmd_ready is low (a stall).
// cmd_ready is the addressed bank's ready for ACT/PRE/RD/WR and the AND of
// all banks' ready for REF and RFM. A controller that respects tRC (58
// cycles of 0.83 ns), tRFC and the RFM window never sees cmd_ready low.
module pvac_chip
  import pvac_pkg::*;
#(
  parameter int unsigned NUM_BANKS = 32,
  parameter int unsigned NBO       = NBO_DEFAULT,
  parameter int unsigned NMIT      = NMIT_DEFAULT,
  localparam int unsigned BW       = (NUM_BANKS > 1) ? $clog2(NUM_BANKS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  input  cmd_e                 cmd,
  input  logic [BW-1:0]        cmd_bank,
  input  row_t                 cmd_row,
  output logic                 cmd_ready,
  output logic                 alert_n,
  output logic                 abo_act_violation,
  output logic [NUM_BANKS-1:0] over_nbo,
  output logic [NUM_BANKS-1:0] proactive_start,
  output logic [NUM_BANKS-1:0] dsa_ref_valid,
  output logic [NUM_BANKS-1:0] dsa_ref_mit,
  output upd_job_t             dsa_ref_rows [NUM_BANKS],
  output cnt_t                 bank_head_cnt [NUM_BANKS]
);
  logic [NUM_BANKS-1:0] b_ready, b_sel;

  wire all_bank = (cmd == CMD_REF) || (cmd == CMD_RFM);

  always_comb begin
    b_sel = '0;
    if (all_bank) b_sel = '1;
    else          b_sel[cmd_bank] = 1'b1;
  end

  assign cmd_ready = all_bank ? (&b_ready) : b_ready[cmd_bank];

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    row_t unused_head_row;
    logic unused_viol;  // never set: commands only reach a bank when it is ready
    pvac_bank #(.NBO(NBO)) u_bank (
      .clk              (clk),
      .rst_n            (rst_n),
      .cmd_valid        (cmd_valid && b_sel[b] && cmd_ready),
      .cmd              (cmd),
      .cmd_row          (cmd_row),
      .cmd_ready        (b_ready[b]),
      .over_nbo         (over_nbo[b]),
      .head_cnt         (bank_head_cnt[b]),
      .head_row         (unused_head_row),
      .dsa_ref_valid    (dsa_ref_valid[b]),
      .dsa_ref_mit      (dsa_ref_mit[b]),
      .dsa_ref_rows     (dsa_ref_rows[b]),
      .proactive_start  (proactive_start[b]),
      .timing_violation (unused_viol)
    );
  end

  abo_ctrl #(.NMIT(NMIT), .ABO_ACT(ABO_ACT), .ABO_DELAY(NMIT)) u_abo (
    .clk               (clk),
    .rst_n             (rst_n),
    .alert_req         (|over_nbo),
    .act_seen          (cmd_valid && cmd_ready && cmd == CMD_ACT),
    .rfm_seen          (cmd_valid && cmd_ready && cmd == CMD_RFM),
    .alert_n           (alert_n),
    .in_recovery       (),
    .abo_act_violation (abo_act_violation),
    .state_o           ()
  );
endmodule
