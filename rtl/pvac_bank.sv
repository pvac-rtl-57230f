// pvac_bank -- the PVAC logic of one DRAM bank.
//
// PVAC counts, for every row, how often its neighbours were activated since
// the row itself was last activated or refreshed (its "hammered count").
// Each activation of row A therefore resets A's counter and increments the
// counters of A-2, A-1, A+1, A+2. The bank holds
//   * two counter subarrays with their counter update logic
//     (counter_update_logic, CSA 0 and CSA 1), which do the five updates of
//     an activation beside the normal DSA access, inside tRC,
//   * a priority queue of the 20 rows with the highest counts,
//   * a normal-refresh row counter,
//   * the mitigation sequencer.
// Commands:
//   ACT row  one update job for the activated row.
//   REF      one job for the eight rows this REF refreshes (the same
//            row-in-DSA in eight consecutive DSAs, one CSA row per CSA);
//            then, if the queue head count is >= PROACT_TH (NBO/2), a
//            proactive mitigation: up to ROWS_PER_MIT rows taken from the
//            queue head are refreshed, each as an activation of that row.
//   RFM      the same mitigation of up to ROWS_PER_MIT rows, unconditionally.
//   PRE/RD/WR/NOP  no counter work (the CSA precharges itself).
// over_nbo tells the device's ABO control that a counter reached NBO.
// dsa_ref_* names, for the DSA (outside this RTL), the rows it must refresh:
// eight rows for a normal refresh, one row per mitigative refresh.
// The update rule, the queue, the threshold NBO/2 and the four rows per
// mitigation follow the paper. The order in which REF walks the rows, taking
// mitigation rows one at a time from the current queue head, and flagging
// (rather than queuing) a command that arrives while the bank logic is busy
// are this design's choices.
//
// Timing: a command is accepted when cmd_ready is high. An ACT keeps the
// bank logic busy for tRCD_CSA + 5 tUP + tWR_CSA + tRP_CSA = 44 cycles
// (36.5 ns at 0.83 ns), below tRC = 58 cycles. A REF takes 79 cycles for the
// normal refresh plus 45 per mitigated row; an RFM 45 per row (one cycle to
// pick the row). After reset the logic is busy for 32 cycles zeroing the
// counters.
module pvac_bank
  import pvac_pkg::*;
#(
  parameter int unsigned NBO          = NBO_DEFAULT,
  parameter int unsigned PROACT_TH    = NBO / 2,
  parameter int unsigned MIT_ROWS     = ROWS_PER_MIT,
  parameter int unsigned QDEPTH       = QUEUE_DEPTH,
  parameter int unsigned T_RCD        = T_RCD_CSA,
  parameter int unsigned T_RAS        = T_RAS_CSA,
  parameter int unsigned T_WR         = T_WR_CSA,
  parameter int unsigned T_RP         = T_RP_CSA
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cmd_valid,
  input  cmd_e      cmd,
  input  row_t      cmd_row,
  output logic      cmd_ready,
  output logic      over_nbo,
  output cnt_t      head_cnt,
  output row_t      head_row,
  output logic      dsa_ref_valid,
  output logic      dsa_ref_mit,     // 1: mitigative refresh, 0: normal refresh
  output upd_job_t  dsa_ref_rows,
  output logic      proactive_start, // a REF started a proactive mitigation
  output logic      timing_violation
);
  typedef enum logic [2:0] {B_INIT, B_IDLE, B_WAIT, B_MIT} bstate_e;

  bstate_e     state;
  logic [12:0] ref_ctr;      // {dsa group [3:0], row-in-DSA [8:0]}
  logic [3:0]  mit_left;

  // ---------------- CSA units ----------------
  logic     job_valid;
  upd_job_t job;
  logic [1:0] u_busy;
  logic [1:0] u_upd_valid;
  row_t       u_upd_row [2];
  cnt_t       u_upd_cnt [2];

  for (genvar c = 0; c < 2; c++) begin : g_csa
    counter_update_logic #(
      .CSA_ID (c[0]),
      .T_RCD  (T_RCD),
      .T_RAS  (T_RAS),
      .T_WR   (T_WR),
      .T_RP   (T_RP)
    ) u_cul (
      .clk       (clk),
      .rst_n     (rst_n),
      .job_valid (job_valid),
      .job       (job),
      .busy      (u_busy[c]),
      .upd_valid (u_upd_valid[c]),
      .upd_row   (u_upd_row[c]),
      .upd_cnt   (u_upd_cnt[c])
    );
  end

  // ---------------- priority queue ----------------
  logic q_pop;
  logic q_head_valid;

  priority_queue #(.DEPTH(QDEPTH), .NUPD(2)) u_pq (
    .clk        (clk),
    .rst_n      (rst_n),
    .upd_valid  (u_upd_valid),
    .upd_row    (u_upd_row),
    .upd_cnt    (u_upd_cnt),
    .pop        (q_pop),
    .head_valid (q_head_valid),
    .head_row   (head_row),
    .head_cnt   (head_cnt),
    .occupancy  ()
  );

  assign over_nbo = q_head_valid && (head_cnt >= cnt_t'(NBO));

  // ---------------- sequencer ----------------
  wire units_idle = (u_busy == 2'b00);
  assign cmd_ready = (state == B_IDLE) && units_idle;

  wire take   = cmd_valid && cmd_ready;
  wire do_act = take && (cmd == CMD_ACT);
  wire do_ref = take && (cmd == CMD_REF);
  wire do_rfm = take && (cmd == CMD_RFM);
  wire do_mit = (state == B_MIT) && units_idle && (mit_left != '0) && q_head_valid;

  upd_job_t ref_job;
  always_comb begin
    ref_job        = '0;
    ref_job.n_rows = 4'(REF_ROWS);
    for (int unsigned j = 0; j < REF_ROWS; j++)
      ref_job.rows[j] = {ref_ctr[12:9], 3'(j), ref_ctr[8:0]};
  end

  always_comb begin
    job       = '0;
    job_valid = 1'b0;
    q_pop     = 1'b0;
    if (do_act) begin
      job.n_rows  = 4'd1;
      job.rows[0] = cmd_row;
      job_valid   = 1'b1;
    end else if (do_ref) begin
      job       = ref_job;
      job_valid = 1'b1;
    end else if (do_mit) begin
      job.n_rows  = 4'd1;
      job.rows[0] = head_row;
      job_valid   = 1'b1;
      q_pop       = 1'b1;
    end
  end

  assign dsa_ref_valid   = do_ref || do_mit;
  assign dsa_ref_mit     = do_mit;
  assign dsa_ref_rows    = job;
  assign proactive_start = do_ref && (head_cnt >= cnt_t'(PROACT_TH)) && q_head_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state            <= B_INIT;
      ref_ctr          <= '0;
      mit_left         <= '0;
      timing_violation <= 1'b0;
    end else begin
      if (cmd_valid && !cmd_ready && cmd inside {CMD_ACT, CMD_REF, CMD_RFM})
        timing_violation <= 1'b1;
      case (state)
        B_INIT: if (units_idle) state <= B_IDLE;
        B_IDLE: begin
          if (do_act) state <= B_WAIT;
          else if (do_ref) begin
            ref_ctr  <= ref_ctr + 13'd1;
            mit_left <= proactive_start ? 4'(MIT_ROWS) : 4'd0;
            state    <= B_WAIT;
          end else if (do_rfm) begin
            mit_left <= 4'(MIT_ROWS);
            state    <= B_MIT;
          end
        end
        B_WAIT: if (units_idle) state <= (mit_left != '0) ? B_MIT : B_IDLE;
        B_MIT: begin
          if (do_mit) begin
            mit_left <= mit_left - 4'd1;
            state    <= B_WAIT;
          end else if (units_idle) begin
            mit_left <= '0;
            state    <= B_IDLE;
          end
        end
        default: state <= B_IDLE;
      endcase
    end
  end
endmodule
