// counter_update_logic -- one counter subarray (CSA) together with the
// logic that performs PVAC's victim-based counter updates in it.
//
// When a DSA row A is activated (by ACT, by a normal refresh or by a
// mitigative refresh) the hammered counts of A's victims A-2, A-1, A+1, A+2
// are incremented and A's own count is reset to zero, because the
// activation has just restored A's charge. A job names up to eight activated
// rows that share one CSA-row footprint (one row for an ACT, eight rows in
// eight DSAs for a REF). The sequencer
//   1. activates the CSA row holding the counters that live in this CSA
//      (waits tRCD_CSA),
//   2. walks the candidates A-2, A-1, A+1, A+2, A of every job row, one per
//      tUP: reads the counter through the 8-bit column multiplexer, writes
//      back the incremented (saturating) or zeroed value and reports it on
//      upd_*; a candidate held in the other CSA or outside A's DSA costs its
//      tUP slot but is skipped,
//   3. waits the write recovery tWR_CSA (and at least tRAS_CSA since ACT),
//   4. precharges the CSA row (tRP_CSA).
// Both CSAs of a bank get the same job and walk it in lockstep, so an
// activation whose counters straddle a chunk boundary is served by two CSA
// rows in parallel. A CSA that holds none of the job's counters stays idle.
// The order of updates, the five-update sequence and the four steps follow
// the paper; the saturating increment, the skip-in-place of foreign
// candidates and the zero-fill after reset are this design's choices.
//
// The counter footprint of an activation (which counters, where they are
// stored, which CSA row to open) comes from csa_addr_map.
//
// Interface: job_valid is taken when busy is low. busy is high for exactly
// T_RCD + 5*n_rows*T_UP + T_WR + T_RP cycles after the accepting edge (when
// this CSA holds a counter of the job), and for ROWS cycles after reset
// while every CSA row is cleared. upd_valid/upd_row/upd_cnt pulse once per
// counter written.
module counter_update_logic
  import pvac_pkg::*;
#(
  parameter bit          CSA_ID = 1'b0,
  parameter int unsigned T_RCD  = T_RCD_CSA,
  parameter int unsigned T_RAS  = T_RAS_CSA,
  parameter int unsigned T_WR   = T_WR_CSA,
  parameter int unsigned T_RP   = T_RP_CSA,
  parameter int unsigned T_UPC  = T_UP
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     job_valid,
  input  upd_job_t job,
  output logic     busy,
  output logic     upd_valid,
  output row_t     upd_row,
  output cnt_t     upd_cnt
);
  typedef enum logic [2:0] {S_INIT, S_IDLE, S_ACT, S_UPD, S_WR, S_PRE} state_e;

  state_e               state;
  upd_job_t             cur;
  logic [CSA_ROW_W-1:0] open_row;
  logic [7:0]           timer;      // cycles left in the current wait
  logic [7:0]           since_act;  // cycles since the CSA ACT, for tRAS
  logic [3:0]           ri;         // job row index
  logic [2:0]           ki;         // candidate index 0..4
  logic [CSA_ROW_W-1:0] init_row;
  logic                 need;           // this CSA holds a counter of the offered job
  logic [CSA_ROW_W-1:0] open_row_next;  // and this is its CSA row

  // ---------------- CSA array ----------------
  logic             a_act, a_pre, a_wr, a_clr;
  logic [COL_W-1:0] a_col;
  cnt_t             a_rdata, a_wdata;

  csa_subarray #(.ROWS(CSA_ROWS), .ROW_BITS(CSA_ROW_BITS), .CNT_W(CNT_W)) u_csa (
    .clk     (clk),
    .act     (a_act),
    .act_row (open_row_next),
    .pre     (a_pre),
    .col     (a_col),
    .wr      (a_wr),
    .wdata   (a_wdata),
    .rdata   (a_rdata),
    .clr     (a_clr),
    .clr_row (init_row)
  );

  // ---------------- counter footprints ----------------
  // All rows of a job share the footprint of job.rows[0], so the footprint
  // of rows[0] tells whether this CSA is involved and which row to open.
  logic [NUM_CSA-1:0]   n_need;
  logic [CSA_ROW_W-1:0] n_row [NUM_CSA];

  csa_addr_map u_map_new (
    .row      (job.rows[0]),
    .cand_ok  (),
    .cand     (),
    .loc      (),
    .csa_need (n_need),
    .csa_row  (n_row)
  );

  assign need          = n_need[CSA_ID];
  assign open_row_next = n_row[CSA_ID];

  // The candidate being updated: candidate ki of job row ri.
  logic [CAND_PER_ROW-1:0] c_ok;
  row_t                    c_row [CAND_PER_ROW];
  csa_loc_t                c_loc [CAND_PER_ROW];
  row_t                    cc;
  csa_loc_t                cl;
  logic                    c_mine;

  csa_addr_map u_map_cur (
    .row      (cur.rows[ri]),
    .cand_ok  (c_ok),
    .cand     (c_row),
    .loc      (c_loc),
    .csa_need (),
    .csa_row  ()
  );

  always_comb begin
    cc     = c_row[ki];
    cl     = c_loc[ki];
    c_mine = c_ok[ki] && (cl.csa == CSA_ID);
  end

  wire upd_slot = (state == S_UPD) && (timer == 8'(T_UPC - 1));  // first cycle of a tUP slot
  wire last_k   = (ki == 3'(CAND_PER_ROW - 1));
  wire last_row = (ri == cur.n_rows - 4'd1);

  always_comb begin
    a_act   = (state == S_IDLE) && job_valid && need;
    a_clr   = (state == S_INIT);
    a_pre   = (state == S_PRE) && (timer == 8'(T_RP - 1));
    a_col   = cl.col;
    a_wr    = upd_slot && c_mine;
    a_wdata = (ki == 3'(CAND_PER_ROW - 1)) ? '0 :
              (a_rdata == cnt_t'(CNT_MAX)) ? a_rdata : a_rdata + cnt_t'(1);
    upd_valid = a_wr;
    upd_row   = cc;
    upd_cnt   = a_wdata;
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_INIT;
      init_row  <= '0;
      timer     <= '0;
      since_act <= '0;
      ri        <= '0;
      ki        <= '0;
      cur       <= '0;
      open_row  <= '0;
    end else begin
      if (state != S_IDLE && since_act != 8'hff) since_act <= since_act + 8'd1;
      case (state)
        S_INIT: begin
          init_row <= init_row + 1'b1;
          if (init_row == CSA_ROW_W'(CSA_ROWS - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (job_valid && need) begin
            cur       <= job;
            open_row  <= open_row_next;
            ri        <= '0;
            ki        <= '0;
            since_act <= 8'd1;
            timer     <= 8'(T_RCD - 1);
            state     <= S_ACT;
          end
        end
        S_ACT: begin
          if (timer == '0) begin
            timer <= 8'(T_UPC - 1);
            state <= S_UPD;
          end else timer <= timer - 8'd1;
        end
        S_UPD: begin
          if (timer == '0) begin
            timer <= 8'(T_UPC - 1);
            if (last_k) begin
              ki <= '0;
              if (last_row) begin
                timer <= 8'(T_WR - 1);
                state <= S_WR;
              end else ri <= ri + 4'd1;
            end else ki <= ki + 3'd1;
          end else timer <= timer - 8'd1;
        end
        S_WR: begin
          // Precharge only after tWR_CSA and tRAS_CSA have both elapsed.
          if (timer == '0 && since_act >= 8'(T_RAS)) begin
            timer <= 8'(T_RP - 1);
            state <= S_PRE;
          end else if (timer != '0) timer <= timer - 8'd1;
        end
        S_PRE: begin
          if (timer == '0) state <= S_IDLE;
          else timer <= timer - 8'd1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Every counter written in one job must sit in the CSA row that was opened.
  a_same_row: assert property (@(posedge clk) disable iff (!rst_n)
                               a_wr |-> cl.csa_row == open_row)
    else $error("counter_update_logic: counter outside the open CSA row");
endmodule
