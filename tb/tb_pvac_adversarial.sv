// tb_pvac_adversarial -- the adversarial access pattern PVAC is evaluated
// under: an attacker activates n rows of one bank round-robin, the rows
// spaced `stride` rows apart, while the device also receives normal REFs.
//
// The whole device runs at its default sizes (32 banks, 64K rows, NBO = 237,
// NMit = 4). The behavioural memory controller issues one REF per 81 ACTs
// (tREFI = 3.9 us over tRC = 48 ns) and obeys Alert Back-Off: on ALERT_n at
// most ABO_ACT = 3 more ACTs, then NMit RFMs. Patterns: stride 3 (the worst
// case for victim counting, since no aggressor resets another aggressor's
// victims) with n = 8, 32, 128, 512, and strides 1 and 5 with n = 32. Each
// pattern starts from reset and runs ACTS_PER_PATTERN activations, a small
// slice of a 32 ms refresh window (about 663K ACTs per bank), so the slice
// shows the steady state of mitigation rather than a whole window.
//
// A model of victim counting for bank 0 follows every ACT, REF row and
// mitigative refresh. Checked per pattern: no victim ever reaches the
// maximum hammered count of 256 that NBO = 237 is sized for, the controller
// is never flagged for an ABO violation, and every touched counter in the CSA
// cells equals the model at the end. No alert may be raised either: at this
// maximum hammered count, proactive mitigation on REF alone keeps the
// victims below NBO, as the paper reports for HC >= 128. The number of
// alerts, RFMs and proactive mitigations is printed for each pattern.
module tb_pvac_adversarial;
  timeunit 1ns; timeprecision 10ps;
  import pvac_pkg::*;

  localparam int unsigned NB      = 32;
  localparam int unsigned HC_MAX  = 256;
  localparam int unsigned ACTS_PER_REF     = 81;
  localparam int unsigned ACTS_PER_PATTERN = 12000;
  localparam int unsigned NPAT    = 6;
  localparam int unsigned PAT_N      [NPAT] = '{8, 32, 128, 512, 32, 32};
  localparam int unsigned PAT_STRIDE [NPAT] = '{3, 3, 3, 3, 1, 5};

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  cmd_e cmd = CMD_NOP;
  logic [4:0] cmd_bank = 0;
  row_t cmd_row = 0;
  logic cmd_ready, alert_n, abo_act_violation;
  logic [NB-1:0] over_nbo, proactive_start, dsa_ref_valid, dsa_ref_mit;
  upd_job_t dsa_ref_rows [NB];
  cnt_t bank_head_cnt [NB];

  pvac_chip dut (.*);

  always #0.5 clk = ~clk;

  int unsigned checks = 0, failures = 0;
  byte unsigned model [65536];
  bit           touched [65536];
  int unsigned  max_hc = 0, acts_in_alert = 0;
  int unsigned  n_alert = 0, n_rfm = 0, n_proact = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (20000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void m_act(row_t r);
    int signed rin;
    for (int signed off = -2; off <= 2; off++) begin
      rin = int'(r[8:0]) + off;
      if (off != 0 && rin >= 0 && rin < 512) begin
        row_t v;
        v = {r[15:9], 9'(rin)};
        if (model[v] < 255) model[v]++;
        if (int'(model[v]) > max_hc) max_hc = int'(model[v]);
        touched[v] = 1;
      end
    end
    model[r] = 0;
    touched[r] = 1;
  endfunction

  function automatic int unsigned cell_of(row_t r);
    csa_loc_t l;
    l = map_row(r);
    if (l.csa) return int'(dut.g_bank[0].u_bank.g_csa[1].u_cul.u_csa.cells[l.csa_row][l.col*8 +: 8]);
    else       return int'(dut.g_bank[0].u_bank.g_csa[0].u_cul.u_csa.cells[l.csa_row][l.col*8 +: 8]);
  endfunction

  // ---- monitor: bank 0 model, alert and RFM counts ----
  int unsigned ref_k = 0;
  logic alert_n_q = 1;
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && cmd_ready && cmd == CMD_ACT && cmd_bank == 0) m_act(cmd_row);
    if (cmd_valid && cmd_ready && cmd == CMD_ACT && !alert_n) acts_in_alert++;
    if (cmd_valid && cmd_ready && cmd == CMD_RFM) begin n_rfm++; acts_in_alert = 0; end
    if (dsa_ref_valid[0]) begin
      if (dsa_ref_mit[0]) m_act(dsa_ref_rows[0].rows[0]);
      else begin
        logic [12:0] k;
        k = 13'(ref_k);
        for (int unsigned j = 0; j < 8; j++) begin
          check(dsa_ref_rows[0].rows[j] == {k[12:9], 3'(j), k[8:0]}, "REF row address");
          m_act(dsa_ref_rows[0].rows[j]);
        end
        ref_k++;
        if (proactive_start[0]) n_proact++;
      end
    end
    if (alert_n_q && !alert_n) n_alert++;
    alert_n_q <= alert_n;
  end

  // ---- behavioural memory controller ----
  task automatic send_one(cmd_e c, row_t r);
    @(negedge clk);
    cmd_valid = 1; cmd = c; cmd_bank = 0; cmd_row = r;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NOP;
  endtask

  task automatic send(cmd_e c, row_t r);
    if (c == CMD_ACT && !alert_n && acts_in_alert >= ABO_ACT)
      for (int i = 0; i < NMIT_DEFAULT; i++) send_one(CMD_RFM, 0);
    send_one(c, r);
  endtask

  initial begin
    for (int p = 0; p < NPAT; p++) begin
      int unsigned n, stride;
      row_t base;
      n      = PAT_N[p];
      stride = PAT_STRIDE[p];
      base   = row_t'(4096 + 7);
      // fresh device and model
      @(negedge clk);
      rst_n = 0;
      for (int r = 0; r < 65536; r++) begin model[r] = 0; touched[r] = 0; end
      max_hc = 0; acts_in_alert = 0; ref_k = 0;
      n_alert = 0; n_rfm = 0; n_proact = 0;
      repeat (3) @(negedge clk);
      rst_n = 1;
      for (int unsigned a = 0; a < ACTS_PER_PATTERN; a++) begin
        send(CMD_ACT, row_t'(int'(base) + (a % n) * stride));
        if (a % ACTS_PER_REF == ACTS_PER_REF - 1) send(CMD_REF, 0);
        // serve a pending alert on the controller's own initiative, as an MC
        // that sees ALERT_n between bursts would
        if (!alert_n && $urandom_range(1) == 0)
          for (int i = 0; i < NMIT_DEFAULT; i++) send_one(CMD_RFM, 0);
      end
      repeat (100) @(negedge clk);
      for (int r = 0; r < 65536; r++) if (touched[r]) begin
        checks++;
        if (cell_of(row_t'(r)) != int'(model[r])) begin
          failures++;
          if (failures < 15) $display("FAIL pattern %0d row %0d: %0d expected %0d", p, r, cell_of(row_t'(r)), model[r]);
        end
      end
      check(max_hc < HC_MAX, $sformatf("n=%0d stride=%0d: maximum hammered count %0d below %0d", n, stride, max_hc, HC_MAX));
      check(!abo_act_violation, "no ABO_ACT violation");
      // at a maximum hammered count of 256 these patterns raise no alert:
      // proactive mitigation on REF keeps every victim below NBO
      check(n_alert == 0, $sformatf("n=%0d stride=%0d: no alert", n, stride));
      $display("n=%0d stride=%0d: ACTs %0d REFs %0d proactive %0d alerts %0d RFMs %0d max HC %0d",
               n, stride, ACTS_PER_PATTERN, ref_k, n_proact, n_alert, n_rfm, max_hc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
