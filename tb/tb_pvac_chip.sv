// tb_pvac_chip -- end-to-end run of the PVAC device logic at its default
// sizes (32 banks, 64K rows per bank, NBO = 237, NMit = 4, 20-entry queues).
//
// A small behavioural memory controller (below) drives the command port:
// benign random ACT/PRE traffic over all banks, periodic REFs, and a
// stride-3 double-sided hammering of one row pair in bank 5, the pattern
// the paper identifies as the worst case for victim counting. The
// controller obeys the Alert Back-Off protocol: on ALERT_n it issues at most
// ABO_ACT = 3 more ACTs, then NMit = 4 RFMs.
// A reference model of victim-based counting (per bank, all 65536 rows) is
// applied to every ACT, every REF row and every mitigative refresh the
// device reports, and compared with the CSA cells of all touched rows at the
// end. Also checked: the hammered victims never exceed the maximum hammered
// count of 256 that NBO = 237 is sized for, ALERT_n follows a pending NBO
// crossing, no ABO violation is flagged, and every RFM makes each bank that
// tracks a hammered row refresh one. Each mechanism (counter
// update, dual-CSA update, normal refresh, proactive mitigation, alert,
// RFM mitigation, ACTs counted in the ABO_Delay hold-off, controller stall on a busy bank) must
// happen at least once.
module tb_pvac_chip;
  timeunit 1ns; timeprecision 10ps;
  import pvac_pkg::*;

  localparam int unsigned NB  = 32;
  localparam int unsigned NBO = NBO_DEFAULT;
  localparam int unsigned HC_MAX = 256;

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
  byte unsigned model [NB][65536];
  bit           touched [NB][65536];
  int unsigned  ref_k = 0, max_hc = 0;
  int unsigned  acts_in_alert = 0;  // ACTs the controller issued while ALERT_n was low
  // mechanism counters
  int unsigned n_act = 0, n_dual = 0, n_ref = 0, n_proact = 0, n_alert = 0, n_rfm = 0,
               n_mit = 0, n_holdoff = 0, n_stall = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void m_act(int unsigned b, row_t r);
    int signed rin;
    for (int signed off = -2; off <= 2; off++) begin
      rin = int'(r[8:0]) + off;
      if (off != 0 && rin >= 0 && rin < 512) begin
        row_t v;
        v = {r[15:9], 9'(rin)};
        if (model[b][v] < 255) model[b][v]++;
        if (model[b][v] > max_hc) max_hc = model[b][v];
        touched[b][v] = 1;
      end
    end
    model[b][r] = 0;
    touched[b][r] = 1;
  endfunction

  function automatic bit is_dual(row_t r);
    bit s0 = 0, s1 = 0;
    for (int unsigned k = 0; k < 5; k++) begin
      logic [ROW_W:0] c;
      csa_loc_t l;
      c = cand_row(r, k);
      l = map_row(c[ROW_W-1:0]);
      if (c[ROW_W]) begin if (l.csa) s1 = 1; else s0 = 1; end
    end
    return s0 && s1;
  endfunction

  // ---- monitor ----
  logic alert_n_q = 1;
  bit   rfm_pending [NB];
  initial for (int b = 0; b < NB; b++) rfm_pending[b] = 0;
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && cmd_ready && cmd == CMD_ACT) begin
      m_act(cmd_bank, cmd_row);
      n_act++;
      if (is_dual(cmd_row)) n_dual++;
    end
    // Every RFM reaches all banks: a bank whose queue holds a row must report
    // a mitigative refresh before the next all-bank command is taken.
    if (cmd_valid && cmd_ready && (cmd == CMD_RFM || cmd == CMD_REF))
      for (int b = 0; b < NB; b++) begin
        check(!rfm_pending[b], $sformatf("bank %0d mitigated a row on RFM", b));
        rfm_pending[b] = 0;
      end
    if (cmd_valid && cmd_ready && cmd == CMD_RFM)
      for (int b = 0; b < NB; b++) if (bank_head_cnt[b] != 0) rfm_pending[b] = 1;
    if (cmd_valid && cmd_ready && cmd == CMD_RFM) begin n_rfm++; acts_in_alert = 0; end
    if (cmd_valid && cmd_ready && cmd == CMD_ACT && !alert_n) acts_in_alert++;
    if (cmd_valid && !cmd_ready) n_stall++;
    for (int b = 0; b < NB; b++) if (dsa_ref_valid[b]) begin
      if (dsa_ref_mit[b]) begin
        m_act(b, dsa_ref_rows[b].rows[0]);
        rfm_pending[b] = 0;
        n_mit++;
      end else begin
        logic [12:0] k;
        k = 13'(ref_k);
        for (int unsigned j = 0; j < 8; j++) begin
          check(dsa_ref_rows[b].rows[j] == {k[12:9], 3'(j), k[8:0]}, "REF row address");
          m_act(b, dsa_ref_rows[b].rows[j]);
        end
        if (proactive_start[b]) n_proact++;
      end
    end
    if (dsa_ref_valid[0] && !dsa_ref_mit[0]) begin ref_k++; n_ref++; end
    if (alert_n_q && !alert_n) n_alert++;
    if (cmd_valid && cmd_ready && cmd == CMD_ACT && dut.u_abo.state == 2'd3) n_holdoff++;
    alert_n_q <= alert_n;
  end

  // ---- end-of-run comparison of every touched counter, bank by bank ----
  event do_compare;
  for (genvar b = 0; b < NB; b++) begin : g_cmp
    function automatic int unsigned cell_of(row_t r);
      csa_loc_t l;
      l = map_row(r);
      if (l.csa) return int'(dut.g_bank[b].u_bank.g_csa[1].u_cul.u_csa.cells[l.csa_row][l.col*8 +: 8]);
      else       return int'(dut.g_bank[b].u_bank.g_csa[0].u_cul.u_csa.cells[l.csa_row][l.col*8 +: 8]);
    endfunction
    always @(do_compare) begin
      for (int r = 0; r < 65536; r++) if (touched[b][r]) begin
        checks++;
        if (cell_of(row_t'(r)) != int'(model[b][r])) begin
          failures++;
          if (failures < 15) $display("FAIL bank %0d row %0d: %0d expected %0d", b, r, cell_of(row_t'(r)), model[b][r]);
        end
      end
    end
  end

  // ---- behavioural memory controller ----
  task automatic send(cmd_e c, int unsigned bank, row_t r);
    @(negedge clk);
    // ABO: once ABO_ACT ACTs went out under ALERT_n, send the NMit RFMs first
    if (c == CMD_ACT && !alert_n && acts_in_alert >= ABO_ACT) begin
      for (int i = 0; i < NMIT_DEFAULT; i++) send_one(CMD_RFM, 0, 0);
      @(negedge clk);
    end
    send_one(c, bank, r);
  endtask

  task automatic send_one(cmd_e c, int unsigned bank, row_t r);
    @(negedge clk);
    cmd_valid = 1; cmd = c; cmd_bank = 5'(bank); cmd_row = r;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NOP;
  endtask

  // Serve an alert now: NMit RFMs.
  task automatic serve_alert();
    if (alert_n) return;
    for (int i = 0; i < NMIT_DEFAULT; i++) send_one(CMD_RFM, 0, 0);
  endtask

  initial begin
    int unsigned it;
    for (int b = 0; b < NB; b++) for (int r = 0; r < 65536; r++) begin
      model[b][r] = 0; touched[b][r] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // benign traffic, with an occasional activation at a chunk boundary
    for (it = 0; it < 400; it++) begin
      row_t r;
      r = ($urandom_range(7) == 0) ? row_t'({7'($urandom), 2'($urandom_range(2)), 7'd127}) : row_t'($urandom);
      send(CMD_ACT, $urandom_range(NB - 1), r);
      if ($urandom_range(3) == 0) send(CMD_PRE, $urandom_range(NB - 1), 0);
      if (it % 50 == 49) send(CMD_REF, 0, 0);
    end
    // attack on bank 5 (stride 3) mixed with benign traffic and REFs
    for (it = 0; it < 1500; it++) begin
      send(CMD_ACT, 5, row_t'(20000));
      send(CMD_ACT, 5, row_t'(20003));
      send(CMD_ACT, $urandom_range(NB - 1), row_t'($urandom));
      if (it % 150 == 149) send(CMD_REF, 0, 0);
      serve_alert();
    end
    repeat (200) @(negedge clk);
    serve_alert();
    repeat (200) @(negedge clk);
    -> do_compare;
    #1;
    check(max_hc < HC_MAX, $sformatf("maximum hammered count %0d stays below %0d", max_hc, HC_MAX));
    check(!abo_act_violation, "no ABO_ACT violation");
    check(n_act > 0,     "mechanism: counter update on ACT");
    check(n_dual > 0,    "mechanism: dual-CSA update");
    check(n_ref > 0,     "mechanism: normal refresh");
    check(n_proact > 0,  "mechanism: proactive mitigation");
    check(n_alert > 0,   "mechanism: alert");
    check(n_rfm > 0 && n_mit > 0, "mechanism: RFM mitigation");
    check(n_holdoff > 0, "mechanism: ABO_Delay hold-off");
    check(n_stall > 0,   "mechanism: controller stalled on a busy bank");
    $display("ACT %0d dual-CSA %0d REF %0d proactive %0d alerts %0d RFM %0d mitigated rows %0d hold-off ACTs %0d stall cycles %0d max HC %0d",
             n_act, n_dual, n_ref, n_proact, n_alert, n_rfm, n_mit, n_holdoff, n_stall, max_hc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
