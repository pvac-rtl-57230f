// tb_pvac_bank -- one bank of PVAC logic at its default sizes (NBO = 237,
// 20-entry queue, full 2 x 32 x 8192-bit CSAs) against a reference model of
// victim-based counting (every activation of row r zeroes cnt[r] and
// increments, saturating, the in-DSA rows r-2, r-1, r+1, r+2).
// The model is applied to every ACT, to the eight rows of every REF and to
// every mitigative refresh the bank reports. Checked:
//   * the CSA cells of every touched row equal the model whenever the bank
//     is idle, and every queue entry holds its row's true count,
//   * REF refreshes the expected eight rows in the expected order,
//   * a proactive mitigation starts on REF exactly when the head count is
//     >= NBO/2 and refreshes four rows, each the queue head at its turn,
//   * an RFM refreshes four rows, each the queue head at its turn,
//   * over_nbo follows head count >= NBO,
//   * an ACT frees the bank within tRC (58 cycles).
module tb_pvac_bank;
  timeunit 1ns; timeprecision 10ps;
  import pvac_pkg::*;

  localparam int unsigned NBO = NBO_DEFAULT;

  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  cmd_e cmd = CMD_NOP;
  row_t cmd_row = 0;
  logic cmd_ready, over_nbo, dsa_ref_valid, dsa_ref_mit, proactive_start, timing_violation;
  cnt_t head_cnt;
  row_t head_row;
  upd_job_t dsa_ref_rows;

  int unsigned checks = 0, failures = 0;
  int unsigned model [65536];
  bit          touched [65536];
  int unsigned ref_k = 0;
  int unsigned n_mit = 0, n_proact = 0, n_refs = 0, n_over = 0, max_act_busy = 0;

  pvac_bank dut (.*);

  always #0.5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void m_act(row_t r);
    int signed rin;
    for (int signed off = -2; off <= 2; off++) begin
      rin = int'(r[8:0]) + off;
      if (off != 0 && rin >= 0 && rin < 512) begin
        row_t v = {r[15:9], 9'(rin)};
        if (model[v] < 255) model[v]++;
        touched[v] = 1;
      end
    end
    model[r] = 0;
    touched[r] = 1;
  endfunction

  function automatic int unsigned cell_of(row_t r);
    csa_loc_t l = map_row(r);
    if (l.csa) return int'(dut.g_csa[1].u_cul.u_csa.cells[l.csa_row][l.col*8 +: 8]);
    else       return int'(dut.g_csa[0].u_cul.u_csa.cells[l.csa_row][l.col*8 +: 8]);
  endfunction

  // ---- monitor: apply the model at the moment each activation starts ----
  always @(posedge clk) if (rst_n) begin
    if (cmd_valid && cmd_ready && cmd == CMD_ACT) m_act(cmd_row);
    if (dsa_ref_valid) begin
      if (dsa_ref_mit) begin
        check(dsa_ref_rows.n_rows == 1, "mitigation refreshes one row at a time");
        check(dsa_ref_rows.rows[0] == head_row && model[head_row] == int'(head_cnt) && head_cnt != 0,
              "mitigated row is the queue head with its true count");
        m_act(dsa_ref_rows.rows[0]);
        n_mit++;
      end else begin
        logic [12:0] k;
        k = 13'(ref_k);
        check(dsa_ref_rows.n_rows == 8, "REF refreshes 8 rows");
        for (int unsigned j = 0; j < 8; j++) begin
          check(dsa_ref_rows.rows[j] == {k[12:9], 3'(j), k[8:0]}, "REF row address");
          m_act(dsa_ref_rows.rows[j]);
        end
        check(proactive_start == (head_cnt >= cnt_t'(NBO / 2) && dut.q_head_valid),
              "proactive mitigation iff head >= NBO/2");
        if (proactive_start) n_proact++;
        ref_k++;
        n_refs++;
      end
    end
    check(over_nbo == (dut.q_head_valid && head_cnt >= cnt_t'(NBO)), "over_nbo");
    if (over_nbo) n_over++;
  end

  task automatic compare_all();
    for (int r = 0; r < 65536; r++) if (touched[r]) begin
      checks++;
      if (cell_of(row_t'(r)) != model[r]) begin
        failures++;
        if (failures < 15) $display("FAIL counter of row %0d: %0d expected %0d", r, cell_of(row_t'(r)), model[r]);
      end
    end
    for (int i = 0; i < QUEUE_DEPTH; i++) if (dut.u_pq.q[i].v)
      check(int'(dut.u_pq.q[i].cnt) == model[dut.u_pq.q[i].row], "queue entry holds the true count");
  endtask

  task automatic issue(cmd_e c, row_t r);
    int unsigned busy;
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd = c; cmd_row = r;
    @(negedge clk);
    cmd_valid = 0; cmd = CMD_NOP;
    busy = 1;
    while (!cmd_ready) begin @(negedge clk); busy++; end
    if (c == CMD_ACT) begin
      check(busy <= T_RC, $sformatf("ACT frees the bank within tRC (%0d cycles)", busy));
      if (busy > max_act_busy) max_act_busy = busy;
    end
  endtask

  initial begin
    int unsigned mit_before;
    for (int i = 0; i < 65536; i++) begin model[i] = 0; touched[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1) benign mix: a few hot rows, REFs every 16 ACTs
    for (int it = 0; it < 600; it++) begin
      issue(CMD_ACT, row_t'(4000 + $urandom_range(20)));
      if (it % 16 == 15) issue(CMD_REF, 0);
      if (it % 100 == 99) compare_all();
    end
    compare_all();
    // 2) stride-3 hammering until a row crosses NBO/2, then REF -> proactive
    while (!(dut.q_head_valid && head_cnt >= cnt_t'(NBO / 2))) begin
      issue(CMD_ACT, 16'd8000);
      issue(CMD_ACT, 16'd8003);
    end
    mit_before = n_mit;
    issue(CMD_REF, 0);
    while (!cmd_ready) @(negedge clk);
    check(n_mit - mit_before == ROWS_PER_MIT, "proactive mitigation refreshed 4 rows");
    compare_all();
    // 3) hammer past NBO, then RFM
    while (!over_nbo) begin
      issue(CMD_ACT, 16'd12000);
      issue(CMD_ACT, 16'd12003);
    end
    check(int'(head_cnt) >= NBO, "a counter reached NBO");
    mit_before = n_mit;
    issue(CMD_RFM, 0);
    check(n_mit - mit_before == ROWS_PER_MIT, "RFM refreshed 4 rows");
    compare_all();
    repeat (3) issue(CMD_RFM, 0);
    check(!over_nbo, "RFMs brought the counts below NBO");
    compare_all();
    // 4) REF with a low head: no proactive mitigation
    for (int it = 0; it < 40; it++) issue(CMD_RFM, 0);
    mit_before = n_mit;
    issue(CMD_REF, 0);
    check(n_mit == mit_before, "no proactive mitigation below NBO/2");
    // 5) REFs across the chunk boundary (row-in-DSA 126..129), then random traffic
    while (ref_k < 131) issue(CMD_REF, 0);
    for (int it = 0; it < 300; it++) begin
      case ($urandom_range(9))
        0: issue(CMD_REF, 0);
        1: issue(CMD_RFM, 0);
        2: issue(CMD_PRE, 0);
        default: issue(CMD_ACT, row_t'($urandom));
      endcase
    end
    compare_all();
    check(!timing_violation, "no timing violation");
    check(n_proact > 0 && n_over > 0 && n_mit > 0, "proactive, NBO crossing and mitigation seen");
    $display("refs %0d proactive %0d mitigated rows %0d, longest ACT busy %0d cycles",
             n_refs, n_proact, n_mit, max_act_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
