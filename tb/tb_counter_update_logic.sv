// tb_counter_update_logic -- the two CSAs of a bank, each with its counter
// update logic, driven with the same jobs as in a bank: single-row ACT jobs
// (random rows, rows at chunk and DSA boundaries, one row hammered until its
// neighbours saturate) and eight-row REF jobs. A reference model of all
// 65536 counters predicts every reported counter value (victim +1 with
// saturation at 255, activated row reset to 0) and the number of updates per
// job; the busy time of every job is checked against
// tRCD_CSA + 5 x n x tUP + tWR_CSA + tRP_CSA and, for an ACT, against tRC.
module tb_counter_update_logic;
  timeunit 1ns; timeprecision 10ps;
  import pvac_pkg::*;

  logic clk = 0, rst_n = 0;
  logic job_valid = 0;
  upd_job_t job = '0;
  logic [1:0] busy, upd_valid;
  row_t upd_row [2];
  cnt_t upd_cnt [2];

  int unsigned checks = 0, failures = 0;
  int unsigned model [65536];
  int unsigned n_upd, exp_upd, dual_jobs, sat_seen;

  for (genvar c = 0; c < 2; c++) begin : g_u
    counter_update_logic #(.CSA_ID(c[0])) dut (
      .clk(clk), .rst_n(rst_n), .job_valid(job_valid), .job(job),
      .busy(busy[c]), .upd_valid(upd_valid[c]), .upd_row(upd_row[c]), .upd_cnt(upd_cnt[c]));
  end

  always #0.5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit in_job(row_t r);
    for (int unsigned j = 0; j < job.n_rows; j++) if (job.rows[j] == r) return 1;
    return 0;
  endfunction

  // Score every reported counter.
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 2; c++) if (upd_valid[c]) begin
      int unsigned e;
      e = in_job(upd_row[c]) ? 0 : (model[upd_row[c]] == 255 ? 255 : model[upd_row[c]] + 1);
      if (e == 255 && !in_job(upd_row[c])) sat_seen++;
      check(upd_cnt[c] == cnt_t'(e), $sformatf("row %0d: got %0d expected %0d", upd_row[c], upd_cnt[c], e));
      model[upd_row[c]] = e;
      n_upd++;
    end
  end

  task automatic run_job(upd_job_t j);
    int unsigned cyc, valid_c;
    bit s0, s1;
    logic [ROW_W:0] cr;
    csa_loc_t l;
    valid_c = 0; s0 = 0; s1 = 0;
    for (int unsigned i = 0; i < j.n_rows; i++)
      for (int unsigned k = 0; k < 5; k++) begin
        cr = cand_row(j.rows[i], k);
        l  = map_row(cr[ROW_W-1:0]);
        if (cr[ROW_W]) begin
          valid_c++;
          if (l.csa) s1 = 1; else s0 = 1;
        end
      end
    if (s0 && s1) dual_jobs++;
    n_upd = 0;
    @(negedge clk);
    job = j; job_valid = 1;
    @(negedge clk);
    job_valid = 0;
    cyc = 0;
    while (busy != 2'b00) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == T_RCD_CSA + 5 * j.n_rows * T_UP + T_WR_CSA + T_RP_CSA,
          $sformatf("latency %0d for %0d rows", cyc, j.n_rows));
    if (j.n_rows == 1) check(cyc <= T_RC, "ACT update within tRC");
    check(n_upd == valid_c, $sformatf("updates %0d expected %0d", n_upd, valid_c));
  endtask

  function automatic upd_job_t act_job(row_t r);
    upd_job_t j = '0;
    j.n_rows = 1; j.rows[0] = r;
    return j;
  endfunction

  function automatic upd_job_t ref_job(int unsigned g, int unsigned rin);
    upd_job_t j = '0;
    j.n_rows = 8;
    for (int unsigned k = 0; k < 8; k++) j.rows[k] = {4'(g), 3'(k), 9'(rin)};
    return j;
  endfunction

  initial begin
    for (int i = 0; i < 65536; i++) model[i] = 0;
    dual_jobs = 0; sat_seen = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // wait for the power-up clear
    @(negedge clk);
    while (busy != 2'b00) @(negedge clk);
    // boundary rows
    begin
      row_t br [11] = '{16'd0, 16'd1, 16'd126, 16'd127, 16'd128, 16'd129, 16'd255,
                        16'd256, 16'd511, 16'd512, 16'd65535};
      foreach (br[i]) run_job(act_job(br[i]));
    end
    // a small hot region, so that counters build up and get reset
    for (int it = 0; it < 400; it++) run_job(act_job(row_t'(1000 + $urandom_range(12))));
    // random rows anywhere
    for (int it = 0; it < 200; it++) run_job(act_job(row_t'($urandom)));
    // REF jobs, including chunk boundaries
    run_job(ref_job(0, 127));
    run_job(ref_job(0, 128));
    for (int it = 0; it < 30; it++) run_job(ref_job($urandom_range(15), $urandom_range(511)));
    // hammer one row past saturation of its neighbours
    for (int it = 0; it < 270; it++) run_job(act_job(16'd3000));
    check(model[3001] == 255 && model[2999] == 255, "neighbours saturated at 255");
    check(sat_seen > 0, "saturation exercised");
    check(dual_jobs > 0, "dual-CSA jobs exercised");
    $display("dual-CSA jobs %0d, saturated updates %0d", dual_jobs, sat_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
