// tb_priority_queue -- the worked example of the paper's queue figure on a
// three-entry queue, then random traffic on the full 20-entry queue against
// a reference model written with SystemVerilog queues (delete the row if
// present, insert behind entries of equal or larger count, cut to DEPTH).
// Random traffic uses two update ports and pops in the same cycle, and a
// small row range so rows are often already present.
module tb_priority_queue;
  timeunit 1ns; timeprecision 10ps;
  import pvac_pkg::*;

  typedef struct { row_t row; int unsigned cnt; } ent_t;

  logic clk = 0, rst_n = 0;
  int unsigned checks = 0, failures = 0;

  // ---- three-entry instance for the figure example ----
  logic [1:0] s_valid = 0;
  row_t s_row [2];
  cnt_t s_cnt [2];
  logic s_pop = 0, s_hv;
  row_t s_hr;
  cnt_t s_hc;
  logic [1:0] s_occ;
  priority_queue #(.DEPTH(3), .NUPD(2)) dut_s (
    .clk(clk), .rst_n(rst_n), .upd_valid(s_valid), .upd_row(s_row), .upd_cnt(s_cnt),
    .pop(s_pop), .head_valid(s_hv), .head_row(s_hr), .head_cnt(s_hc), .occupancy(s_occ));

  // ---- full-size instance ----
  logic [1:0] f_valid = 0;
  row_t f_row [2];
  cnt_t f_cnt [2];
  logic f_pop = 0, f_hv;
  row_t f_hr;
  cnt_t f_hc;
  logic [4:0] f_occ;
  priority_queue dut_f (
    .clk(clk), .rst_n(rst_n), .upd_valid(f_valid), .upd_row(f_row), .upd_cnt(f_cnt),
    .pop(f_pop), .head_valid(f_hv), .head_row(f_hr), .head_cnt(f_hc), .occupancy(f_occ));

  always #0.5 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  ent_t m[$];

  function automatic void m_update(row_t r, int unsigned c, int unsigned depth);
    int idx[$];
    int pos;
    idx = m.find_first_index(e) with (e.row == r);
    if (idx.size() > 0) m.delete(idx[0]);
    if (c == 0) return;
    pos = m.size();
    for (int i = 0; i < m.size(); i++) if (m[i].cnt < c) begin pos = i; break; end
    if (pos < depth) begin
      m.insert(pos, '{row: r, cnt: c});
      while (m.size() > depth) void'(m.pop_back());
    end
  endfunction

  // hierarchical look at the table contents for a full comparison
  function automatic bit table_matches_f();
    for (int i = 0; i < 20; i++) begin
      if (i < m.size()) begin
        if (!dut_f.q[i].v || dut_f.q[i].row != m[i].row || dut_f.q[i].cnt != cnt_t'(m[i].cnt)) return 0;
      end else if (dut_f.q[i].v) return 0;
    end
    return 1;
  endfunction

  task automatic s_upd(row_t r, cnt_t c);
    @(negedge clk);
    s_valid = 2'b01; s_row[0] = r; s_cnt[0] = c;
    @(negedge clk);
    s_valid = 0;
  endtask

  function automatic bit s_is(int i, row_t r, cnt_t c);
    return dut_s.q[i].v && dut_s.q[i].row == r && dut_s.q[i].cnt == c;
  endfunction

  initial begin
    s_row[1] = 0; s_cnt[1] = 0; f_row[0] = 0; f_row[1] = 0; f_cnt[0] = 0; f_cnt[1] = 0;
    s_row[0] = 0; s_cnt[0] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // ---- the figure: rows 1/2/3 with counts 10/8/8 ----
    s_upd(1, 10); s_upd(2, 8); s_upd(3, 8);
    check(s_is(0, 1, 10) && s_is(1, 2, 8) && s_is(2, 3, 8), "initial table 1:10 2:8 3:8");
    s_upd(4, 3);
    check(s_is(0, 1, 10) && s_is(1, 2, 8) && s_is(2, 3, 8), "row 4 (3) not inserted");
    s_upd(5, 9);
    check(s_is(0, 1, 10) && s_is(1, 5, 9) && s_is(2, 2, 8), "row 5 (9) evicts row 3");
    s_upd(2, 9);
    check(s_is(0, 1, 10) && s_is(1, 5, 9) && s_is(2, 2, 9), "row 2 updated to 9 behind row 5");
    check(s_hv && s_hr == 1 && s_hc == 10, "head is row 1");
    s_upd(1, 0);
    check(s_is(0, 5, 9) && s_is(1, 2, 9) && !dut_s.q[2].v && s_occ == 2, "reset row 1 removed");
    @(negedge clk); s_pop = 1; @(negedge clk); s_pop = 0;
    check(s_hv && s_hr == 2 && s_hc == 9 && s_occ == 1, "pop leaves row 2");

    // ---- random traffic on the 20-entry queue ----
    for (int it = 0; it < 20000; it++) begin
      @(negedge clk);
      f_pop = ($urandom_range(9) == 0);
      for (int u = 0; u < 2; u++) begin
        f_valid[u] = ($urandom_range(3) != 0);
        f_row[u]   = row_t'($urandom_range(40));
        f_cnt[u]   = ($urandom_range(7) == 0) ? 8'd0 : cnt_t'($urandom_range(255));
      end
      if (f_valid == 2'b11 && f_row[0] == f_row[1]) f_row[1] = f_row[1] + 1;
      if (f_pop && m.size() > 0) void'(m.pop_front());
      for (int u = 0; u < 2; u++) if (f_valid[u]) m_update(f_row[u], f_cnt[u], 20);
      @(posedge clk); #0.1;
      check(table_matches_f(), "full table matches model");
      check(f_occ == 5'(m.size()), "occupancy");
      if (m.size() > 0) check(f_hv && f_hr == m[0].row && f_hc == cnt_t'(m[0].cnt), "head");
      else check(!f_hv, "empty head");
    end
    f_valid = 0; f_pop = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
