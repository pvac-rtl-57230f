// tb_csa_addr_map -- exhaustive check of the activation footprint and the
// row-to-counter mapping.
//
// All 65536 bank rows are applied as the activated row. For each, the five
// candidates are compared with A-2, A-1, A+1, A+2, A worked out with plain
// integer arithmetic (invalid when outside A's 512-row DSA), and each
// candidate's (CSA, CSA row, column) with the same placement written with
// divisions and remainders (DSA = row / 512, chunk = (row % 512) / 128,
// ...). The per-CSA "needed" flags and CSA rows are recomputed from those,
// and every valid candidate held by a CSA must lie in that one CSA row. The
// own-row location of every row must name a distinct counter slot. Finally,
// the share of activations that need both CSAs must be the paper's 3/128
// (1536 of 65536 rows).
module tb_csa_addr_map;
  timeunit 1ns; timeprecision 10ps;
  import pvac_pkg::*;

  int unsigned checks = 0, failures = 0;
  row_t                    row;
  logic [CAND_PER_ROW-1:0] cand_ok;
  row_t                    cand     [CAND_PER_ROW];
  csa_loc_t                loc      [CAND_PER_ROW];
  logic [NUM_CSA-1:0]      csa_need;
  logic [CSA_ROW_W-1:0]    csa_row  [NUM_CSA];
  bit                      used [65536];

  csa_addr_map dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s (row %0d)", what, row);
    end
  endtask

  initial begin : watchdog
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned dsa, rin, dual;
    int          off [CAND_PER_ROW];
    off = '{-2, -1, 1, 2, 0};
    dual = 0;
    for (int i = 0; i < 65536; i++) used[i] = 0;
    for (int unsigned r = 0; r < 65536; r++) begin
      bit                   need [2];
      int unsigned          need_row [2];
      row = row_t'(r);
      #1;
      dsa = r / 512;
      rin = r % 512;
      need = '{0, 0};
      need_row = '{0, 0};
      for (int k = 0; k < CAND_PER_ROW; k++) begin
        int          vr;
        int unsigned v, vchunk, e_csa, e_row, e_col;
        vr = int'(rin) + off[k];
        check(cand_ok[k] == (vr >= 0 && vr < 512), "candidate valid");
        if (vr >= 0 && vr < 512) begin
          v      = dsa * 512 + unsigned'(vr);
          vchunk = unsigned'(vr) / 128;
          e_csa  = vchunk % 2;
          e_row  = (dsa / 8) * 2 + vchunk / 2;
          e_col  = (dsa % 8) * 128 + unsigned'(vr) % 128;
          check(cand[k] == row_t'(v), "candidate row");
          check(loc[k].csa == e_csa[0], "csa select");
          check(loc[k].csa_row == e_row[4:0], "csa row");
          check(loc[k].col == e_col[9:0], "column");
          if (need[e_csa]) check(need_row[e_csa] == e_row, "one CSA row per CSA");
          need[e_csa]     = 1;
          need_row[e_csa] = e_row;
        end
      end
      for (int c = 0; c < 2; c++) begin
        check(csa_need[c] == need[c], "CSA needed");
        if (need[c]) check(csa_row[c] == need_row[c][4:0], "CSA row to open");
      end
      if (need[0] && need[1]) dual++;
      begin
        int unsigned slot;
        slot = (int'(loc[4].csa) * 32 + int'(loc[4].csa_row)) * 1024 + int'(loc[4].col);
        check(!used[slot], "counter slot used once");
        used[slot] = 1;
      end
    end
    check(dual == 65536 * 3 / 128, "dual-CSA share 3/128");
    $display("dual-CSA activations: %0d of 65536", dual);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
