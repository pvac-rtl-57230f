// tb_csa_subarray -- random ACT / column read / column write / PRE / clear
// traffic against a counter subarray at its full size (32 x 8192 bits),
// compared with a reference model kept as an array of 8-bit counters.
// Checks that reads see the row buffer, that writes reach the cells only
// through PRE (write-back) and that a write to one row never shows in
// another.
module tb_csa_subarray;
  timeunit 1ns; timeprecision 10ps;
  localparam int unsigned ROWS = 32, ROW_BITS = 8192, CNT_W = 8, NCOL = ROW_BITS / CNT_W;

  logic clk = 0, act = 0, pre = 0, wr = 0, clr = 0;
  logic [4:0] act_row = 0, clr_row = 0;
  logic [9:0] col = 0;
  logic [7:0] wdata = 0, rdata;
  int unsigned checks = 0, failures = 0;

  logic [7:0] cells_m [ROWS][NCOL];  // model of the cells
  logic [7:0] buf_m [NCOL];          // model of the row buffer
  int unsigned open_m;

  csa_subarray dut (.*);

  always #1 clk = ~clk;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cycle();
    @(posedge clk); #0.1;
    act = 0; pre = 0; wr = 0; clr = 0;
  endtask

  initial begin
    // clear every row
    for (int r = 0; r < ROWS; r++) begin
      clr = 1; clr_row = 5'(r); cycle();
      for (int c = 0; c < NCOL; c++) cells_m[r][c] = 0;
    end
    open_m = 0;
    for (int it = 0; it < 300; it++) begin
      // activate a random row
      open_m  = $urandom_range(ROWS - 1);
      act = 1; act_row = 5'(open_m); cycle();
      for (int c = 0; c < NCOL; c++) buf_m[c] = cells_m[open_m][c];
      // random column reads and writes
      for (int k = 0; k < 20; k++) begin
        col = 10'($urandom_range(NCOL - 1));
        #0.1;
        check(rdata == buf_m[col], $sformatf("read row %0d col %0d", open_m, col));
        if ($urandom_range(1)) begin
          wdata = 8'($urandom);
          wr = 1; cycle();
          buf_m[col] = wdata;
          #0.1;
          check(rdata == wdata, "read after write");
        end
      end
      // sometimes open a different row without writing back (the model then
      // loses the buffer contents, like a row that is never restored)
      pre = 1; cycle();
      for (int c = 0; c < NCOL; c++) cells_m[open_m][c] = buf_m[c];
      if (it % 50 == 49) begin
        int unsigned r;
        r = $urandom_range(ROWS - 1);
        clr = 1; clr_row = 5'(r); cycle();
        for (int c = 0; c < NCOL; c++) cells_m[r][c] = 0;
      end
    end
    // full read-back of every row
    for (int r = 0; r < ROWS; r++) begin
      act = 1; act_row = 5'(r); cycle();
      for (int c = 0; c < NCOL; c += 7) begin
        col = 10'(c); #0.1;
        check(rdata == cells_m[r][c], $sformatf("read-back row %0d col %0d", r, c));
      end
      pre = 1; cycle();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
