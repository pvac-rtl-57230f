// csa_subarray -- one counter subarray (CSA): ROWS x ROW_BITS cells, a row
// decoder, a row buffer and an 8-bit column multiplexer.
//
// The cell array is modelled as a register array. ACT copies the addressed
// row into the row buffer (sensing); counter reads and writes then work on
// the row buffer through the column multiplexer; PRE writes the row buffer
// back into the open row (restore). A row-wide clear is used once after
// reset to zero all counters. The analog sensing and the CSA timing
// (tRCD/tWR/tRP) are not modelled here: the counter update logic that
// drives this block waits those times itself.
//
// Timing: act, pre, wr and clr take effect at the clock edge; rdata is the
// combinational column read of the row buffer and already reflects a write
// made at the previous edge. Only one of act, pre, clr may be high in a
// cycle (checked by an assertion).
module csa_subarray #(
  parameter int unsigned ROWS     = 32,
  parameter int unsigned ROW_BITS = 8192,
  parameter int unsigned CNT_W    = 8,
  localparam int unsigned RW      = $clog2(ROWS),
  localparam int unsigned NCOL    = ROW_BITS / CNT_W,
  localparam int unsigned CW      = $clog2(NCOL)
) (
  input  logic              clk,
  input  logic              act,
  input  logic [RW-1:0]     act_row,
  input  logic              pre,
  input  logic [CW-1:0]     col,
  input  logic              wr,
  input  logic [CNT_W-1:0]  wdata,
  output logic [CNT_W-1:0]  rdata,
  input  logic              clr,
  input  logic [RW-1:0]     clr_row
);
  logic [ROW_BITS-1:0] cells [ROWS];
  logic [ROW_BITS-1:0] row_buf;
  logic [RW-1:0]       open_row;

  always_ff @(posedge clk) begin
    if (clr) begin
      cells[clr_row] <= '0;
    end else if (act) begin
      row_buf  <= cells[act_row];
      open_row <= act_row;
    end else if (pre) begin
      cells[open_row] <= row_buf;
    end else if (wr) begin
      row_buf[col*CNT_W +: CNT_W] <= wdata;
    end
  end

  assign rdata = row_buf[col*CNT_W +: CNT_W];

  a_one_op: assert property (@(posedge clk) $onehot0({act, pre, clr}))
    else $error("csa_subarray: act, pre and clr in the same cycle");
endmodule
