// priority_queue -- per-bank table of the DEPTH rows with the highest
// hammered counts, kept sorted by count (largest at index 0).
//
// Every counter the CSA logic writes is reported here as (row, count):
//   * a row already in the table takes the new count and moves to its
//     sorted place; a count of zero (the row was just activated or
//     refreshed) removes it,
//   * a row not in the table is inserted when its count is larger than the
//     smallest entry (that entry is evicted) or when the table has room.
// Ties keep age order: a new or raised entry goes behind the entries with
// the same count, and a newcomer that only equals the smallest count is not
// inserted. The head (index 0) is the next mitigation target; pop removes it.
// Keeping the top rows sorted and evicting the smallest entry is the paper's
// scheme, and its example sets the tie order; removal at count zero and the
// two update ports per cycle are this design's choices.
//
// Timing: pop and the NUPD updates of one cycle are applied together at the
// clock edge, pop first, then update port 0, then port 1. The head outputs
// are registered state. The table is a single-cycle shift-insert network of
// DEPTH entries, so its cost grows linearly with DEPTH.
module priority_queue
  import pvac_pkg::*;
#(
  parameter int unsigned DEPTH = QUEUE_DEPTH,
  parameter int unsigned NUPD  = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NUPD-1:0] upd_valid,
  input  row_t            upd_row [NUPD],
  input  cnt_t            upd_cnt [NUPD],
  input  logic            pop,
  output logic            head_valid,
  output row_t            head_row,
  output cnt_t            head_cnt,
  output logic [$clog2(DEPTH+1)-1:0] occupancy
);
  typedef struct packed {
    logic v;
    row_t row;
    cnt_t cnt;
  } entry_t;

  typedef entry_t [DEPTH-1:0] table_t;

  table_t q, q_next;

  // Remove the head.
  function automatic table_t do_pop(table_t t);
    table_t r;
    for (int unsigned i = 0; i < DEPTH; i++)
      r[i] = (i + 1 < DEPTH) ? t[i+1] : '0;
    return r;
  endfunction

  // Apply one counter update to a sorted table.
  function automatic table_t do_update(table_t t, row_t row, cnt_t cnt);
    table_t      l, r;
    logic        hit;
    int unsigned hpos, p;
    entry_t      ne;
    // 1) drop the row if it is present (compact the tail up)
    hit  = 1'b0;
    hpos = DEPTH;
    for (int unsigned i = 0; i < DEPTH; i++)
      if (t[i].v && t[i].row == row && !hit) begin
        hit  = 1'b1;
        hpos = i;
      end
    for (int unsigned i = 0; i < DEPTH; i++)
      if (i < hpos)          l[i] = t[i];
      else if (i + 1 < DEPTH) l[i] = t[i+1];
      else                   l[i] = '0;
    // 2) insert behind every valid entry whose count is >= cnt
    p = 0;
    for (int unsigned i = 0; i < DEPTH; i++)
      if (l[i].v && l[i].cnt >= cnt) p = i + 1;
    ne.v   = 1'b1;
    ne.row = row;
    ne.cnt = cnt;
    for (int unsigned i = 0; i < DEPTH; i++)
      if (cnt == '0 || i < p) r[i] = l[i];
      else if (i == p)        r[i] = ne;
      else                    r[i] = l[i-1];
    return r;
  endfunction

  always_comb begin
    q_next = pop ? do_pop(q) : q;
    for (int unsigned u = 0; u < NUPD; u++)
      if (upd_valid[u]) q_next = do_update(q_next, upd_row[u], upd_cnt[u]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) q <= '0;
    else        q <= q_next;
  end

  assign head_valid = q[0].v;
  assign head_row   = q[0].row;
  assign head_cnt   = q[0].v ? q[0].cnt : '0;

  always_comb begin
    occupancy = '0;
    for (int unsigned i = 0; i < DEPTH; i++)
      if (q[i].v) occupancy = occupancy + 1'b1;
  end

  // The table stays sorted and packed (valid entries first).
  for (genvar i = 0; i + 1 < DEPTH; i++) begin : g_chk
    a_sorted: assert property (@(posedge clk) disable iff (!rst_n)
                               q[i+1].v |-> (q[i].v && q[i].cnt >= q[i+1].cnt))
      else $error("priority_queue: table out of order at %0d", i);
  end
endmodule
