// pvac_pkg -- constants, types and address-mapping functions shared by the
// PVAC (per-victim-row hammered counting) bank logic.
//
// Geometry follows a DDR5 16 Gb device: 64K rows per bank, split into 128
// data subarrays (DSAs) of 512 rows. Every row owns an 8-bit hammered-count
// counter. The counters live in two counter subarrays (CSA 0 and CSA 1) of
// 32 rows x 8192 bits each. A bank row address is {dsa[6:0], rin[8:0]} where
// rin is the row inside its DSA.
//
// Counter placement (energy-efficient dual CSA): the 512 counters of a DSA
// are cut into four chunks of 128 rows (chunk = rin[8:7]). Even chunks live
// in CSA 0, odd chunks in CSA 1, so the five counters touched by one
// activation never need two rows of the same CSA. One CSA row holds the same
// chunk of eight consecutive DSAs (one 1024-bit slot per DSA), so a refresh
// of one row-in-DSA in eight DSAs opens a single CSA row. The chunking, the
// even/odd split and the eight-DSA row follow the paper and its layout
// figure; the slot order past the first two DSAs is this design's choice.
//
// The counter placement is given here as reference functions and built as
// hardware in csa_addr_map.
//
// Timing is counted in cycles of the in-DRAM counter logic, taken as one
// counter read-modify-write time (tUP = 0.83 ns). The CSA timings given in
// nanoseconds are rounded up to whole cycles.
package pvac_pkg;

  // ---------------- geometry ----------------
  localparam int unsigned ROWS_PER_BANK = 65536;
  localparam int unsigned ROW_W         = 16;    // bank row address width
  localparam int unsigned DSA_ROWS      = 512;
  localparam int unsigned NUM_DSA       = ROWS_PER_BANK / DSA_ROWS;  // 128
  localparam int unsigned CNT_W         = 8;     // counter width
  localparam int unsigned CNT_MAX       = (1 << CNT_W) - 1;
  localparam int unsigned BR            = 2;     // blast radius
  localparam int unsigned CHUNK_ROWS    = 128;
  localparam int unsigned NUM_CSA       = 2;
  localparam int unsigned CSA_ROWS      = 32;
  localparam int unsigned CSA_ROW_W     = 5;
  localparam int unsigned CSA_ROW_BITS  = 8192;
  localparam int unsigned COL_W         = 10;    // 1024 counters per CSA row
  localparam int unsigned DSAS_PER_CSA_ROW = 8;
  localparam int unsigned REF_ROWS      = 8;     // rows refreshed per REF and bank
  localparam int unsigned CAND_PER_ROW  = 2 * BR + 1;  // counters touched per activation

  // ---------------- CSA timing, cycles of tUP = 0.83 ns ----------------
  localparam int unsigned T_RCD_CSA = 10;  // 7.6 ns
  localparam int unsigned T_RAS_CSA = 21;  // 16.7 ns
  localparam int unsigned T_WR_CSA  = 24;  // 19.2 ns
  localparam int unsigned T_RP_CSA  = 5;   // 4.1 ns
  localparam int unsigned T_UP      = 1;   // 0.83 ns
  localparam int unsigned T_RC      = 58;  // DSA tRC 48 ns, the bound an update must meet

  // ---------------- mitigation ----------------
  localparam int unsigned NBO_DEFAULT  = 237;  // PVAC-4 at a maximum hammered count of 256
  localparam int unsigned NMIT_DEFAULT = 4;
  localparam int unsigned ABO_ACT      = 3;
  localparam int unsigned ROWS_PER_MIT = 4;    // rows refreshed per RFM or proactive mitigation
  localparam int unsigned QUEUE_DEPTH  = 20;   // NMit*4 + 4

  typedef logic [ROW_W-1:0] row_t;
  typedef logic [CNT_W-1:0] cnt_t;

  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_RD  = 3'd3,
    CMD_WR  = 3'd4,
    CMD_REF = 3'd5,
    CMD_RFM = 3'd6
  } cmd_e;

  // Where a row's counter is stored.
  typedef struct packed {
    logic                 csa;      // CSA 0 or 1
    logic [CSA_ROW_W-1:0] csa_row;  // row inside that CSA
    logic [COL_W-1:0]     col;      // 8-bit counter column inside the CSA row
  } csa_loc_t;

  // One counter update job: up to REF_ROWS activated rows that share a CSA
  // footprint (a single ACT uses n_rows = 1, a REF uses 8).
  typedef struct packed {
    logic [3:0]             n_rows;
    row_t [REF_ROWS-1:0]    rows;
  } upd_job_t;

  // The two functions below state the counter placement and the victim set
  // in their simplest form. The hardware computes both in csa_addr_map; the
  // functions serve as the reference that the testbenches check against.

  // Counter location of bank row r.
  function automatic csa_loc_t map_row(row_t r);
    csa_loc_t   l;
    logic [6:0] dsa;
    logic [8:0] rin;
    logic [1:0] chunk;
    dsa       = r[15:9];
    rin       = r[8:0];
    chunk     = rin[8:7];
    l.csa     = chunk[0];
    l.csa_row = {dsa[6:3], chunk[1]};
    l.col     = {dsa[2:0], rin[6:0]};
    return l;
  endfunction

  // Candidate k (0..4) of an activation of row a: the victims a-2, a-1,
  // a+1, a+2 in that order, then a itself (the reset). valid is 0 for a
  // victim that falls outside a's DSA.
  function automatic logic [ROW_W:0] cand_row(row_t a, int unsigned k);
    int signed  off;
    int signed  rin;
    logic       ok;
    row_t       t;
    case (k)
      0:       off = -2;
      1:       off = -1;
      2:       off = 1;
      3:       off = 2;
      default: off = 0;
    endcase
    rin = int'(a[8:0]) + off;
    ok  = (rin >= 0) && (rin < int'(DSA_ROWS));
    t   = {a[15:9], 9'(rin)};
    return {ok, t};
  endfunction

endpackage
