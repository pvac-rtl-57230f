// csa_addr_map -- counter footprint of one activation in the dual counter
// subarray (CSA) organisation.
//
// For an activated bank row A = {dsa[6:0], rin[8:0]} it lists the five
// counters the activation touches -- victims A-2, A-1, A+1, A+2, then A
// itself (the reset) -- and, for each, where it is stored. A victim that
// would fall outside A's 512-row DSA is marked invalid, since RowHammer
// disturbance does not cross a subarray boundary. A row r has its 8-bit
// counter in CSA chunk[0] (chunk = r.rin[8:7]), in CSA row
// {r.dsa[6:3], chunk[1]}, at column {r.dsa[2:0], r.rin[6:0]}, i.e. bits
// [8*col+7 : 8*col] of the 8192-bit CSA row. From that the block also says
// which CSAs the activation needs and which row each of them must open.
//
// Splitting each DSA's counters into four 128-row chunks and sending even
// and odd chunks to different CSAs is the paper's scheme. As a result, the
// valid candidates held by one CSA always share a single CSA row. Packing
// the same chunk of eight consecutive DSAs into one CSA row follows the
// paper's layout figure, which fills a CSA row with eight DSAs; it lets one
// REF that touches the same row of eight DSAs open a single CSA row. The
// slot order past the first two DSAs is this design's choice.
//
// Purely combinational (incrementers, boundary compares, bit placement).
module csa_addr_map
  import pvac_pkg::*;
(
  input  row_t                        row,        // activated row A
  output logic [CAND_PER_ROW-1:0]     cand_ok,    // candidate lies in A's DSA
  output row_t                        cand     [CAND_PER_ROW],
  output csa_loc_t                    loc      [CAND_PER_ROW],
  output logic [NUM_CSA-1:0]          csa_need,   // CSA holds a valid candidate
  output logic [CSA_ROW_W-1:0]        csa_row  [NUM_CSA]
);
  always_comb begin
    logic signed [10:0] rin;
    logic [1:0]         chunk;
    for (int unsigned k = 0; k < CAND_PER_ROW; k++) begin
      case (k)
        0:       rin = $signed({2'b00, row[8:0]}) - 11'sd2;
        1:       rin = $signed({2'b00, row[8:0]}) - 11'sd1;
        2:       rin = $signed({2'b00, row[8:0]}) + 11'sd1;
        3:       rin = $signed({2'b00, row[8:0]}) + 11'sd2;
        default: rin = $signed({2'b00, row[8:0]});
      endcase
      cand_ok[k]     = (rin >= 0) && (rin < 11'sd512);
      cand[k]        = {row[15:9], rin[8:0]};
      chunk          = rin[8:7];
      loc[k].csa     = chunk[0];
      loc[k].csa_row = {row[15:12], chunk[1]};
      loc[k].col     = {row[11:9], rin[6:0]};
    end
    for (int unsigned c = 0; c < NUM_CSA; c++) begin
      csa_need[c] = 1'b0;
      csa_row[c]  = '0;
      for (int unsigned k = 0; k < CAND_PER_ROW; k++)
        if (cand_ok[k] && loc[k].csa == c[0] && !csa_need[c]) begin
          csa_need[c] = 1'b1;
          csa_row[c]  = loc[k].csa_row;
        end
    end
  end
endmodule
