// code_status_table: freshness state of every tracked row of one code region.
//
// For each parity-slot row (srow) and each of the 4 data banks of the region
// the table keeps a status_t: 00 data and parities agree, 01 the data bank
// holds the newest value and the parities of that row must be recoded, 10 a
// parity bank (ptr) holds the newest value. The encodings 00/01/10 are the
// ones printed in the source's Fig. 15. Rows are indexed by parity-slot row
// rather than by data-bank row: rows of regions that are not mapped onto a
// parity slot have no parity to go stale and are always "00". The whole table
// is visible combinationally on st; each cycle it accepts a row clear (all
// four banks to 00, applied first) and up to N_UPD single-entry updates,
// applied in index order so later ones win. Reset clears everything to 00.
module code_status_table
  import cm_pkg::*;
#(
  parameter int N_UPD = SERVE_SLOTS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr_v,
  input  logic [SROW_W-1:0] clr_srow,
  input  logic              upd_v    [N_UPD],
  input  logic [SROW_W-1:0] upd_srow [N_UPD],
  input  logic [1:0]        upd_bank [N_UPD],
  input  status_t           upd_val  [N_UPD],
  output status_t           st [P_ROWS][BANKS_PER_GROUP]
);
  status_t tbl [P_ROWS][BANKS_PER_GROUP];

  always_comb st = tbl;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < P_ROWS; r++)
        for (int b = 0; b < BANKS_PER_GROUP; b++) tbl[r][b] <= '{st: ST_FRESH, ptr: '0};
    end else begin
      automatic status_t n [P_ROWS][BANKS_PER_GROUP] = tbl;
      if (clr_v)
        for (int b = 0; b < BANKS_PER_GROUP; b++) n[clr_srow][b] = '{st: ST_FRESH, ptr: '0};
      for (int u = 0; u < N_UPD; u++)
        if (upd_v[u]) n[upd_srow[u]][upd_bank[u]] = upd_val[u];
      tbl <= n;
    end
  end
endmodule
