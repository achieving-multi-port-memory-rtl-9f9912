// write_pattern_builder: picks the writes one code region commits in a memory
// cycle, following the flowchart of the source's Fig. 14.
//
// Phase 1: for each data bank i = 0..3 the oldest write of its queue is
// written to data bank i. Phase 2: for each parity bank j = 0..5 of pair
// (p,q), one more write to p or q is committed into parity bank j, provided
// its row lies in an active parity slot. The element is stored there as is
// (not XORed), and the code status table then points at parity bank j
// (status 10); a data-bank write of a tracked row sets status 01. Every
// committed write of a tracked row also produces a recoding request naming
// the row, the source bank, the banks left stale and the cycle number.
// Between p and q the builder takes the bank with more writes still waiting
// (p on a tie), and within it the oldest write that has no older write to the
// same row in its queue (keeps same-address writes in order) and whose row in
// parity j is not holding the partner's fresh element. With these rules the
// builder reproduces the commitment pattern and status table printed in
// Fig. 15. Purely combinational; en gates everything. Outputs are indexed by
// serve slot: 0..3 data banks, 4..9 parity banks.
module write_pattern_builder
  import cm_pkg::*;
(
  input  logic        en,
  input  wr_entry_t   ent   [BANKS_PER_GROUP][QDEPTH],
  input  logic [QDEPTH-1:0] vld [BANKS_PER_GROUP],
  input  status_t     st    [P_ROWS][BANKS_PER_GROUP],
  input  logic [REGION_W-1:0] slot_region [N_SLOTS],
  input  slot_state_e slot_state [N_SLOTS],
  input  logic [15:0] cycle,
  output logic [QDEPTH-1:0] rm [BANKS_PER_GROUP],
  output logic        d_en   [BANKS_PER_GROUP],
  output logic [ROW_W-1:0]  d_row  [BANKS_PER_GROUP],
  output logic [W-1:0]      d_data [BANKS_PER_GROUP],
  output logic        p_en   [N_PAR_PER_GROUP],
  output logic [SROW_W-1:0] p_row  [N_PAR_PER_GROUP],
  output logic [W-1:0]      p_data [N_PAR_PER_GROUP],
  output logic        upd_v    [SERVE_SLOTS],
  output logic [SROW_W-1:0] upd_srow [SERVE_SLOTS],
  output logic [1:0]  upd_bank [SERVE_SLOTS],
  output status_t     upd_val  [SERVE_SLOTS],
  output logic        rc_v   [SERVE_SLOTS],
  output recode_req_t rc_req [SERVE_SLOTS],
  output logic [3:0]  n_parity_writes
);
  localparam int NB = BANKS_PER_GROUP;
  localparam int NS = NB + N_PAR_PER_GROUP;

  // parity banks that contain local bank b, as a stale mask
  function automatic logic [NS-1:0] par_mask(input int b);
    logic [NS-1:0] m = '0;
    for (int j = 0; j < N_PAR_PER_GROUP; j++)
      if (PAIR_P[j] == b || PAIR_Q[j] == b) m[NB + j] = 1'b1;
    return m;
  endfunction

  always_comb begin
    automatic int rem [NB];
    for (int i = 0; i < NB; i++) begin
      rm[i] = '0; d_en[i] = 1'b0; d_row[i] = '0; d_data[i] = '0;
      rem[i] = 0;
      for (int x = 0; x < QDEPTH; x++) if (vld[i][x]) rem[i]++;
    end
    for (int j = 0; j < N_PAR_PER_GROUP; j++) begin
      p_en[j] = 1'b0; p_row[j] = '0; p_data[j] = '0;
    end
    for (int s = 0; s < NS; s++) begin
      upd_v[s] = 1'b0; upd_srow[s] = '0; upd_bank[s] = '0; upd_val[s] = '0;
      rc_v[s] = 1'b0; rc_req[s] = '0;
    end
    n_parity_writes = '0;

    if (en) begin
      // ---- phase 1: head of each write queue to its data bank -------------
      for (int i = 0; i < NB; i++) begin
        if (vld[i][0]) begin
          automatic row_map_t m = map_row(ent[i][0].row, slot_region, slot_state);
          d_en[i]   = 1'b1;
          d_row[i]  = ent[i][0].row;
          d_data[i] = ent[i][0].data;
          rm[i][0]  = 1'b1;
          rem[i]--;
          if (m.tracked) begin
            upd_v[i]    = 1'b1;
            upd_srow[i] = m.srow;
            upd_bank[i] = 2'(i);
            upd_val[i]  = '{st: ST_DATA, ptr: '0};
            rc_v[i]     = 1'b1;
            rc_req[i]   = '{srow: m.srow, src_bank: 2'(i), stale: par_mask(i), cycle: cycle};
          end
        end
      end

      // ---- phase 2: one extra write per parity bank -----------------------
      for (int j = 0; j < N_PAR_PER_GROUP; j++) begin
        for (int side = 0; side < 2; side++) begin
          automatic int p = PAIR_P[j];
          automatic int q = PAIR_Q[j];
          automatic int first = (rem[q] > rem[p]) ? q : p;
          automatic int b     = (side == 0) ? first : ((first == p) ? q : p);
          automatic int y     = (b == p) ? q : p;
          if (!p_en[j]) begin
            automatic int f = -1;
            automatic row_map_t fm = '0;
            for (int x = QDEPTH - 1; x >= 0; x--) begin
              automatic row_map_t m = map_row(ent[b][x].row, slot_region, slot_state);
              automatic logic older_same = 1'b0;
              for (int o = 0; o < QDEPTH; o++)
                if (o < x && ent[b][o].row == ent[b][x].row) older_same = 1'b1;
              if (vld[b][x] && !rm[b][x] && m.active && !older_same &&
                  !(st[m.srow][y].st == ST_PARITY && int'(st[m.srow][y].ptr) == j)) begin
                f  = x;
                fm = m;
              end
            end
            if (f >= 0) begin
              automatic logic [NS-1:0] stale = par_mask(b);
              stale[NB + j] = 1'b0;
              stale[b]      = 1'b1;
              p_en[j]   = 1'b1;
              p_row[j]  = fm.srow;
              p_data[j] = ent[b][f].data;
              for (int k = 0; k < NB; k++)
                if (k == b) begin
                  rem[k]--;
                  for (int x = 0; x < QDEPTH; x++)
                    if (x == f) rm[k][x] = 1'b1;
                end
              upd_v[NB + j]    = 1'b1;
              upd_srow[NB + j] = fm.srow;
              upd_bank[NB + j] = 2'(b);
              upd_val[NB + j]  = '{st: ST_PARITY, ptr: PAR_W'(j)};
              rc_v[NB + j]     = 1'b1;
              rc_req[NB + j]   = '{srow: fm.srow, src_bank: 2'(b), stale: stale, cycle: cycle};
              n_parity_writes++;
            end
          end
        end
      end
    end
  end
endmodule
