// read_pattern_builder: picks the read requests one code region serves in a
// memory cycle, following the flowchart of the source's Fig. 12.
//
// Phase 1 walks the data banks i = 0..3. The oldest waiting request of bank
// i is read straight from data bank i. Right after, the value just read is
// used for degraded reads: for every other bank k whose parity bank (i,k) is
// still idle, the oldest request of bank k for the same row is served as
// data(i) XOR parity(i,k). Phase 2 walks the parity banks j = 0..5 left idle:
// a request for one bank of the pair is served from parity j and the other
// bank of the pair if that data bank is still idle (p-side first).
// Degraded reads need the row to be in an active parity slot and both
// elements in status 00. A request whose element is in status 10 (the fresh
// value was written into a parity bank) is read from that parity bank as is.
// The block is purely combinational: en gates everything; rm marks the
// served queue entries; dcmd/pcmd are the bank reads to issue; serve[s]
// tells the decoder, one cycle later when the banks answer, how to build the
// value of serve slot s (0..3 data-bank reads, 4..9 parity-bank reads).
// The walk order comes from the paper; which entry is taken (oldest first)
// and the p-before-q order of phase 2 are this design's choices.
module read_pattern_builder
  import cm_pkg::*;
(
  input  logic        en,
  input  rd_entry_t   ent   [BANKS_PER_GROUP][QDEPTH],
  input  logic [QDEPTH-1:0] vld [BANKS_PER_GROUP],
  input  status_t     st    [P_ROWS][BANKS_PER_GROUP],
  input  logic [REGION_W-1:0] slot_region [N_SLOTS],
  input  slot_state_e slot_state [N_SLOTS],
  output logic [QDEPTH-1:0] rm [BANKS_PER_GROUP],
  output logic        d_en  [BANKS_PER_GROUP],
  output logic [ROW_W-1:0]  d_row [BANKS_PER_GROUP],
  output logic        p_en  [N_PAR_PER_GROUP],
  output logic [SROW_W-1:0] p_row [N_PAR_PER_GROUP],
  output serve_t      serve [SERVE_SLOTS],
  output logic [3:0]  n_degraded,
  output logic [3:0]  n_raw
);
  always_comb begin
    automatic logic     dl_ok  [BANKS_PER_GROUP];
    automatic row_map_t dl_map [BANKS_PER_GROUP];
    for (int i = 0; i < BANKS_PER_GROUP; i++) begin
      rm[i] = '0; d_en[i] = 1'b0; d_row[i] = '0; dl_ok[i] = 1'b0; dl_map[i] = '0;
    end
    for (int j = 0; j < N_PAR_PER_GROUP; j++) begin
      p_en[j] = 1'b0; p_row[j] = '0;
    end
    for (int s = 0; s < SERVE_SLOTS; s++) serve[s] = '0;
    n_degraded = '0;
    n_raw      = '0;

    if (en) begin
      // ---- phase 1: data banks, each followed by degraded reads ----------
      for (int i = 0; i < BANKS_PER_GROUP; i++) begin
        automatic int e = -1;
        for (int x = QDEPTH - 1; x >= 0; x--)
          if (vld[i][x] && !rm[i][x]) e = x;
        if (e >= 0) begin
          automatic row_map_t m = map_row(ent[i][e].row, slot_region, slot_state);
          automatic status_t  s = st[m.srow][i];
          if (m.tracked && s.st == ST_PARITY) begin
            if (!p_en[s.ptr]) begin
              p_en[s.ptr]  = 1'b1;
              p_row[s.ptr] = m.srow;
              rm[i][e]     = 1'b1;
              serve[i]     = '{valid: 1'b1, mode: DEC_RAW, src_bank: 2'(i), src_par: s.ptr,
                               core: ent[i][e].core, tag: ent[i][e].tag};
              n_raw++;
            end
          end else begin
            d_en[i]   = 1'b1;
            d_row[i]  = ent[i][e].row;
            rm[i][e]  = 1'b1;
            serve[i]  = '{valid: 1'b1, mode: DEC_DIRECT, src_bank: 2'(i), src_par: '0,
                          core: ent[i][e].core, tag: ent[i][e].tag};
            dl_ok[i]  = m.active && s.st == ST_FRESH;
            dl_map[i] = m;
          end
        end
        // degraded reads with the element just downloaded from bank i
        if (dl_ok[i]) begin
          for (int k = 0; k < BANKS_PER_GROUP; k++) begin
            automatic logic [PAR_W-1:0] j = pair_idx(i, k);
            if (k != i && !p_en[j] && st[dl_map[i].srow][k].st == ST_FRESH) begin
              automatic int f = -1;
              for (int x = QDEPTH - 1; x >= 0; x--)
                if (vld[k][x] && !rm[k][x] && ent[k][x].row == d_row[i]) f = x;
              if (f >= 0) begin
                p_en[j]  = 1'b1;
                p_row[j] = dl_map[i].srow;
                rm[k][f] = 1'b1;
                serve[BANKS_PER_GROUP + int'(j)] =
                  '{valid: 1'b1, mode: DEC_XOR, src_bank: 2'(i), src_par: j,
                    core: ent[k][f].core, tag: ent[k][f].tag};
                n_degraded++;
              end
            end
          end
        end
      end

      // ---- phase 2: remaining parity banks with idle data banks ----------
      for (int j = 0; j < N_PAR_PER_GROUP; j++) begin
        if (!p_en[j]) begin
          for (int side = 0; side < 2; side++) begin
            automatic int want = (side == 0) ? PAIR_P[j] : PAIR_Q[j];  // requested bank
            automatic int help = (side == 0) ? PAIR_Q[j] : PAIR_P[j];  // idle partner
            if (!p_en[j] && !d_en[help]) begin
              automatic int f = -1;
              automatic row_map_t fm = '0;
              for (int x = QDEPTH - 1; x >= 0; x--) begin
                automatic row_map_t m = map_row(ent[want][x].row, slot_region, slot_state);
                if (vld[want][x] && !rm[want][x] && m.active &&
                    st[m.srow][want].st == ST_FRESH && st[m.srow][help].st == ST_FRESH) begin
                  f  = x;
                  fm = m;
                end
              end
              if (f >= 0) begin
                d_en[help]  = 1'b1;
                d_row[help] = ent[want][f].row;
                p_en[j]     = 1'b1;
                p_row[j]    = fm.srow;
                rm[want][f] = 1'b1;
                serve[BANKS_PER_GROUP + j] =
                  '{valid: 1'b1, mode: DEC_XOR, src_bank: 2'(help), src_par: PAR_W'(j),
                    core: ent[want][f].core, tag: ent[want][f].tag};
                n_degraded++;
              end
            end
          end
        end
      end
    end
  end
endmodule
