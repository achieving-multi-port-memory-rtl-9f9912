// dynamic_coding_controller: decides which memory regions the shallow parity
// banks encode.
//
// Each data bank is cut into N_REGIONS regions of REGION_ROWS rows (the same
// row range in every bank); the parity banks hold N_SLOTS region-sized slots,
// of which one is kept free for building. The controller counts accepted
// requests per region (up to N_ACC per cycle, counts saturate). Every EPOCH
// cycles it ranks the regions by count and takes the N_SLOTS-1 most accessed
// ones. If all of them are encoded it does nothing. Otherwise it encodes the
// most accessed one that is not: if the active slots are all used, it first
// evicts the least-accessed encoded region (the slot goes EVICTING, its
// parities are no longer used, and it is freed once both code regions have no
// recoding work left), then it puts the region into a free slot as BUILDING
// and asks each code region's recoding unit to encode its rows one by one
// (enc_* valid/ready). When both code regions have encoded every row the
// slot becomes ACTIVE. Counts restart each epoch. slot_region/slot_state are
// read by the pattern builders; n_switches counts newly encoded regions and
// n_evictions evictions (the paper's "region switches").
// From the paper: the partition into ceil(1/r) regions, the alpha/r - 1
// encoded regions plus one reserved, the periodic top-count choice and
// least-frequently-used eviction. Epoch length, counter width, tie breaks
// (lower region number wins), ignoring never-accessed regions and the
// row-by-row encode are this design's choices.
module dynamic_coding_controller
  import cm_pkg::*;
#(
  parameter int EPOCH = 4096,
  parameter int N_ACC = 2 * N_DATA_BANKS,
  parameter int CNT_W = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        acc_v   [N_ACC],
  input  logic [ROW_W-1:0] acc_row [N_ACC],
  input  logic        clean   [N_GROUPS],   // recoding queue empty, unit idle
  input  logic        eng_busy [N_GROUPS],  // recoding unit in an operation
  input  logic        enc_ready [N_GROUPS],
  output logic        enc_valid [N_GROUPS],
  output logic [ROW_W-1:0]  enc_row  [N_GROUPS],
  output logic [SROW_W-1:0] enc_srow [N_GROUPS],
  output logic [REGION_W-1:0] slot_region [N_SLOTS],
  output slot_state_e slot_state [N_SLOTS],
  output logic [15:0] n_switches,
  output logic [15:0] n_evictions
);
  localparam int K = N_SLOTS - 1;   // regions kept encoded

  typedef enum logic [1:0] {S_IDLE, S_EVICT_WAIT, S_BUILD} fsm_e;

  logic [CNT_W-1:0]    cnt [N_REGIONS];
  logic [$clog2(EPOCH)-1:0] timer;
  fsm_e                fsm;
  logic [REGION_W-1:0] target;
  logic [SLOT_W-1:0]   vict, bslot;
  logic [OFF_W:0]      off [N_GROUPS];
  logic [REGION_W-1:0] sreg [N_SLOTS];
  slot_state_e         sst  [N_SLOTS];

  // ranking and choice, combinational
  logic                need;          // a selected region is not encoded
  logic [REGION_W-1:0] best;          // most accessed such region
  logic                full_active;   // K slots active
  logic [SLOT_W-1:0]   lfu;           // least-accessed active slot
  logic                have_free;
  logic [SLOT_W-1:0]   free_slot;

  always_comb begin
    automatic int best_rank = N_REGIONS;
    automatic int n_act = 0;
    automatic logic [CNT_W:0] lfu_cnt = '1;
    need = 1'b0; best = '0; lfu = '0; have_free = 1'b0; free_slot = '0;
    for (int r = 0; r < N_REGIONS; r++) begin
      automatic int rank = 0;
      automatic logic enc = 1'b0;
      for (int o = 0; o < N_REGIONS; o++)
        if (cnt[o] > cnt[r] || (cnt[o] == cnt[r] && o < r)) rank++;
      for (int s = 0; s < N_SLOTS; s++)
        if (sst[s] != SLOT_FREE && int'(sreg[s]) == r) enc = 1'b1;
      if (rank < K && cnt[r] != 0 && !enc && rank < best_rank) begin
        need = 1'b1;
        best = REGION_W'(r);
        best_rank = rank;
      end
    end
    for (int s = N_SLOTS - 1; s >= 0; s--) begin
      if (sst[s] == SLOT_ACTIVE) begin
        n_act++;
        if ({1'b0, cnt[sreg[s]]} <= lfu_cnt) begin
          lfu_cnt = {1'b0, cnt[sreg[s]]};
          lfu = SLOT_W'(s);
        end
      end
      if (sst[s] == SLOT_FREE) begin
        have_free = 1'b1;
        free_slot = SLOT_W'(s);
      end
    end
    full_active = (n_act >= K);
    for (int s = 0; s < N_SLOTS; s++) begin
      slot_region[s] = sreg[s];
      slot_state[s]  = sst[s];
    end
    for (int g = 0; g < N_GROUPS; g++) begin
      enc_valid[g] = (fsm == S_BUILD) && (int'(off[g]) < REGION_ROWS);
      enc_row[g]   = ROW_W'(int'(target) * REGION_ROWS + int'(off[g][OFF_W-1:0]));
      enc_srow[g]  = SROW_W'(int'(bslot) * REGION_ROWS + int'(off[g][OFF_W-1:0]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_REGIONS; r++) cnt[r] <= '0;
      for (int s = 0; s < N_SLOTS; s++) begin
        sreg[s] <= '0;
        sst[s]  <= SLOT_FREE;
      end
      for (int g = 0; g < N_GROUPS; g++) off[g] <= '0;
      timer       <= '0;
      fsm         <= S_IDLE;
      target      <= '0;
      vict        <= '0;
      bslot       <= '0;
      n_switches  <= '0;
      n_evictions <= '0;
    end else begin
      automatic logic epoch_end = (int'(timer) == EPOCH - 1);
      timer <= epoch_end ? '0 : timer + 1'b1;
      // access counting (restart at each epoch end)
      for (int r = 0; r < N_REGIONS; r++) begin
        automatic int add = 0;
        for (int a = 0; a < N_ACC; a++)
          if (acc_v[a] && int'(region_of(acc_row[a])) == r) add++;
        if (epoch_end) cnt[r] <= '0;
        else if (int'(cnt[r]) + add > (1 << CNT_W) - 1) cnt[r] <= '1;
        else cnt[r] <= cnt[r] + CNT_W'(add);
      end
      case (fsm)
        S_IDLE:
          if (epoch_end && need) begin
            target <= best;
            if (full_active || !have_free) begin
              sst[lfu] <= SLOT_EVICTING;
              vict     <= lfu;
              fsm      <= S_EVICT_WAIT;
            end else begin
              sst[free_slot]  <= SLOT_BUILDING;
              sreg[free_slot] <= best;
              bslot           <= free_slot;
              for (int g = 0; g < N_GROUPS; g++) off[g] <= '0;
              fsm <= S_BUILD;
            end
          end
        S_EVICT_WAIT:
          if (clean[0] && clean[1]) begin
            sst[vict]   <= SLOT_FREE;
            n_evictions <= n_evictions + 1'b1;
            // build in the slot that was kept free (or the one just freed)
            bslot <= have_free ? free_slot : vict;
            sst[have_free ? free_slot : vict]  <= SLOT_BUILDING;
            sreg[have_free ? free_slot : vict] <= target;
            for (int g = 0; g < N_GROUPS; g++) off[g] <= '0;
            fsm <= S_BUILD;
          end
        S_BUILD: begin
          automatic logic done = 1'b1;
          for (int g = 0; g < N_GROUPS; g++) begin
            if (enc_valid[g] && enc_ready[g]) off[g] <= off[g] + 1'b1;
            if (int'(off[g]) < REGION_ROWS || eng_busy[g]) done = 1'b0;
          end
          if (done) begin
            sst[bslot] <= SLOT_ACTIVE;
            n_switches <= n_switches + 1'b1;
            fsm        <= S_IDLE;
          end
        end
        default: fsm <= S_IDLE;
      endcase
    end
  end
endmodule
