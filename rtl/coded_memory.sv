// coded_memory: multi-core shared memory built from single-port banks with
// Code Scheme I parity, and its coded memory controller.
//
// Eight data banks (a..h, L_ROWS rows each) form two code regions of four
// banks. Each code region has six shallow parity banks, one per pair of its
// data banks, holding the XOR of the pair for the rows of the regions that
// the dynamic coding controller has placed in parity slots. Requests from
// N_CORES cores go through the core arbiter into a read queue and a write
// queue per data bank (depth 10). Each code region has its own access
// scheduler, which every memory cycle serves reads (direct and degraded),
// writes (into data banks and parity banks) or recoding/encoding work. The
// dynamic coding controller is shared by both code regions.
//
// Interface: req[c] is core c's request (addr = {row, bank}, bank in the low
// BANK_W bits); busy[c] high means the request was not taken and must be
// held. Reads are answered on resp[g][s] (code region g, serve slot s) with
// the core number and tag of the request, one cycle after they leave the bank
// queue; up to 10 reads per code region per cycle. Writes are posted (no
// answer). ev[g] reports what scheduler g did in the cycle; n_switches and
// n_evictions count dynamic coding region changes. Reads and writes sit in
// separate queues, so a read issued after a write to the same address may
// return the older value; cores that need ordering must wait (see README).
module coded_memory
  import cm_pkg::*;
#(
  parameter int EPOCH     = 4096,
  parameter int WQ_HIGH   = 8,
  parameter int RQ_DEPTH  = 32,
  parameter int AGE_LIMIT = 64
) (
  input  logic      clk,
  input  logic      rst_n,
  input  core_req_t req  [N_CORES],
  output logic      busy [N_CORES],
  output rd_resp_t  resp [N_GROUPS][SERVE_SLOTS],
  output sched_ev_t ev   [N_GROUPS],
  output logic [15:0] n_switches,
  output logic [15:0] n_evictions
);
  logic [15:0] cycle;

  // ---- core arbiter and bank queues ----------------------------------------
  logic      rq_full [N_DATA_BANKS], wq_full [N_DATA_BANKS];
  logic      rq_push [N_DATA_BANKS], wq_push [N_DATA_BANKS];
  rd_entry_t rq_pdata [N_DATA_BANKS];
  wr_entry_t wq_pdata [N_DATA_BANKS];
  rd_entry_t rq_ent [N_DATA_BANKS][QDEPTH];
  wr_entry_t wq_ent [N_DATA_BANKS][QDEPTH];
  logic [QDEPTH-1:0] rq_vld [N_DATA_BANKS], wq_vld [N_DATA_BANKS];
  logic [QDEPTH-1:0] rq_rm  [N_DATA_BANKS], wq_rm  [N_DATA_BANKS];

  core_arbiter u_arb (
    .clk, .rst_n, .req, .busy, .rq_full, .wq_full,
    .rq_push, .rq_data(rq_pdata), .wq_push, .wq_data(wq_pdata)
  );

  for (genvar b = 0; b < N_DATA_BANKS; b++) begin : g_q
    bank_queue #(.DEPTH(QDEPTH), .T(rd_entry_t)) u_rq (
      .clk, .rst_n, .push(rq_push[b]), .push_data(rq_pdata[b]), .rm(rq_rm[b]),
      .ent(rq_ent[b]), .vld(rq_vld[b]), .count(), .full(rq_full[b])
    );
    bank_queue #(.DEPTH(QDEPTH), .T(wr_entry_t)) u_wq (
      .clk, .rst_n, .push(wq_push[b]), .push_data(wq_pdata[b]), .rm(wq_rm[b]),
      .ent(wq_ent[b]), .vld(wq_vld[b]), .count(), .full(wq_full[b])
    );
  end

  // ---- dynamic coding controller ----------------------------------------------
  logic        acc_v   [2 * N_DATA_BANKS];
  logic [ROW_W-1:0] acc_row [2 * N_DATA_BANKS];
  logic        clean [N_GROUPS], eng_busy [N_GROUPS];
  logic        enc_ready [N_GROUPS], enc_valid [N_GROUPS];
  logic [ROW_W-1:0]  enc_row  [N_GROUPS];
  logic [SROW_W-1:0] enc_srow [N_GROUPS];
  logic [REGION_W-1:0] slot_region [N_SLOTS];
  slot_state_e slot_state [N_SLOTS];

  always_comb
    for (int b = 0; b < N_DATA_BANKS; b++) begin
      acc_v[b]                  = rq_push[b];
      acc_row[b]                = rq_pdata[b].row;
      acc_v[b + N_DATA_BANKS]   = wq_push[b];
      acc_row[b + N_DATA_BANKS] = wq_pdata[b].row;
    end

  dynamic_coding_controller #(.EPOCH(EPOCH), .N_ACC(2 * N_DATA_BANKS)) u_dcc (
    .clk, .rst_n, .acc_v, .acc_row, .clean, .eng_busy, .enc_ready,
    .enc_valid, .enc_row, .enc_srow, .slot_region, .slot_state,
    .n_switches, .n_evictions
  );

  // ---- code regions: scheduler and banks ---------------------------------------
  for (genvar g = 0; g < N_GROUPS; g++) begin : g_grp
    rd_entry_t rq_e [BANKS_PER_GROUP][QDEPTH];
    wr_entry_t wq_e [BANKS_PER_GROUP][QDEPTH];
    logic [QDEPTH-1:0] rq_v [BANKS_PER_GROUP], wq_v [BANKS_PER_GROUP];
    logic [QDEPTH-1:0] rq_r [BANKS_PER_GROUP], wq_r [BANKS_PER_GROUP];
    bank_cmd_t dcmd [BANKS_PER_GROUP];
    bank_cmd_t pcmd [N_PAR_PER_GROUP];
    logic [W-1:0] drd [BANKS_PER_GROUP];
    logic [W-1:0] prd [N_PAR_PER_GROUP];

    always_comb
      for (int b = 0; b < BANKS_PER_GROUP; b++) begin
        rq_e[b] = rq_ent[g * BANKS_PER_GROUP + b];
        wq_e[b] = wq_ent[g * BANKS_PER_GROUP + b];
        rq_v[b] = rq_vld[g * BANKS_PER_GROUP + b];
        wq_v[b] = wq_vld[g * BANKS_PER_GROUP + b];
      end
    for (genvar b = 0; b < BANKS_PER_GROUP; b++) begin : g_rm
      assign rq_rm[g * BANKS_PER_GROUP + b] = rq_r[b];
      assign wq_rm[g * BANKS_PER_GROUP + b] = wq_r[b];
    end

    access_scheduler #(.WQ_HIGH(WQ_HIGH), .RQ_DEPTH(RQ_DEPTH), .AGE_LIMIT(AGE_LIMIT)) u_sched (
      .clk, .rst_n, .cycle,
      .rq_ent(rq_e), .rq_vld(rq_v), .rq_rm(rq_r),
      .wq_ent(wq_e), .wq_vld(wq_v), .wq_rm(wq_r),
      .slot_region, .slot_state,
      .enc_valid(enc_valid[g]), .enc_row(enc_row[g]), .enc_srow(enc_srow[g]),
      .enc_ready(enc_ready[g]), .clean(clean[g]), .eng_busy(eng_busy[g]),
      .dcmd, .pcmd, .drd, .prd, .resp(resp[g]), .ev(ev[g])
    );

    for (genvar b = 0; b < BANKS_PER_GROUP; b++) begin : g_dbank
      sp_bank #(.DEPTH(L_ROWS), .WIDTH(W)) u_bank (
        .clk, .en(dcmd[b].en), .we(dcmd[b].we), .addr(dcmd[b].row),
        .wdata(dcmd[b].wdata), .rdata(drd[b])
      );
    end
    for (genvar j = 0; j < N_PAR_PER_GROUP; j++) begin : g_pbank
      sp_bank #(.DEPTH(P_ROWS), .WIDTH(W)) u_bank (
        .clk, .en(pcmd[j].en), .we(pcmd[j].we), .addr(pcmd[j].row[SROW_W-1:0]),
        .wdata(pcmd[j].wdata), .rdata(prd[j])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) cycle <= '0;
    else        cycle <= cycle + 1'b1;
endmodule
