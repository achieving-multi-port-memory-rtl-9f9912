// access_scheduler: memory-cycle scheduler of one code region (4 data banks
// and their 6 parity banks).
//
// Each memory cycle it chooses one kind of work, in this order:
//   1. write, if some write queue holds WQ_HIGH or more requests ("nearly
//      full") and the recoding queue has room for a full write pattern;
//   2. recode, if the recoding unit is urgent (queue short of room or oldest
//      request AGE_LIMIT cycles old);
//   3. encode a row for the dynamic coding controller, if one is waiting and
//      the previous choice was not an encode (shares the banks with reads);
//   4. read, if any read is queued;
//   5. recode, then encode, then write (draining writes when nothing else is
//      waiting).
// A read cycle runs the read pattern builder and a write cycle the write
// pattern builder; both remove the requests they take from the bank queues
// in that cycle. Recode and encode operations take two cycles, the second of
// which is given to the recoding unit alone. Reads are answered one cycle
// after they are scheduled, when the banks return data: resp[s] carries the
// value of serve slot s, decoded as data, raw parity, or data XOR parity.
// The status table updates of a write cycle take effect at the next edge.
// The paper fixes the read/write choice per cycle and that writes are
// scheduled when the write queues are nearly full; the priority list,
// WQ_HIGH = 8 of 10, the write drain when idle and the encode interleave are
// this design's choices.
module access_scheduler
  import cm_pkg::*;
#(
  parameter int WQ_HIGH   = 8,
  parameter int RQ_DEPTH  = 32,
  parameter int AGE_LIMIT = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] cycle,
  input  rd_entry_t   rq_ent [BANKS_PER_GROUP][QDEPTH],
  input  logic [QDEPTH-1:0] rq_vld [BANKS_PER_GROUP],
  output logic [QDEPTH-1:0] rq_rm  [BANKS_PER_GROUP],
  input  wr_entry_t   wq_ent [BANKS_PER_GROUP][QDEPTH],
  input  logic [QDEPTH-1:0] wq_vld [BANKS_PER_GROUP],
  output logic [QDEPTH-1:0] wq_rm  [BANKS_PER_GROUP],
  input  logic [REGION_W-1:0] slot_region [N_SLOTS],
  input  slot_state_e slot_state [N_SLOTS],
  input  logic        enc_valid,
  input  logic [ROW_W-1:0]  enc_row,
  input  logic [SROW_W-1:0] enc_srow,
  output logic        enc_ready,
  output logic        clean,
  output logic        eng_busy,
  output bank_cmd_t   dcmd [BANKS_PER_GROUP],
  output bank_cmd_t   pcmd [N_PAR_PER_GROUP],
  input  logic [W-1:0] drd [BANKS_PER_GROUP],
  input  logic [W-1:0] prd [N_PAR_PER_GROUP],
  output rd_resp_t    resp [SERVE_SLOTS],
  output sched_ev_t   ev
);
  typedef enum logic [2:0] {M_NONE, M_READ, M_WRITE, M_RECODE, M_ENCODE} mode_e;

  mode_e   mode;
  logic    last_enc;
  status_t st [P_ROWS][BANKS_PER_GROUP];

  // recoding unit
  logic rc_room, rc_pending, rc_urgent, rc_busy, rc_empty;
  logic clr_v;
  logic [SROW_W-1:0] clr_srow;
  bank_cmd_t r_dcmd [BANKS_PER_GROUP];
  bank_cmd_t r_pcmd [N_PAR_PER_GROUP];
  logic ev_recode, ev_encode;

  // read builder
  logic        rb_d_en [BANKS_PER_GROUP];
  logic [ROW_W-1:0] rb_d_row [BANKS_PER_GROUP];
  logic        rb_p_en [N_PAR_PER_GROUP];
  logic [SROW_W-1:0] rb_p_row [N_PAR_PER_GROUP];
  serve_t      rb_serve [SERVE_SLOTS];
  serve_t      serve_q  [SERVE_SLOTS];
  logic [3:0]  rb_n_deg, rb_n_raw;

  // write builder
  logic        wb_d_en [BANKS_PER_GROUP];
  logic [ROW_W-1:0] wb_d_row [BANKS_PER_GROUP];
  logic [W-1:0] wb_d_data [BANKS_PER_GROUP];
  logic        wb_p_en [N_PAR_PER_GROUP];
  logic [SROW_W-1:0] wb_p_row [N_PAR_PER_GROUP];
  logic [W-1:0] wb_p_data [N_PAR_PER_GROUP];
  logic        upd_v [SERVE_SLOTS];
  logic [SROW_W-1:0] upd_srow [SERVE_SLOTS];
  logic [1:0]  upd_bank [SERVE_SLOTS];
  status_t     upd_val [SERVE_SLOTS];
  logic        rc_v [SERVE_SLOTS];
  recode_req_t rc_req [SERVE_SLOTS];
  logic [3:0]  wb_n_par;

  // ---- mode choice ----------------------------------------------------------
  logic wr_high, wr_any, rd_any;

  always_comb begin
    wr_high = 1'b0;
    wr_any  = 1'b0;
    rd_any  = 1'b0;
    for (int b = 0; b < BANKS_PER_GROUP; b++) begin
      automatic int n = 0;
      for (int x = 0; x < QDEPTH; x++) if (wq_vld[b][x]) n++;
      if (n >= WQ_HIGH) wr_high = 1'b1;
      if (n > 0) wr_any = 1'b1;
      if (rq_vld[b] != '0) rd_any = 1'b1;
    end
  end

  always_comb begin
    if (rc_busy)                          mode = M_NONE;
    else if (wr_high && rc_room)          mode = M_WRITE;
    else if (rc_urgent)                   mode = M_RECODE;
    else if (enc_valid && !last_enc)      mode = M_ENCODE;
    else if (rd_any)                      mode = M_READ;
    else if (rc_pending)                  mode = M_RECODE;
    else if (enc_valid)                   mode = M_ENCODE;
    else if (wr_any && rc_room)           mode = M_WRITE;
    else                                  mode = M_NONE;
  end

  code_status_table u_cst (
    .clk, .rst_n, .clr_v, .clr_srow,
    .upd_v, .upd_srow, .upd_bank, .upd_val, .st
  );

  read_pattern_builder u_rpb (
    .en(mode == M_READ), .ent(rq_ent), .vld(rq_vld), .st, .slot_region, .slot_state,
    .rm(rq_rm), .d_en(rb_d_en), .d_row(rb_d_row), .p_en(rb_p_en), .p_row(rb_p_row),
    .serve(rb_serve), .n_degraded(rb_n_deg), .n_raw(rb_n_raw)
  );

  write_pattern_builder u_wpb (
    .en(mode == M_WRITE), .ent(wq_ent), .vld(wq_vld), .st, .slot_region, .slot_state,
    .cycle, .rm(wq_rm), .d_en(wb_d_en), .d_row(wb_d_row), .d_data(wb_d_data),
    .p_en(wb_p_en), .p_row(wb_p_row), .p_data(wb_p_data),
    .upd_v, .upd_srow, .upd_bank, .upd_val, .rc_v, .rc_req, .n_parity_writes(wb_n_par)
  );

  recoding_unit #(.RQ_DEPTH(RQ_DEPTH), .AGE_LIMIT(AGE_LIMIT)) u_rcu (
    .clk, .rst_n, .cycle, .rc_v, .rc_req,
    .room(rc_room), .pending(rc_pending), .urgent(rc_urgent), .busy(rc_busy),
    .empty_idle(rc_empty),
    .enc_valid, .enc_row, .enc_srow, .enc_ready,
    .go_recode(mode == M_RECODE), .go_encode(mode == M_ENCODE),
    .st, .slot_region, .clr_v, .clr_srow,
    .dcmd(r_dcmd), .pcmd(r_pcmd), .drd, .prd, .ev_recode, .ev_encode
  );

  assign clean    = rc_empty;
  assign eng_busy = rc_busy;

  // ---- bank command mux -------------------------------------------------------
  always_comb begin
    for (int b = 0; b < BANKS_PER_GROUP; b++) begin
      if (mode == M_READ)
        dcmd[b] = '{en: rb_d_en[b], we: 1'b0, row: rb_d_row[b], wdata: '0};
      else if (mode == M_WRITE)
        dcmd[b] = '{en: wb_d_en[b], we: 1'b1, row: wb_d_row[b], wdata: wb_d_data[b]};
      else
        dcmd[b] = r_dcmd[b];
    end
    for (int j = 0; j < N_PAR_PER_GROUP; j++) begin
      if (mode == M_READ)
        pcmd[j] = '{en: rb_p_en[j], we: 1'b0, row: ROW_W'(rb_p_row[j]), wdata: '0};
      else if (mode == M_WRITE)
        pcmd[j] = '{en: wb_p_en[j], we: 1'b1, row: ROW_W'(wb_p_row[j]), wdata: wb_p_data[j]};
      else
        pcmd[j] = r_pcmd[j];
    end
  end

  // ---- events of the cycle ---------------------------------------------------------
  always_comb begin
    ev = '0;
    ev.read_cycle   = (mode == M_READ);
    ev.write_cycle  = (mode == M_WRITE);
    ev.write_forced = (mode == M_WRITE) && wr_high;
    ev.recode = ev_recode;
    ev.encode = ev_encode;
    ev.n_degraded = rb_n_deg;
    ev.n_raw = rb_n_raw;
    ev.n_parity_writes = wb_n_par;
    ev.n_reads = '0;
    ev.n_writes = '0;
    for (int s = 0; s < SERVE_SLOTS; s++) begin
      if (rb_serve[s].valid) ev.n_reads++;
      if (s < BANKS_PER_GROUP ? wb_d_en[s] : wb_p_en[s - BANKS_PER_GROUP]) ev.n_writes++;
    end
  end

  // ---- read response decode, one cycle after scheduling --------------------------
  always_comb begin
    for (int s = 0; s < SERVE_SLOTS; s++) begin
      automatic logic [W-1:0] v;
      unique case (serve_q[s].mode)
        DEC_RAW: v = prd[serve_q[s].src_par];
        DEC_XOR: v = drd[serve_q[s].src_bank] ^ prd[serve_q[s].src_par];
        default: v = drd[serve_q[s].src_bank];
      endcase
      resp[s] = '{valid: serve_q[s].valid, core: serve_q[s].core, tag: serve_q[s].tag, data: v};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_enc <= 1'b0;
      for (int s = 0; s < SERVE_SLOTS; s++) serve_q[s] <= '0;
    end else begin
      if (mode != M_NONE) last_enc <= (mode == M_ENCODE);
      for (int s = 0; s < SERVE_SLOTS; s++) serve_q[s] <= rb_serve[s];
    end
  end
endmodule
