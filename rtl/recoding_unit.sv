// recoding_unit: restores consistency of data and parity banks after writes.
//
// Every committed write of a tracked row pushes a recoding request (row,
// source bank, stale banks, cycle number) into a queue; up to SERVE_SLOTS
// pushes are taken per cycle, in slot order. Requests are served oldest
// first. A request whose row is already all-00 in the code status table is
// dropped without using the banks. Otherwise, when the access scheduler
// grants the banks (go_recode), the unit runs a two-cycle operation:
//   cycle 1 - read the row from the 4 data banks, and from every parity bank
//             that holds a fresh element (status 10);
//   cycle 2 - take each element's fresh value (data bank or parity bank),
//             write back to the data banks whose element was in a parity
//             bank, write all 6 parity banks with the pairwise XORs, and
//             clear the row's status to 00.
// The same operation encodes a row of a region that the dynamic coding
// controller is bringing into a parity slot (go_encode, enc_* handshake:
// enc_ready pulses in the cycle the request is taken).
// The scheduler must give the unit both cycles exclusively (busy is high in
// cycle 2). urgent asks for the banks ahead of reads: the queue cannot take
// another full write cycle, or the oldest request is AGE_LIMIT cycles old.
// The paper specifies the queue contents and the oldest-first service; the
// two-cycle read/rewrite operation, queue depth and age limit are this
// design's choices.
module recoding_unit
  import cm_pkg::*;
#(
  parameter int RQ_DEPTH  = 32,
  parameter int AGE_LIMIT = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] cycle,
  // requests from the write pattern builder
  input  logic        rc_v   [SERVE_SLOTS],
  input  recode_req_t rc_req [SERVE_SLOTS],
  output logic        room,          // space for a full write cycle
  output logic        pending,
  output logic        urgent,
  output logic        busy,          // in cycle 2 of an operation
  output logic        empty_idle,    // nothing queued, nothing in flight
  // encode requests from the dynamic coding controller
  input  logic        enc_valid,
  input  logic [ROW_W-1:0]  enc_row,
  input  logic [SROW_W-1:0] enc_srow,
  output logic        enc_ready,
  // grants from the access scheduler
  input  logic        go_recode,
  input  logic        go_encode,
  // status table and slot map
  input  status_t     st [P_ROWS][BANKS_PER_GROUP],
  input  logic [REGION_W-1:0] slot_region [N_SLOTS],
  output logic        clr_v,
  output logic [SROW_W-1:0] clr_srow,
  // banks
  output bank_cmd_t   dcmd [BANKS_PER_GROUP],
  output bank_cmd_t   pcmd [N_PAR_PER_GROUP],
  input  logic [W-1:0] drd [BANKS_PER_GROUP],
  input  logic [W-1:0] prd [N_PAR_PER_GROUP],
  output logic        ev_recode,
  output logic        ev_encode
);
  localparam int CW = $clog2(RQ_DEPTH + 1);

  recode_req_t q [RQ_DEPTH];
  logic [CW-1:0] cnt;

  // operation in flight (cycle 2)
  logic              op_v;
  logic [ROW_W-1:0]  op_row;
  logic [SROW_W-1:0] op_srow;
  status_t           op_st [BANKS_PER_GROUP];

  recode_req_t head;
  logic        head_clean;
  logic [ROW_W-1:0] head_row;
  logic        pop;

  always_comb begin
    head     = q[0];
    head_row = ROW_W'(int'(slot_region[head.srow / REGION_ROWS]) * REGION_ROWS
                      + int'(head.srow % REGION_ROWS));
    head_clean = 1'b1;
    for (int b = 0; b < BANKS_PER_GROUP; b++)
      if (st[head.srow][b].st != ST_FRESH) head_clean = 1'b0;
    pending    = (cnt != 0) && !head_clean;
    room       = (int'(cnt) + SERVE_SLOTS <= RQ_DEPTH);
    urgent     = pending && (!room || (cycle - head.cycle) >= 16'(AGE_LIMIT));
    busy       = op_v;
    empty_idle = (cnt == 0) && !op_v;
  end

  // grant-dependent handshake, kept apart from the state outputs above, which
  // the scheduler uses to make the grant
  always_comb begin
    enc_ready  = go_encode && enc_valid && !op_v;
    // a clean head is dropped at once; a dirty one when the banks are granted
    pop        = (cnt != 0) && !op_v && (head_clean || (go_recode && !go_encode));
  end

  // bank commands and status clear
  always_comb begin
    automatic logic [W-1:0] v [BANKS_PER_GROUP];
    automatic logic         start = !op_v && ((go_recode && pending) || enc_ready);
    automatic logic [ROW_W-1:0]  srow_row = enc_ready ? enc_row : head_row;
    automatic logic [SROW_W-1:0] srow     = enc_ready ? enc_srow : head.srow;
    for (int b = 0; b < BANKS_PER_GROUP; b++) dcmd[b] = '0;
    for (int j = 0; j < N_PAR_PER_GROUP; j++) pcmd[j] = '0;
    clr_v    = 1'b0;
    clr_srow = op_srow;
    ev_recode = 1'b0;
    ev_encode = 1'b0;
    if (start) begin
      ev_recode = !enc_ready;
      ev_encode = enc_ready;
      for (int b = 0; b < BANKS_PER_GROUP; b++) begin
        dcmd[b] = '{en: 1'b1, we: 1'b0, row: srow_row, wdata: '0};
        if (st[srow][b].st == ST_PARITY)
          pcmd[st[srow][b].ptr] = '{en: 1'b1, we: 1'b0, row: ROW_W'(srow), wdata: '0};
      end
    end
    if (op_v) begin
      for (int b = 0; b < BANKS_PER_GROUP; b++) begin
        v[b] = (op_st[b].st == ST_PARITY) ? prd[op_st[b].ptr] : drd[b];
        if (op_st[b].st == ST_PARITY)
          dcmd[b] = '{en: 1'b1, we: 1'b1, row: op_row, wdata: v[b]};
      end
      for (int j = 0; j < N_PAR_PER_GROUP; j++)
        pcmd[j] = '{en: 1'b1, we: 1'b1, row: ROW_W'(op_srow), wdata: v[PAIR_P[j]] ^ v[PAIR_Q[j]]};
      clr_v = 1'b1;
    end else begin
      for (int b = 0; b < BANKS_PER_GROUP; b++) v[b] = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      op_v    <= 1'b0;
      op_row  <= '0;
      op_srow <= '0;
      for (int i = 0; i < RQ_DEPTH; i++) q[i] <= '0;
      for (int b = 0; b < BANKS_PER_GROUP; b++) op_st[b] <= '0;
    end else begin
      automatic recode_req_t nq [RQ_DEPTH];
      automatic int k = 0;
      // queue: pop the head, then append this cycle's pushes
      for (int i = 0; i < RQ_DEPTH; i++) nq[i] = q[i];
      for (int i = 0; i < RQ_DEPTH; i++)
        if (i < int'(cnt) && !(pop && i == 0)) begin
          nq[k] = q[i];
          k++;
        end
      for (int s = 0; s < SERVE_SLOTS; s++)
        if (rc_v[s] && k < RQ_DEPTH) begin
          nq[k] = rc_req[s];
          k++;
        end
      for (int i = 0; i < RQ_DEPTH; i++) q[i] <= nq[i];
      cnt <= CW'(k);
      // operation sequencing
      if (op_v) op_v <= 1'b0;
      else if ((go_recode && pending) || enc_ready) begin
        op_v    <= 1'b1;
        op_row  <= enc_ready ? enc_row : head_row;
        op_srow <= enc_ready ? enc_srow : head.srow;
        for (int b = 0; b < BANKS_PER_GROUP; b++)
          op_st[b] <= st[enc_ready ? enc_srow : head.srow][b];
      end
    end
  end

  // Pushes arrive only when the scheduler has checked room.
  assert property (@(posedge clk) disable iff (!rst_n)
    (rc_v.sum() with (int'(item)) == 0) || room);
endmodule
