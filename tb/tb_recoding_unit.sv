// tb_recoding_unit: the recoding unit against bank and status-table models
// kept in the testbench. Checks: a row left in status 01 gets its six
// parities rewritten from the data banks in a two-cycle operation; a row
// whose element sits in a parity bank (status 10) gets that element copied
// back to its data bank and the parities rebuilt from it; a request for a
// row that is already clean is dropped without touching the banks; a row
// encode for the dynamic coding controller lands in the right parity-slot
// row; the age rule raises urgent after AGE_LIMIT cycles; room drops when
// the queue cannot take another full write cycle.
module tb_recoding_unit;
  import cm_pkg::*;
  localparam int AGE = 64;
  logic clk = 0, rst_n = 0;
  logic [15:0] cycle = '0;
  logic rc_v [SERVE_SLOTS];
  recode_req_t rc_req [SERVE_SLOTS];
  logic room, pending, urgent, busy, empty_idle;
  logic enc_valid = 0;
  logic [ROW_W-1:0] enc_row = '0;
  logic [SROW_W-1:0] enc_srow = '0;
  logic enc_ready;
  logic go_recode = 0, go_encode = 0;
  status_t st [P_ROWS][BANKS_PER_GROUP];
  logic [REGION_W-1:0] slot_region [N_SLOTS];
  logic clr_v;
  logic [SROW_W-1:0] clr_srow;
  bank_cmd_t dcmd [BANKS_PER_GROUP];
  bank_cmd_t pcmd [N_PAR_PER_GROUP];
  logic [W-1:0] drd [BANKS_PER_GROUP];
  logic [W-1:0] prd [N_PAR_PER_GROUP];
  logic ev_recode, ev_encode;

  logic [W-1:0] dmem [BANKS_PER_GROUP][L_ROWS];
  logic [W-1:0] pmem [N_PAR_PER_GROUP][P_ROWS];
  int checks = 0, failures = 0, bank_ops = 0;

  recoding_unit #(.AGE_LIMIT(AGE)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) cycle <= cycle + 1'b1;

  // bank and status models
  always_ff @(posedge clk) begin
    for (int b = 0; b < BANKS_PER_GROUP; b++)
      if (dcmd[b].en) begin
        bank_ops++;
        if (dcmd[b].we) dmem[b][dcmd[b].row] <= dcmd[b].wdata;
        else drd[b] <= dmem[b][dcmd[b].row];
      end
    for (int j = 0; j < N_PAR_PER_GROUP; j++)
      if (pcmd[j].en) begin
        bank_ops++;
        if (pcmd[j].we) pmem[j][SROW_W'(pcmd[j].row)] <= pcmd[j].wdata;
        else prd[j] <= pmem[j][SROW_W'(pcmd[j].row)];
      end
    if (clr_v) for (int b = 0; b < BANKS_PER_GROUP; b++) st[clr_srow][b] <= '0;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic push1(input int srow, input int c);
    @(negedge clk);
    rc_v[0] = 1; rc_req[0] = '{srow: SROW_W'(srow), src_bank: 2'd0, stale: '1, cycle: 16'(c)};
    @(negedge clk);
    rc_v[0] = 0;
  endtask

  // run one granted recode; checks it takes two cycles
  task automatic grant_recode();
    @(negedge clk);
    chk(pending, "request pending");
    go_recode = 1;
    @(negedge clk);
    go_recode = 0;
    chk(busy, "second cycle of the operation");
    @(negedge clk);
    chk(!busy && empty_idle, "done after two cycles");
  endtask

  function automatic bit row_ok(input int drow, input int srow);
    for (int j = 0; j < N_PAR_PER_GROUP; j++)
      if (pmem[j][srow] != (dmem[PAIR_P[j]][drow] ^ dmem[PAIR_Q[j]][drow])) return 0;
    return 1;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < SERVE_SLOTS; s++) begin rc_v[s] = 0; rc_req[s] = '0; end
    for (int r = 0; r < P_ROWS; r++) for (int b = 0; b < BANKS_PER_GROUP; b++) st[r][b] = '0;
    for (int b = 0; b < BANKS_PER_GROUP; b++) for (int r = 0; r < L_ROWS; r++) dmem[b][r] = W'($urandom);
    for (int j = 0; j < N_PAR_PER_GROUP; j++) for (int r = 0; r < P_ROWS; r++) pmem[j][r] = '0;
    for (int b = 0; b < BANKS_PER_GROUP; b++) drd[b] = '0;
    for (int j = 0; j < N_PAR_PER_GROUP; j++) prd[j] = '0;
    slot_region = '{5'd0, 5'd4, 5'd0};     // slot 0: region 0, slot 1: region 4
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- status 01 on a(5) ------------------------------------------------------
    st[5][0] = '{st: ST_DATA, ptr: '0};
    push1(5, int'(cycle));
    chk(!row_ok(5, 5), "row 5 parities stale before recode");
    grant_recode();
    chk(row_ok(5, 5), "row 5 parities rebuilt");
    chk(st[5][0].st == ST_FRESH, "row 5 status cleared");

    // ---- status 10: b(7) held in parity a+b -------------------------------------
    pmem[0][7] = 64'hfeed_f00d_1234_5678;
    st[7][1] = '{st: ST_PARITY, ptr: 3'd0};
    push1(7, int'(cycle));
    grant_recode();
    chk(dmem[1][7] == 64'hfeed_f00d_1234_5678, "b(7) copied back to data bank b");
    chk(row_ok(7, 7), "row 7 parities rebuilt from the fresh b(7)");
    chk(st[7][1].st == ST_FRESH, "row 7 status cleared");

    // ---- clean row: dropped without bank use ---------------------------------------
    bank_ops = 0;
    push1(9, int'(cycle));
    @(negedge clk);
    chk(empty_idle && !pending, "clean request dropped");
    chk(bank_ops == 0, "no bank access for a clean row");

    // ---- encode row 3 of region 4 into slot 1 -----------------------------------------
    @(negedge clk);
    enc_valid = 1; enc_row = ROW_W'(4 * REGION_ROWS + 3); enc_srow = SROW_W'(REGION_ROWS + 3);
    go_encode = 1;
    #1 chk(enc_ready, "encode accepted");
    @(negedge clk);
    enc_valid = 0; go_encode = 0;
    chk(busy, "encode second cycle");
    @(negedge clk);
    chk(row_ok(4 * REGION_ROWS + 3, REGION_ROWS + 3), "region 4 row 3 encoded in slot 1");

    // ---- age rule -----------------------------------------------------------------------
    st[20][2] = '{st: ST_DATA, ptr: '0};
    push1(20, int'(cycle));
    @(negedge clk);
    chk(pending && !urgent, "young request not urgent");
    repeat (AGE) @(negedge clk);
    chk(urgent, "old request urgent");
    grant_recode();

    // ---- room -----------------------------------------------------------------------------
    for (int r = 30; r < 60; r++) st[r][3] = '{st: ST_DATA, ptr: '0};
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      for (int s = 0; s < SERVE_SLOTS; s++) begin
        rc_v[s] = 1; rc_req[s] = '{srow: SROW_W'(30 + 10 * k + s), src_bank: 2'd3, stale: '1, cycle: cycle};
      end
    end
    @(negedge clk);
    for (int s = 0; s < SERVE_SLOTS; s++) rc_v[s] = 0;
    chk(!room && urgent, "no room for another write cycle: urgent");
    // serve them all
    for (int k = 0; k < 30; k++) grant_recode_quiet();
    @(negedge clk);
    chk(empty_idle, $sformatf("queue drained cnt=%0d", dut.cnt));
    begin
      automatic bit all_ok = 1;
      for (int r = 30; r < 60; r++) if (!row_ok(r, r)) all_ok = 0;
      chk(all_ok, "thirty rows recoded in order");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic grant_recode_quiet();
    @(negedge clk);
    go_recode = 1;
    @(negedge clk);
    go_recode = 0;
  endtask
endmodule
