// tb_write_pattern_builder: checks the write pattern builder on the queues of
// the source's Fig. 15. Ten writes are committed (four data banks, six parity
// banks) and the resulting code status table rows 1..10 must equal the table
// printed in that figure. Also checks the recoding requests, the rule that
// keeps same-row writes in order, and that unencoded rows get no parity write.
module tb_write_pattern_builder;
  import cm_pkg::*;

  logic        en;
  wr_entry_t   ent [BANKS_PER_GROUP][QDEPTH];
  logic [QDEPTH-1:0] vld [BANKS_PER_GROUP];
  status_t     st  [P_ROWS][BANKS_PER_GROUP];
  logic [REGION_W-1:0] slot_region [N_SLOTS];
  slot_state_e slot_state [N_SLOTS];
  logic [15:0] cycle;
  logic [QDEPTH-1:0] rm [BANKS_PER_GROUP];
  logic        d_en [BANKS_PER_GROUP];
  logic [ROW_W-1:0] d_row [BANKS_PER_GROUP];
  logic [W-1:0] d_data [BANKS_PER_GROUP];
  logic        p_en [N_PAR_PER_GROUP];
  logic [SROW_W-1:0] p_row [N_PAR_PER_GROUP];
  logic [W-1:0] p_data [N_PAR_PER_GROUP];
  logic        upd_v [SERVE_SLOTS];
  logic [SROW_W-1:0] upd_srow [SERVE_SLOTS];
  logic [1:0]  upd_bank [SERVE_SLOTS];
  status_t     upd_val [SERVE_SLOTS];
  logic        rc_v [SERVE_SLOTS];
  recode_req_t rc_req [SERVE_SLOTS];
  logic [3:0]  n_parity_writes;

  int checks = 0, failures = 0;

  write_pattern_builder dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic clear_all();
    for (int b = 0; b < BANKS_PER_GROUP; b++) begin
      vld[b] = '0;
      for (int x = 0; x < QDEPTH; x++) ent[b][x] = '0;
    end
    for (int r = 0; r < P_ROWS; r++)
      for (int b = 0; b < BANKS_PER_GROUP; b++) st[r][b] = '{st: ST_FRESH, ptr: '0};
  endtask

  // data written = 1000*bank + row, so every value names its element
  task automatic fill(input int b, input int rows[$]);
    foreach (rows[k]) begin
      ent[b][k] = '{core: 3'(b), tag: 8'(k), row: ROW_W'(rows[k]), data: W'(1000 * b + rows[k])};
      vld[b][k] = 1'b1;
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 1'b1;
    cycle = 16'd77;
    slot_region = '{default: '0};
    slot_state  = '{SLOT_ACTIVE, SLOT_FREE, SLOT_FREE};

    // ---- Fig. 15 (queues oldest first) --------------------------------------
    clear_all();
    fill(0, '{5, 7, 3, 10, 22});
    fill(1, '{2, 9, 1, 12, 23});
    fill(2, '{2, 3, 8, 1, 12});
    fill(3, '{4, 2, 30, 1, 3});
    #1;
    chk(d_en[0] && d_row[0] == 5 && d_data[0] == 5, "a(5) to data bank a");
    chk(d_en[1] && d_row[1] == 2 && d_data[1] == 1002, "b(2) to data bank b");
    chk(d_en[2] && d_row[2] == 2 && d_data[2] == 2002, "c(2) to data bank c");
    chk(d_en[3] && d_row[3] == 4 && d_data[3] == 3004, "d(4) to data bank d");
    begin
      // parity a+b a+c a+d b+c b+d c+d; the figure shows c(8) on a+c and c(3)
      // on c+d, these rules swap those two (same status table either way)
      int exp_val [N_PAR_PER_GROUP] = '{7, 2003, 3002, 1009, 1001, 2008};
      for (int j = 0; j < N_PAR_PER_GROUP; j++)
        chk(p_en[j] && p_data[j] == W'(exp_val[j]) && int'(p_row[j]) == exp_val[j] % 1000,
            $sformatf("parity %0d gets element %0d", j, exp_val[j]));
    end
    chk(n_parity_writes == 6, "ten writes, six to parity banks");
    begin
      // apply the updates to a model table, compare with the printed table
      // (rows 1..10, banks a..d; 0 = 00, 1 = 01, 2 = 10)
      int fig [1:10][4] = '{'{0,2,0,0}, '{0,1,1,2}, '{0,0,2,0}, '{0,0,0,1}, '{1,0,0,0},
                            '{0,0,0,0}, '{2,0,0,0}, '{0,0,2,0}, '{0,2,0,0}, '{0,0,0,0}};
      status_t model [P_ROWS][BANKS_PER_GROUP] = st;
      for (int s = 0; s < SERVE_SLOTS; s++)
        if (upd_v[s]) model[upd_srow[s]][upd_bank[s]] = upd_val[s];
      for (int r = 1; r <= 10; r++)
        for (int b = 0; b < 4; b++)
          chk(int'(model[r][b].st) == fig[r][b], $sformatf("status row %0d bank %0d", r, b));
      chk(model[7][0].ptr == 0 && model[2][3].ptr == 2 && model[9][1].ptr == 3, "pointers");
    end
    chk(rc_v[0] && rc_req[0].srow == 5 && rc_req[0].src_bank == 0 && rc_req[0].cycle == 77
        && rc_req[0].stale == 10'b0000_0111_0000, "recode request for a(5)");
    chk(rc_v[4] && rc_req[4].srow == 7 && rc_req[4].stale == 10'b0000_0110_0001,
        "recode request for a(7) in a+b: data a, a+c, a+d stale");
    chk(rm[0] == 10'b011 && rm[1] == 10'b0111 && rm[2] == 10'b00111 && rm[3] == 10'b011,
        "committed entries removed");

    // ---- same row twice in one queue: second write waits --------------------
    clear_all();
    fill(0, '{9, 9});
    #1;
    chk(d_en[0] && rm[0] == 10'b01, "only the older of two same-row writes");
    for (int j = 0; j < N_PAR_PER_GROUP; j++) chk(!p_en[j], "no parity write for the newer one");

    // ---- partner element already in the parity bank at that row ------------
    clear_all();
    fill(0, '{1, 6});
    st[6][1] = '{st: ST_PARITY, ptr: 3'd0};   // b(6) lives in a+b
    #1;
    chk(!p_en[0] && p_en[1] && p_data[1] == 6, "a(6) goes to a+c, not over b(6) in a+b");

    // ---- rows outside encoded regions: data banks only ----------------------
    clear_all();
    fill(0, '{200, 201, 202});
    #1;
    chk(d_en[0] && !rc_v[0] && !upd_v[0], "no status for unencoded row");
    for (int j = 0; j < N_PAR_PER_GROUP; j++) chk(!p_en[j], "no parity write outside region");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
