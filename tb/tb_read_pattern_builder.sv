// tb_read_pattern_builder: checks the read pattern builder on the example
// pattern of the source's Fig. 13 (all ten banks busy, six degraded reads),
// on a single-bank burst served through phase 2 (four reads to bank a), on a
// row that is not encoded (no degraded reads), on status 01 (degraded read
// refused) and on status 10 (value read from the parity bank holding it).
// Expected values are written out by hand from the figures and rules.
module tb_read_pattern_builder;
  import cm_pkg::*;

  logic        en;
  rd_entry_t   ent [BANKS_PER_GROUP][QDEPTH];
  logic [QDEPTH-1:0] vld [BANKS_PER_GROUP];
  status_t     st  [P_ROWS][BANKS_PER_GROUP];
  logic [REGION_W-1:0] slot_region [N_SLOTS];
  slot_state_e slot_state [N_SLOTS];
  logic [QDEPTH-1:0] rm [BANKS_PER_GROUP];
  logic        d_en [BANKS_PER_GROUP];
  logic [ROW_W-1:0] d_row [BANKS_PER_GROUP];
  logic        p_en [N_PAR_PER_GROUP];
  logic [SROW_W-1:0] p_row [N_PAR_PER_GROUP];
  serve_t      serve [SERVE_SLOTS];
  logic [3:0]  n_degraded, n_raw;

  int checks = 0, failures = 0;

  read_pattern_builder dut (.*);

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

  // fill queue b with rows, oldest first; tag = 16*b + position
  task automatic fill(input int b, input int rows[$]);
    foreach (rows[k]) begin
      ent[b][k] = '{core: 3'(b), tag: 8'(16 * b + k), row: ROW_W'(rows[k])};
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
    // slot 0 holds region 0 (rows 0..63), others free
    slot_region = '{default: '0};
    slot_state  = '{SLOT_ACTIVE, SLOT_FREE, SLOT_FREE};

    // ---- Fig. 13 -----------------------------------------------------------
    clear_all();
    fill(0, '{1, 2});
    fill(1, '{2, 9, 1});
    fill(2, '{2, 3, 8, 1});
    fill(3, '{4, 2, 30, 1, 3});
    #1;
    chk(d_en[0] && d_row[0] == 1, "a(1) from data bank a");
    chk(d_en[1] && d_row[1] == 2, "b(2) from data bank b");
    chk(d_en[2] && d_row[2] == 3, "c(3) from data bank c");
    chk(d_en[3] && d_row[3] == 4, "d(4) from data bank d");
    begin
      int exp_row [N_PAR_PER_GROUP] = '{1, 1, 1, 2, 2, 3};  // a+b a+c a+d b+c b+d c+d
      for (int j = 0; j < N_PAR_PER_GROUP; j++)
        chk(p_en[j] && int'(p_row[j]) == exp_row[j], $sformatf("parity %0d row %0d", j, exp_row[j]));
    end
    chk(rm[0] == 10'b0000000001, "a served: a(1)");
    chk(rm[1] == 10'b0000000101, "b served: b(2), b(1)");
    chk(rm[2] == 10'b0000001011, "c served: c(2), c(3), c(1)");
    chk(rm[3] == 10'b0000011011, "d served: d(4), d(2), d(1), d(3)");
    chk(n_degraded == 6 && n_raw == 0, "six degraded reads");
    // decode recipe: parity b+c (slot 4+3) gives c(2) = b(2) ^ (b+c)(2)
    chk(serve[7].valid && serve[7].mode == DEC_XOR && serve[7].src_bank == 1 && serve[7].src_par == 3
        && serve[7].tag == 8'(16 * 2 + 0), "c(2) decoded from b and b+c");
    chk(serve[4].valid && serve[4].mode == DEC_XOR && serve[4].src_bank == 0
        && serve[4].tag == 8'(16 * 1 + 2), "b(1) decoded from a and a+b");

    // ---- four reads to bank a: phase 2 uses idle b, c, d --------------------
    clear_all();
    fill(0, '{10, 11, 12, 13, 14});
    #1;
    chk(d_en[0] && d_row[0] == 10, "a(10) direct");
    chk(d_en[1] && d_row[1] == 11 && p_en[0] && p_row[0] == 11, "a(11) via b + a+b");
    chk(d_en[2] && d_row[2] == 12 && p_en[1] && p_row[1] == 12, "a(12) via c + a+c");
    chk(d_en[3] && d_row[3] == 13 && p_en[2] && p_row[2] == 13, "a(13) via d + a+d");
    chk(!p_en[3] && !p_en[4] && !p_en[5], "b+c, b+d, c+d idle");
    chk(rm[0] == 10'b0000001111, "four of bank a served");
    chk(serve[5].mode == DEC_XOR && serve[5].src_bank == 2 && serve[5].src_par == 1, "a(12) recipe");

    // ---- rows outside the encoded region: only direct reads -----------------
    clear_all();
    fill(0, '{100, 101});
    fill(1, '{100});
    #1;
    chk(rm[0] == 10'b01 && rm[1] == 10'b1, "one per bank when not encoded");
    chk(n_degraded == 0, "no degraded read outside encoded region");
    for (int j = 0; j < N_PAR_PER_GROUP; j++) chk(!p_en[j], "parity idle outside region");

    // ---- status 01 on b(5) blocks the degraded read through a+b -------------
    clear_all();
    fill(0, '{5});
    fill(1, '{6, 5});
    st[5][1] = '{st: ST_DATA, ptr: '0};
    #1;
    chk(rm[1] == 10'b01, "b(5) not decoded while its parity is stale");
    st[5][1] = '{st: ST_FRESH, ptr: '0};
    #1;
    chk(rm[1] == 10'b11, "b(5) decoded once fresh");

    // ---- status 10: a(7) lives in parity a+c --------------------------------
    clear_all();
    fill(0, '{7});
    st[7][0] = '{st: ST_PARITY, ptr: 3'd1};
    #1;
    chk(!d_en[0] && p_en[1] && p_row[1] == 7, "a(7) read from parity a+c");
    chk(serve[0].valid && serve[0].mode == DEC_RAW && serve[0].src_par == 1, "raw decode");
    chk(n_raw == 1, "raw counted");

    // ---- disabled ----------------------------------------------------------
    en = 1'b0;
    #1;
    chk(rm[0] == '0 && !p_en[1], "nothing when disabled");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
