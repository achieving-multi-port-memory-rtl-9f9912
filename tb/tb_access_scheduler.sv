// tb_access_scheduler: test of one code region's scheduler with real bank
// queues and single-port banks around it.
//
// Slot map: region 0 in slot 0 and region 1 in slot 1 are active from the
// start; region 2 is built into slot 2 through the encode handshake while
// traffic runs, then made active; region 5 is never encoded. Random reads and
// writes are pushed into the 4 read and 4 write queues. Within a phase reads
// use even rows and writes odd rows (swapped every phase), and between phases
// the queues drain, so each read has one correct answer, taken from a
// reference copy updated when the write is pushed. The test checks every
// answer, that each read is answered exactly once, that the banks end up
// encoded (after the final drain every parity row of an encoded region equals
// the XOR of its pair) and that degraded reads, raw parity reads, parity
// writes, forced write cycles, recodes and encodes all occur. A last
// directed step reads back rows right after a write cycle stored them in
// parity banks, so they are answered from the parity bank as stored.
module tb_access_scheduler;
  import cm_pkg::*;

  localparam int PHASES = 6, PH_CYCLES = 1500;
  localparam int HOT [4] = '{0, 1, 2, 5};

  logic clk = 0, rst_n = 0;
  logic [15:0] cycle = '0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1'b1;

  // queues
  logic        rq_push [BANKS_PER_GROUP], wq_push [BANKS_PER_GROUP];
  rd_entry_t   rq_pd   [BANKS_PER_GROUP];
  wr_entry_t   wq_pd   [BANKS_PER_GROUP];
  rd_entry_t   rq_ent  [BANKS_PER_GROUP][QDEPTH];
  wr_entry_t   wq_ent  [BANKS_PER_GROUP][QDEPTH];
  logic [QDEPTH-1:0] rq_vld [BANKS_PER_GROUP], rq_rm [BANKS_PER_GROUP];
  logic [QDEPTH-1:0] wq_vld [BANKS_PER_GROUP], wq_rm [BANKS_PER_GROUP];
  logic        rq_full [BANKS_PER_GROUP], wq_full [BANKS_PER_GROUP];

  logic [REGION_W-1:0] slot_region [N_SLOTS];
  slot_state_e slot_state [N_SLOTS];
  logic enc_valid = 0, enc_ready, clean, eng_busy;
  logic [ROW_W-1:0]  enc_row = '0;
  logic [SROW_W-1:0] enc_srow = '0;
  bank_cmd_t dcmd [BANKS_PER_GROUP];
  bank_cmd_t pcmd [N_PAR_PER_GROUP];
  logic [W-1:0] drd [BANKS_PER_GROUP];
  logic [W-1:0] prd [N_PAR_PER_GROUP];
  rd_resp_t resp [SERVE_SLOTS];
  sched_ev_t ev;

  for (genvar b = 0; b < BANKS_PER_GROUP; b++) begin : g_b
    bank_queue #(.DEPTH(QDEPTH), .T(rd_entry_t)) u_rq (
      .clk, .rst_n, .push(rq_push[b]), .push_data(rq_pd[b]), .rm(rq_rm[b]),
      .ent(rq_ent[b]), .vld(rq_vld[b]), .count(), .full(rq_full[b]));
    bank_queue #(.DEPTH(QDEPTH), .T(wr_entry_t)) u_wq (
      .clk, .rst_n, .push(wq_push[b]), .push_data(wq_pd[b]), .rm(wq_rm[b]),
      .ent(wq_ent[b]), .vld(wq_vld[b]), .count(), .full(wq_full[b]));
    sp_bank #(.DEPTH(L_ROWS), .WIDTH(W)) u_d (
      .clk, .en(dcmd[b].en), .we(dcmd[b].we), .addr(dcmd[b].row),
      .wdata(dcmd[b].wdata), .rdata(drd[b]));
  end
  for (genvar j = 0; j < N_PAR_PER_GROUP; j++) begin : g_p
    sp_bank #(.DEPTH(P_ROWS), .WIDTH(W)) u_p (
      .clk, .en(pcmd[j].en), .we(pcmd[j].we), .addr(SROW_W'(pcmd[j].row)),
      .wdata(pcmd[j].wdata), .rdata(prd[j]));
  end

  access_scheduler dut (.*);

  event do_check;
  for (genvar j = 0; j < N_PAR_PER_GROUP; j++) begin : g_pchk
    always @(do_check)
      for (int s = 0; s < N_SLOTS; s++)
        for (int o = 0; o < REGION_ROWS; o++) begin
          automatic int row = int'(slot_region[s]) * REGION_ROWS + o;
          chk(g_p[j].u_p.mem[s * REGION_ROWS + o] ==
              (ref_mem[PAIR_P[j]][row] ^ ref_mem[PAIR_Q[j]][row]),
              $sformatf("parity %0d row %0d", j, row));
        end
  end
  for (genvar b = 0; b < BANKS_PER_GROUP; b++) begin : g_dchk
    always @(do_check)
      for (int r = 0; r < 6 * REGION_ROWS; r++)
        chk(g_b[b].u_d.mem[r] == ref_mem[b][r], $sformatf("data bank %0d row %0d", b, r));
  end

  logic [W-1:0] ref_mem [BANKS_PER_GROUP][L_ROWS];
  logic [W-1:0] exp_val [N_CORES][256];
  bit           exp_v   [N_CORES][256];
  logic [7:0]   next_tag [N_CORES];
  int checks = 0, failures = 0, rpar = 0;
  bit issuing = 0, directed = 0;
  int dir_w = 0;
  int committed [$];
  longint n_w_pushed = 0, n_w_done = 0, n_r = 0, n_ans = 0;
  longint c_deg = 0, c_raw = 0, c_parw = 0, c_forced = 0, c_rec = 0, c_enc = 0, max_rd = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // answers and events
  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < SERVE_SLOTS; s++)
      if (resp[s].valid) begin
        automatic int c = int'(resp[s].core), t = int'(resp[s].tag);
        chk(exp_v[c][t], $sformatf("answer to pending read core %0d tag %0d", c, t));
        chk(resp[s].data == exp_val[c][t],
            $sformatf("slot %0d core %0d tag %0d: got %h want %h", s, c, t, resp[s].data, exp_val[c][t]));
        exp_v[c][t] = 0;
        n_ans++;
      end
    if (directed && ev.write_cycle)
      for (int i = 0; i < QDEPTH; i++)
        if (wq_rm[0][i]) committed.push_back(int'(wq_ent[0][i].row));
    n_w_done += ev.n_writes;
    c_deg    += ev.n_degraded;
    c_raw    += ev.n_raw;
    c_parw   += ev.n_parity_writes;
    c_forced += ev.write_forced;
    c_rec    += ev.recode;
    c_enc    += ev.encode;
    if (ev.n_reads > max_rd) max_rd = ev.n_reads;
  end

  // traffic (queue pushes are sampled at the next edge)
  always @(negedge clk) begin
    for (int b = 0; b < BANKS_PER_GROUP; b++) begin
      rq_push[b] = 0; wq_push[b] = 0;
      rq_pd[b] = '0;  wq_pd[b] = '0;
      if (rst_n && issuing) begin
        automatic int region = ($urandom_range(4) == 0) ? $urandom_range(N_REGIONS - 1)
                                                        : HOT[$urandom_range(3)];
        automatic int off = $urandom_range(REGION_ROWS / 2 - 1) * 2;
        if (!rq_full[b] && $urandom_range(99) < 55) begin
          automatic int c = $urandom_range(N_CORES - 1);
          automatic int row = region * REGION_ROWS + off + rpar;
          if (!exp_v[c][next_tag[c]]) begin
            rq_push[b] = 1;
            rq_pd[b] = '{core: CORE_W'(c), tag: next_tag[c], row: ROW_W'(row)};
            exp_val[c][next_tag[c]] = ref_mem[b][row];
            exp_v[c][next_tag[c]] = 1;
            next_tag[c]++;
            n_r++;
          end
        end
        if (!wq_full[b] && $urandom_range(99) < 30) begin
          automatic int row = region * REGION_ROWS + off + 1 - rpar;
          wq_push[b] = 1;
          wq_pd[b] = '{core: CORE_W'(b), tag: '0, row: ROW_W'(row), data: {$urandom, $urandom}};
          ref_mem[b][row] = wq_pd[b].data;
          n_w_pushed++;
        end
      end else if (rst_n && directed) begin
        // bank 0: nine writes to odd rows of region 0, then read back the
        // rows a write cycle committed; bank 1: a read every cycle keeps the
        // scheduler in read cycles until the write queue is nearly full
        automatic int c = 1 + b;
        automatic int row = -1;
        if (b == 0 && dir_w < 9 && !wq_full[0]) begin
          wq_push[0] = 1;
          wq_pd[0] = '{core: '0, tag: '0, row: ROW_W'(2 * dir_w + 1), data: {$urandom, $urandom}};
          ref_mem[0][2 * dir_w + 1] = wq_pd[0].data;
          n_w_pushed++;
          dir_w++;
        end
        if (b == 0 && committed.size() > 0) row = committed.pop_front();
        if (b == 1) row = 0;
        if (row >= 0 && !rq_full[b] && !exp_v[c][next_tag[c]]) begin
          rq_push[b] = 1;
          rq_pd[b] = '{core: CORE_W'(c), tag: next_tag[c], row: ROW_W'(row)};
          exp_val[c][next_tag[c]] = ref_mem[b][row];
          exp_v[c][next_tag[c]] = 1;
          next_tag[c]++;
          n_r++;
        end
      end
    end
  end

  // build region 2 into slot 2 while traffic runs
  initial begin
    slot_region = '{REGION_W'(0), REGION_W'(1), REGION_W'(2)};
    slot_state  = '{SLOT_ACTIVE, SLOT_ACTIVE, SLOT_FREE};
    for (int b = 0; b < BANKS_PER_GROUP; b++) for (int r = 0; r < L_ROWS; r++) ref_mem[b][r] = '0;
    for (int c = 0; c < N_CORES; c++) begin
      next_tag[c] = '0;
      for (int t = 0; t < 256; t++) begin exp_v[c][t] = 0; exp_val[c][t] = '0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin : builder
        repeat (2000) @(negedge clk);
        slot_state[2] = SLOT_BUILDING;
        for (int o = 0; o < REGION_ROWS; o++) begin
          enc_valid = 1;
          enc_row   = ROW_W'(2 * REGION_ROWS + o);
          enc_srow  = SROW_W'(2 * REGION_ROWS + o);
          do @(posedge clk); while (!enc_ready);
          @(negedge clk);
          enc_valid = 0;
        end
        while (eng_busy) @(negedge clk);
        slot_state[2] = SLOT_ACTIVE;
      end
      begin : traffic
        for (int ph = 0; ph < PHASES; ph++) begin
          automatic int waited = 0;
          rpar = ph % 2;
          issuing = 1;
          repeat (PH_CYCLES) @(negedge clk);
          issuing = 0;
          while (waited < 4000) begin
            automatic bit out = 0;
            @(negedge clk);
            waited++;
            for (int c = 0; c < N_CORES; c++) for (int t = 0; t < 256; t++) if (exp_v[c][t]) out = 1;
            if (!out && n_w_done == n_w_pushed && clean && !eng_busy) break;
          end
          chk(n_w_done == n_w_pushed, $sformatf("phase %0d: writes committed", ph));
          chk(clean, $sformatf("phase %0d: recoding queue empty after drain", ph));
        end
      end
    join
    // directed: reads of values that a write cycle left in parity banks
    directed = 1;
    repeat (40) @(negedge clk);
    directed = 0;
    repeat (300) @(negedge clk);
    chk(n_w_done == n_w_pushed && clean, "directed writes committed and recoded");
    chk(slot_state[2] == SLOT_ACTIVE, "region 2 built");
    chk(n_ans == n_r, "every read answered once");
    // code check: parity rows equal the XOR of their pair, data banks hold the reference
    -> do_check;
    @(negedge clk);
    $display("reads %0d (max %0d per cycle) degraded %0d raw %0d | writes %0d to parity %0d forced %0d | recodes %0d encodes %0d",
             n_r, max_rd, c_deg, c_raw, n_w_done, c_parw, c_forced, c_rec, c_enc);
    chk(c_deg > 0,    "mechanism: degraded read");
    chk(c_raw > 0,    "mechanism: raw parity read");
    chk(c_parw > 0,   "mechanism: parity write");
    chk(c_forced > 0, "mechanism: forced write cycle");
    chk(c_rec > 0,    "mechanism: recode");
    chk(c_enc == REGION_ROWS, "mechanism: one encode per row of the built region");
    chk(max_rd > BANKS_PER_GROUP, "more reads per cycle than data banks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
