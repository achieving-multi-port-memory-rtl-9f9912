// tb_coded_memory: end-to-end test of the coded memory at its default size
// (8 cores, 8 data banks of 1280 rows, 12 parity banks of 192 rows, epoch
// 4096 cycles).
//
// Eight cores issue random reads and writes, 90 % of them to two "hot"
// regions, the rest anywhere. Core c writes only bank c, so every address
// has one writer and program order fixes its value. Traffic runs in phases;
// within a phase reads go to even rows and writes to odd rows (or the other
// way round), so a read never races a write to the same address. Between
// phases the cores stop until every write is committed and every read
// answered. Every read answer is checked against a reference copy of the
// memory. Halfway the hot regions change, forcing an eviction.
// The test counts each mechanism of the design and fails if one never
// happens: core stalls, degraded reads, reads from a parity bank holding a
// fresh value, forced write cycles, writes into parity banks, recoding
// operations, row encodes, region switches and evictions.
module tb_coded_memory;
  import cm_pkg::*;

  localparam int PHASES     = 8;
  localparam int PH_CYCLES  = 2800;

  logic clk = 0, rst_n = 0;
  core_req_t req  [N_CORES];
  logic      busy [N_CORES];
  rd_resp_t  resp [N_GROUPS][SERVE_SLOTS];
  sched_ev_t ev   [N_GROUPS];
  logic [15:0] n_switches, n_evictions;

  coded_memory dut (.*);
  always #5 clk = ~clk;

  logic [W-1:0] ref_mem [N_DATA_BANKS][L_ROWS];
  logic [W-1:0] exp_val [N_CORES][256];
  bit           exp_v   [N_CORES][256];
  logic [7:0]   next_tag [N_CORES];
  int checks = 0, failures = 0;
  longint n_issued_w = 0, n_commit_w = 0, n_issued_r = 0, n_answered = 0, cyc = 0;
  longint c_stall = 0, c_degraded = 0, c_raw = 0, c_forced = 0, c_parw = 0,
          c_recode = 0, c_encode = 0, c_reads = 0, max_reads = 0;
  int  hot0 = 3, hot1 = 11, rpar = 0;
  bit  issuing = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // responses and events
  always @(negedge clk) if (rst_n) begin
    automatic int nr = 0;
    cyc++;
    for (int g = 0; g < N_GROUPS; g++) begin
      for (int s = 0; s < SERVE_SLOTS; s++)
        if (resp[g][s].valid) begin
          automatic int c = int'(resp[g][s].core);
          automatic int t = int'(resp[g][s].tag);
          chk(exp_v[c][t], $sformatf("answer to a read that is pending (core %0d tag %0d)", c, t));
          chk(resp[g][s].data == exp_val[c][t],
              $sformatf("read data core %0d tag %0d: got %h want %h", c, t, resp[g][s].data, exp_val[c][t]));
          exp_v[c][t] = 0;
          n_answered++;
        end
      n_commit_w += ev[g].n_writes;
      c_degraded += ev[g].n_degraded;
      c_raw      += ev[g].n_raw;
      c_parw     += ev[g].n_parity_writes;
      c_forced   += ev[g].write_forced;
      c_recode   += ev[g].recode;
      c_encode   += ev[g].encode;
      nr         += int'(ev[g].n_reads);
    end
    c_reads += nr;
    if (nr > max_reads) max_reads = nr;
  end

  // request generation (at negedge, after the answers above)
  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < N_CORES; c++) begin
      if (req[c].valid && busy[c]) begin
        c_stall++;                       // held: not taken at the next edge
      end else begin
        req[c] = '0;
        if (issuing && $urandom_range(99) < 60) begin
          automatic int region = ($urandom_range(9) != 0) ? (($urandom_range(1) != 0) ? hot0 : hot1)
                                                          : $urandom_range(N_REGIONS - 1);
          automatic int off    = $urandom_range(REGION_ROWS / 2 - 1) * 2;
          automatic bit wr     = ($urandom_range(99) < 35);
          automatic int row    = region * REGION_ROWS + off + (wr ? 1 - rpar : rpar);
          automatic int bank   = wr ? c : $urandom_range(N_DATA_BANKS - 1);
          if (wr) begin
            req[c] = '{valid: 1, we: 1, addr: {ROW_W'(row), BANK_W'(bank)},
                       wdata: {$urandom, $urandom}, tag: '0};
          end else if (!exp_v[c][next_tag[c]]) begin
            req[c] = '{valid: 1, we: 0, addr: {ROW_W'(row), BANK_W'(bank)}, wdata: '0, tag: next_tag[c]};
          end
        end
      end
      // bookkeeping for a request the next edge will take
      if (req[c].valid && !busy[c]) begin
        automatic int b = int'(req[c].addr[BANK_W-1:0]);
        automatic int r = int'(req[c].addr[ADDR_W-1:BANK_W]);
        if (req[c].we) begin
          ref_mem[b][r] = req[c].wdata;
          n_issued_w++;
        end else begin
          exp_val[c][req[c].tag] = ref_mem[b][r];
          exp_v[c][req[c].tag]   = 1;
          next_tag[c]            = next_tag[c] + 1'b1;
          n_issued_r++;
        end
      end
    end
  end

  initial begin
    for (int b = 0; b < N_DATA_BANKS; b++) for (int r = 0; r < L_ROWS; r++) ref_mem[b][r] = '0;
    for (int c = 0; c < N_CORES; c++) begin
      req[c] = '0; next_tag[c] = '0;
      for (int t = 0; t < 256; t++) begin exp_v[c][t] = 0; exp_val[c][t] = '0; end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ph = 0; ph < PHASES; ph++) begin
      automatic int waited = 0;
      if (ph == PHASES / 2) begin hot0 = 15; hot1 = 3; end
      rpar = ph % 2;
      issuing = 1;
      repeat (PH_CYCLES) @(negedge clk);
      issuing = 0;
      // drain: all writes committed, all reads answered
      while (waited < 5000) begin
        automatic bit rd_out = 0;
        @(negedge clk);
        waited++;
        for (int c = 0; c < N_CORES; c++) begin
          if (req[c].valid) rd_out = 1;
          for (int t = 0; t < 256; t++) if (exp_v[c][t]) rd_out = 1;
        end
        if (!rd_out && n_commit_w == n_issued_w) break;
      end
      chk(n_commit_w == n_issued_w, $sformatf("phase %0d: all writes committed", ph));
      $display("phase %0d done at cycle %0d: reads %0d writes %0d switches %0d evictions %0d",
               ph, cyc, n_issued_r, n_issued_w, n_switches, n_evictions);
    end
    chk(n_answered == n_issued_r, "every read answered once");
    $display("reads %0d (max %0d per cycle), degraded %0d, raw %0d, stalls %0d",
             c_reads, max_reads, c_degraded, c_raw, c_stall);
    $display("writes %0d, to parity %0d, forced write cycles %0d, recodes %0d, encodes %0d",
             n_commit_w, c_parw, c_forced, c_recode, c_encode);
    $display("region switches %0d, evictions %0d", n_switches, n_evictions);
    chk(c_stall > 0,    "mechanism: core stall");
    chk(c_degraded > 0, "mechanism: degraded read");
    chk(c_raw > 0,      "mechanism: read of a value held in a parity bank");
    chk(c_forced > 0,   "mechanism: write pattern builder on nearly full queue");
    chk(c_parw > 0,     "mechanism: write into a parity bank");
    chk(c_recode > 0,   "mechanism: recoding");
    chk(c_encode > 0,   "mechanism: region encode");
    chk(n_switches >= 3, "mechanism: region switches");
    chk(n_evictions >= 1, "mechanism: eviction");
    chk(max_reads > N_DATA_BANKS, "more reads in a cycle than data banks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
