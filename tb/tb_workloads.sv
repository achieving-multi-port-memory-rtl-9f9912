// tb_workloads: the coded memory under three synthetic access shapes that
// mirror the kinds of traces the architecture is evaluated with:
//   bands - two stationary hot bands (like the dedup trace): both stay
//           encoded, so after the first two builds no region is switched;
//   split - hot traffic spread over five bands, more than the two encoded
//           slots: regions keep being evicted and rebuilt;
//   ramp  - the hot band moves to the next region every epoch: the
//           controller follows it with a new build each time.
// The epoch is shortened to 1024 cycles (the only change from the default
// size) so that each shape spans several epochs. Traffic rules are those of
// the end-to-end test: core c writes only bank c, reads and writes use
// opposite row parities within a phase, and phases drain in between. Every
// read answer is checked; each shape prints its cycle count, reads per
// cycle, degraded reads, switches and evictions, and the switch/eviction
// behaviour described above is checked. The design is reset between shapes
// after an idle stretch in which all recoding completes (memory contents
// persist; the reference copy follows them).
module tb_workloads;
  import cm_pkg::*;

  localparam int PHASES     = 6;
  localparam int PH_CYCLES  = 1500;
  localparam int EPOCH      = 1024;

  logic clk = 0, rst_n = 0;
  core_req_t req  [N_CORES];
  logic      busy [N_CORES];
  rd_resp_t  resp [N_GROUPS][SERVE_SLOTS];
  sched_ev_t ev   [N_GROUPS];
  logic [15:0] n_switches, n_evictions;

  coded_memory #(.EPOCH(EPOCH)) dut (.*);
  always #5 clk = ~clk;

  logic [W-1:0] ref_mem [N_DATA_BANKS][L_ROWS];
  logic [W-1:0] exp_val [N_CORES][256];
  bit           exp_v   [N_CORES][256];
  logic [7:0]   next_tag [N_CORES];
  int checks = 0, failures = 0;
  longint n_issued_w = 0, n_commit_w = 0, n_issued_r = 0, n_answered = 0, cyc = 0;
  longint c_stall = 0, c_degraded = 0, c_raw = 0, c_forced = 0, c_parw = 0,
          c_recode = 0, c_encode = 0, c_reads = 0, max_reads = 0;
  int  hot0 = 3, hot1 = 11, rpar = 0, wl = 0;
  longint wl_cyc = 0;
  bit  issuing = 0;

  // hot region of the current shape (90 % of requests), else anywhere
  function automatic int pick_region();
    if ($urandom_range(9) == 0) return $urandom_range(N_REGIONS - 1);
    case (wl)
      0:       return ($urandom_range(1) != 0) ? 4 : 13;
      1:       return 2 + 4 * $urandom_range(4);
      default: return (3 + int'(wl_cyc / EPOCH)) % N_REGIONS;
    endcase
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // responses and events
  always @(negedge clk) if (rst_n) begin
    automatic int nr = 0;
    cyc++;
    wl_cyc++;
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
          automatic int region = pick_region();
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
    for (wl = 0; wl < 3; wl++) begin
      longint r0, w0, d0, c0;
      // idle long enough for every pending recode to finish: a value parked
      // in a parity bank exists nowhere else until it is recoded
      repeat (500) @(negedge clk);
      rst_n = 0;
      repeat (3) @(negedge clk);
      rst_n = 1;
      wl_cyc = 0;
      r0 = c_reads; w0 = n_commit_w; d0 = c_degraded; c0 = cyc;
      for (int ph = 0; ph < PHASES; ph++) begin
        automatic int waited = 0;
        rpar = ph % 2;
        issuing = 1;
        repeat (PH_CYCLES) @(negedge clk);
        issuing = 0;
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
        chk(n_commit_w == n_issued_w, $sformatf("shape %0d phase %0d: all writes committed", wl, ph));
      end
      $display("%s: %0d cycles, %0d reads (%0.2f per cycle, %0d degraded), %0d writes, %0d switches, %0d evictions",
               wl == 0 ? "bands" : wl == 1 ? "split" : "ramp ", cyc - c0, c_reads - r0,
               real'(c_reads - r0) / real'(cyc - c0), c_degraded - d0, n_commit_w - w0,
               n_switches, n_evictions);
      case (wl)
        0: begin
          chk(n_switches == 2, "bands: exactly the two hot bands are encoded");
          chk(n_evictions == 0, "bands: no eviction");
        end
        1: chk(n_evictions >= 2, "split: bands keep replacing each other");
        default: chk(n_switches >= 5, "ramp: a new build for most moves of the band");
      endcase
      chk(c_degraded > d0, "degraded reads occur");
    end
    chk(n_answered == n_issued_r, "every read answered once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
