// tb_core_arbiter: (1) all eight cores read bank 3 at once: one push per
// cycle, round-robin, every core served once in eight cycles, busy on the
// others; (2) a full write queue stalls its core and releases it when space
// appears; (3) requests to different queues all pass in the same cycle with
// the right row, core, tag and data.
module tb_core_arbiter;
  import cm_pkg::*;
  logic clk = 0, rst_n = 0;
  core_req_t req [N_CORES];
  logic busy [N_CORES];
  logic rq_full [N_DATA_BANKS], wq_full [N_DATA_BANKS];
  logic rq_push [N_DATA_BANKS], wq_push [N_DATA_BANKS];
  rd_entry_t rq_data [N_DATA_BANKS];
  wr_entry_t wq_data [N_DATA_BANKS];
  int checks = 0, failures = 0;

  core_arbiter dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic bit seen [N_CORES];
    for (int c = 0; c < N_CORES; c++) req[c] = '0;
    for (int b = 0; b < N_DATA_BANKS; b++) begin rq_full[b] = 0; wq_full[b] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // (1) eight reads to bank 3
    @(negedge clk);
    for (int c = 0; c < N_CORES; c++)
      req[c] = '{valid: 1, we: 0, addr: {ROW_W'(100 + c), 3'd3}, wdata: '0, tag: 8'(c)};
    @(posedge clk); #1;   // requests now in the holding slots
    for (int c = 0; c < N_CORES; c++) req[c] = '0;
    for (int c = 0; c < N_CORES; c++) seen[c] = 0;
    for (int n = 0; n < N_CORES; n++) begin
      automatic int nb = 0;
      #1;
      chk(rq_push[3], "one push per cycle to bank 3");
      for (int b = 0; b < N_DATA_BANKS; b++) if (b != 3) chk(!rq_push[b] && !wq_push[b], "no other push");
      chk(rq_data[3].row == ROW_W'(100 + int'(rq_data[3].core)) && rq_data[3].tag == 8'(rq_data[3].core),
          "row and tag travel with the core");
      chk(!seen[rq_data[3].core], "each core granted once");
      seen[rq_data[3].core] = 1;
      for (int c = 0; c < N_CORES; c++) if (busy[c]) nb++;
      chk(nb == N_CORES - 1 - n, "losers are busy");
      @(posedge clk); #1;
    end
    chk(!rq_push[3], "all eight drained");

    // (2) full write queue of bank 5 stalls core 2
    @(negedge clk);
    wq_full[5] = 1;
    req[2] = '{valid: 1, we: 1, addr: {ROW_W'(9), 3'd5}, wdata: 64'h1234, tag: 8'h22};
    @(posedge clk); #1;
    repeat (3) begin
      #1 chk(busy[2] && !wq_push[5], "stalled on full queue");
      @(posedge clk); #1;
    end
    wq_full[5] = 0;
    #1;
    chk(!busy[2] && wq_push[5] && wq_data[5].data == 64'h1234 && wq_data[5].row == 9
        && wq_data[5].core == 2 && wq_data[5].tag == 8'h22, "released when space appears");
    @(negedge clk); req[2] = '0;

    // (3) eight different queues in one cycle
    @(negedge clk);
    for (int c = 0; c < N_CORES; c++)
      req[c] = '{valid: 1, we: c[0], addr: {ROW_W'(c), 3'(c)}, wdata: 64'(c * 3), tag: 8'(c)};
    @(posedge clk); #1;
    for (int c = 0; c < N_CORES; c++) req[c] = '0;
    #1;
    for (int c = 0; c < N_CORES; c++) begin
      chk(!busy[c], "no stall without conflict");
      if (c[0]) chk(wq_push[c] && wq_data[c].data == 64'(c * 3) && wq_data[c].core == 3'(c), "write routed");
      else      chk(rq_push[c] && rq_data[c].row == ROW_W'(c), "read routed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
