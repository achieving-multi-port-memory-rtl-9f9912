// tb_dynamic_coding_controller: with a short epoch, traffic first favours
// regions 5 and 9, which get encoded one per epoch into free slots (each
// build issues the 64 row encodes in order to both code regions); then
// traffic moves to region 12 with region 5 still used, so the least used
// encoded region (9) is evicted, but only once both code regions report
// clean, and region 12 is built in its place.
module tb_dynamic_coding_controller;
  import cm_pkg::*;
  localparam int EPOCH = 256;
  localparam int NA = 2 * N_DATA_BANKS;
  logic clk = 0, rst_n = 0;
  logic acc_v [NA];
  logic [ROW_W-1:0] acc_row [NA];
  logic clean [N_GROUPS], eng_busy [N_GROUPS], enc_ready [N_GROUPS], enc_valid [N_GROUPS];
  logic [ROW_W-1:0] enc_row [N_GROUPS];
  logic [SROW_W-1:0] enc_srow [N_GROUPS];
  logic [REGION_W-1:0] slot_region [N_SLOTS];
  slot_state_e slot_state [N_SLOTS];
  logic [15:0] n_switches, n_evictions;
  int checks = 0, failures = 0;
  int hot_a = 5, hot_b = 9;
  int enc_seen [N_GROUPS];
  bit enc_order_ok = 1;

  dynamic_coding_controller #(.EPOCH(EPOCH)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int slot_of(input int region, input slot_state_e s);
    for (int k = 0; k < N_SLOTS; k++) if (slot_state[k] == s && slot_region[k] == region) return k;
    return -1;
  endfunction

  // traffic: ports 0..3 hit hot_a, ports 4..5 hot_b, port 6 a random region
  always_ff @(negedge clk) begin
    for (int a = 0; a < NA; a++) begin
      acc_v[a] <= (a < 7);
      acc_row[a] <= ROW_W'(((a < 4) ? hot_a : (a < 6) ? hot_b : 0) * REGION_ROWS + $urandom_range(63));
    end
  end

  // encode handshake: accept one row per cycle per group, check the order
  always_ff @(posedge clk) begin
    for (int g = 0; g < N_GROUPS; g++)
      if (rst_n && enc_valid[g] && enc_ready[g]) begin
        if (int'(enc_row[g]) % REGION_ROWS != enc_seen[g] % REGION_ROWS ||
            int'(enc_srow[g]) % REGION_ROWS != enc_seen[g] % REGION_ROWS) enc_order_ok = 0;
        enc_seen[g]++;
      end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int g = 0; g < N_GROUPS; g++) begin
      clean[g] = 1; eng_busy[g] = 0; enc_ready[g] = 1; enc_seen[g] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    chk(slot_state[0] == SLOT_FREE && slot_state[1] == SLOT_FREE && slot_state[2] == SLOT_FREE, "all free");
    // end of first epoch: region 5 starts building
    repeat (EPOCH + 2) @(negedge clk);
    chk(slot_of(5, SLOT_BUILDING) >= 0, "region 5 building after first epoch");
    chk(enc_valid[0] && enc_valid[1], "row encodes requested from both code regions");
    repeat (REGION_ROWS + 4) @(negedge clk);
    chk(slot_of(5, SLOT_ACTIVE) >= 0, "region 5 active after 64 row encodes");
    chk(n_switches == 1, "one region switch");
    chk(enc_seen[0] == REGION_ROWS && enc_seen[1] == REGION_ROWS && enc_order_ok, $sformatf("64 rows each, in order %0d %0d %0d", enc_seen[0], enc_seen[1], enc_order_ok));
    // second epoch: region 9
    repeat (EPOCH) @(negedge clk);
    chk(slot_of(9, SLOT_ACTIVE) >= 0 && slot_of(5, SLOT_ACTIVE) >= 0, "regions 5 and 9 active");
    chk(n_switches == 2 && n_evictions == 0, "two switches, no eviction yet");
    // nothing changes while the same regions stay hot
    repeat (EPOCH) @(negedge clk);
    chk(n_switches == 2, "no switch when the chosen regions are encoded");
    // traffic moves: region 12 hottest, 5 second, 9 unused
    @(negedge clk);
    hot_a = 12; hot_b = 5;
    clean[0] = 0;               // a code region still has recoding work
    repeat (EPOCH + 4) @(negedge clk);
    chk(slot_of(9, SLOT_EVICTING) >= 0, "least used region 9 being evicted");
    chk(n_evictions == 0, "eviction waits for clean");
    repeat (10) @(negedge clk);
    clean[0] = 1;
    repeat (REGION_ROWS + 8) @(negedge clk);
    chk(slot_of(12, SLOT_ACTIVE) >= 0 && slot_of(5, SLOT_ACTIVE) >= 0, "regions 12 and 5 active");
    chk(slot_of(9, SLOT_ACTIVE) < 0 && slot_of(9, SLOT_EVICTING) < 0, "region 9 gone");
    chk(n_switches == 3 && n_evictions == 1, "three switches, one eviction");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
