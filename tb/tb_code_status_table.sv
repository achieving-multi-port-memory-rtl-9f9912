// tb_code_status_table: random single-entry updates and row clears against a
// reference table, including two updates of the same entry in one cycle
// (the later index wins) and a clear together with an update (update wins).
module tb_code_status_table;
  import cm_pkg::*;
  localparam int N_UPD = SERVE_SLOTS;
  logic clk = 0, rst_n = 0, clr_v = 0;
  logic [SROW_W-1:0] clr_srow = '0;
  logic upd_v [N_UPD];
  logic [SROW_W-1:0] upd_srow [N_UPD];
  logic [1:0] upd_bank [N_UPD];
  status_t upd_val [N_UPD];
  status_t st [P_ROWS][BANKS_PER_GROUP];
  status_t model [P_ROWS][BANKS_PER_GROUP];
  int checks = 0, failures = 0;

  code_status_table dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare();
    for (int r = 0; r < P_ROWS; r++)
      for (int b = 0; b < BANKS_PER_GROUP; b++)
        if (st[r][b] != model[r][b]) begin
          chk(0, $sformatf("row %0d bank %0d", r, b));
          return;
        end
    chk(1, "table");
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int u = 0; u < N_UPD; u++) begin
      upd_v[u] = 0; upd_srow[u] = '0; upd_bank[u] = '0; upd_val[u] = '0;
    end
    for (int r = 0; r < P_ROWS; r++)
      for (int b = 0; b < BANKS_PER_GROUP; b++) model[r][b] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    compare();
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      clr_v = ($urandom_range(3) == 0);
      clr_srow = SROW_W'($urandom_range(P_ROWS - 1));
      for (int u = 0; u < N_UPD; u++) begin
        upd_v[u]    = ($urandom_range(1) == 1);
        upd_srow[u] = (u == 1) ? upd_srow[0] : SROW_W'($urandom_range(P_ROWS - 1));
        if (u == 2 && clr_v) upd_srow[u] = clr_srow;
        upd_bank[u] = (u == 1) ? upd_bank[0] : 2'($urandom_range(3));
        upd_val[u]  = '{st: status_e'($urandom_range(2)), ptr: PAR_W'($urandom_range(5))};
      end
      if (clr_v) for (int b = 0; b < BANKS_PER_GROUP; b++) model[clr_srow][b] = '0;
      for (int u = 0; u < N_UPD; u++) if (upd_v[u]) model[upd_srow[u]][upd_bank[u]] = upd_val[u];
      @(posedge clk); #1;
      compare();
    end
    // reset clears everything
    rst_n = 0; #1;
    for (int r = 0; r < P_ROWS; r++)
      for (int b = 0; b < BANKS_PER_GROUP; b++) model[r][b] = '0;
    compare();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
