// tb_bank_queue: drives random pushes and random removal masks into a depth
// 10 queue and compares contents, order, count and full with a reference
// queue kept in the testbench.
module tb_bank_queue;
  localparam int DEPTH = 10;
  typedef logic [7:0] T;
  logic clk = 0, rst_n = 0, push = 0, full;
  T push_data = '0;
  logic [DEPTH-1:0] rm = '0, vld;
  T ent [DEPTH];
  logic [$clog2(DEPTH+1)-1:0] count;
  T model [$];
  int checks = 0, failures = 0, n_full = 0;

  bank_queue #(.DEPTH(DEPTH), .T(T)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      // compare state
      chk(int'(count) == model.size(), "count");
      chk(full == (model.size() == DEPTH), "full");
      for (int i = 0; i < DEPTH; i++) begin
        chk(vld[i] == (i < model.size()), "vld");
        if (i < model.size()) chk(ent[i] == model[i], $sformatf("entry %0d", i));
      end
      if (full) n_full++;
      // next stimulus: removal of random valid entries, maybe a push
      rm = '0;
      for (int i = 0; i < model.size(); i++) rm[i] = ($urandom_range((n / 500) % 2 ? 2 : 20) == 0);
      push = ($urandom_range(2) != 0);
      push_data = 8'($urandom);
      @(posedge clk); #1;
      begin
        automatic T nm [$];
        foreach (model[i]) if (!rm[i]) nm.push_back(model[i]);
        if (push && model.size() < DEPTH) nm.push_back(push_data);
        model = nm;
      end
      rm = '0; push = 0;
    end
    chk(n_full > 0, "queue reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
