// tb_sp_bank: writes random words to random rows of a full-size bank, reads
// them back and checks the one-cycle read latency, that rdata holds while
// the bank is idle and that a write does not disturb rdata.
module tb_sp_bank;
  localparam int DEPTH = 1280, WIDTH = 64;
  logic clk = 0, en = 0, we = 0;
  logic [$clog2(DEPTH)-1:0] addr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  sp_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) model[i] = '0;
    // reset contents are zero
    @(negedge clk); en = 1; we = 0; addr = 11'd17;
    @(negedge clk); chk(rdata == '0, "initial zero");
    for (int n = 0; n < 2000; n++) begin
      automatic int a = $urandom_range(DEPTH - 1);
      @(negedge clk);
      en = 1; addr = 11'(a);
      if ($urandom_range(1)) begin
        we = 1; wdata = {$urandom, $urandom}; model[a] = wdata;
      end else begin
        we = 0;
        @(posedge clk); #1;
        chk(rdata == model[a], $sformatf("read row %0d after one cycle", a));
        en = 0;
        @(posedge clk); #1;
        chk(rdata == model[a], "rdata holds while idle");
      end
    end
    // a write leaves the last read value on rdata
    @(negedge clk); en = 1; we = 0; addr = 11'd5;
    @(negedge clk); we = 1; addr = 11'd6; wdata = 64'hdead_beef;
    @(negedge clk); en = 0;
    chk(rdata == model[5], "write does not change rdata");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
