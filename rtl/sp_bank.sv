// sp_bank: single-port memory bank.
//
// One access per memory cycle: when en is high the bank either writes wdata
// to row addr (we = 1) or reads row addr (we = 0); read data appears on rdata
// on the next clock edge and holds until the next read. The same module is
// used for the L-row data banks and for the shallow parity banks. The paper
// treats the banks as given single-port memories; this is the plain array
// model of one, written so that synthesis infers a one-port RAM.
module sp_bank #(
  parameter int DEPTH = 1280,
  parameter int WIDTH = 64,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  // Banks start zeroed so that the parity banks are consistent (0 ^ 0 = 0)
  // with the data banks from the first cycle.
  initial for (int i = 0; i < DEPTH; i++) mem[i] = '0;

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
