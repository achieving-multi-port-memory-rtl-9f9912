// bank_queue: request queue of one data bank (a read queue or a write queue).
//
// Holds up to DEPTH entries in age order, entry 0 being the oldest. Unlike a
// FIFO, every entry is visible on ent/vld so that the pattern builders can
// pick requests out of order (Fig. 13 and Fig. 15 of the source serve queue
// entries that are not at the head). In one cycle the builder removes any
// subset given by the rm mask; the remaining entries close up in order and a
// pushed entry is appended behind them. push is accepted only when !full; a
// push and removals in the same cycle are allowed. count and full are
// registered state. Depth 10 follows the paper; the removal-by-mask
// interface is this design's own.
module bank_queue #(
  parameter int  DEPTH = 10,
  parameter type T     = logic [7:0],
  localparam int CW = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  T              push_data,
  input  logic [DEPTH-1:0] rm,
  output T              ent [DEPTH],
  output logic [DEPTH-1:0] vld,
  output logic [CW-1:0] count,
  output logic          full
);
  T             q   [DEPTH];
  logic [CW-1:0] cnt;

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      ent[i] = q[i];
      vld[i] = (i < int'(cnt));
    end
    count = cnt;
    full  = (int'(cnt) == DEPTH);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0;
      for (int i = 0; i < DEPTH; i++) q[i] <= '0;
    end else begin
      automatic int k = 0;
      automatic T   nq [DEPTH];
      for (int i = 0; i < DEPTH; i++) nq[i] = q[i];
      for (int i = 0; i < DEPTH; i++)
        if (vld[i] && !rm[i]) begin
          nq[k] = q[i];
          k++;
        end
      if (push && !full) begin
        nq[k] = push_data;
        k++;
      end
      for (int i = 0; i < DEPTH; i++) q[i] <= nq[i];
      cnt <= CW'(k);
    end
  end

  // A removal may only name a valid entry.
  assert property (@(posedge clk) disable iff (!rst_n) (rm & ~vld) == '0);
endmodule
