// core_arbiter: moves core requests into the per-bank read and write queues.
//
// Each core may present one request per cycle (req[c].valid). A request is
// taken into that core's one-entry holding slot whenever busy[c] is low; a
// core must hold its request while busy[c] is high (a stall). Every cycle,
// for each of the 2*N_DATA_BANKS destination queues (read or write queue of
// bank addr[BANK_W-1:0]) one waiting slot is granted, round-robin among the
// cores, provided that queue is not full; the granted slot is pushed and
// freed in the same cycle and may take a new request at once. busy[c] is
// therefore high when the slot is full and its destination queue is full or
// given to another core this cycle. The paper fixes only the behaviour (one
// request per core per cycle, stall on a full queue); the one-entry slot,
// round-robin order and low-order bank interleaving are this design's.
module core_arbiter
  import cm_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  core_req_t  req     [N_CORES],
  output logic       busy    [N_CORES],
  input  logic       rq_full [N_DATA_BANKS],
  input  logic       wq_full [N_DATA_BANKS],
  output logic       rq_push [N_DATA_BANKS],
  output rd_entry_t  rq_data [N_DATA_BANKS],
  output logic       wq_push [N_DATA_BANKS],
  output wr_entry_t  wq_data [N_DATA_BANKS]
);
  localparam int NQ = 2 * N_DATA_BANKS;   // queue q: bank q%8, write if q >= 8

  core_req_t         slot   [N_CORES];
  logic [CORE_W-1:0] rr     [NQ];
  logic              pop    [N_CORES];
  logic [CORE_W-1:0] gnt    [NQ];
  logic              gnt_v  [NQ];

  function automatic int dest_q(input core_req_t r);
    return int'(r.addr[BANK_W-1:0]) + (r.we ? N_DATA_BANKS : 0);
  endfunction

  always_comb begin
    for (int c = 0; c < N_CORES; c++) pop[c] = 1'b0;
    for (int q = 0; q < NQ; q++) begin
      automatic logic qfull = (q < N_DATA_BANKS) ? rq_full[q] : wq_full[q - N_DATA_BANKS];
      gnt_v[q] = 1'b0;
      gnt[q]   = '0;
      for (int k = 0; k < N_CORES; k++) begin
        automatic int c = (int'(rr[q]) + k) % N_CORES;
        if (!gnt_v[q] && !qfull && slot[c].valid && dest_q(slot[c]) == q) begin
          gnt_v[q] = 1'b1;
          gnt[q]   = CORE_W'(c);
        end
      end
      if (gnt_v[q]) pop[gnt[q]] = 1'b1;
    end
    for (int c = 0; c < N_CORES; c++) busy[c] = slot[c].valid && !pop[c];
    for (int b = 0; b < N_DATA_BANKS; b++) begin
      automatic core_req_t rs = slot[gnt[b]];
      automatic core_req_t ws = slot[gnt[b + N_DATA_BANKS]];
      rq_push[b] = gnt_v[b];
      rq_data[b] = '{core: gnt[b], tag: rs.tag, row: rs.addr[ADDR_W-1:BANK_W]};
      wq_push[b] = gnt_v[b + N_DATA_BANKS];
      wq_data[b] = '{core: gnt[b + N_DATA_BANKS], tag: ws.tag,
                     row: ws.addr[ADDR_W-1:BANK_W], data: ws.wdata};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CORES; c++) slot[c] <= '0;
      for (int q = 0; q < NQ; q++) rr[q] <= '0;
    end else begin
      for (int c = 0; c < N_CORES; c++)
        if (!busy[c]) slot[c] <= req[c];   // takes a new request or goes empty
      for (int q = 0; q < NQ; q++)
        if (gnt_v[q]) rr[q] <= CORE_W'((int'(gnt[q]) + 1) % N_CORES);
    end
  end
endmodule
