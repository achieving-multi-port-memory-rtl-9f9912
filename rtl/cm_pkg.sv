// cm_pkg: constants and types shared by the coded-memory controller.
//
// The memory follows Code Scheme I: 8 single-port data banks split into two
// code regions (groups) of 4 banks, and for each group 6 shallow parity banks,
// one per pair of data banks of that group (a+b, a+c, a+d, b+c, b+d, c+d).
// A parity bank holds N_SLOTS*REGION_ROWS rows. Each data bank is cut into
// N_REGIONS regions of REGION_ROWS rows; the dynamic coding controller maps up
// to N_SLOTS regions onto the parity "slots" (one of them kept free for
// building a new region).
//
// Bank count, grouping, pair order, queue depth (10), core count (8) and
// region count (ceil(1/r) with r = 0.05) follow the paper. Data width, rows
// per region, number of slots (alpha = 0.15), address interleaving and the
// request tag width are choices of this design.
package cm_pkg;

  // ---- sizes -------------------------------------------------------------
  localparam int N_CORES         = 8;
  localparam int N_DATA_BANKS    = 8;
  localparam int N_GROUPS        = 2;
  localparam int BANKS_PER_GROUP = 4;
  localparam int N_PAR_PER_GROUP = 6;     // C(4,2) pairs
  localparam int QDEPTH          = 10;    // bank queue depth
  localparam int N_REGIONS       = 20;    // ceil(1/r), r = 0.05
  localparam int REGION_ROWS     = 64;
  localparam int L_ROWS          = N_REGIONS * REGION_ROWS;   // rows per data bank
  localparam int N_SLOTS         = 3;     // alpha / r, alpha = 0.15
  localparam int P_ROWS          = N_SLOTS * REGION_ROWS;     // rows per parity bank
  localparam int W               = 64;    // data element width
  localparam int TAG_W           = 8;

  localparam int CORE_W   = $clog2(N_CORES);
  localparam int BANK_W   = $clog2(N_DATA_BANKS);
  localparam int ROW_W    = $clog2(L_ROWS);
  localparam int SROW_W   = $clog2(P_ROWS);
  localparam int REGION_W = $clog2(N_REGIONS);
  localparam int SLOT_W   = (N_SLOTS > 1) ? $clog2(N_SLOTS) : 1;
  localparam int OFF_W    = $clog2(REGION_ROWS);
  localparam int PAR_W    = 3;            // parity index 0..5
  localparam int ADDR_W   = ROW_W + BANK_W;
  localparam int SERVE_SLOTS = BANKS_PER_GROUP + N_PAR_PER_GROUP;  // 10

  // Parity bank j of a group encodes data banks PAIR_P[j] + PAIR_Q[j]
  // (local bank numbers 0..3 = a..d), in the order printed in Fig. 7.
  localparam int PAIR_P [N_PAR_PER_GROUP] = '{0, 0, 0, 1, 1, 2};
  localparam int PAIR_Q [N_PAR_PER_GROUP] = '{1, 2, 3, 2, 3, 3};

  // Parity index for a pair of distinct local banks.
  function automatic logic [PAR_W-1:0] pair_idx(input int x, input int y);
    int lo, hi;
    lo = (x < y) ? x : y;
    hi = (x < y) ? y : x;
    for (int j = 0; j < N_PAR_PER_GROUP; j++)
      if (PAIR_P[j] == lo && PAIR_Q[j] == hi) return PAR_W'(j);
    return '0;
  endfunction

  // ---- code status table entry -------------------------------------------
  typedef enum logic [1:0] {
    ST_FRESH  = 2'b00,   // data and parity banks agree
    ST_DATA   = 2'b01,   // data bank is fresh, parities must be recoded
    ST_PARITY = 2'b10    // a parity bank holds the fresh element
  } status_e;

  typedef struct packed {
    status_e          st;
    logic [PAR_W-1:0] ptr;   // parity bank holding the element when ST_PARITY
  } status_t;

  // ---- requests ----------------------------------------------------------
  typedef struct packed {
    logic             valid;
    logic             we;
    logic [ADDR_W-1:0] addr;
    logic [W-1:0]     wdata;
    logic [TAG_W-1:0] tag;
  } core_req_t;

  typedef struct packed {
    logic [CORE_W-1:0] core;
    logic [TAG_W-1:0]  tag;
    logic [ROW_W-1:0]  row;
  } rd_entry_t;

  typedef struct packed {
    logic [CORE_W-1:0] core;
    logic [TAG_W-1:0]  tag;
    logic [ROW_W-1:0]  row;
    logic [W-1:0]      data;
  } wr_entry_t;

  typedef struct packed {
    logic              valid;
    logic [CORE_W-1:0] core;
    logic [TAG_W-1:0]  tag;
    logic [W-1:0]      data;
  } rd_resp_t;

  // How a scheduled read is decoded one cycle later.
  typedef enum logic [1:0] {
    DEC_DIRECT = 2'd0,   // value from data bank src_bank
    DEC_RAW    = 2'd1,   // value stored as-is in parity bank src_par
    DEC_XOR    = 2'd2    // data bank src_bank XOR parity bank src_par
  } dec_mode_e;

  typedef struct packed {
    logic              valid;
    dec_mode_e         mode;
    logic [1:0]        src_bank;
    logic [PAR_W-1:0]  src_par;
    logic [CORE_W-1:0] core;
    logic [TAG_W-1:0]  tag;
  } serve_t;

  // Bank command (one per bank per cycle).
  typedef struct packed {
    logic              en;
    logic              we;
    logic [ROW_W-1:0]  row;
    logic [W-1:0]      wdata;
  } bank_cmd_t;

  // Recoding request.
  typedef struct packed {
    logic [SROW_W-1:0] srow;
    logic [1:0]        src_bank;              // bank whose write caused it
    logic [BANKS_PER_GROUP+N_PAR_PER_GROUP-1:0] stale;  // stale data/parity banks
    logic [15:0]       cycle;                 // cycle number when pushed
  } recode_req_t;

  // Per-cycle events of one code region's access scheduler.
  typedef struct packed {
    logic       read_cycle;
    logic       write_cycle;     // write pattern builder ran
    logic       write_forced;    // ... because a write queue was nearly full
    logic       recode;          // a recoding operation started
    logic       encode;          // a row encode operation started
    logic [3:0] n_reads;         // read requests served
    logic [3:0] n_degraded;      // of which by parity XOR data
    logic [3:0] n_raw;           // of which from a parity bank holding the value
    logic [3:0] n_writes;        // writes committed
    logic [3:0] n_parity_writes; // of which into parity banks
  } sched_ev_t;

  // ---- dynamic coding slots ------------------------------------------------
  typedef enum logic [1:0] {
    SLOT_FREE     = 2'd0,
    SLOT_BUILDING = 2'd1,
    SLOT_ACTIVE   = 2'd2,
    SLOT_EVICTING = 2'd3
  } slot_state_e;

  typedef struct packed {
    logic              tracked;  // row has status entries (slot not free)
    logic              active;   // parities usable for reads / writes
    logic [SROW_W-1:0] srow;     // row inside the parity banks
  } row_map_t;

  function automatic logic [REGION_W-1:0] region_of(input logic [ROW_W-1:0] row);
    return REGION_W'(row / REGION_ROWS);
  endfunction

  function automatic row_map_t map_row(input logic [ROW_W-1:0] row,
                                       input logic [REGION_W-1:0] slot_region [N_SLOTS],
                                       input slot_state_e slot_state [N_SLOTS]);
    row_map_t m;
    m = '0;
    for (int s = 0; s < N_SLOTS; s++)
      if (slot_state[s] != SLOT_FREE && slot_region[s] == region_of(row)) begin
        m.tracked = 1'b1;
        m.active  = (slot_state[s] == SLOT_ACTIVE);
        m.srow    = SROW_W'(s * REGION_ROWS + int'(row % REGION_ROWS));
      end
    return m;
  endfunction

endpackage
