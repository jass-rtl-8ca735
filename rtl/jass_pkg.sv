// jass_pkg: shared types and constants of the JASS checkpointing hardware.
//
// JASS takes periodic, incremental snapshots of a multicore whose main memory
// is DRAM next to an NVM.  Every NoC message and cache line carries one
// "snapshot" bit, the colour of the epoch that produced it; the sense of that
// bit flips at every checkpoint.  A message whose bit differs from the current
// colour of the element holding it is "pre-snapshot".
//
// Fixed by the paper: 48-bit physical addresses, 64-byte cache blocks,
// 256-byte "pages" (the unit the DRAM page table and the NVM access scheduler
// track), four 10-bit page-table levels above an 8-bit page offset (Fig. 7),
// the cache message kinds of Algorithm 3 and the three tunables sent with the
// token (scrubbing-step, scrubbing-granularity, memory-walk step).
// Own choices: field widths of the flit and of the tunables, node-id width.
package jass_pkg;

  localparam int unsigned PA_W          = 48;   // physical address (Fig. 7)
  localparam int unsigned LINE_BYTES    = 64;   // cache block (Table 1)
  localparam int unsigned LINE_W        = LINE_BYTES * 8;
  localparam int unsigned BLK_OFF_W     = 6;    // byte offset inside a block
  localparam int unsigned PAGE_OFF_W    = 8;    // 256-byte page (Sec. 3)
  localparam int unsigned BLKS_PER_PAGE = 4;    // 4 blocks per page (Sec. 4.5)
  localparam int unsigned PAGE_W        = PA_W - PAGE_OFF_W;   // 40-bit page number
  localparam int unsigned PT_LEVELS     = 4;    // four-level tree (Sec. 4.6.1)
  localparam int unsigned PT_IDX_W      = 10;   // 10 index bits per level
  localparam int unsigned PT_ENTRIES    = 1 << PT_IDX_W;
  localparam int unsigned NODE_W        = 5;    // NoC node id
  localparam int unsigned NPORTS        = 5;    // N, E, S, W, local
  localparam int unsigned CNT_W         = 32;   // flush message counters

  // Router port numbering.
  localparam int unsigned P_N = 0;
  localparam int unsigned P_E = 1;
  localparam int unsigned P_S = 2;
  localparam int unsigned P_W = 3;
  localparam int unsigned P_L = 4;

  // Message kinds (Algorithm 3) plus a write-back carrying a line downwards.
  typedef enum logic [2:0] {
    M_READ  = 3'd0,
    M_WRITE = 3'd1,
    M_GETS  = 3'd2,
    M_GETX  = 3'd3,
    M_INV   = 3'd4,
    M_EVICT = 3'd5,
    M_WB    = 3'd6
  } msg_e;

  // One NoC flit carries one whole message, a cache line included.
  typedef struct packed {
    msg_e               mtype;
    logic               snap;   // epoch colour the sender gave it
    logic               mark;   // counted in some router's xcount
    logic [NODE_W-1:0]  dst;
    logic [NODE_W-1:0]  src;
    logic [PA_W-1:0]    addr;
    logic [LINE_W-1:0]  data;
  } flit_t;

  // Tunables sent along with the snapshot token (Sec. 4.7).
  typedef struct packed {
    logic [19:0] scrub_step;    // cycles between scrubbing cycles
    logic [7:0]  scrub_gran;    // sets scrubbed per scrubbing cycle
    logic [19:0] walk_step;     // cycles between DRAM-walker activations
  } tune_t;

  // A cache-level request, used between a core port and a cache.
  typedef struct packed {
    msg_e              mtype;
    logic              snap;
    logic [PA_W-1:0]   addr;
    logic [LINE_W-1:0] data;
  } creq_t;

  // A page on its way to the NVM access scheduler.
  typedef struct packed {
    logic [PAGE_W-1:0]                     page;
    logic [BLKS_PER_PAGE-1:0]              mask;
    logic [BLKS_PER_PAGE-1:0][LINE_W-1:0]  data;
  } page_t;

endpackage
