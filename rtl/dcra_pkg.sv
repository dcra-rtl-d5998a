// dcra_pkg: types and constants shared by the DCRA tile, NoC and die.
//
// A task-invocation message is the unit that travels on both NoCs. It names
// the destination tile by its logical coordinates inside the software-
// configured torus/mesh, the task type (which input queue it lands in) and
// two 32-bit parameters. The first parameter is always an array index: the
// sender uses it to find the owner tile, the receiver uses it to prefetch.
// The paper fixes the idea (task types, one IQ/OQ per type, index as first
// parameter); the field widths, the number of task types and the two-word
// payload are this design's choices.
package dcra_pkg;

  // Number of task types, hence of IQs and OQs per tile (assumed).
  parameter int unsigned NUM_TT   = 4;
  parameter int unsigned TT_W     = $clog2(NUM_TT);
  // Logical coordinate width: up to 256 tiles per dimension (a 2^16-tile node).
  parameter int unsigned COORD_W  = 8;
  parameter int unsigned WORD_W   = 32;
  // Cache line = bitline width of the DRAM memory controller (paper: 512 bits).
  parameter int unsigned LINE_W   = 512;
  parameter int unsigned WPL      = LINE_W / WORD_W;   // 32-bit words per line
  parameter int unsigned WPL_LOG2 = $clog2(WPL);

  typedef logic [COORD_W-1:0] coord_t;
  typedef logic [TT_W-1:0]    tt_t;
  typedef logic [WORD_W-1:0]  word_t;
  typedef logic [LINE_W-1:0]  line_t;

  typedef struct packed {
    coord_t dst_x;
    coord_t dst_y;
    tt_t    ttype;
    word_t  arg0;   // array index (used for routing and prefetching)
    word_t  arg1;   // value
  } msg_t;

  // Router port numbering. Ports 0..4 exist in every router (radix-5);
  // ports 5..8 are the die-NoC ports of the radix-9 routers.
  typedef enum logic [3:0] {
    P_L   = 4'd0,  // local: to/from the TSU
    P_XP  = 4'd1,  // tile-NoC, towards increasing logical x
    P_XM  = 4'd2,  // tile-NoC, towards decreasing logical x
    P_YP  = 4'd3,
    P_YM  = 4'd4,
    P_DXP = 4'd5,  // die-NoC, one die further in +x
    P_DXM = 4'd6,
    P_DYP = 4'd7,
    P_DYM = 4'd8
  } port_e;


  // Routing configuration of one router, written by software before a run.
  typedef struct packed {
    coord_t my_x;        // logical position inside the configured grid
    coord_t my_y;
    coord_t size_x;      // logical grid size (ring length when torus)
    coord_t size_y;
    logic   torus_x;     // tile-NoC wraps around in x
    logic   torus_y;
    logic   die_en_x;    // die-NoC used for x travel
    logic   die_torus_x; // die-NoC wraps around in x
    logic   die_en_y;
    logic   die_torus_y;
  } route_cfg_t;

  // Per-task-type table kept by the TSU.
  typedef struct packed {
    word_t            ptr_a;       // base of the array the index points into
    word_t            ptr_b;       // second array read with the same index
    logic             pf_a;        // prefetch ptr_a[index] on dispatch
    logic             pf_b;        // prefetch ptr_b[index] on dispatch
    logic             stream;      // keep next-line prefetching during the task
    logic [4:0]       chunk_log2;  // log2(elements per tile) of the indexed array
    logic [NUM_TT-1:0] spawns;     // task types this task may spawn
    logic [7:0]       iq_cap;      // configured IQ size (messages)
    logic [7:0]       oq_cap;      // configured OQ size (messages)
  } task_cfg_t;

  // Event counters of one tile.
  typedef struct packed {
    logic [31:0] hits;        // data-cache hits (PU accesses)
    logic [31:0] misses;      // data-cache misses (PU accesses)
    logic [31:0] writebacks;  // dirty lines written back to DRAM
    logic [31:0] pf_fills;    // lines brought in by prefetches
    logic [31:0] pf_issued;   // prefetch requests handed to the cache
    logic [31:0] dispatched;  // tasks dispatched to the PU
    logic [31:0] die_hops;    // messages sent on die-NoC ports
    logic [31:0] oq_holds;    // cycles a waiting task was held for a full OQ
  } tile_stats_t;

  // Tile configuration register map (word addresses on the config bus).
  parameter logic [7:0] CFG_ROUTE0 = 8'h00; // my_x, my_y, size_x, size_y
  parameter logic [7:0] CFG_ROUTE1 = 8'h01; // [5:0] mode bits, [11:8] log2 size_x
  parameter logic [7:0] CFG_CSEG_B = 8'h02; // cached segment base (word address)
  parameter logic [7:0] CFG_CSEG_L = 8'h03; // cached segment limit (exclusive)
  parameter logic [7:0] CFG_CLINES = 8'h04; // [4:0] log2 lines, [8] cache enable
  parameter logic [7:0] CFG_CDATA  = 8'h05; // SRAM row of cache line 0
  parameter logic [7:0] CFG_CTAG   = 8'h06; // SRAM row of the first tag row
  parameter logic [7:0] CFG_CINIT  = 8'h07; // any write: invalidate all cache lines
  parameter logic [7:0] CFG_TASK0  = 8'h10; // + 4*tt + {0:ptr_a,1:ptr_b,2:flags,3:caps}
  // flags word: [0] pf_a, [1] pf_b, [2] stream, [7:4] spawns, [20:16] chunk_log2

endpackage
