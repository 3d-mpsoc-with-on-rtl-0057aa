// Shared types and constants of the eight-core cluster.
//
// The cluster separates two kinds of traffic: coherent memory traffic goes
// from the private L1 caches through a CCI-like crossbar to a shared L2, and
// inter-processor messages go through a packet-switched mesh NoC. This package
// holds what several modules of both systems agree on: the 32-bit physical
// address, the 64-byte line carried as four 128-bit beats (the 128-bit data
// channel width of the CCI), the MOESI line states, the command set of the
// crossbar, and the NoC flit format.
//
// Line size, data width and the MOESI protocol follow the paper. The command
// encoding, the flit layout and the 32-bit address are this design's choices.
package mpsoc_pkg;

  // Memory system ----------------------------------------------------------
  localparam int unsigned ADDR_W     = 32;   // physical address width
  localparam int unsigned WORD_W     = 32;   // core load/store width
  localparam int unsigned LINE_BYTES = 64;   // L1 and L2 block size
  localparam int unsigned BEAT_W     = 128;  // CCI read/write data channel width
  localparam int unsigned BEATS      = LINE_BYTES * 8 / BEAT_W;  // 4 beats per line
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);       // 6
  localparam int unsigned LADDR_W    = ADDR_W - OFF_W;           // line address width
  localparam int unsigned BEAT_IDX_W = $clog2(BEATS);            // 2

  typedef logic [LADDR_W-1:0] line_addr_t;
  typedef logic [BEAT_W-1:0]  beat_t;

  // MOESI coherence state of an L1 line.
  typedef enum logic [2:0] {
    ST_I = 3'd0,  // invalid
    ST_S = 3'd1,  // shared, clean or owned elsewhere
    ST_E = 3'd2,  // exclusive clean
    ST_O = 3'd3,  // owned: dirty, other sharers may exist, this copy answers reads
    ST_M = 3'd4   // modified: dirty, only copy
  } moesi_t;

  // Commands a bus master issues while it holds the crossbar.
  typedef enum logic [1:0] {
    CMD_RD_SHARED = 2'd0,  // read a line for loading
    CMD_RD_UNIQUE = 2'd1,  // read a line for storing, invalidate other copies
    CMD_UPGRADE   = 2'd2,  // invalidate other copies of a line held S or O
    CMD_WRITEBACK = 2'd3   // write a dirty victim line to L2
  } cci_cmd_t;

  // Message NoC -------------------------------------------------------------
  localparam int unsigned FLIT_DATA_W = 32;
  localparam int unsigned COORD_W     = 3;   // enough for the 4x2 cluster mesh

  typedef enum logic [1:0] {
    FL_HEAD   = 2'd0,
    FL_BODY   = 2'd1,
    FL_TAIL   = 2'd2,
    FL_SINGLE = 2'd3   // one-flit packet: head and tail at once
  } flit_kind_t;

  // A head (or single) flit carries the destination in its low data bits:
  // data[COORD_W-1:0] = x, data[2*COORD_W-1:COORD_W] = y.
  typedef struct packed {
    flit_kind_t             kind;
    logic [FLIT_DATA_W-1:0] data;
  } flit_t;

  // Router port numbering.
  localparam int unsigned P_LOCAL = 0;
  localparam int unsigned P_NORTH = 1;  // y + 1
  localparam int unsigned P_SOUTH = 2;  // y - 1
  localparam int unsigned P_EAST  = 3;  // x + 1
  localparam int unsigned P_WEST  = 4;  // x - 1
  localparam int unsigned NPORTS  = 5;

endpackage
