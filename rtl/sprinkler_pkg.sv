// Shared types and fixed widths of the Sprinkler NVMHC scheduler.
//
// The scheduler works on three kinds of record: an I/O request (the host's
// tag: start logical page, length in pages, read/write, force-unit-access),
// a memory request (one flash page of an I/O, identified by tag and index,
// with its flash-internal location once the FTL has translated it) and a
// group (up to one memory request per die/plane of a chip, the unit that
// becomes one flash transaction).
//
// Flash geometry follows the evaluated configuration: two dies per chip,
// 8,192 blocks per die, 128 pages per block, 2 KB pages. The paper says
// "each flash chip employs two dies and four planes"; this design reads that
// as four planes per chip, two per die, which also matches the two-die,
// two-plane chip drawn in the timing example and the "4x" of full die
// interleaving plus plane sharing. DIES and PLANES are therefore fixed at 2.
// Widths are sized for the largest configuration (1024 chips, a 256-entry
// queue, 64 memory requests per I/O from the eight-byte bitmap).
package sprinkler_pkg;

  localparam int unsigned TAG_W   = 8;   // up to 256 queue entries
  localparam int unsigned IDX_W   = 6;   // 64 memory requests per I/O
  localparam int unsigned LEN_W   = 7;   // I/O length 1..64 pages
  localparam int unsigned CHIP_W  = 10;  // up to 1024 chips
  localparam int unsigned LPN_W   = 32;  // logical page number
  localparam int unsigned BLOCK_W = 13;  // 8,192 blocks per die
  localparam int unsigned PAGE_W  = 7;   // 128 pages per block
  localparam int unsigned DIES    = 2;
  localparam int unsigned PLANES  = 2;   // per die
  localparam int unsigned GROUP   = DIES * PLANES;
  localparam int unsigned MAX_MREQ = 64; // bits of the per-entry bitmap

  // Host I/O request as carried by a queue tag.
  typedef struct packed {
    logic [LPN_W-1:0] lpn;   // first logical page
    logic [LEN_W-1:0] len;   // number of pages, 1..MAX_MREQ
    logic             wr;    // 1: write, 0: read
    logic             fua;   // force unit access: no reordering
  } io_req_t;

  // Location inside a chip.
  typedef struct packed {
    logic               die;
    logic               plane;
    logic [BLOCK_W-1:0] block;
    logic [PAGE_W-1:0]  page;
  } loc_t;

  // Physical location returned by the FTL.
  typedef struct packed {
    logic [CHIP_W-1:0] chip;
    loc_t              loc;
  } phys_t;

  // One memory request (one flash page of an I/O request).
  typedef struct packed {
    logic [TAG_W-1:0] tag;
    logic [IDX_W-1:0] idx;
    logic [LPN_W-1:0] lpn;
    logic             wr;
    loc_t             loc;
  } mreq_t;

  // Up to GROUP memory requests of one chip, member g at die g/2, plane g%2.
  typedef struct packed {
    logic  [GROUP-1:0] vld;
    mreq_t [GROUP-1:0] m;
  } group_t;

  // Flash-level parallelism of a transaction: {die interleaving, plane sharing}.
  typedef enum logic [1:0] {
    PAL_NON = 2'd0,  // single memory request
    PAL_1   = 2'd1,  // plane sharing only
    PAL_2   = 2'd2,  // die interleaving only
    PAL_3   = 2'd3   // die interleaving with plane sharing
  } pal_e;

  function automatic int unsigned grp_pos(input logic die, input logic plane);
    return int'(die) * PLANES + int'(plane);
  endfunction

endpackage
