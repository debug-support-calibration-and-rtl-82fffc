// Shared types and constants of the multi-core debug (trace, trigger, break)
// and emulation-memory subsystem.
//
// A core's activity is turned by its adaptation logic into two generic
// observation records, one for retired instructions (prog_obs_t) and one for
// data accesses (data_obs_t). Each carries the cycle time stamp of the event.
// The reconstruction stages turn observations into trace messages
// (trace_msg_t), which are buffered, merged in time-stamp order and finally
// written to the trace part of the emulation RAM as four 32-bit words.
// Widths (32-bit addresses, data and time stamps) are this design's choice;
// the structure (adaptation, program/data reconstruction, message FIFOs,
// message sorter, cross trigger, break switch, 16-range overlay map, 512 KB
// emulation RAM in 64 KB blocks) follows the published architecture.
package mcds_pkg;
  parameter int unsigned ADDR_W = 32;
  parameter int unsigned DATA_W = 32;
  parameter int unsigned TS_W   = 32;
  parameter int unsigned SRC_W  = 2;
  parameter int unsigned MST_W  = 4;   // bus master number in bus trace
  parameter int unsigned NCMP   = 2;   // comparators per reconstruction path
  parameter int unsigned NCORE  = 2;   // cores with a trace unit (Core A, B)
  parameter int unsigned NXT    = 2*NCMP + 1; // trigger lines per core into
                                       // the cross trigger: unit + 1 pin
  parameter int unsigned NEXT   = 2;   // external trigger pins / outputs
  parameter int unsigned NSUSP  = 4;   // suspend outputs (peripherals)
  parameter int unsigned NBSRC  = NCORE + 1 + NEXT; // break switch sources
  parameter int unsigned NTSRC  = NCORE + 1;   // trace sources: cores + bus

  // Message kinds. MSG_PROG: program-flow discontinuity; MSG_RD / MSG_WR:
  // qualified data read / write.
  typedef enum logic [1:0] {
    MSG_PROG = 2'd0,
    MSG_RD   = 2'd1,
    MSG_WR   = 2'd2,
    MSG_RSVD = 2'd3
  } msg_kind_e;

  typedef struct packed {
    logic [TS_W-1:0]   ts;     // cycle of the event
    logic [SRC_W-1:0]  src;    // trace unit that produced it
    msg_kind_e         kind;
    logic [MST_W-1:0]  mst;    // bus master (bus trace), 0 for cores
    logic [ADDR_W-1:0] addr;   // branch target or data address
    logic [DATA_W-1:0] data;   // sequential count or data value
  } trace_msg_t;

  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] pc;
    logic [2:0]        len;    // instruction length in bytes
    logic [TS_W-1:0]   ts;
  } prog_obs_t;

  typedef struct packed {
    logic              valid;
    logic              write;
    logic [MST_W-1:0]  mst;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] data;
    logic [TS_W-1:0]   ts;
  } data_obs_t;

  // Inclusive address range comparator.
  typedef struct packed {
    logic              en;
    logic [ADDR_W-1:0] lo;
    logic [ADDR_W-1:0] hi;
  } range_cmp_t;

  typedef struct packed {
    logic                  trace_en;   // generate program messages
    range_cmp_t [NCMP-1:0] cmp;        // PC trigger comparators
  } prog_cfg_t;

  typedef struct packed {
    logic                  trace_en;   // generate data messages
    logic                  qualify;    // only trace accesses hitting cmp[0]
    logic                  val_en;     // cmp[1] also requires the data match
    logic [DATA_W-1:0]     value;
    logic [DATA_W-1:0]     vmask;
    range_cmp_t [NCMP-1:0] cmp;        // data address trigger comparators
  } data_cfg_t;

  typedef struct packed {
    logic      gate;                   // messages only while cross-trigger Enable
    prog_cfg_t prog;
    data_cfg_t data;
  } unit_cfg_t;

  // Emulation RAM: 512 KB in eight 64 KB blocks, 32-bit words.
  parameter int unsigned EMEM_BYTES = 512*1024;
  parameter int unsigned BLK_BYTES  = 64*1024;
  parameter int unsigned NBLK       = EMEM_BYTES / BLK_BYTES;
  parameter int unsigned EMEM_AW    = $clog2(EMEM_BYTES);  // byte address
  parameter int unsigned EMEM_WAW   = EMEM_AW - 2;         // word address

  // Overlay address map: 16 ranges of 1 KB to 32 KB.
  parameter int unsigned NRANGE     = 16;
  parameter int unsigned MIN_BLK    = 1024;
  parameter int unsigned MAX_BLK    = 32*1024;
  parameter int unsigned NSIZE      = $clog2(MAX_BLK/MIN_BLK) + 1; // 6 sizes

  typedef struct packed {
    logic               en;
    logic [2:0]         size;   // block size MIN_BLK << size (0..5)
    logic [ADDR_W-1:0]  base;   // flash address, aligned to the size
    logic [EMEM_AW-1:0] offs;   // emulation RAM byte offset, page 0
  } ovl_range_t;

  typedef struct packed {
    ovl_range_t [NRANGE-1:0] rng;
    logic                    page;         // 0: page 0, 1: page 1
    logic [EMEM_AW-1:0]      page_stride;  // page 1 = page 0 + stride
    logic [3:0]              ws;           // flash wait states to mimic
  } ovl_cfg_t;

  // Trace buffer in the trace blocks of the emulation RAM.
  typedef struct packed {
    logic [EMEM_WAW-1:0] base;     // first word
    logic [EMEM_WAW-1:0] limit;    // one past the last word
    logic [15:0]         post;     // messages kept after the trigger
  } trc_cfg_t;

  // Cross trigger configuration of one core: the AND term takes the lines set
  // in and_mask (bit NXT is the fed-back complex trigger), the OR combines
  // the AND term with the lines set in or_mask.
  typedef struct packed {
    logic           latch;             // Enable stays set once the OR fired
    logic [NXT:0]   and_mask;
    logic [NXT:0]   or_mask;
  } xcore_cfg_t;

  typedef struct packed {
    xcore_cfg_t [NCORE-1:0] core;
    logic [NCORE-1:0]       c_and_mask;  // cores in the central AND
    logic [NCORE-1:0]       c_or_mask;   // cores straight into the central OR
    logic                   and2or;      // central AND into the OR
    logic                   cnt2or;      // counter into the OR
    logic [15:0]            cnt_limit;   // counter fires at this count, 0 off
  } xtrig_cfg_t;

  // Break and suspend switch: for every source the targets it reaches.
  typedef struct packed {
    logic [NCORE-1:0] halt;
    logic [NSUSP-1:0] susp;
    logic [NEXT-1:0]  ext;
  } brk_route_t;

  function automatic logic in_range(range_cmp_t c, logic [ADDR_W-1:0] a);
    return c.en && (a >= c.lo) && (a <= c.hi);
  endfunction
endpackage
