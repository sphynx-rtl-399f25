// sphynx_pkg: constants and types shared by the shared instruction cache design.
//
// The cache geometry is the paper's, the Fermi (GTX580) L1 instruction cache: 128-byte lines, 4 sets, 4 ways (2 KiB of instruction data).
// The line size is a package constant because it sets the width of the refill
// bus; sets and ways are module parameters of the cache. The 32-bit byte address
// and the 64-bit instruction word (the Fermi instruction size) are this design's
// choices. A processor fetches one aligned 64-bit instruction per request.
package sphynx_pkg;

  localparam int unsigned ADDR_W     = 32;               // byte address width
  localparam int unsigned INST_W     = 64;               // one instruction word
  localparam int unsigned LINE_BYTES = 128;              // cache block size
  localparam int unsigned LINE_W     = LINE_BYTES * 8;   // refill bus width (1024)
  localparam int unsigned WORDS      = LINE_W / INST_W;  // instructions per line (16)
  localparam int unsigned OFF_W      = $clog2(LINE_BYTES);
  localparam int unsigned WSEL_W     = $clog2(WORDS);
  localparam int unsigned WOFF_W     = $clog2(INST_W / 8); // byte offset inside a word
  localparam int unsigned CNT_W      = 32;               // event counter width

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [INST_W-1:0] inst_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [CNT_W-1:0]  cnt_t;

  // Fetch request from one processor: held until granted.
  typedef struct packed {
    logic  valid;
    addr_t addr;
  } fetch_req_t;

  // Fetch response to one processor: a one-cycle pulse with the instruction.
  typedef struct packed {
    logic  valid;
    inst_t inst;
  } fetch_rsp_t;

  // Event counters of one shared cache.
  typedef struct packed {
    cnt_t accesses;  // lookups performed (hits + misses)
    cnt_t hits;
    cnt_t misses;
    cnt_t stalls;    // fetch attempts refused for one cycle
  } perf_t;

  // Index width that stays legal for a count of one.
  function automatic int unsigned idx_w(input int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage
