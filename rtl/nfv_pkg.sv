// nfv_pkg: shared constants and types of the compressed NUCA last-level cache.
//
// Sizes follow the evaluated system: 64-byte lines, 32 frequent values coded
// as one-hot 32-bit (1-LWC) codewords, a 128-wire TSV link per tile, 64 banks
// of 128 KB behind 16 cache controllers (4 banks each), 12-bit statistics
// counters. The packet format (head flit layout) and the 32-bit physical
// address are choices of this implementation.
package nfv_pkg;

  localparam int LINE_BITS    = 512;   // 64-byte cache line
  localparam int FLIT_BITS    = 128;   // TSV wires per tile / flit width
  localparam int CW_BITS      = 32;    // 1-LWC codeword
  localparam int NUM_FV       = 32;    // frequent values in the table
  localparam int FV_IDX_W     = $clog2(NUM_FV);
  localparam int ADDR_W       = 32;
  localparam int OFFSET_W     = 6;     // byte offset inside a line
  localparam int NUM_BANKS    = 64;
  localparam int BANK_W       = $clog2(NUM_BANKS);
  localparam int BANKS_PER_CC = 4;
  localparam int NUM_CC       = NUM_BANKS / BANKS_PER_CC;
  localparam int TILE_W       = $clog2(NUM_CC);
  localparam int CNT_W        = 12;
  localparam int RAW_FLITS    = LINE_BITS / FLIT_BITS;  // 4 payload flits

  // Which compression the cache uses: zero lines (NIZCache) or frequent values (NFVCache).
  typedef enum logic {SCHEME_NIZ = 1'b0, SCHEME_NFV = 1'b1} scheme_e;

  typedef enum logic [1:0] {
    CMD_RD   = 2'd0,   // read a line
    CMD_WR   = 2'd1,   // write a dirty line (L1 write-back)
    CMD_FILL = 2'd2,   // install a clean line from memory
    CMD_RSP  = 2'd3    // read response from the cache layer
  } cmd_e;

  // Head flit contents (low bits of the flit).
  typedef struct packed {
    cmd_e              cmd;
    logic              cmp;     // FV bit / zero bit: payload is a codeword (or absent for a zero line)
    logic              hit;     // responses only
    logic [TILE_W-1:0] src;     // requesting tile
    logic [ADDR_W-1:0] addr;
  } hdr_t;

  typedef struct packed {
    logic                 valid;
    logic                 head;
    logic                 last;
    logic [FLIT_BITS-1:0] data;
  } flit_t;

  // A whole packet after deserialisation.
  typedef struct packed {
    hdr_t                 hdr;
    logic [LINE_BITS-1:0] data;   // codeword in [CW_BITS-1:0] when hdr.cmp
  } pkt_t;

  // Bank request and response.
  typedef struct packed {
    logic                 valid;
    cmd_e                 cmd;
    logic                 cmp;
    logic [TILE_W-1:0]    src;
    logic [ADDR_W-1:0]    addr;
    logic [LINE_BITS-1:0] data;
  } bank_req_t;

  typedef struct packed {
    logic                 valid;
    logic                 hit;
    logic                 cmp;
    logic [TILE_W-1:0]    src;
    logic [ADDR_W-1:0]    addr;
    logic [LINE_BITS-1:0] data;
  } bank_rsp_t;

  // One-cycle event pulses that feed the per-bank counters.
  typedef struct packed {
    logic access;    // C_A
    logic cmp_hit;   // C_C (C_Z in NIZCache, C_F in NFVCache)
    logic invalid;   // C_I
  } bank_ev_t;

  // Line leaving a bank: write-back of dirty data or migration before power-off.
  typedef struct packed {
    logic                 valid;
    logic                 dirty;
    logic                 migrate;
    logic                 cmp;
    logic [ADDR_W-1:0]    addr;
    logic [LINE_BITS-1:0] data;
  } evict_t;

  // Core-side request and response of a network interface.
  typedef struct packed {
    logic                 valid;
    cmd_e                 cmd;
    logic [ADDR_W-1:0]    addr;
    logic [LINE_BITS-1:0] data;
  } core_req_t;

  typedef struct packed {
    logic                 valid;
    logic                 hit;
    logic                 cmp;
    logic [ADDR_W-1:0]    addr;
    logic [LINE_BITS-1:0] data;
  } core_rsp_t;

  typedef struct packed {
    logic                 valid;
    logic [FV_IDX_W-1:0]  idx;
    logic [LINE_BITS-1:0] value;
  } fv_load_t;

  // Global bank number of an address (line-interleaved across the 64 banks).
  function automatic logic [BANK_W-1:0] bank_of(logic [ADDR_W-1:0] a);
    return a[OFFSET_W +: BANK_W];
  endfunction

  // Payload flits following the head flit. A raw line takes all 128 wires for
  // RAW_FLITS flits; an FV codeword takes one flit on wires [31:0] only (the
  // other 96 wires stay at 0); a zero line (NIZCache) or a read request or a
  // miss carries no payload.
  function automatic int unsigned payload_flits(hdr_t h, scheme_e scheme);
    if (h.cmd == CMD_RD) return 0;
    if (h.cmd == CMD_RSP && !h.hit) return 0;
    if (h.cmp) return (scheme == SCHEME_NFV) ? 1 : 0;
    return RAW_FLITS;
  endfunction

endpackage
