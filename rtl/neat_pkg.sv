// neat_pkg: types and constants shared by the Neat coherence blocks.
//
// Neat keeps private caches coherent without a directory: a private cache
// self-invalidates at an acquire and writes back its dirty bytes at a release.
// This package defines the line states (I, V and the partially invalid PI
// state), the messages exchanged between a private cache and the shared
// last-level cache (GetLine, Data, write-back, PutAck, PutAllAck, GetWrSig and
// the write-signature reply), the core-side request format, and the two hash
// functions of the Bloom-filter write signature.
//
// Line size (64 B) and the 1008-bit write signature follow the paper. The
// address width, count width, core-id width, the number of Bloom hashes (two)
// and their formulas are this design's own choices. The data-less
// "write-back with CNT" that closes a bulk commit or self-invalidation is a
// message type of its own (MSG_WB_DONE) so that totals of 0 and 1 cannot be
// mistaken for an eviction write-back.
package neat_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int ADDR_W     = 32;                 // byte address width
  localparam int LINE_BYTES = 64;                 // line size
  localparam int LINE_BITS  = LINE_BYTES * 8;
  localparam int OFF_W      = $clog2(LINE_BYTES);
  localparam int LADDR_W    = ADDR_W - OFF_W;     // line address width
  localparam int WORD_BYTES = 8;                  // core access granule
  localparam int WORD_W     = $clog2(LINE_BYTES / WORD_BYTES);
  localparam int CORE_W     = 8;                  // up to 256 cores
  localparam int CNT_W      = 16;                 // CNT field of write-backs
  localparam int SIG_BITS   = 1008;               // write signature size
  localparam int SIG_IDX_W  = $clog2(SIG_BITS);

  typedef logic [LADDR_W-1:0]   laddr_t;
  typedef logic [LINE_BITS-1:0] line_t;
  typedef logic [LINE_BYTES-1:0] wbits_t;
  typedef logic [SIG_BITS-1:0]  sig_t;
  typedef logic [CORE_W-1:0]    core_id_t;
  typedef logic [CNT_W-1:0]     cnt_t;

  // ---------------------------------------------------------- private cache
  // Per-line state of a private cache line.
  typedef enum logic [1:0] {
    LS_I  = 2'd0,   // invalid
    LS_V  = 2'd1,   // valid
    LS_PI = 2'd2    // partially invalid: clean bytes may be stale
  } line_state_e;

  // Core-wide state of a private cache controller.
  typedef enum logic [1:0] {
    CS_NE = 2'd0,   // normal execution
    CS_SI = 2'd1,   // self-invalidation (at an acquire)
    CS_CM = 2'd2    // commit (at a release)
  } core_state_e;

  // ------------------------------------------------------------- core side
  typedef enum logic [1:0] {
    OP_LOAD    = 2'd0,
    OP_STORE   = 2'd1,
    OP_ACQUIRE = 2'd2,
    OP_RELEASE = 2'd3
  } core_op_e;

  typedef struct packed {
    core_op_e                  op;
    logic [ADDR_W-1:0]         addr;   // byte address, 8-byte aligned word
    logic [WORD_BYTES*8-1:0]   wdata;
    logic [WORD_BYTES-1:0]     be;     // byte enables within the word
  } core_req_t;

  // ------------------------------------------------- private cache -> LLC
  typedef enum logic [1:0] {
    MSG_GETLINE  = 2'd0,  // read miss / write miss
    MSG_WB       = 2'd1,  // write-back of dirty bytes: data + Wbs + CNT
    MSG_WB_DONE  = 2'd2,  // data-less write-back carrying CNT = total count
    MSG_GETWRSIG = 2'd3   // fetch and clear own write signature
  } req_type_e;

  typedef struct packed {
    req_type_e typ;
    core_id_t  src;
    laddr_t    laddr;
    cnt_t      cnt;     // MSG_WB: 1 = eviction, 0 = bulk; MSG_WB_DONE: total
    wbits_t    wbs;     // write bits: which bytes of data are dirty
    line_t     data;
  } req_msg_t;

  // ------------------------------------------------- LLC -> private cache
  typedef enum logic [1:0] {
    RSP_DATA      = 2'd0,
    RSP_PUTACK    = 2'd1,
    RSP_PUTALLACK = 2'd2,
    RSP_WRSIG     = 2'd3
  } rsp_type_e;

  typedef struct packed {
    rsp_type_e typ;
    core_id_t  dst;
    laddr_t    laddr;
    line_t     data;
    sig_t      sig;
  } rsp_msg_t;

  // --------------------------------------------------- Bloom write signature
  // Two hash functions of the line address, each reduced modulo SIG_BITS.
  function automatic logic [SIG_IDX_W-1:0] sig_hash0(input laddr_t la);
    logic [LADDR_W-1:0] h;
    h = la;
    return SIG_IDX_W'(h % LADDR_W'(SIG_BITS));
  endfunction

  function automatic logic [SIG_IDX_W-1:0] sig_hash1(input laddr_t la);
    logic [LADDR_W-1:0] r;
    for (int i = 0; i < LADDR_W; i++) r[i] = la[LADDR_W-1-i];  // bit reverse
    r = r ^ (la >> 7) ^ (la << 3);
    return SIG_IDX_W'(r % LADDR_W'(SIG_BITS));
  endfunction

  // Membership test: may the line have been written by another core?
  function automatic logic sig_test(input sig_t s, input laddr_t la);
    return s[sig_hash0(la)] & s[sig_hash1(la)];
  endfunction

  // Byte mask, within a line, of a word access.
  function automatic wbits_t word_mask(input logic [WORD_W-1:0] w,
                                       input logic [WORD_BYTES-1:0] be);
    return wbits_t'(be) << (w * WORD_BYTES);
  endfunction

endpackage
