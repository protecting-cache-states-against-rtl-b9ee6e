// star_pkg: widths, encodings and request/response structs shared by the STAR
// cache subsystem (SFill-Inv unit, STAR-FARR / STAR-NEWS L1 data cache, L2).
//
// Widths follow the address layout of the design: a 48-bit physical address,
// 64-byte lines (6 offset bits, so a 42-bit line address), a 6-bit DomainID
// and a 1-bit SpecBit carried with every load. SourceLevel is the level that
// supplied a load's data (1 = L1 hit, 2 = L2 hit, 3 = memory). The 64-bit
// load/store word size, the 32-entry load-queue tag and the request kinds on
// the L1-to-L2 channel are choices of this implementation.
package star_pkg;

  localparam int ADDR_W     = 48;              // physical address bits
  localparam int OFFS_W     = 6;               // byte selection within a 64 B line
  localparam int LINE_BYTES = 64;
  localparam int LINE_W     = LINE_BYTES * 8;  // 512 data bits per line
  localparam int LADDR_W    = ADDR_W - OFFS_W; // 42-bit line address
  localparam int DOM_W      = 6;               // DomainID bits
  localparam int WORD_W     = 64;              // load/store data word
  localparam int WSTRB_W    = WORD_W / 8;
  localparam int LQ_ENTRIES = 32;              // load queue entries of the core
  localparam int LQ_ID_W    = $clog2(LQ_ENTRIES);

  typedef logic [LADDR_W-1:0] line_addr_t;
  typedef logic [DOM_W-1:0]   domain_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [WORD_W-1:0]  word_t;

  // SourceLevel: where a load found its data.
  typedef enum logic [1:0] {
    SRC_NONE = 2'd0,
    SRC_L1   = 2'd1,
    SRC_L2   = 2'd2,
    SRC_MEM  = 2'd3
  } src_level_e;

  // Load or store from the core to the L1 data cache.
  typedef struct packed {
    logic                is_store; // stores are issued only once non-speculative
    logic                spec;     // SpecBit of the load
    domain_t             domain;   // DomainID of the issuing security domain
    logic [ADDR_W-1:0]   addr;
    word_t               wdata;
    logic [WSTRB_W-1:0]  wstrb;
    logic [LQ_ID_W-1:0]  id;       // load-queue entry, echoed in the response
  } core_req_t;

  typedef struct packed {
    word_t               data;
    src_level_e          src;      // SourceLevel returned with the data
    logic                is_store;
    logic [LQ_ID_W-1:0]  id;
  } core_resp_t;

  // SFill-Inv: one-way invalidation of a line fetched by a squashed load.
  typedef struct packed {
    logic [ADDR_W-1:0]   addr;
    domain_t             domain;
    src_level_e          src;      // SourceLevel the squashed load had received
  } sfinv_req_t;

  // L1 -> L2 channel.
  typedef enum logic [1:0] {
    L2_READ  = 2'd0,   // line fill, answered on the response channel
    L2_WB    = 2'd1,   // dirty line write-back, no response
    L2_SFINV = 2'd2    // forwarded SFill-Inv, no response
  } l2_kind_e;

  typedef struct packed {
    l2_kind_e    kind;
    line_addr_t  laddr;
    domain_t     domain;  // carried by miss and write-back buffers
    logic        spec;
    src_level_e  src;     // SFill-Inv only
    line_t       data;    // write-back only
  } l2_req_t;

  typedef struct packed {
    line_t       data;
    src_level_e  src;     // SRC_L2 or SRC_MEM
  } l2_resp_t;

  // L2 -> memory channel.
  typedef struct packed {
    logic        we;
    line_addr_t  laddr;
    line_t       data;
  } mem_req_t;

  // Single-cycle event pulses of an L1 cache, for performance counting.
  typedef struct packed {
    logic hit;           // load or store hit (FARR) / mapping hit and tag hit (NEWS)
    logic miss;          // any miss that goes to L2
    logic map_miss;      // NEWS: mapping miss
    logic tag_miss;      // NEWS: mapping hit but tag miss
    logic fwd_nofill;    // NEWS: speculative tag miss, ForwardNoFill + random eviction
    logic spec_clear;    // a non-speculative access cleared a line's SpecBit
    logic writeback;     // a dirty line was written back
    logic sfinv_inval;   // SFill-Inv invalidated a speculative line
    logic sfinv_drop;    // SFill-Inv found a non-speculative line and was dropped
    logic sfinv_fwd;     // SFill-Inv forwarded to L2
    logic back_inval;    // L2 eviction invalidated L1 copies (inclusion)
  } l1_events_t;

  // Byte-masked merge of a 64-bit store word into a line.
  // offs is address bits [5:3], the word within the line; bytes inside the
  // word are selected by wstrb.
  function automatic line_t merge_word(line_t line, logic [OFFS_W-1:3] offs,
                                       word_t wdata, logic [WSTRB_W-1:0] wstrb);
    line_t r = line;
    int unsigned w = 32'(offs);
    for (int b = 0; b < WSTRB_W; b++)
      if (wstrb[b]) r[w*WORD_W + b*8 +: 8] = wdata[b*8 +: 8];
    return r;
  endfunction

  function automatic word_t select_word(line_t line, logic [OFFS_W-1:3] offs);
    return line[32'(offs)*WORD_W +: WORD_W];
  endfunction

endpackage
