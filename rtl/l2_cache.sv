// l2_cache: shared second-level cache behind the STAR L1 data cache. A
// set-associative, write-back cache that serves L1 fills with a SourceLevel
// tag (2 = found here, 3 = fetched from memory), absorbs L1 write-backs, and
// is the last level that handles forwarded SFill-Inv requests.
//
// How it works. SETS x WAYS lines of 64 B; set = low log2(SETS) bits of the
// line address, tag = the rest. Each way keeps {Valid, Dirty, SpecBit, Tag}.
// A fill read that hits returns the line after LATENCY cycles and, when the
// read is non-speculative, clears the way's SpecBit. A read miss picks a victim
// (an invalid way, else the set's round-robin pointer), writes it back to
// memory if dirty, reads memory and installs the line with the SpecBit of the
// request, returning it with SourceLevel 3. The hierarchy is inclusive:
// before a valid way is replaced, the L2 back-invalidates every L1 copy of
// that line (one cycle); a dirty L1 copy hands back its data, which is newer
// and goes to memory in place of the L2's. A write-back that hits updates the
// line (Dirty=1, SpecBit=0); one that misses is written through to memory. An
// SFill-Inv that finds its line with SpecBit=1 invalidates it (and, for
// inclusion, any L1 copy of another domain); otherwise it is
// dropped. As the last cache level it does not pass SFill-Inv on: memory holds
// no speculative state.
//
// Storage is written as synchronous-read arrays (SRAM-like): one set of
// metadata and one data line are read per access. After reset the valid bits
// are cleared one set per cycle (SETS cycles) before the first request is
// accepted.
//
// Interface. l1_req valid/ready (one request at a time), l1_resp valid only
// (a single-cycle pulse), mem_req valid/ready, mem_resp valid only,
// l1_binv valid for one cycle with the L1's dirty/data answer in that cycle.
//
// Timing. A read hit answers exactly LATENCY cycles after its handshake
// (default 12). A miss answers one cycle after the memory response. One-way
// requests (write-back, SFill-Inv) finish two cycles after the handshake.
// Replacing a valid way adds one back-invalidation cycle to a miss.
//
// Size (2 MB, 16 ways, 2048 sets, 64 B lines, 12 cycles) and the SFill-Inv
// rules follow the evaluated configuration; the replacement policy, the
// non-allocating write-back miss, the SpecBit per L2 line and the reset sweep
// are this design's choices, as is enforcing inclusion by back-invalidation
// (the architecture only states that the hierarchy is inclusive).
module l2_cache
  import star_pkg::*;
#(
  parameter int SETS    = 2048,
  parameter int WAYS    = 16,
  parameter int LATENCY = 12
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      l1_req_valid,
  output logic      l1_req_ready,
  input  l2_req_t   l1_req,
  output logic      l1_resp_valid,
  output l2_resp_t  l1_resp,
  // back-invalidation of L1 copies (inclusion); the L1 answers in the same cycle
  output logic       l1_binv_valid,
  output line_addr_t l1_binv_laddr,
  input  logic       l1_binv_dirty,
  input  line_t      l1_binv_data,
  output logic      mem_req_valid,
  input  logic      mem_req_ready,
  output mem_req_t  mem_req,
  input  logic      mem_resp_valid,
  input  line_t     mem_resp_data,
  // event pulses
  output logic      ev_hit,
  output logic      ev_miss,
  output logic      ev_sfinv_inval
);

  localparam int SET_W = $clog2(SETS);
  localparam int WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int TAG_W = LADDR_W - SET_W;
  localparam int CNT_W = $clog2(LATENCY + 1);

  typedef struct packed {
    logic             valid;
    logic             dirty;
    logic             spec;
    logic [TAG_W-1:0] tag;
  } way_meta_t;

  typedef way_meta_t [WAYS-1:0] set_meta_t;

  typedef enum logic [3:0] {S_INIT, S_IDLE, S_LOOKUP, S_HITWAIT, S_BINV, S_MEMWB, S_MEMRD, S_MEMWAIT,
                            S_WBMISS} state_e;
  state_e state;

  // ---------------- storage ----------------
  set_meta_t        meta_q [SETS];
  logic [WAY_W-1:0] rr_q   [SETS];
  line_t            data_q [SETS*WAYS];

  // ---------------- request registers ----------------
  l2_req_t          req_q;
  set_meta_t        meta_rd;
  logic [WAY_W-1:0] rr_rd;
  line_t            data_rd;
  logic [WAY_W-1:0] way_q;
  logic [CNT_W-1:0] cnt_q;
  logic [SET_W-1:0] init_set;
  logic             wb_dirty_q;   // the way being removed must go to memory

  logic [SET_W-1:0] set_q;
  logic [TAG_W-1:0] tag_q;
  assign set_q = req_q.laddr[SET_W-1:0];
  assign tag_q = req_q.laddr[LADDR_W-1:SET_W];

  // ---------------- tag compare on the read metadata ----------------
  logic             hit;
  logic [WAY_W-1:0] hit_way;
  logic             has_inv;
  logic [WAY_W-1:0] inv_way;
  logic [WAY_W-1:0] vict_way;

  always_comb begin
    hit = 1'b0; hit_way = '0; has_inv = 1'b0; inv_way = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (meta_rd[w].valid && meta_rd[w].tag == tag_q) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
      if (!meta_rd[w].valid) begin
        has_inv = 1'b1; inv_way = WAY_W'(w);
      end
    end
    vict_way = has_inv ? inv_way : rr_rd;
  end

  assign l1_req_ready = (state == S_IDLE);

  // ---------------- write ports ----------------
  logic             meta_we;
  logic [SET_W-1:0] meta_wset;
  set_meta_t        meta_wval;
  logic             data_we;
  logic [SET_W+WAY_W-1:0] data_widx;
  line_t            data_wval;

  always_comb begin
    meta_we   = 1'b0;
    meta_wset = set_q;
    meta_wval = meta_rd;
    data_we   = 1'b0;
    data_widx = {set_q, hit_way};
    data_wval = req_q.data;
    unique case (state)
      S_INIT: begin
        meta_we   = 1'b1;
        meta_wset = init_set;
        meta_wval = '0;
      end
      S_LOOKUP: begin
        unique case (req_q.kind)
          L2_READ: if (hit && !req_q.spec) begin
            meta_we = 1'b1;
            meta_wval[hit_way].spec = 1'b0;
          end
          L2_WB: if (hit) begin
            meta_we = 1'b1;
            meta_wval[hit_way].dirty = 1'b1;
            meta_wval[hit_way].spec  = 1'b0;
            data_we = 1'b1;
          end
          L2_SFINV: if (hit && meta_rd[hit_way].spec) begin
            meta_we = 1'b1;
            meta_wval[hit_way].valid = 1'b0;
          end
          default: ;
        endcase
      end
      S_MEMWAIT: if (mem_resp_valid) begin
        meta_we   = 1'b1;
        meta_wval[way_q] = '{valid: 1'b1, dirty: 1'b0, spec: req_q.spec, tag: tag_q};
        data_we   = 1'b1;
        data_widx = {set_q, way_q};
        data_wval = mem_resp_data;
      end
      default: ;
    endcase
  end

  // round-robin pointer: cleared by the reset sweep, advanced when a valid
  // way is replaced
  logic rr_we;
  assign rr_we = (state == S_INIT) ||
                 (state == S_LOOKUP && req_q.kind == L2_READ && !hit && !has_inv);

  always_ff @(posedge clk) begin
    if (rr_we)   rr_q[meta_wset] <= (state == S_INIT) ? '0 : rr_rd + 1'b1;
    if (meta_we) meta_q[meta_wset] <= meta_wval;
    if (data_we) data_q[data_widx] <= data_wval;
  end

  // synchronous reads: metadata at the handshake, data in the lookup cycle
  always_ff @(posedge clk) begin
    if (l1_req_valid && l1_req_ready) begin
      meta_rd <= meta_q[l1_req.laddr[SET_W-1:0]];
      rr_rd   <= rr_q[l1_req.laddr[SET_W-1:0]];
    end
    if (state == S_LOOKUP)
      data_rd <= data_q[{set_q, hit ? hit_way : vict_way}];
    else if (state == S_BINV && l1_binv_dirty)
      data_rd <= l1_binv_data;                 // the L1 copy is newer
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_INIT;
      init_set      <= '0;
      req_q         <= '0;
      way_q         <= '0;
      wb_dirty_q    <= 1'b0;
      cnt_q         <= '0;
      l1_resp_valid <= 1'b0;
      l1_resp       <= '0;
    end else begin
      l1_resp_valid <= 1'b0;
      if (state != S_IDLE && state != S_INIT) cnt_q <= cnt_q + 1'b1;
      unique case (state)
        S_INIT: begin
          init_set <= init_set + 1'b1;
          if (init_set == SET_W'(SETS - 1)) state <= S_IDLE;
        end
        S_IDLE: if (l1_req_valid) begin
          req_q <= l1_req;
          cnt_q <= CNT_W'(1);
          state <= S_LOOKUP;
        end
        S_LOOKUP: begin
          unique case (req_q.kind)
            L2_READ: begin
              if (hit) begin
                way_q <= hit_way;
                state <= S_HITWAIT;
              end else begin
                way_q      <= vict_way;
                wb_dirty_q <= meta_rd[vict_way].dirty;
                state      <= meta_rd[vict_way].valid ? S_BINV : S_MEMRD;
              end
            end
            L2_WB:   state <= hit ? S_IDLE : S_WBMISS;
            L2_SFINV: begin
              // an invalidated line leaves L1 too, whatever the DomainID
              way_q      <= hit_way;
              wb_dirty_q <= meta_rd[hit_way].dirty;
              state      <= (hit && meta_rd[hit_way].spec) ? S_BINV : S_IDLE;
            end
            default: state <= S_IDLE;
          endcase
        end
        S_BINV: begin
          if (l1_binv_dirty) wb_dirty_q <= 1'b1;
          if (wb_dirty_q || l1_binv_dirty)   state <= S_MEMWB;
          else if (req_q.kind == L2_READ)    state <= S_MEMRD;
          else                               state <= S_IDLE;
        end
        S_HITWAIT: if (cnt_q >= CNT_W'(LATENCY - 1)) begin
          l1_resp_valid <= 1'b1;
          l1_resp       <= '{data: data_rd, src: SRC_L2};
          state         <= S_IDLE;
        end
        S_MEMWB:   if (mem_req_ready) state <= (req_q.kind == L2_READ) ? S_MEMRD : S_IDLE;
        S_MEMRD:   if (mem_req_ready) state <= S_MEMWAIT;
        S_MEMWAIT: if (mem_resp_valid) begin
          l1_resp_valid <= 1'b1;
          l1_resp       <= '{data: mem_resp_data, src: SRC_MEM};
          state         <= S_IDLE;
        end
        S_WBMISS:  if (mem_req_ready) state <= S_IDLE;
        default:   state <= S_IDLE;
      endcase
    end
  end

  // ---------------- memory request ----------------
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    unique case (state)
      S_MEMWB: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.laddr = {meta_rd[way_q].tag, set_q};
        mem_req.data  = data_rd;
      end
      S_MEMRD: begin
        mem_req_valid = 1'b1;
        mem_req.laddr = req_q.laddr;
      end
      S_WBMISS: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.laddr = req_q.laddr;
        mem_req.data  = req_q.data;
      end
      default: ;
    endcase
  end

  assign l1_binv_valid = (state == S_BINV);
  assign l1_binv_laddr = {meta_rd[way_q].tag, set_q};

  assign ev_hit         = (state == S_LOOKUP) && (req_q.kind == L2_READ) && hit;
  assign ev_miss        = (state == S_LOOKUP) && (req_q.kind == L2_READ) && !hit;
  assign ev_sfinv_inval = (state == S_LOOKUP) && (req_q.kind == L2_SFINV) && hit && meta_rd[hit_way].spec;

  // the request must stay stable while it waits for ready
  a_l1_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    l1_req_valid && !l1_req_ready |=> l1_req_valid && $stable(l1_req));

endmodule
