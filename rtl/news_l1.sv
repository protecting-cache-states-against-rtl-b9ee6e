// news_l1: STAR-NEWS L1 data cache -- a NewCache-style dynamic-remapping cache
// made speculation aware, with DomainID-tagged mappings and SFill-Inv handling.
//
// How it works. The line address is split into Tag' (upper LADDR_W-IDX_W bits)
// and an Index of IDX_W = log2(LINES) + K_EXTRA bits, so the index space is
// 2^K_EXTRA times larger than the physical cache (a "logical" cache). Each
// physical line has a mapping entry {DomainID, Index}, a tag entry {Valid,
// Dirty, SpecBit, Tag'} and a 64-byte data block. A request first searches the
// mapping array in parallel for a valid line with its DomainID and Index; only
// that one line's Tag' is then compared. Three outcomes:
//   1) mapping hit, tag hit: return the word; a non-speculative access clears
//      the line's SpecBit.
//   2) mapping hit C, tag miss: the line R is fetched from L2. A
//      non-speculative request replaces C by R (SpecBit 0). A speculative load
//      must not disturb C (that would reveal its Index to a same-domain
//      observer): R's data is forwarded without being cached (ForwardNoFill)
//      and a randomly chosen line V is evicted, so the visible effect equals
//      that of a mapping miss.
//   3) mapping miss: a random line V is replaced by R, which takes the
//      request's DomainID, Index and SpecBit.
// SFill-Inv looks up {DomainID, Index, Tag'}: a found speculative line is
// invalidated, a found non-speculative one is kept and the request dropped;
// the request goes on to L2 if its SourceLevel is above 1 and the line was
// not found or was invalidated.
//
// Interface: identical to farr_l1 (core_req/core_resp, sfinv, l2_req/l2_resp,
// binv back-invalidation from the inclusive L2, event pulses). Timing: blocking, one outstanding miss; hits answer
// HIT_LATENCY (default 1) cycles after the handshake and can issue every
// cycle; misses answer one cycle after the L2 response. A dirty victim (C or V)
// is written back before the fill request; on the ForwardNoFill path V is
// evicted before R is fetched, a reordering that does not change what
// remains in the cache.
//
// Sizes (512 lines, K_EXTRA = 4 giving a 13-bit Index and 29-bit Tag', 6-bit
// DomainID, 1-cycle latency) and the three-way policy follow the architecture;
// requiring Valid for a mapping hit, the blocking organisation, the word
// interface and the back-invalidation port are this design's choices.
module news_l1
  import star_pkg::*;
#(
  parameter int          LINES       = 512,
  parameter int          K_EXTRA     = 4,
  parameter int          HIT_LATENCY = 1,
  parameter logic [31:0] SEED        = 32'h1234_5679
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        core_req_valid,
  output logic        core_req_ready,
  input  core_req_t   core_req,
  output logic        core_resp_valid,
  output core_resp_t  core_resp,
  input  logic        sfinv_valid,
  output logic        sfinv_ready,
  input  sfinv_req_t  sfinv_req,
  output logic        l2_req_valid,
  input  logic        l2_req_ready,
  output l2_req_t     l2_req,
  input  logic        l2_resp_valid,
  input  l2_resp_t    l2_resp,
  // back-invalidation from L2 (inclusion): answered in the same cycle
  input  logic        binv_valid,
  input  line_addr_t  binv_laddr,
  output logic        binv_dirty,
  output line_t       binv_data,
  // event pulses
  output l1_events_t  ev
);

  localparam int LIDX_W = $clog2(LINES);        // physical line number
  localparam int IDX_W  = LIDX_W + K_EXTRA;     // Index field
  localparam int TAGP_W = LADDR_W - IDX_W;      // Tag' field

  typedef logic [IDX_W-1:0]  index_t;
  typedef logic [TAGP_W-1:0] tagp_t;

  typedef enum logic [2:0] {S_IDLE, S_WB, S_FETCH, S_WAIT, S_SFWD} state_e;
  state_e state;

  // ---------------- mapping, tag and data arrays ----------------
  domain_t           map_dom_q [LINES];
  index_t            map_idx_q [LINES];
  logic [LINES-1:0]  valid_q, dirty_q, spec_q;
  tagp_t             tagp_q    [LINES];
  line_t             data_q    [LINES];

  // ---------------- miss register ----------------
  core_req_t          mreq_q;
  logic               nofill_q;   // ForwardNoFill in progress
  logic [LIDX_W-1:0]  victim_q;
  sfinv_req_t         sfreq_q;

  logic [LIDX_W-1:0] rnd_line;
  random_line #(.LINE_IDX_W(LIDX_W), .SEED(SEED)) u_rand (
    .clk(clk), .rst_n(rst_n), .line(rnd_line));

  // ---------------- lookup ----------------
  logic              take_sf, take_core;
  line_addr_t        lk_laddr;
  domain_t           lk_dom;
  index_t            lk_idx;
  tagp_t             lk_tagp;
  logic [LINES-1:0]  mmatch;
  logic              map_hit, tag_hit;
  logic [LIDX_W-1:0] c_idx;

  assign sfinv_ready    = (state == S_IDLE) && !binv_valid;
  assign core_req_ready = (state == S_IDLE) && !sfinv_valid && !binv_valid;
  assign take_sf        = sfinv_valid && sfinv_ready;
  assign take_core      = core_req_valid && core_req_ready;

  assign lk_laddr = sfinv_valid ? sfinv_req.addr[ADDR_W-1:OFFS_W] : core_req.addr[ADDR_W-1:OFFS_W];
  assign lk_dom   = sfinv_valid ? sfinv_req.domain : core_req.domain;
  assign lk_idx   = lk_laddr[IDX_W-1:0];
  assign lk_tagp  = lk_laddr[LADDR_W-1:IDX_W];

  always_comb begin
    c_idx = '0;
    for (int i = 0; i < LINES; i++) begin
      mmatch[i] = valid_q[i] && (map_dom_q[i] == lk_dom) && (map_idx_q[i] == lk_idx);
      if (mmatch[i]) c_idx = LIDX_W'(i);
    end
    map_hit = |mmatch;
    tag_hit = map_hit && (tagp_q[c_idx] == lk_tagp);
  end

  // non-speculative requests (all stores) may replace C on a tag miss
  logic core_nonspec;
  assign core_nonspec = !core_req.spec || core_req.is_store;

  // ---------------- data array write port ----------------
  logic              data_we;
  logic [LIDX_W-1:0] data_widx;
  line_t             data_wval;
  line_t             fill_line;

  assign fill_line = mreq_q.is_store
                   ? merge_word(l2_resp.data, mreq_q.addr[OFFS_W-1:3], mreq_q.wdata, mreq_q.wstrb)
                   : l2_resp.data;

  always_comb begin
    data_we   = 1'b0;
    data_widx = c_idx;
    data_wval = merge_word(data_q[c_idx], core_req.addr[OFFS_W-1:3], core_req.wdata, core_req.wstrb);
    if (take_core && tag_hit && core_req.is_store) begin
      data_we = 1'b1;
    end else if (state == S_WAIT && l2_resp_valid && !nofill_q) begin
      data_we   = 1'b1;
      data_widx = victim_q;
      data_wval = fill_line;
    end
  end

  always_ff @(posedge clk) begin
    if (data_we) data_q[data_widx] <= data_wval;
  end

  // ---------------- response pipeline ----------------
  logic       pipe_v [HIT_LATENCY];
  core_resp_t pipe_r [HIT_LATENCY];
  core_resp_t hit_resp, fill_resp;

  assign hit_resp  = '{data: select_word(data_q[c_idx], core_req.addr[OFFS_W-1:3]),
                       src: SRC_L1, is_store: core_req.is_store, id: core_req.id};
  assign fill_resp = '{data: select_word(fill_line, mreq_q.addr[OFFS_W-1:3]),
                       src: l2_resp.src, is_store: mreq_q.is_store, id: mreq_q.id};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < HIT_LATENCY; s++) begin
        pipe_v[s] <= 1'b0;
        pipe_r[s] <= '0;
      end
    end else begin
      for (int s = HIT_LATENCY - 1; s > 0; s--) begin
        pipe_v[s] <= pipe_v[s-1];
        pipe_r[s] <= pipe_r[s-1];
      end
      pipe_v[0] <= take_core && tag_hit;
      pipe_r[0] <= hit_resp;
      if (state == S_WAIT && l2_resp_valid) begin
        pipe_v[HIT_LATENCY-1] <= 1'b1;
        pipe_r[HIT_LATENCY-1] <= fill_resp;
      end
    end
  end

  assign core_resp_valid = pipe_v[HIT_LATENCY-1];
  assign core_resp       = pipe_r[HIT_LATENCY-1];

  // ---------------- back-invalidation (any DomainID) ----------------
  // The L2 names a line it is removing; every valid copy, whatever its
  // DomainID, is invalidated and a dirty copy's data is handed back in the
  // same cycle. Core and SFill-Inv requests are held off in that cycle, and
  // the L2 is then busy, so no other update of the matched lines coincides.
  logic [LINES-1:0]  bmatch;
  logic [LIDX_W-1:0] bdirty_idx;

  always_comb begin
    bdirty_idx = '0;
    for (int i = 0; i < LINES; i++) begin
      bmatch[i] = valid_q[i] && ({tagp_q[i], map_idx_q[i]} == binv_laddr);
      if (bmatch[i] && dirty_q[i]) bdirty_idx = LIDX_W'(i);
    end
  end

  assign binv_dirty = binv_valid && |(bmatch & dirty_q);
  assign binv_data  = data_q[bdirty_idx];

  // ---------------- control and metadata ----------------
  logic [LIDX_W-1:0] miss_victim;
  logic              miss_nofill;

  always_comb begin
    miss_nofill = map_hit && !core_nonspec;        // path 2, speculative
    miss_victim = (map_hit && core_nonspec) ? c_idx // path 2, replace C
                                            : rnd_line; // V = RandomLine
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      valid_q  <= '0;
      dirty_q  <= '0;
      spec_q   <= '0;
      mreq_q   <= '0;
      nofill_q <= 1'b0;
      victim_q <= '0;
      sfreq_q  <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (take_sf) begin
            sfreq_q <= sfinv_req;
            if (tag_hit && spec_q[c_idx]) begin
              valid_q[c_idx] <= 1'b0;                         // Invalidate(C)
              if (sfinv_req.src > SRC_L1) state <= S_SFWD;
            end else if (!tag_hit && sfinv_req.src > SRC_L1) begin
              state <= S_SFWD;
            end
          end else if (take_core) begin
            if (tag_hit) begin
              if (core_nonspec) spec_q[c_idx] <= 1'b0;
              if (core_req.is_store) dirty_q[c_idx] <= 1'b1;
            end else begin
              mreq_q   <= core_req;
              nofill_q <= miss_nofill;
              victim_q <= miss_victim;
              if (valid_q[miss_victim] && dirty_q[miss_victim]) begin
                state <= S_WB;
              end else begin
                if (miss_nofill) valid_q[miss_victim] <= 1'b0; // Evict(V)
                state <= S_FETCH;
              end
            end
          end
        end
        S_WB:    if (l2_req_ready) begin
                   valid_q[victim_q] <= 1'b0;
                   state <= S_FETCH;
                 end
        S_FETCH: if (l2_req_ready) state <= S_WAIT;
        S_WAIT:  if (l2_resp_valid) begin
                   if (!nofill_q) begin                        // Replace(V or C, R)
                     valid_q[victim_q]   <= 1'b1;
                     dirty_q[victim_q]   <= mreq_q.is_store;
                     spec_q[victim_q]    <= mreq_q.spec && !mreq_q.is_store;
                     map_dom_q[victim_q] <= mreq_q.domain;
                     map_idx_q[victim_q] <= mreq_q.addr[OFFS_W +: IDX_W];
                     tagp_q[victim_q]    <= mreq_q.addr[ADDR_W-1:OFFS_W+IDX_W];
                   end
                   state <= S_IDLE;
                 end
        S_SFWD:  if (l2_req_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      if (binv_valid)
        for (int i = 0; i < LINES; i++)
          if (bmatch[i]) valid_q[i] <= 1'b0;
    end
  end

  // ---------------- L2 request ----------------
  always_comb begin
    l2_req_valid = 1'b0;
    l2_req       = '0;
    unique case (state)
      S_WB: begin
        l2_req_valid  = 1'b1;
        l2_req.kind   = L2_WB;
        l2_req.laddr  = {tagp_q[victim_q], map_idx_q[victim_q]};
        l2_req.domain = map_dom_q[victim_q];
        l2_req.data   = data_q[victim_q];
      end
      S_FETCH: begin
        l2_req_valid  = 1'b1;
        l2_req.kind   = L2_READ;
        l2_req.laddr  = mreq_q.addr[ADDR_W-1:OFFS_W];
        l2_req.domain = mreq_q.domain;
        l2_req.spec   = mreq_q.spec && !mreq_q.is_store;
      end
      S_SFWD: begin
        l2_req_valid  = 1'b1;
        l2_req.kind   = L2_SFINV;
        l2_req.laddr  = sfreq_q.addr[ADDR_W-1:OFFS_W];
        l2_req.domain = sfreq_q.domain;
        l2_req.src    = sfreq_q.src;
      end
      default: ;
    endcase
  end

  // ---------------- events ----------------
  always_comb begin
    ev             = '0;
    ev.hit         = take_core && tag_hit;
    ev.miss        = take_core && !tag_hit;
    ev.map_miss    = take_core && !map_hit;
    ev.tag_miss    = take_core && map_hit && !tag_hit;
    ev.fwd_nofill  = take_core && map_hit && !tag_hit && !core_nonspec;
    ev.spec_clear  = take_core && tag_hit && spec_q[c_idx] && core_nonspec;
    ev.writeback   = (state == S_WB) && l2_req_ready;
    ev.sfinv_inval = take_sf && tag_hit && spec_q[c_idx];
    ev.sfinv_drop  = take_sf && ((tag_hit && !spec_q[c_idx]) || (!tag_hit && sfinv_req.src <= SRC_L1));
    ev.sfinv_fwd   = (state == S_SFWD) && l2_req_ready;
    ev.back_inval  = binv_valid && |bmatch;
  end

  // stores are never speculative
  a_store_nonspec: assert property (@(posedge clk) disable iff (!rst_n)
    take_core && core_req.is_store |-> !core_req.spec);
  // a {DomainID, Index} pair maps to at most one valid line
  a_unique_map: assert property (@(posedge clk) disable iff (!rst_n)
    (mmatch & (mmatch - 1'b1)) == '0);

endmodule
