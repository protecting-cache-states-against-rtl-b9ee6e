// farr_l1: STAR-FARR L1 data cache -- fully associative, random replacement,
// DomainID-tagged lines (no cross-domain hits) and per-line SpecBit with
// invalidate-on-squash (SFill-Inv) handling.
//
// How it works. Every line holds {DomainID, Tag, Valid, Dirty, SpecBit} and a
// 64-byte data block. A request hits only when both its 42-bit line tag and
// its DomainID equal those of a valid line, so a domain never observes a hit
// on another domain's line. On a hit the addressed 64-bit word is returned; a
// non-speculative access clears the line's SpecBit. On a miss a line V is
// picked at random from all LINES lines (valid or not), written back if dirty,
// and refilled from L2; the new line takes the DomainID and SpecBit of the
// request. An SFill-Inv request (sent for a squashed speculative load) looks up
// {address, DomainID}: a found line with SpecBit=1 is invalidated, one with
// SpecBit=0 is left alone and the request dropped; the request is forwarded to
// L2 when its SourceLevel is above 1 and the line was not found or was
// invalidated. SFill-Inv produces no response.
//
// Interface. core_req/core_resp: valid/ready request, response valid only (the
// core always accepts). Stores are non-speculative, write-allocate, and are
// acknowledged with a response. sfinv: valid/ready, takes priority over core
// requests. l2_req: valid/ready (fill reads, write-backs, forwarded SFill-Inv);
// l2_resp: valid only, answers the single outstanding read. binv: a one-cycle
// back-invalidation from the inclusive L2, answered combinationally with the
// dirty data of the matching line, if any. ev: one-cycle event pulses; the
// event struct is shared with news_l1, so its NEWS-only fields (map_miss,
// tag_miss, fwd_nofill) stay 0 here.
//
// Timing. Blocking cache with one outstanding miss; the miss register and the
// write-back path carry the DomainID. A hit's response is valid HIT_LATENCY
// cycles after the request handshake (1 = STAR-FARR-T1, 2 = STAR-FARR-T2); hits
// can be accepted every cycle. A miss answers one cycle after the L2 response,
// a dirty victim adds one write-back handshake before the fill request.
//
// Sizes (512 lines of 64 B, 6-bit DomainID, 48-bit address, 1- or 2-cycle
// latency) and the hit/miss/SFill-Inv policy follow the architecture; the
// blocking organisation, 64-bit word interface, LFSR random source, victim
// write-back before the fill, SFill-Inv priority and the back-invalidation
// port that keeps the hierarchy inclusive are this design's choices.
module farr_l1
  import star_pkg::*;
#(
  parameter int          LINES       = 512,
  parameter int          HIT_LATENCY = 1,
  parameter logic [31:0] SEED        = 32'h1234_5679
) (
  input  logic        clk,
  input  logic        rst_n,
  // core side
  input  logic        core_req_valid,
  output logic        core_req_ready,
  input  core_req_t   core_req,
  output logic        core_resp_valid,
  output core_resp_t  core_resp,
  input  logic        sfinv_valid,
  output logic        sfinv_ready,
  input  sfinv_req_t  sfinv_req,
  // L2 side
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

  localparam int IDX_W = $clog2(LINES);

  typedef enum logic [2:0] {S_IDLE, S_WB, S_FETCH, S_WAIT, S_SFWD} state_e;
  state_e state;

  // ---------------- arrays ----------------
  logic [LINES-1:0] valid_q, dirty_q, spec_q;
  domain_t          dom_q [LINES];
  line_addr_t       tag_q [LINES];
  line_t            data_q[LINES];

  // ---------------- miss register (MSHR) ----------------
  core_req_t        mreq_q;
  logic [IDX_W-1:0] victim_q;
  sfinv_req_t       sfreq_q;

  logic [IDX_W-1:0] rnd_line;
  random_line #(.LINE_IDX_W(IDX_W), .SEED(SEED)) u_rand (
    .clk(clk), .rst_n(rst_n), .line(rnd_line));

  // ---------------- lookup ----------------
  logic             take_sf, take_core;
  line_addr_t       lk_tag;
  domain_t          lk_dom;
  logic [LINES-1:0] match;
  logic             hit;
  logic [IDX_W-1:0] hit_idx;

  assign sfinv_ready    = (state == S_IDLE) && !binv_valid;
  assign core_req_ready = (state == S_IDLE) && !sfinv_valid && !binv_valid;
  assign take_sf        = sfinv_valid && sfinv_ready;
  assign take_core      = core_req_valid && core_req_ready;

  assign lk_tag = sfinv_valid ? sfinv_req.addr[ADDR_W-1:OFFS_W] : core_req.addr[ADDR_W-1:OFFS_W];
  assign lk_dom = sfinv_valid ? sfinv_req.domain : core_req.domain;

  always_comb begin
    hit_idx = '0;
    for (int i = 0; i < LINES; i++) begin
      match[i] = valid_q[i] && (tag_q[i] == lk_tag) && (dom_q[i] == lk_dom);
      if (match[i]) hit_idx = IDX_W'(i);
    end
    hit = |match;
  end

  // ---------------- data array write port ----------------
  logic             data_we;
  logic [IDX_W-1:0] data_widx;
  line_t            data_wval;
  line_t            fill_line;

  assign fill_line = mreq_q.is_store
                   ? merge_word(l2_resp.data, mreq_q.addr[OFFS_W-1:3], mreq_q.wdata, mreq_q.wstrb)
                   : l2_resp.data;

  always_comb begin
    data_we   = 1'b0;
    data_widx = hit_idx;
    data_wval = merge_word(data_q[hit_idx], core_req.addr[OFFS_W-1:3], core_req.wdata, core_req.wstrb);
    if (take_core && hit && core_req.is_store) begin
      data_we = 1'b1;
    end else if (state == S_WAIT && l2_resp_valid) begin
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

  assign hit_resp  = '{data: select_word(data_q[hit_idx], core_req.addr[OFFS_W-1:3]),
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
      pipe_v[0] <= take_core && hit;
      pipe_r[0] <= hit_resp;
      // a miss completes only when no hit is in flight (blocking cache)
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
  logic [IDX_W-1:0] bdirty_idx;

  always_comb begin
    bdirty_idx = '0;
    for (int i = 0; i < LINES; i++) begin
      bmatch[i] = valid_q[i] && (tag_q[i] == binv_laddr);
      if (bmatch[i] && dirty_q[i]) bdirty_idx = IDX_W'(i);
    end
  end

  assign binv_dirty = binv_valid && |(bmatch & dirty_q);
  assign binv_data  = data_q[bdirty_idx];

  // ---------------- control and metadata ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      valid_q  <= '0;
      dirty_q  <= '0;
      spec_q   <= '0;
      mreq_q   <= '0;
      victim_q <= '0;
      sfreq_q  <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (take_sf) begin
            sfreq_q <= sfinv_req;
            if (hit && spec_q[hit_idx]) begin
              valid_q[hit_idx] <= 1'b0;                       // Invalidate(C)
              if (sfinv_req.src > SRC_L1) state <= S_SFWD;
            end else if (!hit && sfinv_req.src > SRC_L1) begin
              state <= S_SFWD;                                // not found: propagate
            end
          end else if (take_core) begin
            if (hit) begin
              if (!core_req.spec || core_req.is_store) spec_q[hit_idx] <= 1'b0;
              if (core_req.is_store) dirty_q[hit_idx] <= 1'b1;
            end else begin
              mreq_q   <= core_req;
              victim_q <= rnd_line;                           // V = RandomLine
              state    <= (valid_q[rnd_line] && dirty_q[rnd_line]) ? S_WB : S_FETCH;
            end
          end
        end
        S_WB:    if (l2_req_ready) begin
                   valid_q[victim_q] <= 1'b0;
                   state <= S_FETCH;
                 end
        S_FETCH: if (l2_req_ready) state <= S_WAIT;
        S_WAIT:  if (l2_resp_valid) begin                     // C = Replace(V, R)
                   valid_q[victim_q] <= 1'b1;
                   dirty_q[victim_q] <= mreq_q.is_store;
                   spec_q[victim_q]  <= mreq_q.spec && !mreq_q.is_store;
                   dom_q[victim_q]   <= mreq_q.domain;
                   tag_q[victim_q]   <= mreq_q.addr[ADDR_W-1:OFFS_W];
                   state             <= S_IDLE;
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
        l2_req_valid = 1'b1;
        l2_req.kind  = L2_WB;
        l2_req.laddr = tag_q[victim_q];
        l2_req.domain= dom_q[victim_q];
        l2_req.data  = data_q[victim_q];
      end
      S_FETCH: begin
        l2_req_valid = 1'b1;
        l2_req.kind  = L2_READ;
        l2_req.laddr = mreq_q.addr[ADDR_W-1:OFFS_W];
        l2_req.domain= mreq_q.domain;
        l2_req.spec  = mreq_q.spec && !mreq_q.is_store;
      end
      S_SFWD: begin
        l2_req_valid = 1'b1;
        l2_req.kind  = L2_SFINV;
        l2_req.laddr = sfreq_q.addr[ADDR_W-1:OFFS_W];
        l2_req.domain= sfreq_q.domain;
        l2_req.src   = sfreq_q.src;
      end
      default: ;
    endcase
  end

  // ---------------- events ----------------
  always_comb begin
    ev             = '0;
    ev.hit         = take_core && hit;
    ev.miss        = take_core && !hit;
    ev.map_miss    = 1'b0;
    ev.spec_clear  = take_core && hit && spec_q[hit_idx] && (!core_req.spec || core_req.is_store);
    ev.writeback   = (state == S_WB) && l2_req_ready;
    ev.sfinv_inval = take_sf && hit && spec_q[hit_idx];
    ev.sfinv_drop  = take_sf && ((hit && !spec_q[hit_idx]) || (!hit && sfinv_req.src <= SRC_L1));
    ev.sfinv_fwd   = (state == S_SFWD) && l2_req_ready;
    ev.back_inval  = binv_valid && |bmatch;
  end

  // stores are never speculative
  a_store_nonspec: assert property (@(posedge clk) disable iff (!rst_n)
    take_core && core_req.is_store |-> !core_req.spec);
  // at most one line may match a {tag, DomainID} pair
  a_onehot_match: assert property (@(posedge clk) disable iff (!rst_n)
    (match & (match - 1'b1)) == '0);

endmodule
