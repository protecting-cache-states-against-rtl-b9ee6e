// star_top: the STAR (Speculative and Timing Attack Resilient) cache subsystem
// of one core -- SFill-Inv unit, STAR L1 data cache and L2 -- with the core's
// load/store port and the main-memory port brought out.
//
// How it works. The core sends loads (each tagged with its SpecBit, DomainID
// and load-queue entry) and non-speculative stores to the L1 data cache. The
// L1 is either STAR-NEWS (news_l1, USE_NEWS = 1, the default, with K_EXTRA
// extra index bits) or STAR-FARR (farr_l1, USE_NEWS = 0, HIT_LATENCY 1 or 2).
// Every response carries the SourceLevel of the data (1 L1, 2 L2, 3 memory).
// The sfinv_unit watches the load handshakes and responses; when the core
// squashes loads it sends an SFill-Inv request into the L1 for each squashed
// load that did not hit in L1. The L1 invalidates the line if it is still
// speculative and passes the request to the L2 when the data came from
// further out. The L2 serves L1 misses and write-backs and talks to memory.
// The hierarchy is inclusive: whenever the L2 removes a line (replacement or
// SFill-Inv) it back-invalidates every L1 copy, taking a dirty copy's data.
//
// Interface. core_req valid/ready, core_resp valid only. squash_valid +
// squash_mask (load-queue entries), commit_valid + commit_id. sfinv_pending is
// high while SFill-Inv requests are still to be handed to the cache; the core
// need not wait for their completion. mem_req valid/ready, mem_resp valid only
// (one outstanding read). Event pulses of the L1, L2 and SFill-Inv unit are
// outputs for performance counting.
//
// Timing. L1 hit: L1_HIT_LATENCY cycles. L2 hit: L2_LATENCY cycles from the L2
// handshake, about L2_LATENCY + 3 cycles from the core's request. After reset
// the L2 spends L2_SETS cycles clearing its tags; L1 misses wait for it.
module star_top
  import star_pkg::*;
#(
  parameter bit          USE_NEWS       = 1'b1,
  parameter int          L1_LINES       = 512,
  parameter int          K_EXTRA        = 4,
  parameter int          L1_HIT_LATENCY = 1,
  parameter int          L2_SETS        = 2048,
  parameter int          L2_WAYS        = 16,
  parameter int          L2_LATENCY     = 12,
  parameter logic [31:0] SEED           = 32'h1234_5679
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // core
  input  logic                  core_req_valid,
  output logic                  core_req_ready,
  input  core_req_t             core_req,
  output logic                  core_resp_valid,
  output core_resp_t            core_resp,
  input  logic                  squash_valid,
  input  logic [LQ_ENTRIES-1:0] squash_mask,
  input  logic                  commit_valid,
  input  logic [LQ_ID_W-1:0]    commit_id,
  output logic                  sfinv_pending,
  // main memory
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output mem_req_t              mem_req,
  input  logic                  mem_resp_valid,
  input  line_t                 mem_resp_data,
  // events
  output l1_events_t            l1_ev,
  output logic                  l2_ev_hit,
  output logic                  l2_ev_miss,
  output logic                  l2_ev_sfinv_inval,
  output logic                  sfinv_ev_sent,
  output logic                  sfinv_ev_skipped
);

  logic       sf_valid, sf_ready;
  sfinv_req_t sf_req;
  logic       l2_req_valid, l2_req_ready, l2_resp_valid;
  l2_req_t    l2_req;
  l2_resp_t   l2_resp;
  logic       binv_valid, binv_dirty;
  line_addr_t binv_laddr;
  line_t      binv_data;

  sfinv_unit #(.ENTRIES(LQ_ENTRIES)) u_sfinv (
    .clk, .rst_n,
    .issue_valid (core_req_valid && core_req_ready),
    .issue_req   (core_req),
    .resp_valid  (core_resp_valid),
    .resp        (core_resp),
    .squash_valid, .squash_mask,
    .commit_valid, .commit_id,
    .sfinv_valid (sf_valid),
    .sfinv_ready (sf_ready),
    .sfinv_req   (sf_req),
    .pending     (sfinv_pending),
    .ev_sent     (sfinv_ev_sent),
    .ev_skipped  (sfinv_ev_skipped)
  );

  if (USE_NEWS) begin : g_news
    news_l1 #(.LINES(L1_LINES), .K_EXTRA(K_EXTRA), .HIT_LATENCY(L1_HIT_LATENCY), .SEED(SEED)) u_l1 (
      .clk, .rst_n,
      .core_req_valid, .core_req_ready, .core_req,
      .core_resp_valid, .core_resp,
      .sfinv_valid (sf_valid), .sfinv_ready (sf_ready), .sfinv_req (sf_req),
      .l2_req_valid, .l2_req_ready, .l2_req,
      .l2_resp_valid, .l2_resp,
      .binv_valid, .binv_laddr, .binv_dirty, .binv_data,
      .ev (l1_ev)
    );
  end else begin : g_farr
    farr_l1 #(.LINES(L1_LINES), .HIT_LATENCY(L1_HIT_LATENCY), .SEED(SEED)) u_l1 (
      .clk, .rst_n,
      .core_req_valid, .core_req_ready, .core_req,
      .core_resp_valid, .core_resp,
      .sfinv_valid (sf_valid), .sfinv_ready (sf_ready), .sfinv_req (sf_req),
      .l2_req_valid, .l2_req_ready, .l2_req,
      .l2_resp_valid, .l2_resp,
      .binv_valid, .binv_laddr, .binv_dirty, .binv_data,
      .ev (l1_ev)
    );
  end

  l2_cache #(.SETS(L2_SETS), .WAYS(L2_WAYS), .LATENCY(L2_LATENCY)) u_l2 (
    .clk, .rst_n,
    .l1_req_valid  (l2_req_valid),
    .l1_req_ready  (l2_req_ready),
    .l1_req        (l2_req),
    .l1_resp_valid (l2_resp_valid),
    .l1_resp       (l2_resp),
    .l1_binv_valid (binv_valid),
    .l1_binv_laddr (binv_laddr),
    .l1_binv_dirty (binv_dirty),
    .l1_binv_data  (binv_data),
    .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp_data,
    .ev_hit        (l2_ev_hit),
    .ev_miss       (l2_ev_miss),
    .ev_sfinv_inval(l2_ev_sfinv_inval)
  );

endmodule
