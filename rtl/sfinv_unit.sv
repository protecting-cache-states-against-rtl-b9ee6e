// sfinv_unit: the load-queue side of "speculative fill, invalidate on squash"
// (SFill-Inv). It remembers, per load-queue entry, the address, DomainID and
// returned SourceLevel of every load sent to the L1 data cache, and when the
// core squashes loads it sends one SFill-Inv request for each squashed load
// that brought a line into the cache hierarchy.
//
// How it works. An entry is allocated when a load is handed to the L1 cache
// (issue_*), and records the SourceLevel when the L1 response for that entry
// returns. A squash (squash_valid with a mask of entries) marks entries as
// squashed. A squashed entry whose load hit in L1 (SourceLevel 1) is freed
// silently: it fetched nothing. A squashed entry with SourceLevel 2 or 3 queues
// an SFill-Inv request {address, DomainID, SourceLevel}; if the response had
// not come back yet, the entry waits for it and then decides. Loads that were
// never sent to the cache have no entry and send nothing. Commit frees an
// entry. Requests leave one per cycle, lowest entry first. The unit never
// waits for an SFill-Inv to complete: the core may resume as soon as
// `pending` is low, i.e. when all requests have been handed over.
//
// Interface. issue_valid/issue_req: observed load handshake into L1 (stores are
// ignored). resp_valid/resp: L1 response. squash_valid/squash_mask, commit_valid
// /commit_id from the core. sfinv_valid/sfinv_ready/sfinv_req to the L1. One
// request per cycle; all state is registered.
//
// The skip rule (SourceLevel 1) and the fire-and-forget issue follow the
// architecture; the entry count is the 32-entry load queue of the evaluated
// core; the bookkeeping (masks, waiting for a late response, priority order)
// is this design's choice.
module sfinv_unit
  import star_pkg::*;
#(
  parameter int ENTRIES = LQ_ENTRIES
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               issue_valid,
  input  core_req_t          issue_req,
  input  logic               resp_valid,
  input  core_resp_t         resp,
  input  logic               squash_valid,
  input  logic [ENTRIES-1:0] squash_mask,
  input  logic               commit_valid,
  input  logic [LQ_ID_W-1:0] commit_id,
  output logic               sfinv_valid,
  input  logic               sfinv_ready,
  output sfinv_req_t         sfinv_req,
  output logic               pending,
  output logic               ev_sent,
  output logic               ev_skipped
);

  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    domain_t           domain;
    src_level_e        src;
  } entry_t;

  logic [ENTRIES-1:0] alloc_q, done_q, squashed_q;
  entry_t             ent_q [ENTRIES];

  // entries ready to send, and the one chosen this cycle
  logic [ENTRIES-1:0] sendable;
  logic [LQ_ID_W-1:0] sel;
  logic               any_send;

  always_comb begin
    sel = '0;
    any_send = 1'b0;
    for (int e = ENTRIES - 1; e >= 0; e--) begin
      sendable[e] = alloc_q[e] && done_q[e] && squashed_q[e] && (ent_q[e].src > SRC_L1);
      if (sendable[e]) begin
        sel = LQ_ID_W'(e);
        any_send = 1'b1;
      end
    end
  end

  assign sfinv_valid = any_send;
  assign sfinv_req   = '{addr: ent_q[sel].addr, domain: ent_q[sel].domain, src: ent_q[sel].src};
  assign ev_sent     = sfinv_valid && sfinv_ready;

  // entries that are squashed, answered and had an L1 hit: freed without a request
  logic [ENTRIES-1:0] skip;
  always_comb begin
    for (int e = 0; e < ENTRIES; e++)
      skip[e] = alloc_q[e] && done_q[e] && squashed_q[e] && (ent_q[e].src <= SRC_L1);
  end
  assign ev_skipped = |skip;

  // pending: some squashed load still owes, or may still owe, an SFill-Inv
  assign pending = |(alloc_q & squashed_q & ~skip);

  logic issue_load;
  assign issue_load = issue_valid && !issue_req.is_store;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      alloc_q    <= '0;
      done_q     <= '0;
      squashed_q <= '0;
      for (int e = 0; e < ENTRIES; e++) ent_q[e] <= '0;
    end else begin
      // free the skipped ones and the one just sent
      alloc_q <= alloc_q & ~skip;
      if (ev_sent) alloc_q[sel] <= 1'b0;
      if (squash_valid) squashed_q <= squashed_q | (squash_mask & alloc_q);
      if (resp_valid && !resp.is_store && alloc_q[resp.id]) begin
        done_q[resp.id]    <= 1'b1;
        ent_q[resp.id].src <= resp.src;
      end
      if (commit_valid && !squashed_q[commit_id]) alloc_q[commit_id] <= 1'b0;
      if (issue_load) begin
        alloc_q[issue_req.id]    <= 1'b1;
        done_q[issue_req.id]     <= 1'b0;
        squashed_q[issue_req.id] <= 1'b0;
        ent_q[issue_req.id]      <= '{addr: issue_req.addr, domain: issue_req.domain, src: SRC_NONE};
      end
    end
  end

  // the core must not reuse an entry that is still owed an SFill-Inv
  a_no_reuse: assert property (@(posedge clk) disable iff (!rst_n)
    issue_load |-> !(alloc_q[issue_req.id] && squashed_q[issue_req.id] && !skip[issue_req.id]));

endmodule
