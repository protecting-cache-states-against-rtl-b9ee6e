// star_top_tb: end-to-end test of the STAR cache subsystem at its default
// parameters (STAR-NEWS L1 with 512 lines and K_EXTRA = 4, 2 MB 16-way L2 with
// 12-cycle hits, 100-cycle main memory), driven by a small core model.
//
// Scenarios, each with its own checks:
//   1. cold load from memory, then L1 hit: data, SourceLevel, latency
//      (L1 hit 1 cycle; memory 105 cycles; L2 hit 14 cycles from the core)
//   2. same-domain Spectre-v1 over a flush-reload channel: a wrong-path load
//      touches shared[30*4096]; after the squash the SFill-Inv removes the line
//      from L1 and L2, and a reload of all 256 lines of the shared array sees
//      the same latency and SourceLevel everywhere. A correct-path
//      (committed) speculative load keeps its line, as it should.
//   3. cross-domain flush-reload on an AES table: lines the victim domain
//      loads are never L1 hits for the attacker domain
//   4. STAR-NEWS paths: non-speculative tag miss replaces the mapped line;
//      same-domain prime-probe Spectre gadget (speculative tag miss) takes
//      ForwardNoFill and leaves the receiver's mapped line in place
//   5. stores, dirty write-back through L2, SFill-Inv of a line already made
//      non-speculative (dropped), SourceLevel 1 squash (skipped)
//   6. inclusion: an L2 eviction back-invalidates the L1 copy and its dirty
//      data reaches memory
// Every mechanism is counted; one that never happened is a failure.
module star_top_tb;
  import star_pkg::*;
  import star_tb_pkg::*;

  localparam int L1_HIT  = 1;
  localparam int MEM_LAT = 100;
  localparam int L2_LAT  = 12;
  localparam int MEM_MISS_LAT = MEM_LAT + 5;   // core-visible, clean victims
  localparam int L2_HIT_LAT   = L2_LAT + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                  core_req_valid, core_req_ready, core_resp_valid;
  core_req_t             core_req;
  core_resp_t            core_resp;
  logic                  squash_valid, commit_valid, sfinv_pending;
  logic [LQ_ENTRIES-1:0] squash_mask;
  logic [LQ_ID_W-1:0]    commit_id;
  logic                  mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t              mem_req;
  line_t                 mem_resp_data;
  l1_events_t            l1_ev;
  logic                  l2_ev_hit, l2_ev_miss, l2_ev_sfinv_inval, sfinv_ev_sent, sfinv_ev_skipped;
  int                    n_mread, n_mwrite;
  mem_req_t              last_mwrite;

  star_top dut (.*);

  mem_model #(.LAT(MEM_LAT)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_data(mem_resp_data),
    .n_read(n_mread), .n_write(n_mwrite), .last_write(last_mwrite));

  // ---------------- mechanism counters ----------------
  int c_hit, c_mapmiss, c_tagmiss, c_nofill, c_specclr, c_wb, c_inval, c_drop, c_fwd;
  int c_l2hit, c_l2miss, c_l2inval, c_sent, c_skipped, c_pending, c_binv;
  initial begin
    c_hit = 0; c_mapmiss = 0; c_tagmiss = 0; c_nofill = 0; c_specclr = 0; c_wb = 0;
    c_inval = 0; c_drop = 0; c_fwd = 0; c_l2hit = 0; c_l2miss = 0; c_l2inval = 0;
    c_sent = 0; c_skipped = 0; c_pending = 0; c_binv = 0;
  end
  always @(posedge clk) if (rst_n) begin
    c_hit     += int'(l1_ev.hit);
    c_mapmiss += int'(l1_ev.map_miss);
    c_tagmiss += int'(l1_ev.tag_miss && !l1_ev.fwd_nofill);
    c_nofill  += int'(l1_ev.fwd_nofill);
    c_specclr += int'(l1_ev.spec_clear);
    c_wb      += int'(l1_ev.writeback);
    c_inval   += int'(l1_ev.sfinv_inval);
    c_drop    += int'(l1_ev.sfinv_drop);
    c_fwd     += int'(l1_ev.sfinv_fwd);
    c_l2hit   += int'(l2_ev_hit);
    c_l2miss  += int'(l2_ev_miss);
    c_l2inval += int'(l2_ev_sfinv_inval);
    c_sent    += int'(sfinv_ev_sent);
    c_skipped += int'(sfinv_ev_skipped);
    c_pending += int'(sfinv_pending);
    c_binv    += int'(l1_ev.back_inval);
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400_000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- core model ----------------
  task automatic access(input bit st, input bit spec, input domain_t d, input logic [ADDR_W-1:0] a,
                        input word_t wd, input int id, output core_resp_t r, output int lat);
    @(negedge clk);
    core_req_valid = 1'b1;
    core_req = '{is_store: st, spec: spec, domain: d, addr: a, wdata: wd, wstrb: 8'hFF, id: LQ_ID_W'(id)};
    while (!core_req_ready) @(negedge clk);
    @(negedge clk);
    core_req_valid = 1'b0;
    lat = 1;
    while (!core_resp_valid) begin @(negedge clk); lat++; end
    r = core_resp;
    check(r.id == LQ_ID_W'(id), "response carries the load-queue entry");
  endtask

  task automatic load(input bit spec, input domain_t d, input logic [ADDR_W-1:0] a, input int id,
                      output core_resp_t r, output int lat);
    access(1'b0, spec, d, a, '0, id, r, lat);
  endtask

  // squash entries and wait until every SFill-Inv has been handed over
  task automatic squash(input logic [LQ_ENTRIES-1:0] m);
    @(negedge clk); squash_valid = 1'b1; squash_mask = m;
    @(negedge clk); squash_valid = 1'b0; squash_mask = '0;
    while (sfinv_pending) @(negedge clk);
    repeat (20) @(negedge clk);   // let forwarded requests drain through L2
  endtask

  task automatic commit(input int id);
    @(negedge clk); commit_valid = 1'b1; commit_id = LQ_ID_W'(id);
    @(negedge clk); commit_valid = 1'b0;
  endtask

  localparam logic [ADDR_W-1:0] SHARED = 48'h0000_0100_0000;  // shared[i*4096], i = 0..255
  localparam logic [ADDR_W-1:0] AES_T1 = 48'h0000_0200_0000;  // 1 kB table, 16 lines
  localparam logic [ADDR_W-1:0] PRIME  = 48'h0000_0300_0000;  // receiver's array
  localparam int SECRET = 30;
  localparam int KEY0 = 'h5C;                                  // victim's key byte
  localparam int D_IN [4] = '{'h00, 'h35, 'h9A, 'hF0};     // victim's plaintext bytes

  // address of T1[i], 4-byte entries
  function automatic logic [ADDR_W-1:0] aes_t1(input int i);
    logic [ADDR_W-1:0] off;
    off = ADDR_W'(i & 'hFF) << 2;
    return AES_T1 + off;
  endfunction

  core_resp_t r;
  int lat, n_bad, n_l1;

  initial begin
    core_req_valid = 1'b0; core_req = '0; squash_valid = 1'b0; squash_mask = '0;
    commit_valid = 1'b0; commit_id = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- 1. cold load, then hit ----
    load(1'b0, 6'd1, 48'h0000_0000_1008, 0, r, lat);   // waits out the L2 reset sweep
    check(r.src == SRC_MEM && r.data == pattern_word(42'h40, 1), "cold load from memory");
    load(1'b0, 6'd1, 48'h0000_0000_1010, 0, r, lat);
    check(r.src == SRC_L1 && r.data == pattern_word(42'h40, 2) && lat == L1_HIT,
          $sformatf("L1 hit, latency %0d", lat));
    load(1'b0, 6'd1, 48'h0000_0000_2000, 0, r, lat);
    check(r.src == SRC_MEM && lat == MEM_MISS_LAT, $sformatf("memory latency %0d", lat));

    // ---- 2. same-domain Spectre-v1, flush-reload channel ----
    // the wrong-path sender touches shared[SECRET]
    load(1'b1, 6'd1, SHARED + 48'(SECRET * 4096), 5, r, lat);
    check(r.src == SRC_MEM, "sender's speculative load filled from memory");
    squash(32'h1 << 5);
    // receiver (same domain) reloads the whole array and times it
    n_bad = 0;
    for (int i = 0; i < 256; i++) begin
      load(1'b0, 6'd1, SHARED + 48'(i * 4096), 0, r, lat);
      if (r.src != SRC_MEM || lat != MEM_MISS_LAT) begin
        n_bad++;
        $display("  reload of shared[%0d]: SourceLevel %0d, %0d cycles", i, r.src, lat);
      end
    end
    check(n_bad == 0, "Spectre-v1 flush-reload: no line reloads faster than the others");
    // a correct-path speculative load keeps its line once it commits
    load(1'b1, 6'd1, 48'h0000_0180_0040, 6, r, lat);
    commit(6);
    load(1'b0, 6'd1, 48'h0000_0180_0040, 0, r, lat);
    check(r.src == SRC_L1, "committed speculative fill stays in the cache");

    // ---- 3. cross-domain flush-reload on an AES T-table ----
    // victim (domain 2) performs T1[D ^ K] lookups (4-byte entries)
    begin
      for (int k = 0; k < 4; k++)
        load(1'b0, 6'd2, aes_t1(D_IN[k] ^ KEY0), 0, r, lat);
      n_l1 = 0;
      for (int i = 0; i < 16; i++) begin
        load(1'b0, 6'd3, AES_T1 + 48'(i * 64), 0, r, lat);
        if (r.src == SRC_L1) n_l1++;
      end
      check(n_l1 == 0, "attacker domain never hits on the victim's table lines");
      load(1'b0, 6'd2, aes_t1(D_IN[1] ^ KEY0), 0, r, lat);
      check(r.src == SRC_L1, "victim still hits on its own lines");
    end

    // ---- 4. STAR-NEWS paths ----
    // addresses with equal Index (line address bits [12:0]) and different Tag'
    begin
      logic [ADDR_W-1:0] x, y, z;
      x = PRIME + 48'(SECRET * 64);
      y = x + (48'h1 << (OFFS_W + 13));
      z = x + (48'h2 << (OFFS_W + 13));
      load(1'b0, 6'd1, x, 0, r, lat);               // receiver's line at Index SECRET
      load(1'b0, 6'd1, x, 0, r, lat);
      check(r.src == SRC_L1, "receiver line resident");
      // prime-probe sender: wrong-path load with the same Index
      load(1'b1, 6'd1, z, 9, r, lat);
      check(r.src == SRC_MEM && r.data == pattern_word(z[ADDR_W-1:OFFS_W], 0), "ForwardNoFill data");
      squash(32'h1 << 9);
      load(1'b0, 6'd1, x, 0, r, lat);
      check(r.src == SRC_L1, "receiver's mapped line not evicted by the speculative tag miss");
      // non-speculative tag miss replaces the mapped line
      load(1'b0, 6'd1, y, 0, r, lat);
      check(r.src == SRC_MEM, "non-speculative tag miss fetched");
      load(1'b0, 6'd1, y, 0, r, lat);
      check(r.src == SRC_L1, "non-speculative tag miss filled");
      load(1'b0, 6'd1, x, 0, r, lat);
      check(r.src == SRC_L2 && lat == L2_HIT_LAT, $sformatf("replaced line now in L2 only, %0d cycles", lat));
    end

    // ---- 5. stores, write-back, dropped and skipped SFill-Inv ----
    begin
      logic [ADDR_W-1:0] s;
      int wb0;
      s = 48'h0000_0400_0018;
      access(1'b1, 1'b0, 6'd4, s, 64'hCAFE_F00D_1234_5678, 0, r, lat);
      load(1'b0, 6'd4, s, 0, r, lat);
      check(r.src == SRC_L1 && r.data == 64'hCAFE_F00D_1234_5678, "store then load");
      // evict it by filling from other domains; dirty data must reach L2
      wb0 = c_wb;
      for (int i = 0; i < 4000 && c_wb == wb0; i++)
        load(1'b0, domain_t'(10 + i % 40), 48'h0000_0500_0000 + 48'(i * 64), 0, r, lat);
      check(c_wb > wb0, "dirty line written back");
      load(1'b0, 6'd4, s, 0, r, lat);
      check(r.src == SRC_L2 && r.data == 64'hCAFE_F00D_1234_5678, "written-back data served by L2");
      // speculative load later reused non-speculatively: SFill-Inv dropped
      load(1'b1, 6'd4, 48'h0000_0600_0000, 11, r, lat);
      load(1'b0, 6'd4, 48'h0000_0600_0000, 0, r, lat);
      squash(32'h1 << 11);
      load(1'b0, 6'd4, 48'h0000_0600_0000, 0, r, lat);
      check(r.src == SRC_L1, "line used non-speculatively survives the squash");
      // a squashed load that hit in L1 sends nothing
      load(1'b1, 6'd4, 48'h0000_0600_0000, 12, r, lat);
      check(r.src == SRC_L1, "speculative L1 hit");
      squash(32'h1 << 12);
      load(1'b0, 6'd4, 48'h0000_0600_0000, 0, r, lat);
      check(r.src == SRC_L1, "SourceLevel 1 squash leaves the line");
    end

    // ---- 6. inclusion: an L2 eviction removes the L1 copy ----
    // 16 more lines of the same L2 set (line address bits [10:0]), loaded by
    // another domain, push the stored line out of its 16-way L2 set
    begin
      logic [ADDR_W-1:0] p;
      int b0, w0;
      p = 48'h0000_0700_0008;
      access(1'b1, 1'b0, 6'd4, p, 64'h0BAD_CAFE_DEAD_0001, 0, r, lat);
      b0 = c_binv; w0 = n_mwrite;
      for (int j = 1; j <= 16; j++)
        load(1'b0, 6'd5, p + 48'(j) * 48'h2_0000, 0, r, lat);
      check(c_binv > b0, "L2 eviction back-invalidated the L1 copy");
      check(n_mwrite > w0 && last_mwrite.laddr == p[ADDR_W-1:OFFS_W] &&
            last_mwrite.data[64 +: 64] == 64'h0BAD_CAFE_DEAD_0001, "dirty L1 data reached memory");
      load(1'b0, 6'd4, p, 0, r, lat);
      check(r.src == SRC_MEM && r.data == 64'h0BAD_CAFE_DEAD_0001, "line gone from both levels, data kept");
    end

    // ---- mechanisms seen ----
    $display("events: L1 hit %0d, mapping miss %0d, tag miss+replace %0d, ForwardNoFill %0d, SpecBit cleared %0d, write-back %0d",
             c_hit, c_mapmiss, c_tagmiss, c_nofill, c_specclr, c_wb);
    $display("        SFill-Inv sent %0d, skipped %0d, L1 invalidate %0d, dropped %0d, forwarded %0d, L2 invalidate %0d, pending cycles %0d",
             c_sent, c_skipped, c_inval, c_drop, c_fwd, c_l2inval, c_pending);
    $display("        L2 hit %0d, L2 miss %0d, back-invalidations %0d", c_l2hit, c_l2miss, c_binv);
    check(c_hit > 0, "mechanism: L1 hit");
    check(c_mapmiss > 0, "mechanism: mapping miss");
    check(c_tagmiss > 0, "mechanism: tag miss with replacement");
    check(c_nofill > 0, "mechanism: ForwardNoFill");
    check(c_specclr > 0, "mechanism: SpecBit cleared by a non-speculative access");
    check(c_wb > 0, "mechanism: dirty write-back");
    check(c_sent > 0, "mechanism: SFill-Inv sent on squash");
    check(c_skipped > 0, "mechanism: SFill-Inv skipped for SourceLevel 1");
    check(c_inval > 0, "mechanism: L1 SFill-Inv invalidation");
    check(c_drop > 0, "mechanism: SFill-Inv dropped");
    check(c_fwd > 0, "mechanism: SFill-Inv forwarded to L2");
    check(c_l2inval > 0, "mechanism: L2 SFill-Inv invalidation");
    check(c_pending > 0, "mechanism: core waits for SFill-Inv hand-over");
    check(c_l2hit > 0 && c_l2miss > 0, "mechanism: L2 hit and miss");
    check(c_binv > 0, "mechanism: back-invalidation for inclusion");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
