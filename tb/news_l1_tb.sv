// news_l1_tb: directed test of the STAR-NEWS L1 data cache (16 lines, K_EXTRA
// = 2, so a 6-bit Index and 36-bit Tag'; 1-cycle hits) against the l2_model.
// Expected data comes from star_tb_pkg::pattern and a shadow of the stores made; expected SourceLevels and latencies follow
// the cache's rules. Covered:
//   - miss then hit, with data, SourceLevel and latency (hit = 1 cycle,
//     clean miss = L2 latency + 2 cycles)
//   - no cross-domain hit: a second DomainID misses on a line the first holds
//   - a speculative line is invalidated by SFill-Inv, which is also forwarded
//   - a non-speculative hit clears SpecBit, so a later SFill-Inv is dropped
//   - a speculative hit leaves SpecBit set
//   - SFill-Inv for an absent line goes on to L2 only if SourceLevel > 1
//   - byte-masked store, and the dirty line's write-back on random eviction
//   - back-invalidation: all domains' copies go, the dirty data is returned,
//     requests are held in that cycle
//   - the three NEWS paths: mapping miss; mapping hit + tag miss of a
//     non-speculative load, which replaces the mapped line; and of a
//     speculative load, which forwards the data without filling
//     (ForwardNoFill) and evicts a random line
module news_l1_tb;
  import star_pkg::*;
  import star_tb_pkg::*;

  localparam int LINES = 16;
  localparam int L2LAT = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       core_req_valid, core_req_ready, core_resp_valid;
  core_req_t  core_req;
  core_resp_t core_resp;
  logic       sfinv_valid, sfinv_ready;
  sfinv_req_t sfinv_req;
  logic       l2_req_valid, l2_req_ready, l2_resp_valid;
  l2_req_t    l2_req;
  l2_resp_t   l2_resp;
  l1_events_t ev;
  logic       binv_valid, binv_dirty;
  line_addr_t binv_laddr;
  line_t      binv_data;
  int         n_read, n_wb, n_sfinv;
  l2_req_t    last_wb, last_sfinv;

  news_l1 #(.LINES(LINES), .K_EXTRA(2), .HIT_LATENCY(1)) dut (.*);

  l2_model #(.LAT(L2LAT)) u_l2 (
    .clk, .rst_n, .req_valid(l2_req_valid), .req_ready(l2_req_ready), .req(l2_req),
    .resp_valid(l2_resp_valid), .resp(l2_resp), .n_read, .n_wb, .n_sfinv, .last_wb, .last_sfinv);

  int checks = 0, failures = 0;
  int n_inval = 0, n_drop = 0, n_fwd = 0, n_specclr = 0;
  int n_mapmiss = 0, n_tagmiss = 0, n_nofill = 0;
  always @(posedge clk) begin
    n_mapmiss += int'(ev.map_miss);
    n_tagmiss += int'(ev.tag_miss);
    n_nofill  += int'(ev.fwd_nofill);
    n_inval   += int'(ev.sfinv_inval);
    n_drop    += int'(ev.sfinv_drop);
    n_fwd     += int'(ev.sfinv_fwd);
    n_specclr += int'(ev.spec_clear);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ADDR_W-1:0] A(int n, int w = 0);
    return {42'(64'h1000 + n), 3'(w), 3'b000};
  endfunction

  task automatic access(input bit st, input bit spec, input domain_t d, input logic [ADDR_W-1:0] a,
                        input word_t wd, input logic [7:0] ws,
                        output core_resp_t r, output int lat);
    @(negedge clk);
    core_req_valid = 1'b1;
    core_req = '{is_store: st, spec: spec, domain: d, addr: a, wdata: wd, wstrb: ws, id: 5'd7};
    while (!core_req_ready) @(negedge clk);
    @(negedge clk);
    core_req_valid = 1'b0;
    lat = 1;
    while (!core_resp_valid) begin @(negedge clk); lat++; end
    r = core_resp;
  endtask

  task automatic load(input bit spec, input domain_t d, input logic [ADDR_W-1:0] a,
                      output core_resp_t r, output int lat);
    access(1'b0, spec, d, a, '0, '0, r, lat);
  endtask

  task automatic sfinv(input domain_t d, input logic [ADDR_W-1:0] a, input src_level_e s);
    @(negedge clk);
    sfinv_valid = 1'b1;
    sfinv_req = '{addr: a, domain: d, src: s};
    while (!sfinv_ready) @(negedge clk);
    @(negedge clk);
    sfinv_valid = 1'b0;
    repeat (3) @(negedge clk);
  endtask

  // one-cycle back-invalidation from the L2 side; the answer is combinational
  int n_binv = 0;
  always @(posedge clk) n_binv += int'(ev.back_inval);

  task automatic binv(input line_addr_t la, output logic dirty, output line_t data);
    @(negedge clk);
    binv_valid = 1'b1; binv_laddr = la;
    #1;
    check(!core_req_ready && !sfinv_ready, "requests held during back-invalidation");
    dirty = binv_dirty; data = binv_data;
    @(negedge clk);
    binv_valid = 1'b0;
  endtask

  core_resp_t r;
  logic       bd;
  line_t      bdata;
  int lat, f0, evicted, wb0;
  word_t expw;

  initial begin
    core_req_valid = 1'b0; core_req = '0; sfinv_valid = 1'b0; sfinv_req = '0;
    binv_valid = 1'b0; binv_laddr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // miss, then hit
    load(1'b0, 6'd1, A(1, 3), r, lat);
    check(r.src == SRC_L2 && r.data == pattern_word(A(1) >> 6, 3), "miss data/SourceLevel");
    check(lat == L2LAT + 2, $sformatf("miss latency %0d", lat));
    check(r.id == 5'd7 && !r.is_store, "response id");
    load(1'b0, 6'd1, A(1, 5), r, lat);
    check(r.src == SRC_L1 && r.data == pattern_word(A(1) >> 6, 5), "hit data/SourceLevel");
    check(lat == 1, $sformatf("hit latency %0d", lat));

    // NoHit: another domain misses on the same address, then has its own copy
    load(1'b0, 6'd2, A(1, 3), r, lat);
    check(r.src == SRC_L2, "cross-domain access must miss");
    load(1'b0, 6'd2, A(1, 3), r, lat);
    check(r.src == SRC_L1, "second domain hits its own copy");
    load(1'b0, 6'd1, A(1, 0), r, lat);
    check(r.src == SRC_L1, "first domain copy untouched");

    // speculative fill, then SFill-Inv invalidates and forwards
    load(1'b1, 6'd1, A(2), r, lat);
    check(r.src == SRC_L2, "speculative miss");
    f0 = n_sfinv;
    sfinv(6'd1, A(2), SRC_L2);
    check(n_inval == 1, "SFill-Inv invalidated the speculative line");
    check(n_sfinv == f0 + 1 && last_sfinv.laddr == A(2) >> 6 && last_sfinv.src == SRC_L2,
          "SFill-Inv forwarded to L2 with its SourceLevel");
    load(1'b0, 6'd1, A(2), r, lat);
    check(r.src == SRC_L2, "line is gone after SFill-Inv");

    // non-speculative hit clears SpecBit; SFill-Inv is then dropped
    load(1'b1, 6'd1, A(3), r, lat);
    load(1'b0, 6'd1, A(3), r, lat);
    check(r.src == SRC_L1 && n_specclr == 1, "non-speculative hit clears SpecBit");
    f0 = n_sfinv;
    sfinv(6'd1, A(3), SRC_L2);
    check(n_sfinv == f0 && n_drop == 1, "SFill-Inv dropped for a non-speculative line");
    load(1'b0, 6'd1, A(3), r, lat);
    check(r.src == SRC_L1, "line kept after dropped SFill-Inv");

    // speculative hit leaves SpecBit set
    load(1'b1, 6'd1, A(4), r, lat);
    load(1'b1, 6'd1, A(4), r, lat);
    check(r.src == SRC_L1, "speculative hit");
    sfinv(6'd1, A(4), SRC_MEM);
    check(n_inval == 2, "speculative hit did not clear SpecBit");

    // SFill-Inv for a line from another domain does not touch it
    load(1'b1, 6'd3, A(5), r, lat);
    sfinv(6'd1, A(5), SRC_L2);
    load(1'b0, 6'd3, A(5), r, lat);
    check(r.src == SRC_L1, "SFill-Inv of another domain leaves the line");

    // absent line: forwarded only when SourceLevel > 1
    f0 = n_sfinv;
    sfinv(6'd1, A(40), SRC_MEM);
    check(n_sfinv == f0 + 1, "absent line, SourceLevel 3: forwarded");
    sfinv(6'd1, A(41), SRC_L1);
    check(n_sfinv == f0 + 1, "SourceLevel 1: not forwarded");

    // store with byte mask, read back
    access(1'b1, 1'b0, 6'd1, A(1, 3), 64'hDEAD_BEEF_0BAD_F00D, 8'h0F, r, lat);
    check(r.is_store && r.src == SRC_L1, "store hit acknowledged");
    expw = merge64(pattern_word(A(1) >> 6, 3), 64'hDEAD_BEEF_0BAD_F00D, 8'h0F);
    load(1'b0, 6'd1, A(1, 3), r, lat);
    check(r.data == expw, "store merged into line");

    // evict the dirty line by random replacement; its write-back must carry the data
    evicted = 0;
    wb0 = n_wb;
    for (int i = 0; i < 400 && !evicted; i++) begin
      load(1'b0, domain_t'(8 + i / 40), A(20 + i % 40), r, lat);
      if (n_wb > wb0) evicted = 1;
    end
    check(evicted == 1, "dirty line eventually evicted");
    check(last_wb.laddr == A(1) >> 6 && last_wb.data[3*64 +: 64] == expw && last_wb.domain == 6'd1,
          "write-back carries address, DomainID and stored data");
    load(1'b0, 6'd1, A(1, 3), r, lat);
    check(r.src == SRC_L2 && r.data == expw, "refetched line holds the stored data");

    // NEWS paths. X and Y share Index 10 but differ in Tag'.
    begin
      int m0, t0, n0;
      m0 = n_mapmiss;
      load(1'b0, 6'd5, A(10, 2), r, lat);
      check(n_mapmiss == m0 + 1 && r.src == SRC_L2, "mapping miss");
      t0 = n_tagmiss; n0 = n_nofill;
      load(1'b0, 6'd5, A(10 + 64, 2), r, lat);
      check(n_tagmiss == t0 + 1 && n_nofill == n0 && r.src == SRC_L2 &&
            r.data == pattern_word(A(10 + 64) >> 6, 2), "non-speculative tag miss");
      load(1'b0, 6'd5, A(10 + 64, 2), r, lat);
      check(r.src == SRC_L1, "tag miss replaced the mapped line");
      load(1'b0, 6'd5, A(10, 2), r, lat);
      check(r.src == SRC_L2, "old line was replaced");
      // speculative tag miss: ForwardNoFill
      t0 = n_tagmiss;
      load(1'b1, 6'd5, A(10 + 128, 4), r, lat);
      check(n_tagmiss == t0 + 1 && n_nofill == n0 + 1, "speculative tag miss takes ForwardNoFill");
      check(r.src == SRC_L2 && r.data == pattern_word(A(10 + 128) >> 6, 4), "forwarded data");
      load(1'b1, 6'd5, A(10 + 128, 4), r, lat);
      check(r.src == SRC_L2, "ForwardNoFill did not fill the cache");
      // the same index from another domain is a mapping miss
      m0 = n_mapmiss;
      load(1'b0, 6'd6, A(10, 2), r, lat);
      check(n_mapmiss == m0 + 1, "another domain's Index never maps");
    end

    // store miss: write-allocate
    access(1'b1, 1'b0, 6'd1, A(60, 1), 64'h1122_3344_5566_7788, 8'hFF, r, lat);
    check(r.is_store && r.src == SRC_L2, "store miss allocates");
    load(1'b0, 6'd1, A(60, 1), r, lat);
    check(r.src == SRC_L1 && r.data == 64'h1122_3344_5566_7788, "stored word read back");

    // back-invalidation (inclusion): every domain's copy goes, dirty data is returned
    load(1'b0, 6'd7, A(60, 1), r, lat);
    load(1'b0, 6'd7, A(60, 1), r, lat);
    check(r.src == SRC_L1 && r.data == pattern_word(A(60) >> 6, 1), "second domain's copy");
    binv(line_addr_t'(A(60) >> 6), bd, bdata);
    check(bd && bdata[1*64 +: 64] == 64'h1122_3344_5566_7788, "dirty copy returned to L2");
    check(n_binv == 1, "back-invalidation event");
    load(1'b0, 6'd1, A(60, 1), r, lat);
    check(r.src == SRC_L2, "first domain's copy invalidated");
    load(1'b0, 6'd7, A(60, 1), r, lat);
    check(r.src == SRC_L2, "second domain's copy invalidated");
    binv(line_addr_t'(A(999) >> 6), bd, bdata);
    check(!bd && n_binv == 1, "absent line: nothing to do");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
