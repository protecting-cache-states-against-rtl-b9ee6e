// l2_cache_tb: directed test of the L2 (16 sets x 4 ways, 12-cycle hit
// latency) with the behavioural memory (20-cycle reads). Expected data comes
// from star_tb_pkg::pattern and the write-backs made. Covered: the reset sweep,
// miss from memory (SourceLevel 3) and its latency, hit (SourceLevel 2) in
// exactly 12 cycles, write-back hit, eviction of a dirty way to memory with
// its data, write-back miss written through, and the SFill-Inv rules (a
// speculative line is invalidated; a line read non-speculatively is kept).
// A stand-in for the L1 answers back-invalidations: every replaced valid way
// and every SFill-Inv invalidation must back-invalidate the L1, and a dirty
// L1 copy's data must reach memory.
module l2_cache_tb;
  import star_pkg::*;
  import star_tb_pkg::*;

  localparam int SETS = 16, WAYS = 4, LAT = 12, MLAT = 20;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     l1_req_valid, l1_req_ready, l1_resp_valid;
  l2_req_t  l1_req;
  l2_resp_t l1_resp;
  logic     mem_req_valid, mem_req_ready, mem_resp_valid;
  mem_req_t mem_req;
  line_t    mem_resp_data;
  logic     ev_hit, ev_miss, ev_sfinv_inval;
  logic       l1_binv_valid, l1_binv_dirty;
  line_addr_t l1_binv_laddr;
  line_t      l1_binv_data;
  int       n_read, n_write;
  mem_req_t last_write;

  l2_cache #(.SETS(SETS), .WAYS(WAYS), .LATENCY(LAT)) dut (.*);
  mem_model #(.LAT(MLAT)) u_mem (
    .clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready), .req(mem_req),
    .resp_valid(mem_resp_valid), .resp_data(mem_resp_data), .n_read, .n_write, .last_write);

  int checks = 0, failures = 0, n_inval = 0;
  always @(posedge clk) n_inval += int'(ev_sfinv_inval);

  // stand-in for the L1: may hold one dirty copy, which a back-invalidation
  // takes away
  logic       l1d_valid = 1'b0;
  line_addr_t l1d_addr = '0;
  line_t      l1d_data = '0;
  assign l1_binv_dirty = l1_binv_valid && l1d_valid && (l1_binv_laddr == l1d_addr);
  assign l1_binv_data  = l1d_data;
  int n_binv = 0;
  line_addr_t binv_seen [$];
  always @(posedge clk) if (l1_binv_valid) begin
    n_binv++;
    binv_seen.push_back(l1_binv_laddr);
    if (l1_binv_dirty) l1d_valid <= 1'b0;
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

  // line address with set s and tag t
  function automatic line_addr_t LA(int t, int s);
    return {38'(t), 4'(s)};
  endfunction

  task automatic send(input l2_kind_e k, input line_addr_t a, input bit spec, input line_t d);
    @(negedge clk);
    l1_req_valid = 1'b1;
    l1_req = '{kind: k, laddr: a, domain: 6'd1, spec: spec, src: SRC_MEM, data: d};
    while (!l1_req_ready) @(negedge clk);
    @(negedge clk);
    l1_req_valid = 1'b0;
  endtask

  task automatic read(input line_addr_t a, input bit spec, output l2_resp_t r, output int lat);
    send(L2_READ, a, spec, '0);
    lat = 1;
    while (!l1_resp_valid) begin @(negedge clk); lat++; end
    r = l1_resp;
  endtask

  l2_resp_t r;
  int lat, w0;
  line_t nd;

  initial begin
    l1_req_valid = 1'b0; l1_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!l1_req_ready, "not ready during the reset sweep");
    repeat (SETS + 2) @(negedge clk);
    check(l1_req_ready, "ready after the reset sweep");

    read(LA(1, 3), 1'b0, r, lat);
    check(r.src == SRC_MEM && r.data == pattern(LA(1, 3)), "miss served from memory");
    check(lat == MLAT + 3, $sformatf("miss latency %0d", lat));
    read(LA(1, 3), 1'b0, r, lat);
    check(r.src == SRC_L2 && r.data == pattern(LA(1, 3)), "hit");
    check(lat == LAT, $sformatf("hit latency %0d, expected %0d", lat, LAT));

    // write-back hit, then read back
    nd = ~pattern(LA(1, 3));
    send(L2_WB, LA(1, 3), 1'b0, nd);
    read(LA(1, 3), 1'b0, r, lat);
    check(r.src == SRC_L2 && r.data == nd, "write-back updated the line");

    // fill the set: the dirty line is evicted to memory with its data
    w0 = n_write;
    for (int t = 2; t < 2 + WAYS; t++) read(LA(t, 3), 1'b0, r, lat);
    check(n_write == w0 + 1 && last_write.laddr == LA(1, 3) && last_write.data == nd,
          "dirty victim written to memory");
    check(LA(1, 3) inside {binv_seen}, "evicted line back-invalidated in L1");
    read(LA(1, 3), 1'b0, r, lat);
    check(r.src == SRC_MEM && r.data == nd, "evicted line re-read from memory");

    // write-back miss goes straight to memory
    w0 = n_write;
    send(L2_WB, LA(9, 5), 1'b0, {8{64'h0123_4567_89AB_CDEF}});
    repeat (4) @(negedge clk);
    check(n_write == w0 + 1 && last_write.laddr == LA(9, 5), "write-back miss written through");

    // SFill-Inv: speculative line is invalidated
    read(LA(20, 7), 1'b1, r, lat);
    send(L2_SFINV, LA(20, 7), 1'b0, '0);
    repeat (3) @(negedge clk);
    check(n_inval == 1, "speculative line invalidated");
    check(binv_seen[$] == LA(20, 7), "SFill-Inv invalidation also removes L1 copies");
    read(LA(20, 7), 1'b0, r, lat);
    check(r.src == SRC_MEM, "invalidated line is gone");
    // non-speculative line is kept
    read(LA(21, 8), 1'b0, r, lat);
    send(L2_SFINV, LA(21, 8), 1'b0, '0);
    repeat (3) @(negedge clk);
    read(LA(21, 8), 1'b0, r, lat);
    check(n_inval == 1 && r.src == SRC_L2, "non-speculative line kept");
    // speculative fill later read non-speculatively: SpecBit cleared, kept
    read(LA(22, 9), 1'b1, r, lat);
    read(LA(22, 9), 1'b0, r, lat);
    send(L2_SFINV, LA(22, 9), 1'b0, '0);
    repeat (3) @(negedge clk);
    read(LA(22, 9), 1'b0, r, lat);
    check(n_inval == 1 && r.src == SRC_L2, "non-speculative hit cleared SpecBit");
    // absent line: nothing happens
    send(L2_SFINV, LA(23, 10), 1'b0, '0);
    repeat (3) @(negedge clk);
    check(n_inval == 1 && l1_req_ready, "absent line ignored");

    // a dirty L1 copy reaches memory when L2 evicts the line (set 6 is empty)
    read(LA(30, 6), 1'b0, r, lat);
    l1d_valid = 1'b1; l1d_addr = LA(30, 6); l1d_data = {8{64'hFEED_FACE_0000_0006}};
    w0 = n_write;
    for (int t = 31; t < 31 + WAYS; t++) read(LA(t, 6), 1'b0, r, lat);
    check(!l1d_valid, "L1 copy back-invalidated");
    check(n_write == w0 + 1 && last_write.laddr == LA(30, 6) && last_write.data == {8{64'hFEED_FACE_0000_0006}},
          "dirty L1 data written to memory");
    read(LA(30, 6), 1'b0, r, lat);
    check(r.src == SRC_MEM && r.data == {8{64'hFEED_FACE_0000_0006}}, "line re-read with the L1 data");
    // filling an invalid way needs no back-invalidation
    w0 = n_binv;
    read(LA(40, 11), 1'b0, r, lat);
    check(n_binv == w0, "no back-invalidation for an invalid way");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
