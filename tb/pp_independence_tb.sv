// pp_independence_tb: prime-probe against both STAR L1 variants at full size
// (512 lines), shown as non-interference. Each scenario runs on two caches
// that start identical (same LFSR seed, same reset cycle) and see the same
// requests, except that the victim touches a different secret-dependent line
// in each. If the attacker's probe sees the same thing in both, the probe
// cannot tell the secrets apart.
//
// Scenarios (pairs of instances, each with its own fixed-latency L2 model):
//   0/1  STAR-FARR, cross-domain, as in prime-probe on an AES T-table: the
//        attacker (domain 1) fills the cache with 512 lines, the victim
//        (domain 2) loads table line 0x10 or 0x2A, and the attacker probes.
//   2/3  STAR-NEWS, the same cross-domain attack.
//   4/5  STAR-NEWS, same domain, Spectre v1 over prime-probe: receiver and
//        sender are both domain 1. The sender's wrong-path load either has the
//        Index of a primed line (secret 30: mapping hit, tag miss, so
//        ForwardNoFill) or an Index nobody holds (mapping miss), and is then
//        squashed with an SFill-Inv. Primed line 30 is touched again just
//        before, since random replacement can evict it while priming.
// Checked: for each pair, the hit/miss pattern of the 512 probe loads and the
// cycle the probe ends are identical; the probe sees at least one eviction, so
// the victim's access did move something; and scenario 4 really took
// ForwardNoFill while 5 took a mapping miss. Requests are issued one at a
// time, each after the previous answer.
module pp_independence_tb;
  import star_pkg::*;
  import star_tb_pkg::*;

  localparam int LINES = 512;
  localparam int L2LAT = 12;
  localparam int NI    = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // primed line j of the attacker / receiver
  function automatic line_addr_t prime_la(int j);
    return 42'h1000 + 42'(j);
  endfunction

  // the victim's line for scenario i
  function automatic line_addr_t victim_la(int i);
    case (i)
      0, 2:    return 42'h8_0000 + 42'h10;           // table line 0x10
      1, 3:    return 42'h8_0000 + 42'h2A;           // table line 0x2A
      4:       return 42'h8_0000 + 42'h1000 + 42'd30; // Index of primed line 30, other Tag'
      default: return 42'h8_0000 + 42'h0E00;         // Index that no primed line has
    endcase
  endfunction

  logic [LINES-1:0] probe_hit [NI];
  longint           probe_end [NI];
  int               n_nofill [NI], n_mapmiss_victim [NI];
  bit               done [NI];

  for (genvar g = 0; g < NI; g++) begin : g_i
    localparam bit      NEWS  = (g >= 2);
    localparam domain_t VDOM  = (g >= 4) ? 6'd1 : 6'd2;
    localparam bit      VSPEC = (g >= 4);

    logic       core_req_valid, core_req_ready, core_resp_valid;
    core_req_t  core_req;
    core_resp_t core_resp;
    logic       sfinv_valid, sfinv_ready;
    sfinv_req_t sfinv_req;
    logic       l2_req_valid, l2_req_ready, l2_resp_valid;
    l2_req_t    l2_req;
    l2_resp_t   l2_resp;
    l1_events_t ev;
    logic       binv_dirty;
    line_t      binv_data;
    int         m_read, m_wb, m_sfinv;
    l2_req_t    last_wb, last_sfinv;

    if (NEWS) begin : g_news
      news_l1 dut (
        .clk, .rst_n, .core_req_valid, .core_req_ready, .core_req, .core_resp_valid, .core_resp,
        .sfinv_valid, .sfinv_ready, .sfinv_req, .l2_req_valid, .l2_req_ready, .l2_req,
        .l2_resp_valid, .l2_resp, .binv_valid(1'b0), .binv_laddr('0), .binv_dirty, .binv_data, .ev);
    end else begin : g_farr
      farr_l1 dut (
        .clk, .rst_n, .core_req_valid, .core_req_ready, .core_req, .core_resp_valid, .core_resp,
        .sfinv_valid, .sfinv_ready, .sfinv_req, .l2_req_valid, .l2_req_ready, .l2_req,
        .l2_resp_valid, .l2_resp, .binv_valid(1'b0), .binv_laddr('0), .binv_dirty, .binv_data, .ev);
    end

    l2_model #(.LAT(L2LAT)) u_l2 (
      .clk, .rst_n, .req_valid(l2_req_valid), .req_ready(l2_req_ready), .req(l2_req),
      .resp_valid(l2_resp_valid), .resp(l2_resp), .n_read(m_read), .n_wb(m_wb),
      .n_sfinv(m_sfinv), .last_wb, .last_sfinv);

    bit in_victim = 1'b0;
    always @(posedge clk) begin
      n_nofill[g] += int'(ev.fwd_nofill);
      if (in_victim) n_mapmiss_victim[g] += int'(ev.map_miss);
    end

    task automatic load(input bit spec, input domain_t d, input line_addr_t la,
                        output bit hit, output bit ok);
      core_resp_t r;
      @(negedge clk);
      core_req_valid = 1'b1;
      core_req = '{is_store: 1'b0, spec: spec, domain: d, addr: {la, 6'h08},
                   wdata: '0, wstrb: '0, id: 5'd0};
      while (!core_req_ready) @(negedge clk);
      @(negedge clk);
      core_req_valid = 1'b0;
      while (!core_resp_valid) @(negedge clk);
      r   = core_resp;
      hit = (r.src == SRC_L1);
      ok  = (r.data == pattern_word(la, 1));
    endtask

    initial begin : drive
      bit hit, ok, all_ok;
      core_req_valid = 1'b0; core_req = '0; sfinv_valid = 1'b0; sfinv_req = '0;
      all_ok = 1'b1;
      wait (rst_n);
      // prime
      for (int j = 0; j < LINES; j++) begin
        load(1'b0, 6'd1, prime_la(j), hit, ok);
        all_ok &= ok;
      end
      // random replacement may have pushed line 30 out while priming: touch it
      // again so the same-domain sender finds its Index mapped
      load(1'b0, 6'd1, prime_la(30), hit, ok);
      all_ok &= ok;
      // victim / sender
      in_victim = 1'b1;
      load(VSPEC, VDOM, victim_la(g), hit, ok);
      all_ok &= ok;
      in_victim = 1'b0;
      if (VSPEC) begin
        @(negedge clk);
        sfinv_valid = 1'b1;
        sfinv_req = '{addr: {victim_la(g), 6'h08}, domain: VDOM, src: SRC_L2};
        while (!sfinv_ready) @(negedge clk);
        @(negedge clk);
        sfinv_valid = 1'b0;
      end
      repeat (4) @(negedge clk);
      // probe
      for (int j = 0; j < LINES; j++) begin
        load(1'b0, 6'd1, prime_la(j), hit, ok);
        probe_hit[g][j] = hit;
        all_ok &= ok;
      end
      probe_end[g] = longint'($time);
      check(all_ok, $sformatf("scenario %0d: all loads returned the right data", g));
      done[g] = 1'b1;
    end
  end

  initial begin
    foreach (done[i]) begin
      done[i] = 1'b0; n_nofill[i] = 0; n_mapmiss_victim[i] = 0; probe_hit[i] = '0; probe_end[i] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NI; i++) wait (done[i]);

    for (int p = 0; p < NI; p += 2) begin
      $display("scenarios %0d/%0d: probe misses %0d and %0d, probe ends at %0t and %0t",
               p, p + 1, LINES - $countones(probe_hit[p]), LINES - $countones(probe_hit[p+1]),
               probe_end[p], probe_end[p+1]);
      check(probe_hit[p] == probe_hit[p+1], $sformatf("scenarios %0d/%0d: same probe pattern", p, p + 1));
      check(probe_end[p] == probe_end[p+1], $sformatf("scenarios %0d/%0d: probe takes the same time", p, p + 1));
      check(probe_hit[p] != '1, $sformatf("scenario %0d: the probe sees evictions", p));
    end
    check(n_nofill[4] == 1, "scenario 4: the sender's load took ForwardNoFill");
    check(n_nofill[5] == 0 && n_mapmiss_victim[5] == 1, "scenario 5: the sender's load was a mapping miss");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
