// news_k_sweep_tb: the four STAR-NEWS configurations side by side -- k = 0,
// 2, 4 and 6 extra Index bits, each a full 512-line news_l1 in front of a
// fixed-latency L2 model. Every instance runs the same load stream, so only
// the Index width differs between them.
//
// The stream has N_LOADS loads from one domain. Half go to a hot set of 256
// lines and half to random lines of a 4 MB region (2^16 lines). Every other
// load is speculative, and a fifth of the speculative loads served from L2
// are squashed, which sends an SFill-Inv. The stream comes from a hash of the
// load number, not from $urandom, so all four instances see the same
// addresses.
//
// Checked per instance: every load returns the word the memory pattern gives
// for its address, and the events add up (each load is a hit or a miss). Across
// the instances: speculative mapping-hit/tag-miss loads, which must take
// ForwardNoFill, become rarer as k grows (k0 > k2 > k4 >= k6). This is the
// trend the architecture's evaluation reports for TagMiss loads; the absolute
// counts belong to this synthetic stream only. Each load is issued after the
// previous one answered.
module news_k_sweep_tb;
  import star_pkg::*;
  import star_tb_pkg::*;

  localparam int N_LOADS = 3000;
  localparam int L2LAT   = 12;
  localparam int NK      = 4;
  localparam int KS [NK] = '{0, 2, 4, 6};

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // 32-bit integer hash (xorshift-multiply), gives the stream
  function automatic logic [31:0] mix(input logic [31:0] x);
    x = x ^ (x >> 16);
    x = x * 32'h7FEB_352D;
    x = x ^ (x >> 15);
    x = x * 32'h846C_A68B;
    x = x ^ (x >> 16);
    return x;
  endfunction

  function automatic logic [ADDR_W-1:0] stream_addr(input int i);
    logic [31:0] h = mix(32'(i) ^ 32'hA5A5_0000);
    logic [41:0] la;
    if (h[31]) la = 42'h20_0000 + 42'(h[7:0]);          // hot set, 256 lines
    else       la = 42'h40_0000 + 42'(h[15:0]);         // 4 MB region
    return {la, h[18:16], 3'b000};
  endfunction

  // results per instance
  int n_hit [NK], n_miss [NK], n_tagmiss [NK], n_nofill [NK], n_sfinv [NK], n_bad [NK];
  bit done [NK];

  for (genvar g = 0; g < NK; g++) begin : g_k
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

    news_l1 #(.K_EXTRA(KS[g])) dut (
      .clk, .rst_n, .core_req_valid, .core_req_ready, .core_req, .core_resp_valid, .core_resp,
      .sfinv_valid, .sfinv_ready, .sfinv_req, .l2_req_valid, .l2_req_ready, .l2_req,
      .l2_resp_valid, .l2_resp, .binv_valid(1'b0), .binv_laddr('0), .binv_dirty, .binv_data, .ev);

    l2_model #(.LAT(L2LAT)) u_l2 (
      .clk, .rst_n, .req_valid(l2_req_valid), .req_ready(l2_req_ready), .req(l2_req),
      .resp_valid(l2_resp_valid), .resp(l2_resp), .n_read(m_read), .n_wb(m_wb),
      .n_sfinv(m_sfinv), .last_wb, .last_sfinv);

    always @(posedge clk) begin
      n_hit[g]     += int'(ev.hit);
      n_miss[g]    += int'(ev.miss);
      n_tagmiss[g] += int'(ev.tag_miss && !ev.fwd_nofill);
      n_nofill[g]  += int'(ev.fwd_nofill);
    end

    initial begin : drive
      logic [ADDR_W-1:0] a;
      logic [31:0]       h;
      bit                spec;
      core_resp_t        r;
      core_req_valid = 1'b0; core_req = '0; sfinv_valid = 1'b0; sfinv_req = '0;
      wait (rst_n);
      for (int i = 0; i < N_LOADS; i++) begin
        a    = stream_addr(i);
        h    = mix(32'(i) + 32'h1234_5678);
        spec = h[0];
        @(negedge clk);
        core_req_valid = 1'b1;
        core_req = '{is_store: 1'b0, spec: spec, domain: 6'd3, addr: a, wdata: '0, wstrb: '0, id: 5'd0};
        while (!core_req_ready) @(negedge clk);
        @(negedge clk);
        core_req_valid = 1'b0;
        while (!core_resp_valid) @(negedge clk);
        r = core_resp;
        if (r.data != pattern_word(a[ADDR_W-1:OFFS_W], int'(a[5:3]))) n_bad[g]++;
        // squash one in five speculative loads that missed in L1
        if (spec && r.src != SRC_L1 && h[3:1] < 3'd2) begin
          @(negedge clk);
          sfinv_valid = 1'b1;
          sfinv_req = '{addr: a, domain: 6'd3, src: r.src};
          while (!sfinv_ready) @(negedge clk);
          @(negedge clk);
          sfinv_valid = 1'b0;
          n_sfinv[g]++;
        end
      end
      repeat (5) @(negedge clk);
      done[g] = 1'b1;
    end
  end

  initial begin
    foreach (done[g]) begin
      done[g] = 1'b0; n_hit[g] = 0; n_miss[g] = 0; n_tagmiss[g] = 0;
      n_nofill[g] = 0; n_sfinv[g] = 0; n_bad[g] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (done[0] && done[1] && done[2] && done[3]);

    for (int g = 0; g < NK; g++) begin
      $display("k=%0d: hits %0d misses %0d tag-miss replacements %0d ForwardNoFill %0d SFill-Inv %0d",
               KS[g], n_hit[g], n_miss[g], n_tagmiss[g], n_nofill[g], n_sfinv[g]);
      check(n_bad[g] == 0, $sformatf("k=%0d: %0d loads returned wrong data", KS[g], n_bad[g]));
      check(n_hit[g] + n_miss[g] == N_LOADS, $sformatf("k=%0d: every load is a hit or a miss", KS[g]));
      check(n_hit[g] > 0 && n_sfinv[g] > 0, $sformatf("k=%0d: hits and SFill-Inv happened", KS[g]));
    end
    check(n_nofill[0] > 0, "k=0 produces ForwardNoFill");
    check(n_nofill[0] > n_nofill[1], "ForwardNoFill: k0 > k2");
    check(n_nofill[1] > n_nofill[2], "ForwardNoFill: k2 > k4");
    check(n_nofill[2] >= n_nofill[3], "ForwardNoFill: k4 >= k6");
    check(n_tagmiss[0] > n_tagmiss[3], "non-speculative tag misses: k0 > k6");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
