// sfinv_unit_tb: directed test of the load-squash side of SFill-Inv (32
// load-queue entries). Six loads are issued and answered with chosen
// SourceLevels; a squash then covers five of them. Expected: no request for
// the L1 hit (SourceLevel 1) or the committed load, one request each, in entry
// order, for the loads answered from L2 and memory, with their address,
// DomainID and SourceLevel; a load squashed before its response sends its
// request once the response arrives; requests are held while the cache is
// not ready; `pending` falls once everything is handed over; a load outside
// the mask sends nothing.
module sfinv_unit_tb;
  import star_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               issue_valid, resp_valid, squash_valid, commit_valid;
  core_req_t          issue_req;
  core_resp_t         resp;
  logic [LQ_ENTRIES-1:0] squash_mask;
  logic [LQ_ID_W-1:0] commit_id;
  logic               sfinv_valid, sfinv_ready, pending, ev_sent, ev_skipped;
  sfinv_req_t         sfinv_req;

  sfinv_unit dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collected requests
  sfinv_req_t got [$];
  always @(posedge clk) if (sfinv_valid && sfinv_ready) got.push_back(sfinv_req);

  function automatic logic [ADDR_W-1:0] AD(int id);
    return 48'h7700_0000 + 48'(id) * 48'h40 + 48'h8;
  endfunction

  task automatic issue(input int id, input domain_t d);
    @(negedge clk);
    issue_valid = 1'b1;
    issue_req = '{is_store: 1'b0, spec: 1'b1, domain: d, addr: AD(id), wdata: '0, wstrb: '0, id: 5'(id)};
    @(negedge clk);
    issue_valid = 1'b0;
  endtask

  task automatic respond(input int id, input src_level_e s);
    @(negedge clk);
    resp_valid = 1'b1;
    resp = '{data: '0, src: s, is_store: 1'b0, id: 5'(id)};
    @(negedge clk);
    resp_valid = 1'b0;
  endtask

  initial begin
    issue_valid = 0; resp_valid = 0; squash_valid = 0; commit_valid = 0;
    issue_req = '0; resp = '0; squash_mask = '0; commit_id = '0; sfinv_ready = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int i = 0; i < 6; i++) issue(i, domain_t'(10 + i));
    respond(0, SRC_L1);
    respond(1, SRC_L2);
    respond(2, SRC_MEM);
    respond(4, SRC_L2);
    respond(5, SRC_L2);
    // entry 4 commits before the squash
    @(negedge clk); commit_valid = 1'b1; commit_id = 5'd4;
    @(negedge clk); commit_valid = 1'b0;
    check(!pending && !sfinv_valid, "nothing pending before the squash");

    // squash entries 0-4, cache not ready yet
    @(negedge clk); squash_valid = 1'b1; squash_mask = 32'h1F;
    @(negedge clk); squash_valid = 1'b0; squash_mask = '0;
    check(pending, "pending after the squash");
    repeat (2) @(negedge clk);
    check(sfinv_valid && sfinv_req.addr == AD(1), "request held while not ready");
    sfinv_ready = 1'b1;
    repeat (4) @(negedge clk);
    check(got.size() == 2, $sformatf("two requests so far, got %0d", got.size()));
    if (got.size() >= 2) begin
      check(got[0].addr == AD(1) && got[0].domain == 6'd11 && got[0].src == SRC_L2, "request for entry 1");
      check(got[1].addr == AD(2) && got[1].domain == 6'd12 && got[1].src == SRC_MEM, "request for entry 2");
    end
    check(pending, "still pending: entry 3 has no response yet");

    // the late response for entry 3 releases its request
    respond(3, SRC_MEM);
    repeat (3) @(negedge clk);
    check(got.size() == 3 && got[$].addr == AD(3) && got[$].src == SRC_MEM, "late request for entry 3");
    check(!pending, "pending cleared once all are sent");
    repeat (10) @(negedge clk);
    check(got.size() == 3, "no request for the L1 hit, the committed or the unsquashed load");

    // a squashed L1 hit is skipped at once
    issue(7, 6'd1);
    respond(7, SRC_L1);
    @(negedge clk); squash_valid = 1'b1; squash_mask = 32'h80;
    @(negedge clk); squash_valid = 1'b0; squash_mask = '0;
    repeat (3) @(negedge clk);
    check(got.size() == 3 && !pending, "SourceLevel 1 load skipped");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
