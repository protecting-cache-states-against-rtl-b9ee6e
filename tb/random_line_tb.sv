// random_line_tb: checks the random line source against an independent
// bit-serial model of the same maximal-length LFSR (x^32+x^22+x^2+x+1), that
// it restarts from its seed on reset, and that over
// 64 x 512 draws every one of the 512 line numbers appears between 32 and 96
// times (uniform expectation 64).
module random_line_tb;
  localparam int W = 9;
  localparam logic [31:0] SEED = 32'hACE1_2345;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [W-1:0] line;
  int checks = 0, failures = 0;
  int hist [1 << W];

  random_line #(.LINE_IDX_W(W), .SEED(SEED)) dut (.clk, .rst_n, .line);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference: one step of the Galois register is a multiplication of the
  // state polynomial by x^-1 modulo p(x), written here from p(x) itself.
  function automatic logic [31:0] ref_step(logic [31:0] s);
    logic [32:0] v;
    // multiply by x^-1 mod p: if s is odd, add p then divide by x
    v = {1'b0, s};
    if (s[0]) v = v ^ 33'h1_0040_0007;    // p(x) = x^32+x^22+x^2+x+1
    return v[32:1];
  endfunction

  initial begin
    logic [31:0] r;
    for (int i = 0; i < (1 << W); i++) hist[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    r = SEED;
    checks++; if (line !== r[W-1:0]) begin failures++; $display("seed not loaded"); end
    for (int n = 0; n < 64 * (1 << W); n++) begin
      @(negedge clk);
      r = ref_step(r);
      hist[line]++;
      if (n < 2000) begin
        checks++;
        if (line !== r[W-1:0]) begin
          failures++;
          if (failures < 5) $display("step %0d: line %0d expected %0d", n, line, r[W-1:0]);
        end
      end
    end
    for (int i = 0; i < (1 << W); i++) begin
      checks++;
      if (hist[i] < 32 || hist[i] > 96) begin
        failures++; $display("line %0d drawn %0d times", i, hist[i]);
      end
    end
    // reset returns to the seed
    rst_n = 1'b0; @(negedge clk); rst_n = 1'b1;
    checks++; if (line !== SEED[W-1:0]) begin failures++; $display("reset did not reload seed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
