// random_line: source of the random line number used for random replacement
// (V = RandomLine) in both STAR L1 caches.
//
// A 32-bit maximal-length Galois LFSR (polynomial x^32+x^22+x^2+x+1) advances
// once per clock; the low LINE_IDX_W bits of its state are presented as the
// random line. Every line number is produced with (near) equal frequency and
// independently of the addresses being accessed, which is the property the
// random-replacement defence relies on. The generator itself is this design's
// choice: the architecture only asks for "a random line". A silicon version
// would seed it from a true random source.
//
// Interface: clk, rst_n (async active low, loads SEED), line (registered,
// changes every cycle).
module random_line #(
  parameter int          LINE_IDX_W = 9,
  parameter logic [31:0] SEED       = 32'h0000_0001
) (
  input  logic                  clk,
  input  logic                  rst_n,
  output logic [LINE_IDX_W-1:0] line
);

  logic [31:0] state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      state <= (SEED == 32'd0) ? 32'd1 : SEED;
    else
      state <= state[0] ? ((state >> 1) ^ 32'h8020_0003) : (state >> 1);
  end

  assign line = state[LINE_IDX_W-1:0];

endmodule
