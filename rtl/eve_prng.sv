// eve_prng: the EvE random number source. Every cycle it hands every PE its own
// RND_BYTES fresh 8-bit random numbers, one for each random decision the four
// PE stages take on the genes they hold in that cycle.
//
// It is built from ceil(RND_BYTES/4) xorwow cores per PE, each seeded
// differently (seed = golden-ratio multiple of the core index), all advancing
// every cycle. Output rnd[p] is registered (one cycle after reset it is valid).
// The paper specifies 8-bit numbers to all PEs every cycle from XOR-WOW; giving
// each PE separate cores and the number of bytes per PE are this design's.
module eve_prng
  import genesys_pkg::*;
#(
  parameter int unsigned NUM_PE    = 256,
  parameter int unsigned RND_BYTES = RND_B
) (
  input  logic                         clk,
  input  logic                         rst_n,
  output logic [NUM_PE-1:0][RND_BYTES*8-1:0] rnd
);
  localparam int unsigned CORES = (RND_BYTES + 3) / 4;

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    logic [CORES*32-1:0] bits;
    for (genvar c = 0; c < CORES; c++) begin : g_core
      xorwow #(.SEED(32'h9E37_79B9 * (p * CORES + c + 1))) u_core (
        .clk, .rst_n, .en(1'b1), .rnd(bits[c*32 +: 32])
      );
    end
    assign rnd[p] = bits[RND_BYTES*8-1:0];
  end
endmodule
