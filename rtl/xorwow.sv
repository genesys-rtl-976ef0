// xorwow: one XOR-WOW pseudo random number generator core (Marsaglia 2003), the
// algorithm the EvE random number generators use.
//
// State: five 32-bit words x,y,z,w,v and a Weyl counter d. Each cycle with en=1:
//   t = x ^ (x >> 2);  x,y,z,w = y,z,w,v;  v = (v ^ (v << 4)) ^ (t ^ (t << 1));
//   d = d + 362437;    rnd = v_new + d_new
// rnd is registered and valid from the first cycle after reset (it then holds
// the first number of the sequence). The algorithm follows the paper; the seed
// handling (SEED is mixed into the five state words at reset) is this design's.
module xorwow #(
  parameter logic [31:0] SEED = 32'h1234_5678
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  output logic [31:0] rnd
);
  logic [31:0] x, y, z, w, v, d;
  logic [31:0] t, v_n, d_n;

  always_comb begin
    t   = x ^ (x >> 2);
    v_n = (v ^ (v << 4)) ^ (t ^ (t << 1));
    d_n = d + 32'd362437;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x <= 32'd123456789 ^ SEED;
      y <= 32'd362436069;
      z <= 32'd521288629 + SEED;
      w <= 32'd88675123;
      v <= 32'd5783321 ^ {SEED[15:0], SEED[31:16]};
      d <= 32'd6615241;
      rnd <= '0;
    end else if (en) begin
      x <= y; y <= z; z <= w; w <= v; v <= v_n; d <= d_n;
      rnd <= v_n + d_n;
    end
  end
endmodule
