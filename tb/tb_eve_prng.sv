// tb_eve_prng: a 5-PE random number source; every PE's bytes must equal the
// xorwow sequences of its three cores (seeded as documented) and the PEs'
// numbers must differ from each other.
module tb_eve_prng;
  import genesys_pkg::*;
  localparam int NP = 5;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0][RND_B*8-1:0] rnd;
  int checks = 0, failures = 0;
  logic [31:0] s [NP*3][6];

  eve_prng #(.NUM_PE(NP)) dut (.clk, .rst_n, .rnd);
  always #5 clk = ~clk;

  function automatic logic [31:0] step(int c);
    logic [31:0] t;
    t = s[c][0] ^ (s[c][0] >> 2);
    s[c][0] = s[c][1]; s[c][1] = s[c][2]; s[c][2] = s[c][3]; s[c][3] = s[c][4];
    s[c][4] = (s[c][4] ^ (s[c][4] << 4)) ^ (t ^ (t << 1));
    s[c][5] = s[c][5] + 32'd362437;
    return s[c][4] + s[c][5];
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NP*3-1:0][31:0] e;
    for (int c = 0; c < NP * 3; c++) begin
      logic [31:0] seed;
      seed = 32'h9E37_79B9 * (c + 1);
      s[c][0] = 32'd123456789 ^ seed; s[c][1] = 32'd362436069; s[c][2] = 32'd521288629 + seed;
      s[c][3] = 32'd88675123; s[c][4] = 32'd5783321 ^ {seed[15:0], seed[31:16]}; s[c][5] = 32'd6615241;
    end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      for (int c = 0; c < NP * 3; c++) e[c] = step(c);
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        checks++;
        if (rnd[p] !== {e[p*3+2], e[p*3+1], e[p*3]}) failures++;
        if (p > 0) begin
          checks++;
          if (rnd[p] == rnd[p-1]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
