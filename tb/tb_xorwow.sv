// tb_xorwow: checks the xorwow core against an independent software model of
// Marsaglia's xorwow recurrence, including the first output after reset, a hold
// cycle (en=0) and 500 consecutive numbers.
module tb_xorwow;
  localparam logic [31:0] SEED = 32'hCAFE_0001;
  logic clk = 0, rst_n = 0, en = 0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;
  logic [31:0] s [6];

  xorwow #(.SEED(SEED)) dut (.clk, .rst_n, .en, .rnd);

  always #5 clk = ~clk;

  function automatic logic [31:0] model_next();
    logic [31:0] t;
    t = s[0] ^ (s[0] >> 2);
    s[0] = s[1]; s[1] = s[2]; s[2] = s[3]; s[3] = s[4];
    s[4] = (s[4] ^ (s[4] << 4)) ^ (t ^ (t << 1));
    s[5] = s[5] + 32'd362437;
    return s[4] + s[5];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] exp;
    s[0] = 32'd123456789 ^ SEED; s[1] = 32'd362436069; s[2] = 32'd521288629 + SEED;
    s[3] = 32'd88675123; s[4] = 32'd5783321 ^ {SEED[15:0], SEED[31:16]}; s[5] = 32'd6615241;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    en = 1;
    for (int i = 0; i < 500; i++) begin
      exp = model_next();
      @(negedge clk);
      checks++;
      if (rnd !== exp) begin
        failures++;
        if (failures < 5) $display("mismatch %0d: %h vs %h", i, rnd, exp);
      end
      if (i == 100) begin   // one cycle on hold
        en = 0; @(negedge clk); checks++;
        if (rnd !== exp) failures++;
        en = 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
