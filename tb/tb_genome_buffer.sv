// tb_genome_buffer: random reads and writes on all banks at once of a reduced
// genome buffer (6 banks of 256 words); read data must match a reference copy
// exactly one cycle after the read.
module tb_genome_buffer;
  localparam int NB = 6, NW = 256;
  logic clk = 0;
  logic [NB-1:0] en, we;
  logic [NB-1:0][7:0] addr;
  logic [NB-1:0][63:0] wdata, rdata;
  logic [63:0] ref_mem [NB][NW];
  int checks = 0, failures = 0;

  genome_buffer #(.NUM_BANKS(NB), .BANK_WORDS(NW)) dut (.clk, .en, .we, .addr, .wdata, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NB-1:0] rd_q; logic [NB-1:0][7:0] a_q;
    en = '1; we = '1;
    for (int w = 0; w < NW; w++) begin   // fill every word
      for (int b = 0; b < NB; b++) begin
        addr[b] = 8'(w); wdata[b] = {$urandom, $urandom}; ref_mem[b][w] = wdata[b];
      end
      @(posedge clk); #1;
    end
    rd_q = '0;
    for (int i = 0; i < 2000; i++) begin
      for (int b = 0; b < NB; b++) begin
        en[b] = 1'($urandom); we[b] = 1'($urandom); addr[b] = 8'($urandom); wdata[b] = {$urandom, $urandom};
      end
      @(posedge clk); #1;
      for (int b = 0; b < NB; b++) begin
        if (en[b] && !we[b]) begin
          checks++;
          if (rdata[b] !== ref_mem[b][addr[b]]) failures++;
        end
        if (en[b] && we[b]) ref_mem[b][addr[b]] = wdata[b];
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
