// genome_buffer: the shared, multi-banked on-chip SRAM that holds every genome
// of a generation (1.5 MB in 48 banks of 4096 64-bit words by default, the
// paper's size and bank count).
//
// Each bank has one port: en/we/addr/wdata, with rdata registered one cycle
// after a read (en=1, we=0). Banks work independently, so the gene split and
// gene merge can stream one word per bank per cycle. Written here as plain
// arrays; an implementation would map each bank onto an SRAM macro.
// Data layout used by the rest of the design (this design's choice): genome g
// lives in bank g mod NUM_BANKS, starting at word (g div NUM_BANKS)*SLOT_WORDS;
// word 0 of the slot is the genome header, the genes follow.
module genome_buffer #(
  parameter int unsigned NUM_BANKS  = 48,
  parameter int unsigned BANK_WORDS = 4096,
  localparam int unsigned AW = $clog2(BANK_WORDS)
) (
  input  logic                              clk,
  input  logic [NUM_BANKS-1:0]              en,
  input  logic [NUM_BANKS-1:0]              we,
  input  logic [NUM_BANKS-1:0][AW-1:0]      addr,
  input  logic [NUM_BANKS-1:0][63:0]        wdata,
  output logic [NUM_BANKS-1:0][63:0]        rdata
);
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_bank
    logic [63:0] mem [BANK_WORDS];
    always_ff @(posedge clk) begin
      if (en[b]) begin
        if (we[b]) mem[addr[b]] <= wdata[b];
        else       rdata[b]     <= mem[addr[b]];
      end
    end
  end
endmodule
