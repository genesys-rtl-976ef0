// eve_gene_merge: writes the finished child genomes of a wave back into the
// genome buffer. Each PE has a child_merge unit (instantiated here) that
// collects its child's genes; after all children of the wave are complete,
// write_start lets one writer per SRAM bank walk over the PEs whose child
// genome lives in that bank. For each such child it writes the header word
// (fitness 0, gene count) and then the genes in ascending key order, one word
// per cycle. Banks write in parallel; children in the same bank are written one
// after another. write_done is high once every bank is finished.
// Writing each child back into the genome buffer follows the paper; fitness is
// left 0 for the CPU to fill in after the child's inference run.
//
// Timing: a writer spends one cycle per PE it skips, one per header and one
// per gene. sram_writes counts words written.
module eve_gene_merge
  import genesys_pkg::*;
#(
  parameter int unsigned NUM_PE     = 256,
  parameter int unsigned NUM_BANKS  = 48,
  parameter int unsigned BANK_WORDS = 4096,
  parameter int unsigned SLOT_WORDS = 512,
  parameter int unsigned ADD_MAX    = 16,
  localparam int unsigned SPB     = BANK_WORDS / SLOT_WORDS,
  localparam int unsigned GENOMES = NUM_BANKS * SPB,
  localparam int unsigned GW      = $clog2(GENOMES),
  localparam int unsigned AW      = $clog2(BANK_WORDS),
  localparam int unsigned PW      = $clog2(NUM_PE + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,          // new wave: empty all child units
  input  logic [NUM_PE-1:0]             pe_active,
  input  logic [NUM_PE-1:0][GW-1:0]     pe_child,
  input  logic [NUM_PE-1:0][15:0]       pe_budget,
  output logic [NUM_PE-1:0]             pe_add_allow,
  // child genes from the PEs (collection side)
  input  logic [NUM_PE-1:0]             in_valid,
  output logic [NUM_PE-1:0]             in_ready,
  input  gene_tok_t [NUM_PE-1:0]        in_tok,
  output logic                          all_done,     // every active child is complete
  // write-back
  input  logic                          write_start,
  output logic                          write_done,
  output logic [31:0]                   sram_writes,
  output logic [NUM_BANKS-1:0]          mem_en,
  output logic [NUM_BANKS-1:0][AW-1:0]  mem_addr,
  output logic [NUM_BANKS-1:0][63:0]    mem_wdata
);
  typedef enum logic [1:0] {M_IDLE, M_SCAN, M_HDR, M_GENES} mstate_t;

  logic [NUM_PE-1:0]         c_done, rd_valid, rd_pop;
  logic [NUM_PE-1:0][15:0]   c_count;
  gene_t [NUM_PE-1:0]        rd_gene;

  for (genvar p = 0; p < NUM_PE; p++) begin : g_child
    child_merge #(.MAX_GENES(SLOT_WORDS - 1), .ADD_MAX(ADD_MAX)) u_child (
      .clk, .rst_n, .clr, .budget(pe_budget[p]), .add_allow(pe_add_allow[p]),
      .in_valid(in_valid[p]), .in_ready(in_ready[p]), .in_tok(in_tok[p]),
      .done(c_done[p]), .count(c_count[p]),
      .rd_valid(rd_valid[p]), .rd_gene(rd_gene[p]), .rd_pop(rd_pop[p])
    );
  end
  assign all_done = &(c_done | ~pe_active);

  mstate_t [NUM_BANKS-1:0]          ms;
  logic    [NUM_BANKS-1:0][PW-1:0]  cur;
  logic    [NUM_BANKS-1:0][15:0]    wi;
  logic    [NUM_BANKS-1:0]          writing;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_wr
    logic [PW-1:0] pc;
    logic          mine;
    logic [AW-1:0] base;
    genome_hdr_t   h;
    always_comb begin
      pc   = (int'(cur[b]) < NUM_PE) ? cur[b] : '0;
      mine = (int'(cur[b]) < NUM_PE) && pe_active[pc] && (int'(pe_child[pc]) % NUM_BANKS == b);
      base = AW'((int'(pe_child[pc]) / NUM_BANKS) * SLOT_WORDS);
      h    = '{fitness: 32'd0, num_genes: c_count[pc], reserved: 16'd0};
      mem_en[b]    = 1'b0;
      mem_addr[b]  = base;
      mem_wdata[b] = 64'(h);
      writing[b]   = 1'b0;
      unique case (ms[b])
        M_HDR:   mem_en[b] = 1'b1;
        M_GENES: if (rd_valid[pc]) begin
          mem_en[b]    = 1'b1;
          mem_addr[b]  = base + AW'(wi[b]);
          mem_wdata[b] = 64'(rd_gene[pc]);
          writing[b]   = 1'b1;
        end
        default: ;
      endcase
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        ms[b] <= M_IDLE; cur[b] <= '0; wi[b] <= '0;
      end else begin
        unique case (ms[b])
          M_IDLE: if (write_start) begin ms[b] <= M_SCAN; cur[b] <= '0; end
          M_SCAN: begin
            if (int'(cur[b]) >= NUM_PE) ms[b] <= M_IDLE;
            else if (mine)              ms[b] <= M_HDR;
            else                        cur[b] <= cur[b] + 1'b1;
          end
          M_HDR: begin wi[b] <= 16'd1; ms[b] <= M_GENES; end
          M_GENES: begin
            if (rd_valid[pc]) wi[b] <= wi[b] + 1'b1;
            else begin ms[b] <= M_SCAN; cur[b] <= cur[b] + 1'b1; end
          end
          default: ms[b] <= M_IDLE;
        endcase
      end
    end
  end

  always_comb begin
    rd_pop = '0;
    for (int b = 0; b < NUM_BANKS; b++)
      if (writing[b]) rd_pop[cur[b]] = 1'b1;
  end

  logic busy_any;
  always_comb begin
    busy_any = 1'b0;
    for (int b = 0; b < NUM_BANKS; b++) if (ms[b] != M_IDLE) busy_any = 1'b1;
  end
  assign write_done = !busy_any && !write_start;

  always_ff @(posedge clk) begin
    if (!rst_n) sram_writes <= '0;
    else        sram_writes <= sram_writes + 32'($countones(mem_en));
  end
endmodule
