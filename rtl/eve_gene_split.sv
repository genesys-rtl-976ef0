// eve_gene_split: moves parent genes from the genome buffer to the EvE PEs.
//
// The CPU's gene selector writes the child list (parent genome IDs and the
// child's genome ID per job) through job_we. For every wave:
//   1. wave_start: PEs are allocated greedily, job wave_base+p to PE p, one
//      child per PE, as many children as there are PEs.
//   2. The set of parent genomes the wave needs is formed, and one reader per
//      SRAM bank reads each needed genome in its bank exactly once (header, then
//      genes) and drives it on that bank's lane of the distribution bus
//      {valid, genome ID, word index, data}. Every PE whose child uses that
//      genome captures it into its gene_align unit: a parent shared by many
//      children costs one SRAM read per gene (multicast).
//   3. load_done rises when all banks are finished; run_go then starts every
//      active aligner, which streams aligned pairs to its PE (pe_* ports).
// One child per PE, the greedy allocation and the aim of reading a parent once
// for many children follow the paper; the bus with one lane per bank and the
// wave phases are this design's choices.
//
// Timing: SRAM reads have one cycle latency; a bank lane streams one word per
// cycle plus one idle cycle per genome for its header. sram_reads counts all
// words read.
module eve_gene_split
  import genesys_pkg::*;
#(
  parameter int unsigned NUM_PE     = 256,
  parameter int unsigned NUM_BANKS  = 48,
  parameter int unsigned BANK_WORDS = 4096,
  parameter int unsigned SLOT_WORDS = 512,
  parameter int unsigned MAX_JOBS   = 256,
  localparam int unsigned SPB     = BANK_WORDS / SLOT_WORDS,   // genome slots per bank
  localparam int unsigned GENOMES = NUM_BANKS * SPB,
  localparam int unsigned GW      = $clog2(GENOMES),
  localparam int unsigned JW      = $clog2(MAX_JOBS + 1),
  localparam int unsigned AW      = $clog2(BANK_WORDS),
  localparam int unsigned BW      = $clog2(NUM_BANKS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // child list from the gene selector (CPU)
  input  logic                          job_we,
  input  logic [JW-1:0]                 job_addr,
  input  logic [GW-1:0]                 job_par_a,
  input  logic [GW-1:0]                 job_par_b,
  input  logic [GW-1:0]                 job_child,
  input  logic [JW-1:0]                 num_jobs,
  // wave control
  input  logic                          wave_start,
  input  logic [JW-1:0]                 wave_base,
  output logic                          load_done,
  input  logic                          run_go,
  output logic [NUM_PE-1:0]             pe_active,
  output logic [NUM_PE-1:0][GW-1:0]     pe_child,
  output logic [31:0]                   sram_reads,
  // genome buffer read ports
  output logic [NUM_BANKS-1:0]          mem_en,
  output logic [NUM_BANKS-1:0][AW-1:0]  mem_addr,
  input  logic [NUM_BANKS-1:0][63:0]    mem_rdata,
  // to the PEs
  output logic [NUM_PE-1:0]             pe_valid,
  input  logic [NUM_PE-1:0]             pe_ready,
  output gene_pair_t [NUM_PE-1:0]       pe_pair,
  output logic [NUM_PE-1:0][15:0]       pe_n_fit,
  output logic [NUM_PE-1:0]             pe_busy
);
  typedef enum logic [1:0] {W_IDLE, W_NEED, W_LOAD, W_READY} wstate_t;
  typedef enum logic [1:0] {L_SCAN, L_HWAIT, L_GENES, L_DONE} lstate_t;

  logic [GW-1:0] jt_a [MAX_JOBS];
  logic [GW-1:0] jt_b [MAX_JOBS];
  logic [GW-1:0] jt_c [MAX_JOBS];

  always_ff @(posedge clk) begin
    if (job_we && int'(job_addr) < MAX_JOBS) begin : wr
      jt_a[job_addr[$clog2(MAX_JOBS)-1:0]] <= job_par_a;
      jt_b[job_addr[$clog2(MAX_JOBS)-1:0]] <= job_par_b;
      jt_c[job_addr[$clog2(MAX_JOBS)-1:0]] <= job_child;
    end
  end

  wstate_t                   ws;
  logic [NUM_PE-1:0][GW-1:0] par_x, par_y;
  logic [GENOMES-1:0]        needed, needed_c;

  // ---- PE allocation and the set of needed parents
  always_comb begin
    needed_c = '0;
    for (int p = 0; p < NUM_PE; p++)
      if (pe_active[p]) begin
        needed_c[par_x[p]] = 1'b1;
        needed_c[par_y[p]] = 1'b1;
      end
  end

  // ---- one reader per bank
  lstate_t [NUM_BANKS-1:0]          ls;
  logic    [NUM_BANKS-1:0][$clog2(SPB+1)-1:0] slot;
  logic    [NUM_BANKS-1:0][15:0]    wi, wn;
  logic    [NUM_BANKS-1:0]          bus_v;
  logic    [NUM_BANKS-1:0][GW-1:0]  bus_gid;
  logic    [NUM_BANKS-1:0][15:0]    bus_idx;
  logic    [NUM_BANKS-1:0]          lane_done;
  genome_hdr_t [NUM_BANKS-1:0]      hdr_in;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_lane
    logic          need_here;
    logic [GW-1:0] gid_here;
    logic [AW-1:0] base;
    always_comb begin
      gid_here  = GW'(int'(slot[b]) * NUM_BANKS + b);
      need_here = (int'(slot[b]) < SPB) && needed[gid_here];
      base      = AW'(int'(slot[b]) * SLOT_WORDS);
      hdr_in[b] = genome_hdr_t'(mem_rdata[b]);
      mem_en[b]   = 1'b0;
      mem_addr[b] = base;
      unique case (ls[b])
        L_SCAN:  mem_en[b] = (ws == W_LOAD) && need_here;
        L_GENES: begin mem_en[b] = 1'b1; mem_addr[b] = base + AW'(wi[b]); end
        default: ;
      endcase
    end
    assign lane_done[b] = (ls[b] == L_DONE);

    always_ff @(posedge clk) begin
      if (!rst_n || wave_start) begin
        ls[b] <= L_SCAN; slot[b] <= '0; wi[b] <= '0; wn[b] <= '0;
        bus_v[b] <= 1'b0; bus_gid[b] <= '0; bus_idx[b] <= '0;
      end else begin
        bus_v[b]   <= mem_en[b];
        bus_gid[b] <= gid_here;
        bus_idx[b] <= (ls[b] == L_GENES) ? wi[b] : 16'd0;
        if (ws == W_LOAD) begin
          unique case (ls[b])
            L_SCAN: begin
              if (int'(slot[b]) >= SPB) ls[b] <= L_DONE;
              else if (need_here)       ls[b] <= L_HWAIT;
              else                      slot[b] <= slot[b] + 1'b1;
            end
            L_HWAIT: begin
              wi[b] <= 16'd1;
              wn[b] <= (int'(hdr_in[b].num_genes) > SLOT_WORDS - 1) ? 16'(SLOT_WORDS - 1)
                                                                    : hdr_in[b].num_genes;
              if (hdr_in[b].num_genes == 16'd0) begin
                ls[b] <= L_SCAN; slot[b] <= slot[b] + 1'b1;
              end else ls[b] <= L_GENES;
            end
            L_GENES: begin
              wi[b] <= wi[b] + 1'b1;
              if (wi[b] >= wn[b]) begin
                ls[b] <= L_SCAN; slot[b] <= slot[b] + 1'b1;
              end
            end
            default: ;
          endcase
        end
      end
    end
  end

  // ---- wave sequencing
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ws <= W_IDLE; pe_active <= '0; needed <= '0; sram_reads <= '0;
      par_x <= '0; par_y <= '0; pe_child <= '0;
    end else begin
      sram_reads <= sram_reads + 32'($countones(mem_en));
      if (wave_start) begin
        for (int p = 0; p < NUM_PE; p++) begin
          pe_active[p] <= (int'(wave_base) + p < int'(num_jobs)) && (int'(wave_base) + p < MAX_JOBS);
          par_x[p]     <= jt_a[(int'(wave_base) + p) % MAX_JOBS];
          par_y[p]     <= jt_b[(int'(wave_base) + p) % MAX_JOBS];
          pe_child[p]  <= jt_c[(int'(wave_base) + p) % MAX_JOBS];
        end
        ws <= W_NEED;
      end else begin
        unique case (ws)
          W_NEED:  begin needed <= needed_c; ws <= W_LOAD; end
          W_LOAD:  if (&lane_done) ws <= W_READY;
          W_READY: if (run_go) ws <= W_IDLE;
          default: ;
        endcase
      end
    end
  end
  assign load_done = (ws == W_READY);

  // ---- per-PE capture from the bus and alignment
  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    logic [BW-1:0] bx, by;
    assign bx = BW'(par_x[p] % GW'(NUM_BANKS));
    assign by = BW'(par_y[p] % GW'(NUM_BANKS));
    gene_align #(.MAX_GENES(SLOT_WORDS - 1)) u_align (
      .clk, .rst_n,
      .cap_x_valid(pe_active[p] && bus_v[bx] && bus_gid[bx] == par_x[p]),
      .cap_x_idx(bus_idx[bx]), .cap_x_data(mem_rdata[bx]),
      .cap_y_valid(pe_active[p] && bus_v[by] && bus_gid[by] == par_y[p]),
      .cap_y_idx(bus_idx[by]), .cap_y_data(mem_rdata[by]),
      .go(run_go && (ws == W_READY) && pe_active[p]),
      .busy(pe_busy[p]), .n_fit(pe_n_fit[p]),
      .out_valid(pe_valid[p]), .out_ready(pe_ready[p]), .out_pair(pe_pair[p])
    );
  end
endmodule
