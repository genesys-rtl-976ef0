// eve: the GeneSys evolution engine. From the child list chosen by the gene
// selector on the CPU it produces the next generation's genomes entirely in
// hardware, and writes them into the genome buffer.
//
// Blocks: gene split (eve_gene_split, with a gene_align unit per PE), NUM_PE
// processing elements (eve_pe), the PRNG (eve_prng), and gene merge
// (eve_gene_merge, with a child_merge unit per PE). The distribution bus runs
// from the gene split to the PEs and the collection path from the PEs to the
// gene merge. One child genome is built per PE; children are processed in
// waves of NUM_PE. A wave is: load parents (each needed parent read once from
// SRAM and multicast), run (PEs stream gene pairs through crossover,
// perturbation, deletion and addition), write (children written back).
// start begins with job 0; done pulses when every job is written. The bank
// ports go to the genome buffer: the gene split reads during load, the gene
// merge writes during write.
// Statistics: SRAM words read and written, and per-event counts summed over
// all PEs (perturbations, node and connection deletions, node and connection
// additions, add-stage stall cycles), plus cycles spent in each phase.
module eve
  import genesys_pkg::*;
#(
  parameter int unsigned NUM_PE     = 256,
  parameter int unsigned NUM_BANKS  = 48,
  parameter int unsigned BANK_WORDS = 4096,
  parameter int unsigned SLOT_WORDS = 512,
  parameter int unsigned MAX_JOBS   = 256,
  parameter int unsigned ADD_MAX    = 16,
  parameter int unsigned DEL_MAX    = 8,
  localparam int unsigned SPB     = BANK_WORDS / SLOT_WORDS,
  localparam int unsigned GENOMES = NUM_BANKS * SPB,
  localparam int unsigned GW      = $clog2(GENOMES),
  localparam int unsigned JW      = $clog2(MAX_JOBS + 1),
  localparam int unsigned AW      = $clog2(BANK_WORDS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  eve_cfg_t                      cfg,
  input  logic                          job_we,
  input  logic [JW-1:0]                 job_addr,
  input  logic [GW-1:0]                 job_par_a,
  input  logic [GW-1:0]                 job_par_b,
  input  logic [GW-1:0]                 job_child,
  input  logic [JW-1:0]                 num_jobs,
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic [NUM_BANKS-1:0]          mem_en,
  output logic [NUM_BANKS-1:0]          mem_we,
  output logic [NUM_BANKS-1:0][AW-1:0]  mem_addr,
  output logic [NUM_BANKS-1:0][63:0]    mem_wdata,
  input  logic [NUM_BANKS-1:0][63:0]    mem_rdata,
  output logic [31:0]                   sram_reads,
  output logic [31:0]                   sram_writes,
  output logic [5:0][31:0]              event_count,
  output logic [2:0][31:0]              phase_cycles   // load, run, write
);
  typedef enum logic [2:0] {E_IDLE, E_START, E_LOAD, E_RUN, E_WSTART, E_WRITE, E_NEXT} estate_t;

  estate_t  st;
  logic [JW-1:0] wave_base;
  logic     wave_start, load_done, run_go, all_done, write_start, write_done;

  logic [NUM_PE-1:0]            pe_active, a_valid, a_ready, a_busy, p_valid, p_ready, add_allow;
  logic [NUM_PE-1:0][GW-1:0]    pe_child;
  gene_pair_t [NUM_PE-1:0]      a_pair;
  logic [NUM_PE-1:0][15:0]      n_fit, budget;
  gene_tok_t [NUM_PE-1:0]       p_tok;
  logic [NUM_PE-1:0][5:0]       ev;
  logic [NUM_PE-1:0][RND_B*8-1:0] rnd;

  logic [NUM_BANKS-1:0]         s_en, m_en;
  logic [NUM_BANKS-1:0][AW-1:0] s_addr, m_addr;
  logic [NUM_BANKS-1:0][63:0]   m_wdata;

  eve_gene_split #(
    .NUM_PE(NUM_PE), .NUM_BANKS(NUM_BANKS), .BANK_WORDS(BANK_WORDS),
    .SLOT_WORDS(SLOT_WORDS), .MAX_JOBS(MAX_JOBS)
  ) u_split (
    .clk, .rst_n, .job_we, .job_addr, .job_par_a, .job_par_b, .job_child, .num_jobs,
    .wave_start, .wave_base, .load_done, .run_go, .pe_active, .pe_child, .sram_reads,
    .mem_en(s_en), .mem_addr(s_addr), .mem_rdata,
    .pe_valid(a_valid), .pe_ready(a_ready), .pe_pair(a_pair), .pe_n_fit(n_fit), .pe_busy(a_busy)
  );

  eve_prng #(.NUM_PE(NUM_PE), .RND_BYTES(RND_B)) u_prng (.clk, .rst_n, .rnd);

  for (genvar p = 0; p < NUM_PE; p++) begin : g_pe
    assign budget[p] = (int'(n_fit[p]) >= SLOT_WORDS - 1) ? 16'd0 : 16'(SLOT_WORDS - 1) - n_fit[p];
    eve_pe #(.DEL_MAX(DEL_MAX)) u_pe (
      .clk, .rst_n, .clr(wave_start), .cfg, .rnd(rnd[p]), .add_allow(add_allow[p]),
      .in_valid(a_valid[p]), .in_ready(a_ready[p]), .in_pair(a_pair[p]),
      .out_valid(p_valid[p]), .out_ready(p_ready[p]), .out_tok(p_tok[p]), .events(ev[p])
    );
  end

  eve_gene_merge #(
    .NUM_PE(NUM_PE), .NUM_BANKS(NUM_BANKS), .BANK_WORDS(BANK_WORDS),
    .SLOT_WORDS(SLOT_WORDS), .ADD_MAX(ADD_MAX)
  ) u_merge (
    .clk, .rst_n, .clr(wave_start), .pe_active, .pe_child, .pe_budget(budget),
    .pe_add_allow(add_allow), .in_valid(p_valid), .in_ready(p_ready), .in_tok(p_tok),
    .all_done, .write_start, .write_done, .sram_writes,
    .mem_en(m_en), .mem_addr(m_addr), .mem_wdata(m_wdata)
  );

  // bank ports: the merge owns them during the write phase, the split otherwise
  always_comb begin
    if (st == E_WRITE || st == E_WSTART) begin
      mem_en = m_en; mem_we = m_en; mem_addr = m_addr; mem_wdata = m_wdata;
    end else begin
      mem_en = s_en; mem_we = '0; mem_addr = s_addr; mem_wdata = '0;
    end
  end

  assign wave_start  = (st == E_START);
  assign run_go      = (st == E_LOAD) && load_done;
  assign write_start = (st == E_WSTART);
  assign busy        = (st != E_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= E_IDLE; wave_base <= '0; done <= 1'b0;
      event_count <= '0; phase_cycles <= '0;
    end else begin
      done <= 1'b0;
      for (int k = 0; k < 6; k++) begin
        logic [31:0] n;
        n = '0;
        for (int p = 0; p < NUM_PE; p++) n += 32'(ev[p][k]);
        event_count[k] <= event_count[k] + n;
      end
      if (st == E_LOAD)  phase_cycles[0] <= phase_cycles[0] + 1;
      if (st == E_RUN)   phase_cycles[1] <= phase_cycles[1] + 1;
      if (st == E_WRITE) phase_cycles[2] <= phase_cycles[2] + 1;
      unique case (st)
        E_IDLE:   if (start) begin
          wave_base <= '0;
          st <= (num_jobs == '0) ? E_IDLE : E_START;
          done <= (num_jobs == '0);
        end
        E_START:  st <= E_LOAD;
        E_LOAD:   if (load_done) st <= E_RUN;
        E_RUN:    if (all_done && !(|a_busy)) st <= E_WSTART;
        E_WSTART: st <= E_WRITE;
        E_WRITE:  if (write_done) st <= E_NEXT;
        E_NEXT: begin
          if (int'(wave_base) + NUM_PE < int'(num_jobs)) begin
            wave_base <= JW'(int'(wave_base) + NUM_PE);
            st <= E_START;
          end else begin
            st <= E_IDLE; done <= 1'b1;
          end
        end
        default: st <= E_IDLE;
      endcase
    end
  end
endmodule
