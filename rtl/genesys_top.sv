// genesys_top: the GeneSys system-on-chip for neuro-evolution (NEAT) at the
// edge: learning (EvE) and inference (ADAM) on one chip around a shared
// multi-banked genome buffer.
//
// The embedded CPU, the software gene selector and the vectorize routine are
// outside this module: their connections are the host_*, cfg, job_*, start and
// adam ports. A generation runs as follows. The CPU writes genomes and fitness
// values into the genome buffer (host port), vectorizes each genome into a
// weight matrix for ADAM and runs the environment through ADAM's matrix-vector
// products. It then writes the child list (two parents and a destination slot
// per child) and pulses start; EvE builds every child genome in hardware and
// writes it back into the genome buffer; eve_done marks the end.
// The host port reaches the genome buffer only while EvE is idle
// (host_ready=0 otherwise); a read returns host_rdata one cycle later.
// Genome g sits in bank g mod NUM_BANKS at word (g div NUM_BANKS)*SLOT_WORDS.
// Sizes default to the paper's: 256 EvE PEs, a 32x32 ADAM array, 1.5 MB of
// SRAM in 48 banks.
module genesys_top
  import genesys_pkg::*;
#(
  parameter int unsigned NUM_PE     = 256,
  parameter int unsigned NUM_BANKS  = 48,
  parameter int unsigned BANK_WORDS = 4096,
  parameter int unsigned SLOT_WORDS = 512,
  parameter int unsigned MAX_JOBS   = 256,
  parameter int unsigned ADAM_DIM   = 32,
  localparam int unsigned SPB     = BANK_WORDS / SLOT_WORDS,
  localparam int unsigned GENOMES = NUM_BANKS * SPB,
  localparam int unsigned GW      = $clog2(GENOMES),
  localparam int unsigned JW      = $clog2(MAX_JOBS + 1),
  localparam int unsigned AW      = $clog2(BANK_WORDS),
  localparam int unsigned BW      = $clog2(NUM_BANKS)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // CPU access to the genome buffer
  input  logic                              host_en,
  input  logic                              host_we,
  input  logic [BW-1:0]                     host_bank,
  input  logic [AW-1:0]                     host_addr,
  input  logic [63:0]                       host_wdata,
  output logic [63:0]                       host_rdata,
  output logic                              host_ready,
  // EvE configuration and child list (gene selector)
  input  eve_cfg_t                          cfg,
  input  logic                              job_we,
  input  logic [JW-1:0]                     job_addr,
  input  logic [GW-1:0]                     job_par_a,
  input  logic [GW-1:0]                     job_par_b,
  input  logic [GW-1:0]                     job_child,
  input  logic [JW-1:0]                     num_jobs,
  input  logic                              eve_start,
  output logic                              eve_busy,
  output logic                              eve_done,
  output logic [31:0]                       sram_reads,
  output logic [31:0]                       sram_writes,
  output logic [5:0][31:0]                  event_count,
  output logic [2:0][31:0]                  phase_cycles,
  // ADAM (fed by the vectorize routine)
  input  logic                              adam_w_we,
  input  logic [$clog2(ADAM_DIM)-1:0]       adam_w_row,
  input  logic signed [ADAM_DIM-1:0][15:0]  adam_w_data,
  input  logic                              adam_in_valid,
  input  logic signed [ADAM_DIM-1:0][15:0]  adam_in_vec,
  output logic                              adam_out_valid,
  output logic signed [ADAM_DIM-1:0][31:0]  adam_out_vec
);
  logic [NUM_BANKS-1:0]         e_en, e_we, b_en, b_we;
  logic [NUM_BANKS-1:0][AW-1:0] e_addr, b_addr;
  logic [NUM_BANKS-1:0][63:0]   e_wdata, b_wdata, b_rdata;
  logic [BW-1:0]                host_bank_q;

  eve #(
    .NUM_PE(NUM_PE), .NUM_BANKS(NUM_BANKS), .BANK_WORDS(BANK_WORDS),
    .SLOT_WORDS(SLOT_WORDS), .MAX_JOBS(MAX_JOBS)
  ) u_eve (
    .clk, .rst_n, .cfg, .job_we, .job_addr, .job_par_a, .job_par_b, .job_child, .num_jobs,
    .start(eve_start), .busy(eve_busy), .done(eve_done),
    .mem_en(e_en), .mem_we(e_we), .mem_addr(e_addr), .mem_wdata(e_wdata), .mem_rdata(b_rdata),
    .sram_reads, .sram_writes, .event_count, .phase_cycles
  );

  assign host_ready = !eve_busy;

  always_comb begin
    b_en = e_en; b_we = e_we; b_addr = e_addr; b_wdata = e_wdata;
    if (host_ready && host_en && int'(host_bank) < NUM_BANKS) begin
      b_en[host_bank]    = 1'b1;
      b_we[host_bank]    = host_we;
      b_addr[host_bank]  = host_addr;
      b_wdata[host_bank] = host_wdata;
    end
  end

  genome_buffer #(.NUM_BANKS(NUM_BANKS), .BANK_WORDS(BANK_WORDS)) u_gbuf (
    .clk, .en(b_en), .we(b_we), .addr(b_addr), .wdata(b_wdata), .rdata(b_rdata)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) host_bank_q <= '0;
    else if (host_en && host_ready) host_bank_q <= host_bank;
  end
  assign host_rdata = (int'(host_bank_q) < NUM_BANKS) ? b_rdata[host_bank_q] : 64'd0;

  adam #(.DIM(ADAM_DIM)) u_adam (
    .clk, .rst_n, .w_we(adam_w_we), .w_row(adam_w_row), .w_data(adam_w_data),
    .in_valid(adam_in_valid), .in_vec(adam_in_vec),
    .out_valid(adam_out_valid), .out_vec(adam_out_vec)
  );
endmodule
