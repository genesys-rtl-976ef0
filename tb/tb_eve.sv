// tb_eve: the evolution engine at reduced size (8 PEs, 4 banks of 256 words,
// 32-word genome slots) with a genome buffer. 8 parent genomes, 12 children,
// so two waves of PEs.
// Run 1, mutations off: every gene two parents share has the same attributes,
// so each child must be exactly the fitter parent's genome; SRAM reads must be
// one read per word of each distinct parent per wave (multicast).
// Run 2, mutations on: every child must be sorted, its header count right, and
// every connection must join two node genes of the child; every event kind
// (perturb, node/connection delete, node/connection add, add stall) must occur.
module tb_eve;
  import genesys_pkg::*;
  localparam int NPE = 8, NB = 4, BW = 256, SW = 32, MJ = 16;
  localparam int GEN = NB * (BW / SW);
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  eve_cfg_t cfg;
  logic job_we, start, busy, done;
  logic [4:0] job_addr, num_jobs;
  logic [4:0] jpa, jpb, jch;
  logic [NB-1:0] e_en, e_we, t_en, t_we, b_en, b_we;
  logic [NB-1:0][7:0] e_addr, t_addr, b_addr;
  logic [NB-1:0][63:0] e_wd, t_wd, b_wd, rd;
  logic [31:0] reads, writes;
  logic [5:0][31:0] evc;
  logic [2:0][31:0] ph;

  eve #(.NUM_PE(NPE), .NUM_BANKS(NB), .BANK_WORDS(BW), .SLOT_WORDS(SW), .MAX_JOBS(MJ)) dut (
    .clk, .rst_n, .cfg, .job_we, .job_addr, .job_par_a(jpa), .job_par_b(jpb), .job_child(jch),
    .num_jobs, .start, .busy, .done, .mem_en(e_en), .mem_we(e_we), .mem_addr(e_addr),
    .mem_wdata(e_wd), .mem_rdata(rd), .sram_reads(reads), .sram_writes(writes),
    .event_count(evc), .phase_cycles(ph));

  assign b_en = busy ? e_en : t_en;
  assign b_we = busy ? e_we : t_we;
  assign b_addr = busy ? e_addr : t_addr;
  assign b_wd = busy ? e_wd : t_wd;
  genome_buffer #(.NUM_BANKS(NB), .BANK_WORDS(BW)) u_mem (
    .clk, .en(b_en), .we(b_we), .addr(b_addr), .wdata(b_wd), .rdata(rd));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic mem_wr(int g, int w, logic [63:0] d);
    t_en = '0; t_we = '0;
    t_en[g % NB] = 1; t_we[g % NB] = 1; t_addr[g % NB] = 8'((g / NB) * SW + w); t_wd[g % NB] = d;
    @(posedge clk); #1; t_en = '0; t_we = '0;
  endtask
  task automatic mem_rd(int g, int w, output logic [63:0] d);
    t_en = '0; t_we = '0;
    t_en[g % NB] = 1; t_addr[g % NB] = 8'((g / NB) * SW + w);
    @(posedge clk); #1; t_en = '0; d = rd[g % NB];
  endtask

  // the gene pool: nodes 0..9, connections between them, fixed attributes
  gene_t pool [$];
  gene_t par [8][$];
  int    fit [8];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_parents();
    for (int p = 0; p < 8; p++) begin
      mem_wr(p, 0, {32'(fit[p]), 16'(par[p].size()), 16'h0});
      foreach (par[p][i]) mem_wr(p, i + 1, 64'(par[p][i]));
    end
  endtask

  task automatic run_eve(int njobs, int pa [], int pb []);
    for (int j = 0; j < njobs; j++) begin
      job_we = 1; job_addr = 5'(j); jpa = 5'(pa[j]); jpb = 5'(pb[j]); jch = 5'(16 + j);
      @(posedge clk); #1;
    end
    job_we = 0; num_jobs = 5'(njobs);
    start = 1; @(posedge clk); #1; start = 0;
    while (!done) @(posedge clk);
    #1;
  endtask

  initial begin
    int pa [12], pb [12];
    int exp_reads;
    cfg = '0; cfg.xover_bias = 8'd128; cfg.protected_nodes = 12'd2; cfg.del_threshold = 4'd3;
    job_we = 0; start = 0; num_jobs = 0; t_en = 0; t_we = 0; t_addr = 0; t_wd = 0;
    jpa = 0; jpb = 0; jch = 0; job_addr = 0;
    for (int n = 0; n < 10; n++) pool.push_back(node_gene(12'(n), 16'($urandom), Q_ONE, 4'($urandom), 3'd0));
    for (int s = 0; s < 10; s++)
      for (int d = 2; d < 10; d++)
        if (s != d && $urandom_range(0, 2) == 0) pool.push_back(conn_gene(12'(s), 12'(d), 16'($urandom), 1'b1));
    for (int p = 0; p < 8; p++) begin
      logic has [10];
      for (int n = 0; n < 10; n++) has[n] = (n < 2) || ($urandom_range(0, 2) != 0);
      par[p].delete();
      foreach (pool[i])
        if (!pool[i].is_conn ? has[pool[i].key_a] : (has[pool[i].key_a] && has[pool[i].key_b] && $urandom_range(0, 1)))
          if (par[p].size() < SW - 1) par[p].push_back(pool[i]);
      fit[p] = 10 * p + 3;
    end
    for (int j = 0; j < 12; j++) begin
      pa[j] = j % 4; pb[j] = (j * 3 + 1) % 8;     // parent 0..3 each used by 3 children
    end
    repeat (3) @(posedge clk); #1 rst_n = 1;
    write_parents();

    // ---------- run 1: no mutation
    run_eve(12, pa, pb);
    exp_reads = 0;
    for (int w = 0; w < 2; w++) begin
      logic used [8];
      used = '{default: 0};
      for (int j = w * NPE; j < 12 && j < (w + 1) * NPE; j++) begin used[pa[j]] = 1; used[pb[j]] = 1; end
      for (int p = 0; p < 8; p++) if (used[p]) exp_reads += 1 + par[p].size();
    end
    check(reads == 32'(exp_reads), $sformatf("SRAM reads %0d, expected %0d (each parent once per wave)", reads, exp_reads));
    for (int j = 0; j < 12; j++) begin
      int f;
      logic [63:0] d;
      f = (fit[pb[j]] > fit[pa[j]]) ? pb[j] : pa[j];
      mem_rd(16 + j, 0, d);
      check(d[31:16] == 16'(par[f].size()), $sformatf("child %0d gene count", j));
      foreach (par[f][i]) begin
        mem_rd(16 + j, i + 1, d);
        check(gene_t'(d) == par[f][i], $sformatf("child %0d gene %0d", j, i));
      end
    end

    // ---------- run 2: mutations on
    cfg.perturb_prob = 8'd60; cfg.node_del_prob = 8'd40; cfg.conn_del_prob = 8'd20;
    cfg.node_add_prob = 8'd30; cfg.conn_add_prob = 8'd60;
    run_eve(12, pa, pb);
    for (int j = 0; j < 12; j++) begin
      logic [63:0] d;
      int n;
      gene_t g [$];
      logic isnode [4096];
      mem_rd(16 + j, 0, d);
      n = int'(d[31:16]);
      check(n > 0 && n < SW, "child size in slot");
      g.delete();
      for (int i = 0; i < n; i++) begin mem_rd(16 + j, i + 1, d); g.push_back(gene_t'(d)); end
      foreach (isnode[i]) isnode[i] = 0;
      foreach (g[i]) begin
        if (i > 0) check(key_of(g[i-1]) <= key_of(g[i]), $sformatf("child %0d sorted at %0d", j, i));
        if (!g[i].is_conn) isnode[g[i].key_a] = 1;
      end
      foreach (g[i]) if (g[i].is_conn)
        check(isnode[g[i].key_a] && isnode[g[i].key_b], $sformatf("child %0d connection %0d->%0d dangles", j, g[i].key_a, g[i].key_b));
      for (int k = 0; k < 2; k++) check(isnode[k], "protected node kept");
    end
    for (int k = 0; k < 6; k++) check(evc[k] > 0, $sformatf("event %0d happened", k));
    $display("events: perturb %0d ndel %0d cdel %0d nadd %0d cadd %0d stall %0d; phases %0d %0d %0d",
             evc[0], evc[1], evc[2], evc[3], evc[4], evc[5], ph[0], ph[1], ph[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
