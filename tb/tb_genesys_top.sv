// tb_genesys_top: one full generation of the GeneSys SoC at its default size
// (256 EvE PEs, 48-bank 1.5 MB genome buffer, 32x32 ADAM), with this testbench
// standing in for the CPU software (vectorize routine, environment, gene
// selector).
//  1. A population of 150 CartPole-sized genomes (4 inputs, 1 output, a few
//     hidden nodes) is written through the host port and read back.
//  2. Inference: each of 8 genomes is vectorized into a weight matrix, loaded
//     into ADAM and run on 4 back-to-back observation vectors; results are
//     checked against the genome's weights. Their outputs and random values
//     for the rest give the fitness written into each genome header.
//  3. Selection: the 30 fittest genomes are parents; 150 children are listed,
//     each fittest parent producing 5 children (adjacent in the list).
//  4. EvE builds all children in one wave; the host port must be refused
//     meanwhile. Every child is read back and checked: sorted, count right,
//     no dangling connection, inputs and output kept.
// Mechanisms counted (each must occur): perturbation, node and connection
// deletion, node and connection addition, add-stage stall, multicast reuse of a
// parent (fewer SRAM reads than two parents per child), host refused while
// EvE runs, ADAM back-to-back vectors.
module tb_genesys_top;
  import genesys_pkg::*;
  localparam int NB = 48, SW = 512, POP = 150, NPAR = 30, DIM = 32;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic host_en, host_we, host_ready;
  logic [5:0] host_bank;
  logic [11:0] host_addr;
  logic [63:0] host_wdata, host_rdata;
  eve_cfg_t cfg;
  logic job_we, eve_start, eve_busy, eve_done;
  logic [8:0] job_addr, num_jobs, jpa, jpb, jch;
  logic [31:0] sram_reads, sram_writes;
  logic [5:0][31:0] evc;
  logic [2:0][31:0] ph;
  logic a_we, a_iv, a_ov;
  logic [4:0] a_row;
  logic signed [DIM-1:0][15:0] a_wd, a_in;
  logic signed [DIM-1:0][31:0] a_out;

  genesys_top dut (
    .clk, .rst_n, .host_en, .host_we, .host_bank, .host_addr, .host_wdata, .host_rdata, .host_ready,
    .cfg, .job_we, .job_addr, .job_par_a(jpa), .job_par_b(jpb), .job_child(jch), .num_jobs,
    .eve_start, .eve_busy, .eve_done, .sram_reads, .sram_writes, .event_count(evc), .phase_cycles(ph),
    .adam_w_we(a_we), .adam_w_row(a_row), .adam_w_data(a_wd), .adam_in_valid(a_iv),
    .adam_in_vec(a_in), .adam_out_valid(a_ov), .adam_out_vec(a_out));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic hw(int g, int w, logic [63:0] d);
    host_en = 1; host_we = 1; host_bank = 6'(g % NB); host_addr = 12'((g / NB) * SW + w); host_wdata = d;
    @(posedge clk); #1; host_en = 0; host_we = 0;
  endtask
  task automatic hr(int g, int w, output logic [63:0] d);
    host_en = 1; host_we = 0; host_bank = 6'(g % NB); host_addr = 12'((g / NB) * SW + w);
    @(posedge clk); #1; host_en = 0; d = host_rdata;
  endtask

  gene_t pop_g [POP][$];
  int unsigned fitv [POP];
  int mech [8];   // perturb, ndel, cdel, nadd, cadd, stall, multicast, host refused
  int adam_b2b;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] d;
    int order [POP];
    host_en = 0; host_we = 0; host_bank = 0; host_addr = 0; host_wdata = 0;
    job_we = 0; eve_start = 0; job_addr = 0; num_jobs = 0; jpa = 0; jpb = 0; jch = 0;
    a_we = 0; a_iv = 0; a_row = 0; a_wd = '0; a_in = '0; adam_b2b = 0;
    cfg = '0; cfg.xover_bias = 8'd128; cfg.perturb_prob = 8'd50; cfg.node_del_prob = 8'd20;
    cfg.conn_del_prob = 8'd15; cfg.del_threshold = 4'd2; cfg.node_add_prob = 8'd12;
    cfg.conn_add_prob = 8'd25; cfg.protected_nodes = 12'd5;
    repeat (3) @(posedge clk); #1 rst_n = 1;

    // ---- 1. population: nodes 0-3 inputs, 4 output, hidden 5..
    for (int g = 0; g < POP; g++) begin
      int nh;
      nh = $urandom_range(0, 3);
      pop_g[g].delete();
      for (int n = 0; n < 5 + nh; n++) pop_g[g].push_back(node_gene(12'(n), 16'($urandom_range(0, 255)), Q_ONE, 4'd1, 3'd0));
      for (int s = 0; s < 5 + nh; s++)
        for (int t = 4; t < 5 + nh; t++)
          if (s != t && s != 4 && (t == 4 || s < t) && $urandom_range(0, 3) != 0)
            pop_g[g].push_back(conn_gene(12'(s), 12'(t), 16'($urandom_range(0, 1023) - 512), 1'b1));
      hw(g, 0, {32'd0, 16'(pop_g[g].size()), 16'd0});
      foreach (pop_g[g][i]) hw(g, i + 1, 64'(pop_g[g][i]));
    end
    for (int g = 0; g < POP; g += 7) begin
      hr(g, 0, d); check(d[31:16] == 16'(pop_g[g].size()), "host read of header");
      foreach (pop_g[g][i]) begin hr(g, i + 1, d); check(gene_t'(d) == pop_g[g][i], "host read of gene"); end
    end

    // ---- 2. inference on ADAM for genomes 0..7
    for (int g = 0; g < POP; g++) fitv[g] = $urandom_range(0, 1000);
    for (int g = 0; g < 8; g++) begin
      logic signed [15:0] W [DIM][DIM];
      logic [DIM-1:0][15:0] xs [4];
      logic [DIM-1:0][31:0] ys [4];
      foreach (W[i, j]) W[i][j] = 0;
      // vectorize: W[dst][src] from the genome read back through the host port
      hr(g, 0, d);
      for (int i = 0; i < int'(d[31:16]); i++) begin
        logic [63:0] gw; gene_t ge;
        hr(g, i + 1, gw); ge = gene_t'(gw);
        if (ge.is_conn && ge.attr3[0]) W[ge.key_b][ge.key_a] = ge.attr0;
      end
      for (int j = 0; j < DIM; j++) begin
        for (int i = 0; i < DIM; i++) a_wd[i] = W[i][j];
        a_row = 5'(j); a_we = 1; @(posedge clk); #1;
      end
      a_we = 0;
      for (int v = 0; v < 4; v++) begin
        xs[v] = '0;
        for (int j = 0; j < 4; j++) xs[v][j] = 16'($urandom_range(0, 511) - 256);
        for (int i = 0; i < DIM; i++) begin
          int acc; acc = 0;
          for (int j = 0; j < DIM; j++) acc += int'(W[i][j]) * int'(signed'(xs[v][j]));
          ys[v][i] = 32'(acc);
        end
      end
      for (int v = 0; v < 4; v++) begin a_in = xs[v]; a_iv = 1; @(posedge clk); #1; end
      a_iv = 0;
      for (int v = 0; v < 4; ) begin
        if (a_ov) begin
          check(a_out == ys[v], $sformatf("ADAM result genome %0d vector %0d", g, v));
          if (v > 0) adam_b2b++;
          if (v == 0) fitv[g] = 32'(signed'(a_out[4][31:8]) & 32'h3FF);
          v++;
        end
        @(posedge clk); #1;
      end
    end
    for (int g = 0; g < POP; g++) hw(g, 0, {fitv[g], 16'(pop_g[g].size()), 16'd0});

    // ---- 3. selection: order by fitness, 30 fittest parents, 5 children each
    foreach (order[i]) order[i] = i;
    order.sort() with (-int'(fitv[item]));
    for (int j = 0; j < POP; j++) begin
      job_we = 1; job_addr = 9'(j);
      jpa = 9'(order[j / 5]); jpb = 9'(order[(j * 7 + 3) % NPAR]); jch = 9'(192 + j);
      @(posedge clk); #1;
    end
    job_we = 0; num_jobs = 9'(POP);

    // ---- 4. evolution
    eve_start = 1; @(posedge clk); #1; eve_start = 0;
    begin
      int cycles;
      cycles = 0;
      while (!eve_done) begin
        if (!host_ready) mech[7]++;
        @(posedge clk); #1; cycles++;
      end
      $display("EvE generation: %0d cycles (load %0d, run %0d, write %0d), SRAM reads %0d writes %0d",
               cycles, ph[0], ph[1], ph[2], sram_reads, sram_writes);
    end
    for (int k = 0; k < 6; k++) mech[k] = int'(evc[k]);
    begin
      int p2p;
      p2p = 0;
      for (int j = 0; j < POP; j++) p2p += 2 + pop_g[order[j / 5]].size() + pop_g[order[(j * 7 + 3) % NPAR]].size();
      if (int'(sram_reads) < p2p) mech[6] = p2p - int'(sram_reads);
      $display("SRAM reads with multicast %0d, with point-to-point %0d", sram_reads, p2p);
    end
    for (int j = 0; j < POP; j++) begin
      int n;
      logic isnode [4096];
      gene_t prev;
      foreach (isnode[i]) isnode[i] = 0;
      hr(192 + j, 0, d);
      n = int'(d[31:16]);
      check(n > 0 && n < SW, "child size");
      for (int i = 0; i < n; i++) begin
        gene_t ge;
        hr(192 + j, i + 1, d); ge = gene_t'(d);
        if (i > 0) check(key_of(prev) <= key_of(ge), $sformatf("child %0d sorted", j));
        if (!ge.is_conn) isnode[ge.key_a] = 1;
        else check(isnode[ge.key_a] && isnode[ge.key_b], $sformatf("child %0d connection %0d->%0d has its nodes", j, ge.key_a, ge.key_b));
        prev = ge;
      end
      for (int k = 0; k < 5; k++) check(isnode[k], "inputs and output kept");
    end
    begin
      string nm [8];
      nm = '{"perturb", "node_delete", "conn_delete", "node_add", "conn_add", "add_stall", "multicast_reuse", "host_refused"};
      for (int k = 0; k < 8; k++) begin
        $display("mechanism %s: %0d", nm[k], mech[k]);
        check(mech[k] > 0, {"mechanism never happened: ", nm[k]});
      end
      $display("mechanism adam_back_to_back: %0d", adam_b2b);
      check(adam_b2b > 0, "ADAM back-to-back vectors");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
