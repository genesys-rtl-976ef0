// tb_eve_pe: the four-stage PE with fixed random bytes, so that every output
// can be computed here. Part 1: crossover picks parent A, every gene is
// perturbed, nothing deleted or added; the first child gene must leave exactly
// 4 cycles after the first pair is accepted, and one gene per cycle follows.
// Part 2 (random output back-pressure): every connection is split by add-node,
// giving node + 2 connections per connection; genes only in parent B vanish.
module tb_eve_pe;
  import genesys_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0, cyc = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  eve_cfg_t cfg;
  logic [RND_B-1:0][7:0] rnd;
  logic iv, ir, ov, ordy;
  gene_pair_t pr;
  gene_tok_t tok;
  logic [5:0] ev;

  eve_pe dut (.clk, .rst_n, .clr(1'b0), .cfg, .rnd, .add_allow(1'b1), .in_valid(iv), .in_ready(ir),
              .in_pair(pr), .out_valid(ov), .out_ready(ordy), .out_tok(tok), .events(ev));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  gene_tok_t outq [$];
  int out_cyc [$];
  always @(posedge clk) if (rst_n && ov && ordy) begin outq.push_back(tok); out_cyc.push_back(cyc); end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gene_t ga [$];
    int first_in;
    cfg = '0; cfg.xover_bias = 8'h80; cfg.perturb_prob = 8'h20; cfg.node_del_prob = 8'h80;
    cfg.conn_del_prob = 8'h80; cfg.del_threshold = 4'd4;
    rnd = '0;
    for (int b = 0; b < 4; b++) rnd[b] = 8'h40;
    rnd[4] = 8'h10; rnd[5] = 8'h08; rnd[6] = 8'hFC; rnd[7] = 8'h03; rnd[8] = 8'hFF;
    rnd[9] = 8'hFF; rnd[10] = 8'hFF; rnd[11] = 8'h05;
    iv = 0; ordy = 1;
    for (int n = 0; n < 4; n++) ga.push_back(node_gene(12'(n), 16'(n * 16), Q_ONE, 4'd1, 3'd1));
    for (int c = 0; c < 6; c++) ga.push_back(conn_gene(12'(c % 2), 12'(2 + c % 2 + (c / 2) * 0), 16'(c * 100), 1'b1));
    repeat (3) @(posedge clk); #1 rst_n = 1;
    // ---- part 1
    foreach (ga[i]) begin
      pr = '{a_valid: 1'b1, b_valid: 1'b1, last: (i == ga.size() - 1), a: ga[i], b: ~ga[i]};
      pr.b.is_conn = ga[i].is_conn; pr.b.key_a = ga[i].key_a; pr.b.key_b = ga[i].key_b;
      iv = 1;
      if (i == 0) first_in = cyc + 1;
      @(posedge clk); #1;
      check(ir, "PE accepts one pair per cycle");
    end
    iv = 0;
    repeat (8) @(posedge clk); #1;
    check(outq.size() == ga.size(), "part 1 gene count");
    check(out_cyc.size() > 0 && out_cyc[0] - first_in == 4, "4-cycle pipeline latency");
    foreach (outq[i]) if (i < ga.size()) begin
      gene_t e;
      e = ga[i];
      e.attr0 = ga[i].attr0 + 16'h0008;
      if (!e.is_conn) begin e.attr1 = ga[i].attr1 + 16'hFFFC; e.attr2 = 4'h3; e.attr3 = 3'h5; end
      check(outq[i].keep && outq[i].g == e, $sformatf("part 1 gene %0d", i));
      if (i > 0) check(out_cyc[i] == out_cyc[i-1] + 1, "one gene per cycle");
    end
    outq.delete(); out_cyc.delete();
    // ---- part 2: split every connection, B-only genes dropped
    cfg.perturb_prob = 8'h00; cfg.node_add_prob = 8'h01; rnd[9] = 8'h00;
    foreach (ga[i]) begin
      pr = '{a_valid: 1'b1, b_valid: 1'b0, last: 1'b0, a: ga[i], b: '0};
      iv = 1; ordy = 1'($urandom);
      @(posedge clk);
      while (!ir) begin #1 ordy = 1'($urandom); @(posedge clk); end
      #1;
      pr = '{a_valid: 1'b0, b_valid: 1'b1, last: (i == ga.size() - 1), a: '0, b: ga[i]};
      ordy = 1'($urandom);
      @(posedge clk);
      while (!ir) begin #1 ordy = 1'($urandom); @(posedge clk); end
      #1;
    end
    iv = 0; ordy = 1;
    repeat (10) @(posedge clk); #1;
    begin
      int nn, nc, ndrop;
      nn = 0; nc = 0; ndrop = 0;
      foreach (outq[i]) begin
        if (!outq[i].keep) ndrop++;
        else if (outq[i].g.is_conn) nc++;
        else nn++;
      end
      check(nn == 4 + 6 && nc == 12, $sformatf("part 2: %0d nodes %0d connections", nn, nc));
      check(ndrop == ga.size(), "B-only genes dropped");
      check(outq.size() > 0 && outq[outq.size() - 1].last, "last marker kept");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
