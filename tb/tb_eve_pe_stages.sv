// tb_eve_pe_stages: drives each of the four EvE PE stages on its own with chosen
// random bytes and checks every output gene against values worked out here:
//   crossover - attribute choice per random byte vs bias, unmatched genes
//   perturb   - probability test and mutated attribute values
//   delete    - node deletion, threshold, protected IDs, dangling connections,
//               clearing after the last gene
//   add       - add-node (3 genes out, incoming dropped), two-step
//               add-connection, stall cycles, add_allow
module tb_eve_pe_stages;
  import genesys_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  eve_cfg_t cfg;

  // ---------------- crossover
  logic [7:0] x_bias; logic [3:0][7:0] x_rnd; logic x_iv, x_ir, x_ov; gene_pair_t x_pair; gene_tok_t x_tok;
  eve_crossover u_x (.clk, .rst_n, .clr(1'b0), .bias(x_bias), .rnd(x_rnd), .in_valid(x_iv), .in_ready(x_ir),
                     .in_pair(x_pair), .out_valid(x_ov), .out_ready(1'b1), .out_tok(x_tok));
  // ---------------- perturb
  logic [7:0] p_prob; logic [4:0][7:0] p_rnd; logic p_iv, p_ir, p_ov, p_fired; gene_tok_t p_in, p_tok;
  eve_perturb u_p (.clk, .rst_n, .clr(1'b0), .prob(p_prob), .rnd(p_rnd), .in_valid(p_iv), .in_ready(p_ir),
                   .in_tok(p_in), .out_valid(p_ov), .out_ready(1'b1), .out_tok(p_tok), .fired(p_fired));
  // ---------------- delete
  logic [7:0] d_rnd; logic d_iv, d_ir, d_ov, d_nd, d_cd; gene_tok_t d_in, d_tok;
  eve_delete u_d (.clk, .rst_n, .clr(1'b0), .cfg, .rnd(d_rnd), .in_valid(d_iv), .in_ready(d_ir),
                  .in_tok(d_in), .out_valid(d_ov), .out_ready(1'b1), .out_tok(d_tok),
                  .node_deleted(d_nd), .conn_deleted(d_cd));
  // ---------------- add
  logic [1:0][7:0] a_rnd; logic a_allow, a_iv, a_ir, a_ov, a_na, a_ca, a_stall; gene_tok_t a_in, a_tok;
  eve_add u_a (.clk, .rst_n, .clr(1'b0), .cfg, .rnd(a_rnd), .add_allow(a_allow), .in_valid(a_iv),
               .in_ready(a_ir), .in_tok(a_in), .out_valid(a_ov), .out_ready(1'b1), .out_tok(a_tok),
               .node_added(a_na), .conn_added(a_ca), .stall(a_stall));

  function automatic gene_tok_t tk(gene_t g, logic last);
    return '{keep: 1'b1, last: last, added: 1'b0, g: g};
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // collected add-stage output
  gene_tok_t a_out [$];
  int a_stalls = 0;
  always @(posedge clk) if (rst_n) begin
    if (a_ov) a_out.push_back(a_tok);
    if (a_stall) a_stalls++;
  end

  task automatic add_send(gene_tok_t t);
    a_in = t; a_iv = 1;
    @(posedge clk);
    while (!a_ir) @(posedge clk);
    #1 a_iv = 0;
  endtask

  initial begin
    gene_t ga, gb, e;
    x_iv = 0; p_iv = 0; d_iv = 0; a_iv = 0; a_allow = 1;
    cfg = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // ===== crossover: 200 random pairs, random bias
    for (int i = 0; i < 200; i++) begin
      ga = gene_t'({$urandom, $urandom}); gb = gene_t'({$urandom, $urandom});
      gb.is_conn = ga.is_conn; gb.key_a = ga.key_a; gb.key_b = ga.key_b;
      x_bias = 8'($urandom); x_rnd = 32'($urandom);
      x_pair = '{a_valid: (i % 7 != 3), b_valid: (i % 5 != 1), last: (i % 11 == 0), a: ga, b: gb};
      x_iv = 1;
      @(posedge clk); #1;
      x_iv = 0;
      e = ga;
      if (x_pair.b_valid && x_pair.a_valid) begin
        if (!(x_rnd[0] < x_bias)) e.attr0 = gb.attr0;
        if (!(x_rnd[1] < x_bias)) e.attr1 = gb.attr1;
        if (!(x_rnd[2] < x_bias)) e.attr2 = gb.attr2;
        if (!(x_rnd[3] < x_bias)) e.attr3 = gb.attr3;
      end
      check(x_ov, "crossover output valid one cycle after input");
      check(x_tok.keep == x_pair.a_valid && x_tok.last == x_pair.last, "crossover keep/last");
      if (x_pair.a_valid) check(x_tok.g == e, $sformatf("crossover gene %0d", i));
    end

    // ===== perturb: 200 random genes
    for (int i = 0; i < 200; i++) begin
      p_in = '{keep: 1'($urandom), last: 1'b0, added: 1'b0, g: gene_t'({$urandom, $urandom})};
      p_prob = 8'($urandom); p_rnd = 40'({$urandom, $urandom});
      p_iv = 1;
      #1;
      check(p_fired == (p_in.keep && p_rnd[0] < p_prob), "perturb fired flag");
      @(posedge clk); #1;
      p_iv = 0;
      e = p_in.g;
      if (p_in.keep && p_rnd[0] < p_prob) begin
        e.attr0 = p_in.g.attr0 + 16'(signed'(p_rnd[1]));
        if (!p_in.g.is_conn) begin
          e.attr1 = p_in.g.attr1 + 16'(signed'(p_rnd[2]));
          e.attr2 = p_rnd[3][3:0];
          e.attr3 = p_rnd[4][2:0];
        end
      end
      check(p_ov && p_tok.g == e && p_tok.keep == p_in.keep, $sformatf("perturb gene %0d", i));
    end

    // ===== delete
    cfg.node_del_prob = 8'd200; cfg.conn_del_prob = 8'd10; cfg.del_threshold = 4'd2;
    cfg.protected_nodes = 12'd2;
    begin
      // nodes 1..6, rnd 0 except node 6 (rnd 255 -> not selected)
      logic exp_keep [6];
      exp_keep = '{1, 0, 0, 1, 1, 1};  // 1 protected, 2,3 deleted, threshold reached
      for (int n = 1; n <= 6; n++) begin
        d_in = tk(node_gene(12'(n), 16'h0, Q_ONE, 4'd0, 3'd0), 1'b0);
        d_rnd = 8'd0; d_iv = 1;
        @(posedge clk); #1; d_iv = 0;
        check(d_ov && d_tok.keep == exp_keep[n-1], $sformatf("delete node %0d", n));
      end
      // connections: (1->2) dangling, (3->4) dangling, (1->4) kept (rnd 50 >= 10),
      // (4->5) deleted by probability (rnd 5 < 10), last
      begin
        gene_t cg [4]; logic ek [4]; logic [7:0] rr [4];
        cg = '{conn_gene(1, 2, Q_ONE, 1), conn_gene(3, 4, Q_ONE, 1), conn_gene(1, 4, Q_ONE, 1), conn_gene(4, 5, Q_ONE, 1)};
        ek = '{0, 0, 1, 0}; rr = '{8'd50, 8'd50, 8'd50, 8'd5};
        for (int c = 0; c < 4; c++) begin
          d_in = tk(cg[c], c == 3); d_rnd = rr[c]; d_iv = 1;
          #1 check(d_cd == !ek[c], "delete connection event");
          @(posedge clk); #1; d_iv = 0;
          check(d_ov && d_tok.keep == ek[c] && d_tok.last == (c == 3), $sformatf("delete conn %0d", c));
        end
      end
      // next genome: the store is clear, so connection 1->2 survives and node 3 can go again
      d_in = tk(node_gene(12'd3, 16'h0, Q_ONE, 4'd0, 3'd0), 1'b0); d_rnd = 8'd0; d_iv = 1;
      @(posedge clk); #1; d_iv = 0;
      check(!d_tok.keep, "delete state reset after last: node deletable again");
      d_in = tk(conn_gene(1, 2, Q_ONE, 1), 1'b1); d_rnd = 8'd255; d_iv = 1;
      @(posedge clk); #1; d_iv = 0;
      check(d_tok.keep, "delete state reset after last: old ID forgotten");
    end

    // ===== add
    cfg.node_add_prob = 8'd100; cfg.conn_add_prob = 8'd100;
    a_rnd = {8'd255, 8'd255};
    add_send(tk(node_gene(1, 16'h0, Q_ONE, 0, 0), 0));
    add_send(tk(node_gene(2, 16'h0, Q_ONE, 0, 0), 0));
    add_send(tk(node_gene(7, 16'h0, Q_ONE, 0, 0), 0));
    a_rnd = {8'd255, 8'd0};                      // add node on 1->7 (weight 0x0180)
    add_send(tk(conn_gene(1, 7, 16'h0180, 1), 0));
    a_rnd = {8'd0, 8'd255};                      // store source 2
    add_send(tk(conn_gene(2, 7, 16'h0040, 1), 0));
    a_rnd = {8'd255, 8'd255};                    // joins 2 -> 8
    add_send(tk(conn_gene(7, 8, 16'h0020, 1), 0));
    a_allow = 0; a_rnd = {8'd0, 8'd0};           // no additions while disallowed
    add_send(tk(conn_gene(1, 2, 16'h0010, 1), 1));
    a_allow = 1;
    repeat (4) @(posedge clk);
    begin
      gene_tok_t exp [$];
      exp.push_back(tk(node_gene(1, 16'h0, Q_ONE, 0, 0), 0));
      exp.push_back(tk(node_gene(2, 16'h0, Q_ONE, 0, 0), 0));
      exp.push_back(tk(node_gene(7, 16'h0, Q_ONE, 0, 0), 0));
      exp.push_back('{1, 0, 1, node_gene(8, 16'h0, Q_ONE, 0, 0)});
      exp.push_back('{1, 0, 1, conn_gene(1, 8, Q_ONE, 1)});
      exp.push_back('{1, 0, 1, conn_gene(8, 7, 16'h0180, 1)});
      exp.push_back(tk(conn_gene(2, 7, 16'h0040, 1), 0));
      exp.push_back('{1, 0, 1, conn_gene(2, 8, Q_ONE, 1)});
      exp.push_back(tk(conn_gene(7, 8, 16'h0020, 1), 0));
      exp.push_back(tk(conn_gene(1, 2, 16'h0010, 1), 1));
      check(a_out.size() == exp.size(), $sformatf("add: %0d genes out, expected %0d", a_out.size(), exp.size()));
      for (int i = 0; i < exp.size() && i < a_out.size(); i++)
        check(a_out[i] == exp[i], $sformatf("add output %0d", i));
      check(a_stalls == 3, $sformatf("add stall cycles %0d (expected 3)", a_stalls));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
