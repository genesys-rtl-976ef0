// tb_gene_align: loads two random sorted parent genomes through the capture
// ports, starts the aligner and compares every emitted pair with a merge-join
// done here: equal keys paired, the fitter parent as parent A, last on the final
// pair, first pair exactly 3 cycles after go (two header cycles). Repeated for
// many random genome pairs, including empty genomes and random back-pressure.
module tb_gene_align;
  import genesys_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic cxv, cyv, go, busy, ov, ordy;
  logic [15:0] cxi, cyi, n_fit;
  logic [63:0] cxd, cyd;
  gene_pair_t pr;

  gene_align #(.MAX_GENES(63)) dut (
    .clk, .rst_n, .cap_x_valid(cxv), .cap_x_idx(cxi), .cap_x_data(cxd),
    .cap_y_valid(cyv), .cap_y_idx(cyi), .cap_y_data(cyd), .go, .busy, .n_fit,
    .out_valid(ov), .out_ready(ordy), .out_pair(pr));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s t=%0t", what, $time); end
  endtask

  // random sorted genome: some node genes then some connection genes
  function automatic void make_genome(ref gene_t g [$], input int nn, input int nc);
    logic [KEY_W-1:0] k [$];
    g.delete();
    for (int i = 0; i < 40 && g.size() < nn; i++)
      if ($urandom_range(0, 1)) g.push_back(node_gene(12'(i), 16'($urandom), 16'($urandom), 4'($urandom), 3'($urandom)));
    for (int s = 0; s < 8; s++)
      for (int d = 0; d < 8; d++)
        if (g.size() < nn + nc && $urandom_range(0, 3) == 0) g.push_back(conn_gene(12'(s), 12'(d), 16'($urandom), 1'($urandom)));
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gene_t gx [$], gy [$], ga [$], gb [$];
    logic [31:0] fx, fy;
    cxv = 0; cyv = 0; go = 0; ordy = 1;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int trial = 0; trial < 60; trial++) begin
      make_genome(gx, (trial % 10 == 0) ? 0 : $urandom_range(1, 12), $urandom_range(0, 20));
      make_genome(gy, (trial % 15 == 1) ? 0 : $urandom_range(1, 12), $urandom_range(0, 20));
      if (trial % 10 == 0) gx.delete();
      fx = $urandom_range(0, 100); fy = (trial % 4 == 0) ? fx : $urandom_range(0, 100);
      // capture headers and genes (y words are sent in reverse order: order must not matter)
      cxv = 1; cxi = 0; cxd = {fx, 16'(gx.size()), 16'h0};
      cyv = 1; cyi = 0; cyd = {fy, 16'(gy.size()), 16'h0};
      @(posedge clk); #1;
      for (int i = 0; i < 64; i++) begin
        cxv = i < gx.size(); cxi = 16'(i + 1); cxd = (i < gx.size()) ? 64'(gx[i]) : '0;
        cyv = i < gy.size(); cyi = 16'(gy.size() - i); cyd = (i < gy.size()) ? 64'(gy[gy.size() - 1 - i]) : '0;
        @(posedge clk); #1;
      end
      cxv = 0; cyv = 0;
      // expected pairs
      if (fy > fx) begin ga = gy; gb = gx; end else begin ga = gx; gb = gy; end
      go = 1; @(posedge clk); #1; go = 0;
      check(!ov, "no output in header cycle 1"); @(posedge clk); #1;
      check(!ov, "no output in header cycle 2"); @(posedge clk); #1;
      check(n_fit == 16'(ga.size()), "n_fit");
      begin
        int ia, ib;
        logic done;
        ia = 0; ib = 0; done = 0;
        while (!done) begin
          gene_pair_t e;
          logic ta, tb;
          ordy = ($urandom_range(0, 3) != 0);
          #0;
          ta = ia < ga.size() && (ib >= gb.size() || key_of(ga[ia]) <= key_of(gb[ib]));
          tb = ib < gb.size() && (ia >= ga.size() || key_of(gb[ib]) <= key_of(ga[ia]));
          check(ov, "pair valid while streaming");
          if (ov && ordy) begin
            check(pr.a_valid == ta && pr.b_valid == tb, $sformatf("trial %0d presence", trial));
            if (ta) check(pr.a == ga[ia], "gene a");
            if (tb) check(pr.b == gb[ib], "gene b");
            ia += int'(ta); ib += int'(tb);
            check(pr.last == (ia >= ga.size() && ib >= gb.size()), "last flag");
            done = pr.last;
          end
          @(posedge clk); #1;
        end
        ordy = 1;
        check(!busy && !ov, $sformatf("idle after last busy=%b ov=%b na=%0d nb=%0d", busy, ov, ga.size(), gb.size()));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
