// tb_child_merge: feeds random child-gene tokens (in-order inherited genes,
// out-of-order added genes, deleted tokens) into one child_merge unit, then
// reads the genome back and checks it equals all kept genes sorted by key, and
// checks count, done and the add_allow rule (side-buffer room and slot budget).
module tb_child_merge;
  import genesys_pkg::*;
  localparam int ADD_MAX = 16;
  logic clk = 0, rst_n = 0, clr = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic [15:0] budget, count;
  logic allow, iv, ir, done, rv, pop;
  gene_tok_t tok;
  gene_t rg;

  child_merge #(.MAX_GENES(127), .ADD_MAX(ADD_MAX)) dut (
    .clk, .rst_n, .clr, .budget, .add_allow(allow), .in_valid(iv), .in_ready(ir), .in_tok(tok),
    .done, .count, .rd_valid(rv), .rd_gene(rg), .rd_pop(pop));

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; pop = 0; budget = 16'd100;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      gene_t exp [$];
      int nadd, nreg;
      logic [KEY_W-1:0] k;
      clr = 1; @(posedge clk); #1 clr = 0;
      budget = 16'($urandom_range(0, 30));
      nadd = 0; nreg = 0; k = '0; exp.delete();
      #1;
      check(allow == (4 <= ADD_MAX && 4 <= int'(budget)), "add_allow when empty");
      for (int i = 0; i < 60; i++) begin
        gene_t g;
        logic added, keep;
        added = ($urandom_range(0, 4) == 0) && nadd < ADD_MAX;
        keep  = ($urandom_range(0, 5) != 0);
        if (added) g = gene_t'({$urandom, $urandom});
        else begin
          k = k + KEY_W'($urandom_range(1, 300));
          g = gene_t'({k, 39'($urandom)});
        end
        tok = '{keep: keep, last: (i == 59), added: added, g: g};
        iv = 1;
        if (keep) begin
          exp.push_back(g);
          if (added) nadd++; else nreg++;
        end
        @(posedge clk); #1;
        check(allow == (nadd + 4 <= ADD_MAX && nadd + 4 <= int'(budget)), "add_allow rule");
      end
      iv = 0;
      check(done && int'(count) == exp.size(), $sformatf("done/count %0d vs %0d", count, exp.size()));
      exp.sort() with (key_of(item));
      for (int i = 0; i < exp.size(); ) begin
        pop = ($urandom_range(0, 2) != 0);
        #0;
        check(rv, "read valid");
        if (pop) begin
          check(key_of(rg) == key_of(exp[i]), $sformatf("trial %0d gene %0d order", trial, i));
          i++;
        end
        @(posedge clk); #1;
      end
      pop = 0;
      check(!rv, "nothing left to read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
