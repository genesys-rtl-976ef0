// eve_crossover: stage 1 of the EvE PE pipeline (crossover engine).
//
// It receives a pair of key-aligned parent genes, parent A being the fitter.
// When both parents carry the gene, each of the four attributes is taken from
// parent A if its own random byte is below the programmable bias, otherwise from
// parent B; the key always comes from A (keys match). A gene only parent A has
// is inherited unchanged; a gene only parent B (the less fit one) has is dropped
// (token with keep=0). The per-attribute comparison against a programmable bias
// (default 0.5) follows the paper; the treatment of unmatched genes is the
// NEAT rule, chosen here because the paper does not spell it out.
//
// Timing: one register stage with a valid/ready handshake; a pair accepted in
// cycle t appears on the output in cycle t+1. rnd[3:0] are used in the cycle
// the pair is accepted.
module eve_crossover
  import genesys_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic [7:0]  bias,
  input  logic [3:0][7:0] rnd,
  input  logic        in_valid,
  output logic        in_ready,
  input  gene_pair_t  in_pair,
  output logic        out_valid,
  input  logic        out_ready,
  output gene_tok_t   out_tok
);
  gene_tok_t nxt;

  always_comb begin
    nxt.keep = in_pair.a_valid;
    nxt.last  = in_pair.last;
    nxt.added = 1'b0;
    nxt.g    = in_pair.a;
    if (in_pair.a_valid && in_pair.b_valid) begin
      if (rnd[0] >= bias) nxt.g.attr0 = in_pair.b.attr0;
      if (rnd[1] >= bias) nxt.g.attr1 = in_pair.b.attr1;
      if (rnd[2] >= bias) nxt.g.attr2 = in_pair.b.attr2;
      if (rnd[3] >= bias) nxt.g.attr3 = in_pair.b.attr3;
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      out_valid <= 1'b0;
      out_tok   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_tok <= nxt;
    end
  end
endmodule
