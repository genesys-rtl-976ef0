// eve_pe: one EvE processing element, a four-stage pipeline that turns a stream
// of aligned parent gene pairs into the genes of one child genome:
//   crossover -> perturbation -> delete gene -> add gene
// The stage order and functions follow the paper. Stages are joined by a
// valid/ready handshake (this design's choice) so the add stage can stall the
// pipeline while it emits added genes.
//
// Interface: in_* carries gene_pair_t (parent A fitter, flags for missing
// genes, last marker); out_* carries gene_tok_t tokens (keep=0 tokens carry no
// gene but may carry the last marker). rnd gives the PE RND_B random bytes per
// cycle: [3:0] crossover, [7:4],[11] perturbation, [8] deletion, [10:9] addition.
// add_allow comes from the gene merge. clr empties the pipeline.
// Timing: 4 cycles from an accepted pair to its child gene at the output when
// nothing stalls; throughput one gene per cycle.
module eve_pe
  import genesys_pkg::*;
#(
  parameter int unsigned DEL_MAX = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  eve_cfg_t    cfg,
  input  logic [RND_B-1:0][7:0] rnd,
  input  logic        add_allow,
  input  logic        in_valid,
  output logic        in_ready,
  input  gene_pair_t  in_pair,
  output logic        out_valid,
  input  logic        out_ready,
  output gene_tok_t   out_tok,
  output logic [5:0]  events      // {stall, conn_added, node_added, conn_deleted, node_deleted, perturbed}
);
  logic      v1, r1, v2, r2, v3, r3;
  gene_tok_t t1, t2, t3;

  eve_crossover u_xover (
    .clk, .rst_n, .clr, .bias(cfg.xover_bias), .rnd(rnd[3:0]),
    .in_valid, .in_ready, .in_pair,
    .out_valid(v1), .out_ready(r1), .out_tok(t1)
  );

  eve_perturb u_perturb (
    .clk, .rst_n, .clr, .prob(cfg.perturb_prob), .rnd({rnd[11], rnd[7:4]}),
    .in_valid(v1), .in_ready(r1), .in_tok(t1),
    .out_valid(v2), .out_ready(r2), .out_tok(t2), .fired(events[0])
  );

  eve_delete #(.DEL_MAX(DEL_MAX)) u_delete (
    .clk, .rst_n, .clr, .cfg, .rnd(rnd[8]),
    .in_valid(v2), .in_ready(r2), .in_tok(t2),
    .out_valid(v3), .out_ready(r3), .out_tok(t3),
    .node_deleted(events[1]), .conn_deleted(events[2])
  );

  eve_add u_add (
    .clk, .rst_n, .clr, .cfg, .rnd(rnd[10:9]), .add_allow,
    .in_valid(v3), .in_ready(r3), .in_tok(t3),
    .out_valid, .out_ready, .out_tok,
    .node_added(events[3]), .conn_added(events[4]), .stall(events[5])
  );
endmodule
