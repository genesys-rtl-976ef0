// genesys_pkg: types and constants shared by the GeneSys learning engine (EvE),
// the inference engine (ADAM) and the genome buffer.
//
// A gene is one 64-bit word. The same layout serves node genes and connection
// genes:
//   is_conn  : 0 = node gene, 1 = connection gene
//   key_a    : node ID (node gene) or source node ID (connection gene)
//   key_b    : 0 (node gene) or destination node ID (connection gene)
//   attr0    : bias (node) or weight (connection), signed Q8.8
//   attr1    : response (node), unused for connections, signed Q8.8
//   attr2    : activation function code (node)
//   attr3    : aggregation function code (node) or {2'b0, enable} (connection)
// The 64-bit width and the four node attributes {bias, response, activation,
// aggregation} follow the paper; the bit positions, the 12-bit IDs and the
// Q8.8 number format are this design's choice.
//
// A genome is stored in a fixed slot of the genome buffer: word 0 is a header
// (fitness, gene count), then the genes sorted ascending by {is_conn, key_a,
// key_b}, i.e. all node genes first, then all connection genes.
package genesys_pkg;

  localparam int unsigned GENE_W  = 64;
  localparam int unsigned ID_W    = 12;
  localparam int unsigned KEY_W   = 1 + 2 * ID_W;   // sort key {is_conn, key_a, key_b}
  localparam int unsigned RND_B   = 12;             // random bytes used by one PE per cycle

  typedef logic [ID_W-1:0] node_id_t;
  typedef logic [KEY_W-1:0] gene_key_t;

  typedef struct packed {
    logic            is_conn;
    node_id_t        key_a;
    node_id_t        key_b;
    logic [15:0]     attr0;
    logic [15:0]     attr1;
    logic [3:0]      attr2;
    logic [2:0]      attr3;
  } gene_t;

  // Header word of a genome slot.
  typedef struct packed {
    logic [31:0] fitness;     // unsigned fitness written by the CPU
    logic [15:0] num_genes;   // genes following the header
    logic [15:0] reserved;
  } genome_hdr_t;

  // An aligned pair of parent genes as handed to a PE. Parent A is the fitter one.
  typedef struct packed {
    logic  a_valid;           // gene present in parent A
    logic  b_valid;           // gene present in parent B
    logic  last;              // last pair of this child genome
    gene_t a;
    gene_t b;
  } gene_pair_t;

  // One slot of the PE pipeline: a child gene plus flags. A gene removed by a
  // stage keeps travelling as a token with keep=0 so that the end-of-genome
  // marker is never lost.
  typedef struct packed {
    logic  keep;              // gene is part of the child
    logic  last;              // last token of this child genome
    logic  added;             // gene created by the add stage (may be out of key order)
    gene_t g;
  } gene_tok_t;

  // Programmable evolution parameters (written by the CPU). Probabilities are
  // 8-bit fractions: an event happens when a random byte is below the value.
  typedef struct packed {
    logic [7:0]  xover_bias;      // P(attribute taken from parent A), 128 = 0.5
    logic [7:0]  perturb_prob;
    logic [7:0]  node_del_prob;
    logic [7:0]  conn_del_prob;
    logic [3:0]  del_threshold;   // max nodes deleted per child genome
    logic [7:0]  node_add_prob;
    logic [7:0]  conn_add_prob;
    node_id_t    protected_nodes; // node IDs below this (inputs, outputs) are never deleted
  } eve_cfg_t;

  localparam logic [15:0] Q_ONE = 16'h0100;   // 1.0 in Q8.8

  function automatic gene_key_t key_of(gene_t g);
    return {g.is_conn, g.key_a, g.key_b};
  endfunction

  function automatic gene_t node_gene(node_id_t id, logic [15:0] bias, logic [15:0] resp,
                                      logic [3:0] act, logic [2:0] agg);
    gene_t g;
    g.is_conn = 1'b0; g.key_a = id; g.key_b = '0;
    g.attr0 = bias; g.attr1 = resp; g.attr2 = act; g.attr3 = agg;
    return g;
  endfunction

  function automatic gene_t conn_gene(node_id_t src, node_id_t dst, logic [15:0] w, logic en);
    gene_t g;
    g.is_conn = 1'b1; g.key_a = src; g.key_b = dst;
    g.attr0 = w; g.attr1 = '0; g.attr2 = '0; g.attr3 = {2'b00, en};
    return g;
  endfunction

endpackage
