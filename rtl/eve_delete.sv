// eve_delete: stage 3 of the EvE PE pipeline (delete gene engine).
//
// Node genes: a node is deleted when its random byte is below node_del_prob,
// fewer than del_threshold nodes of this child have been deleted already, and
// its ID is not protected (IDs below protected_nodes are the input and output
// nodes). Its ID is then stored. Connection genes: a connection is deleted when
// its source or destination matches a stored ID (no dangling edges) or when its
// random byte is below conn_del_prob. Node genes stream before connection genes,
// so every deleted ID is known before the first connection arrives.
// A deleted gene leaves as a token with keep=0. The stored IDs and the count are
// cleared after the token marked last has passed, ready for the next child.
// The mechanism follows the paper; the store size DEL_MAX and the protected
// node range are this design's choices (the paper gives no threshold value).
//
// Timing: one register stage, valid/ready, latency 1 cycle.
module eve_delete
  import genesys_pkg::*;
#(
  parameter int unsigned DEL_MAX = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  eve_cfg_t    cfg,
  input  logic [7:0]  rnd,
  input  logic        in_valid,
  output logic        in_ready,
  input  gene_tok_t   in_tok,
  output logic        out_valid,
  input  logic        out_ready,
  output gene_tok_t   out_tok,
  output logic        node_deleted,   // a node gene was deleted this cycle
  output logic        conn_deleted    // a connection gene was deleted this cycle
);
  localparam int unsigned CW = $clog2(DEL_MAX + 1);

  node_id_t        del_id [DEL_MAX];
  logic [CW-1:0]   del_cnt;
  logic            id_hit, node_del, conn_del, fire;
  gene_tok_t       nxt;

  always_comb begin
    id_hit = 1'b0;
    for (int i = 0; i < DEL_MAX; i++)
      if (i < int'(del_cnt) && (del_id[i] == in_tok.g.key_a || del_id[i] == in_tok.g.key_b))
        id_hit = 1'b1;
    node_del = in_tok.keep && !in_tok.g.is_conn && (rnd < cfg.node_del_prob) &&
               (int'(del_cnt) < int'(cfg.del_threshold)) && (int'(del_cnt) < DEL_MAX) &&
               (in_tok.g.key_a >= cfg.protected_nodes);
    conn_del = in_tok.keep && in_tok.g.is_conn && (id_hit || (rnd < cfg.conn_del_prob));
    nxt      = in_tok;
    if (node_del || conn_del) nxt.keep = 1'b0;
  end

  assign in_ready     = !out_valid || out_ready;
  assign fire         = in_valid && in_ready;
  assign node_deleted = fire && node_del;
  assign conn_deleted = fire && conn_del;

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      out_valid <= 1'b0;
      out_tok   <= '0;
      del_cnt   <= '0;
      for (int i = 0; i < DEL_MAX; i++) del_id[i] <= '0;
    end else begin
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) out_tok <= nxt;
      end
      if (fire) begin
        if (in_tok.last)   del_cnt <= '0;
        else if (node_del) begin
          del_id[del_cnt[$clog2(DEL_MAX)-1:0]] <= in_tok.g.key_a;
          del_cnt         <= del_cnt + 1'b1;
        end
      end
    end
  end
endmodule
