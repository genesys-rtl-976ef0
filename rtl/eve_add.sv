// eve_add: stage 4 of the EvE PE pipeline (add gene engine).
//
// The stage tracks the largest node ID of the child so far (node genes come
// first). On a connection gene src->dst it can:
//   add a node       (random byte rnd[0] < node_add_prob): emit a new node gene
//                    with ID max+1 and default attributes (bias 0, response
//                    1.0), a connection src->new with weight 1.0 and a
//                    connection new->dst with the old weight; the incoming
//                    connection is dropped;
//   add a connection (two steps): when rnd[1] < conn_add_prob the source of the
//                    incoming connection is stored; when the next connection
//                    arrives a new connection stored_src -> its destination
//                    (weight 1.0, enabled) is emitted next to it, unless that
//                    would be a self loop.
// Additions are made only while add_allow is high (the gene merge has room).
// The mechanisms follow the paper; the default attribute values and using
// "random byte below the probability" are this design's choices.
//
// Timing: valid/ready with a 3-entry output queue. A gene is accepted when the
// queue is empty (or is emptying this cycle); the genes it produces leave one
// per cycle, so an addition stalls the upstream stages for one (connection) or
// two (node) cycles. Latency is 1 cycle. Per-child state clears after the token
// marked last.
module eve_add
  import genesys_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  eve_cfg_t    cfg,
  input  logic [1:0][7:0] rnd,
  input  logic        add_allow,
  input  logic        in_valid,
  output logic        in_ready,
  input  gene_tok_t   in_tok,
  output logic        out_valid,
  input  logic        out_ready,
  output gene_tok_t   out_tok,
  output logic        node_added,
  output logic        conn_added,
  output logic        stall         // upstream held because added genes are leaving
);
  gene_tok_t   q [3];
  logic [1:0]  q_cnt;
  node_id_t    max_id, src_st;
  logic        have_src;

  gene_tok_t   n0, n1, n2;
  logic [1:0]  n_cnt;
  node_id_t    cur_max, new_id;
  logic        do_node, do_conn2, do_conn1, fire;

  always_comb begin
    cur_max = max_id;
    if (in_tok.keep) begin
      if (in_tok.g.key_a > cur_max) cur_max = in_tok.g.key_a;
      if (in_tok.g.is_conn && in_tok.g.key_b > cur_max) cur_max = in_tok.g.key_b;
    end
    new_id   = cur_max + 1'b1;
    do_node  = in_tok.keep && in_tok.g.is_conn && add_allow && (rnd[0] < cfg.node_add_prob) &&
               (cur_max != '1);
    do_conn2 = !do_node && in_tok.keep && in_tok.g.is_conn && add_allow && have_src &&
               (src_st != in_tok.g.key_b);
    do_conn1 = !do_node && in_tok.keep && in_tok.g.is_conn && add_allow && !have_src &&
               (rnd[1] < cfg.conn_add_prob);
    n0 = in_tok; n1 = in_tok; n2 = in_tok; n_cnt = 2'd1;
    if (do_node) begin
      n0 = '{keep: 1'b1, last: 1'b0, added: 1'b1, g: node_gene(new_id, 16'h0000, Q_ONE, 4'd0, 3'd0)};
      n1 = '{keep: 1'b1, last: 1'b0, added: 1'b1, g: conn_gene(in_tok.g.key_a, new_id, Q_ONE, 1'b1)};
      n2 = '{keep: 1'b1, last: in_tok.last, added: 1'b1,
             g: conn_gene(new_id, in_tok.g.key_b, in_tok.g.attr0, in_tok.g.attr3[0])};
      n_cnt = 2'd3;
    end else if (do_conn2) begin
      n0 = '{keep: 1'b1, last: 1'b0, added: 1'b1, g: conn_gene(src_st, in_tok.g.key_b, Q_ONE, 1'b1)};
      n1 = in_tok;
      n_cnt = 2'd2;
    end
  end

  assign in_ready   = (q_cnt == 2'd0) || (q_cnt == 2'd1 && out_ready);
  assign fire       = in_valid && in_ready;
  assign out_valid  = (q_cnt != 2'd0);
  assign out_tok    = q[0];
  assign node_added = fire && do_node;
  assign conn_added = fire && do_conn2;
  assign stall      = in_valid && !in_ready;

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      q_cnt    <= '0;
      max_id   <= '0;
      src_st   <= '0;
      have_src <= 1'b0;
      for (int i = 0; i < 3; i++) q[i] <= '0;
    end else begin
      if (fire) begin
        q[0]  <= n0; q[1] <= n1; q[2] <= n2;
        q_cnt <= n_cnt;
        if (in_tok.last) begin
          max_id   <= '0;
          have_src <= 1'b0;
        end else begin
          max_id <= do_node ? new_id : cur_max;
          if (do_conn1) begin
            have_src <= 1'b1;
            src_st   <= in_tok.g.key_a;
          end else if (do_conn2 || (have_src && in_tok.keep && in_tok.g.is_conn)) begin
            have_src <= 1'b0;
          end
        end
      end else if (out_valid && out_ready) begin
        q[0]  <= q[1];
        q[1]  <= q[2];
        q_cnt <= q_cnt - 1'b1;
      end
    end
  end
endmodule
