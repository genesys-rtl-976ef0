// eve_perturb: stage 2 of the EvE PE pipeline (perturbation engine).
//
// With the programmable perturbation probability (random byte rnd[0] below
// perturb_prob) the child gene from the crossover stage gets mutated values:
//   node gene      : bias += d0, response += d1 (d0, d1 signed random bytes,
//                    i.e. up to +-0.5 in Q8.8), activation := rnd[3][3:0],
//                    aggregation := rnd[4][2:0]
//   connection gene: weight += d0
// The probability test per gene follows the paper; how a mutated value is
// formed is this design's choice (the paper only says that mutated values are
// generated for each attribute). Keys and keep/last flags pass unchanged.
//
// Timing: one register stage, valid/ready, latency 1 cycle.
module eve_perturb
  import genesys_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic [7:0]  prob,
  input  logic [4:0][7:0] rnd,
  input  logic        in_valid,
  output logic        in_ready,
  input  gene_tok_t   in_tok,
  output logic        out_valid,
  input  logic        out_ready,
  output gene_tok_t   out_tok,
  output logic        fired        // a gene was perturbed this cycle
);
  gene_tok_t nxt;
  logic      hit;

  assign hit = in_tok.keep && (rnd[0] < prob);

  always_comb begin
    nxt = in_tok;
    if (hit) begin
      nxt.g.attr0 = in_tok.g.attr0 + {{8{rnd[1][7]}}, rnd[1]};
      if (!in_tok.g.is_conn) begin
        nxt.g.attr1 = in_tok.g.attr1 + {{8{rnd[2][7]}}, rnd[2]};
        nxt.g.attr2 = rnd[3][3:0];
        nxt.g.attr3 = rnd[4][2:0];
      end
    end
  end

  assign in_ready = !out_valid || out_ready;
  assign fired    = in_valid && in_ready && hit;

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
