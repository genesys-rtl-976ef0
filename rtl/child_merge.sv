// child_merge: the per-PE part of the gene merge. It collects the genes of one
// child genome coming out of a PE and later streams the whole genome in
// ascending key order, nodes first, as the genome buffer stores it.
//
// Genes inherited from the parents leave the PE already in key order (the
// parents are streamed sorted and a child gene keeps its parent's key); they
// are appended to the main buffer. Genes made by the add stage (added=1) may be
// out of order, so they go to a small side buffer kept sorted by insertion
// (every entry compares itself with the new key and shifts up when larger).
// Reading out is a two-way merge of the main buffer and the side buffer, one
// gene per rd_pop. add_allow tells the PE it may still add genes: the side
// buffer has room for one more node addition (3 genes) plus one in flight, and
// the child cannot outgrow its genome slot (budget = MAX_GENES - genes of the
// fitter parent). The paper only says the gene merge puts new genes in order;
// the side buffer and its size are this design's choice.
//
// Timing: in_ready is always 1 (space is guaranteed by add_allow); done rises
// the cycle after the token marked last is taken. After done, rd_valid/rd_gene
// show the next gene combinationally; count is the number of genes. clr empties
// the unit for the next wave.
module child_merge
  import genesys_pkg::*;
#(
  parameter int unsigned MAX_GENES = 511,
  parameter int unsigned ADD_MAX   = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clr,
  input  logic [15:0] budget,
  output logic        add_allow,
  input  logic        in_valid,
  output logic        in_ready,
  input  gene_tok_t   in_tok,
  output logic        done,
  output logic [15:0] count,
  output logic        rd_valid,
  output gene_t       rd_gene,
  input  logic        rd_pop
);
  localparam int unsigned AW = $clog2(MAX_GENES);
  localparam int unsigned SW = $clog2(ADD_MAX + 1);

  gene_t        main_q [MAX_GENES];
  gene_t        side_q [ADD_MAX];
  logic [15:0]  m_cnt, m_rd;
  logic [SW-1:0] s_cnt, s_rd;

  assign in_ready  = 1'b1;
  assign count     = m_cnt + 16'(s_cnt);
  assign add_allow = (int'(s_cnt) + 4 <= ADD_MAX) && (32'(s_cnt) + 4 <= 32'(budget));

  // side buffer insertion position for the incoming key
  logic [ADD_MAX-1:0] gt;   // entry i holds a key larger than the new one
  int unsigned        pos;  // first such entry: where the new gene goes
  always_comb begin
    for (int i = 0; i < ADD_MAX; i++)
      gt[i] = (i < int'(s_cnt)) && (key_of(side_q[i]) > key_of(in_tok.g));
    pos = 32'(s_cnt);
    for (int i = ADD_MAX - 1; i >= 0; i--)
      if (gt[i]) pos = i;
  end

  logic take, take_side;
  gene_t m_head, s_head;
  logic m_has, s_has;
  always_comb begin
    take   = in_valid && in_tok.keep && !done;
    m_head = main_q[AW'(m_rd)];
    s_head = side_q[s_rd[$clog2(ADD_MAX)-1:0]];
    m_has  = m_rd < m_cnt;
    s_has  = s_rd < s_cnt;
    take_side = s_has && (!m_has || key_of(s_head) < key_of(m_head));
    rd_valid  = done && (m_has || s_has);
    rd_gene   = take_side ? s_head : m_head;
  end

  always_ff @(posedge clk) begin
    if (take && !in_tok.added && int'(m_cnt) < MAX_GENES) main_q[AW'(m_cnt)] <= in_tok.g;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      m_cnt <= '0; m_rd <= '0; s_cnt <= '0; s_rd <= '0; done <= 1'b0;
      for (int i = 0; i < ADD_MAX; i++) side_q[i] <= '0;
    end else begin
      if (take) begin
        if (!in_tok.added) begin
          if (int'(m_cnt) < MAX_GENES) m_cnt <= m_cnt + 1'b1;
        end else if (int'(s_cnt) < ADD_MAX) begin
          for (int i = 0; i < ADD_MAX; i++) begin
            if (i == int'(pos))                          side_q[i] <= in_tok.g;
            else if (i > int'(pos) && i <= int'(s_cnt)) side_q[i] <= side_q[i-1];
          end
          s_cnt <= s_cnt + 1'b1;
        end
      end
      if (in_valid && in_tok.last) done <= 1'b1;
      if (rd_valid && rd_pop) begin
        if (take_side) s_rd <= s_rd + 1'b1;
        else           m_rd <= m_rd + 1'b1;
      end
    end
  end
endmodule
