// gene_align: the per-PE part of the gene split. It keeps local copies of the
// two parent genomes of the child its PE is building and streams them to the PE
// as key-aligned gene pairs.
//
// Capture: while the gene split multicasts parent genomes on the distribution
// bus, cap_x_* / cap_y_* deliver the words of this PE's first and second
// parent (index 0 is the genome header, index i>0 is gene i-1). One SRAM read
// thus serves every PE that uses the same parent (genome-level reuse).
// Run: after go, two cycles read both headers (fitness and gene counts) and
// pick the fitter parent as parent A (ties: the first parent). Then a merge-join
// on the sort key {is_conn, key_a, key_b} emits one pair per accepted cycle:
// equal keys give a pair with both genes, otherwise the smaller key is sent
// alone. Genomes are stored sorted with node genes first, so nodes reach the PE
// before connections. The final pair carries last; two empty parents give one
// empty pair with last. n_fit reports the fitter parent's gene count.
// Aligning genes by key, the node-first order and the two header cycles follow
// the paper; the local copies and the merge-join are this design's choices.
module gene_align
  import genesys_pkg::*;
#(
  parameter int unsigned MAX_GENES = 511
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cap_x_valid,
  input  logic [15:0] cap_x_idx,
  input  logic [63:0] cap_x_data,
  input  logic        cap_y_valid,
  input  logic [15:0] cap_y_idx,
  input  logic [63:0] cap_y_data,
  input  logic        go,
  output logic        busy,
  output logic [15:0] n_fit,
  output logic        out_valid,
  input  logic        out_ready,
  output gene_pair_t  out_pair
);
  localparam int unsigned AW = $clog2(MAX_GENES);

  typedef enum logic [1:0] {S_IDLE, S_HDR0, S_HDR1, S_RUN} state_t;

  gene_t       mem_x [MAX_GENES];
  gene_t       mem_y [MAX_GENES];
  genome_hdr_t hdr_x, hdr_y;
  state_t      st;
  logic [15:0] ix, iy, nx, ny;
  logic        swap;
  logic [31:0] fit_x, fit_y;

  always_ff @(posedge clk) begin
    if (cap_x_valid) begin
      if (cap_x_idx == 16'd0) hdr_x <= genome_hdr_t'(cap_x_data);
      else if (int'(cap_x_idx) <= MAX_GENES) mem_x[AW'(cap_x_idx - 16'd1)] <= gene_t'(cap_x_data);
    end
    if (cap_y_valid) begin
      if (cap_y_idx == 16'd0) hdr_y <= genome_hdr_t'(cap_y_data);
      else if (int'(cap_y_idx) <= MAX_GENES) mem_y[AW'(cap_y_idx - 16'd1)] <= gene_t'(cap_y_data);
    end
  end

  // merge-join of the two sorted genomes
  gene_t      gx, gy;
  logic       hx, hy, take_x, take_y, fin;
  gene_pair_t pr;

  always_comb begin
    gx = mem_x[AW'(ix)];
    gy = mem_y[AW'(iy)];
    hx = (ix < nx);
    hy = (iy < ny);
    take_x = hx && (!hy || key_of(gx) <= key_of(gy));
    take_y = hy && (!hx || key_of(gy) <= key_of(gx));
    fin = ((ix + 16'(take_x)) >= nx) && ((iy + 16'(take_y)) >= ny);
    pr.last = fin;
    if (!swap) begin
      pr.a_valid = take_x; pr.a = gx; pr.b_valid = take_y; pr.b = gy;
    end else begin
      pr.a_valid = take_y; pr.a = gy; pr.b_valid = take_x; pr.b = gx;
    end
  end

  assign busy      = (st != S_IDLE);
  assign out_valid = (st == S_RUN);
  assign out_pair  = pr;
  assign fit_x     = hdr_x.fitness;
  assign fit_y     = hdr_y.fitness;
  assign n_fit     = swap ? ny : nx;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= S_IDLE; ix <= '0; iy <= '0; nx <= '0; ny <= '0; swap <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (go) st <= S_HDR0;
        S_HDR0: begin   // header cycle 1: gene counts
          nx <= (int'(hdr_x.num_genes) > MAX_GENES) ? 16'(MAX_GENES) : hdr_x.num_genes;
          ny <= (int'(hdr_y.num_genes) > MAX_GENES) ? 16'(MAX_GENES) : hdr_y.num_genes;
          ix <= '0; iy <= '0;
          st <= S_HDR1;
        end
        S_HDR1: begin   // header cycle 2: fitness comparison
          swap <= (fit_y > fit_x);
          st   <= S_RUN;
        end
        S_RUN: if (out_ready) begin
          ix <= ix + 16'(take_x);
          iy <= iy + 16'(take_y);
          if (fin) st <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
