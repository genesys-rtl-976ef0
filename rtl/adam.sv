// adam: the GeneSys inference engine, a DIM x DIM (32 x 32) systolic array of
// MAC cells that evaluates many neural-network vertices at once as a packed
// matrix-vector product y = W x.
//
// The CPU's vectorize routine packs a genome's connection weights into W and
// the values of the ready source vertices into x. W stays in the array for a
// whole generation's inferences of that genome (weight stationary): cell (j,i)
// holds W[i][j]. Row j of W^T is written with w_we/w_row/w_data (one row per
// cycle, DIM cycles for a full matrix). A new input vector can enter every
// cycle (in_valid/in_vec); inside, element j is delayed j cycles (skew), the
// partial sum of output i runs down column i, and output i is delayed DIM-1-i
// cycles (de-skew), so a whole result vector appears on out_vec together,
// LATENCY = 2*DIM cycles after its input. Activation functions and bias are
// applied by the CPU to the results.
// The 32x32 array of MACs and matrix-vector packing follow the paper, which
// omits the array's details; dataflow, skewing and number formats are this
// design's choices.
module adam #(
  parameter int unsigned DIM = 32
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          w_we,
  input  logic [$clog2(DIM)-1:0]        w_row,
  input  logic signed [DIM-1:0][15:0]   w_data,
  input  logic                          in_valid,
  input  logic signed [DIM-1:0][15:0]   in_vec,
  output logic                          out_valid,
  output logic signed [DIM-1:0][31:0]   out_vec
);
  localparam int unsigned LATENCY = 2 * DIM;

  logic signed [15:0] xh [DIM][DIM+1];   // activations: row j, between columns
  logic signed [31:0] pv [DIM+1][DIM];   // partial sums: between rows, column i

  // input skew: row j delayed by j cycles
  for (genvar j = 0; j < DIM; j++) begin : g_skew
    if (j == 0) begin : g_direct
      assign xh[0][0] = in_vec[0];
    end else begin : g_delay
      logic signed [15:0] d [j];
      always_ff @(posedge clk) begin
        if (!rst_n) for (int k = 0; k < j; k++) d[k] <= '0;
        else begin
          d[0] <= in_vec[j];
          for (int k = 1; k < j; k++) d[k] <= d[k-1];
        end
      end
      assign xh[j][0] = d[j-1];
    end
  end

  for (genvar i = 0; i < DIM; i++) begin : g_top
    assign pv[0][i] = '0;
  end

  for (genvar j = 0; j < DIM; j++) begin : g_row
    for (genvar i = 0; i < DIM; i++) begin : g_col
      adam_mac u_mac (
        .clk, .rst_n,
        .w_we(w_we && w_row == j[$clog2(DIM)-1:0]), .w_in(w_data[i]),
        .x_in(xh[j][i]), .psum_in(pv[j][i]),
        .x_out(xh[j][i+1]), .psum_out(pv[j+1][i])
      );
    end
  end

  // output de-skew: column i delayed by DIM-1-i cycles, then one output register
  logic signed [31:0] yo [DIM];
  for (genvar i = 0; i < DIM; i++) begin : g_deskew
    assign out_vec[i] = yo[i];
    if (i == DIM - 1) begin : g_direct
      always_ff @(posedge clk) yo[i] <= pv[DIM][i];
    end else begin : g_delay
      logic signed [31:0] d [DIM-1-i];
      always_ff @(posedge clk) begin
        d[0] <= pv[DIM][i];
        for (int k = 1; k < DIM - 1 - i; k++) d[k] <= d[k-1];
        yo[i] <= d[DIM-2-i];
      end
    end
  end

  logic [LATENCY-1:0] vpipe;
  always_ff @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LATENCY-2:0], in_valid};
  end
  assign out_valid = vpipe[LATENCY-1];
endmodule
