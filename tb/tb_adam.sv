// tb_adam: loads a random 32x32 weight matrix row by row, streams 64 random
// input vectors back to back (one per cycle, plus a gap) and checks each result
// vector against y = W x computed here, and that it appears exactly 2*DIM
// cycles after its input. A second matrix is then loaded and checked.
module tb_adam;
  localparam int DIM = 32, NV = 64, LAT = 2 * DIM;
  logic clk = 0, rst_n = 0;
  logic w_we, in_valid, out_valid;
  logic [$clog2(DIM)-1:0] w_row;
  logic signed [DIM-1:0][15:0] w_data, in_vec;
  logic signed [DIM-1:0][31:0] out_vec;
  logic signed [15:0] W [DIM][DIM];
  logic [DIM-1:0][31:0] exp_q [$];
  int in_cycle [$];
  int cyc = 0, checks = 0, failures = 0, nout = 0;

  adam #(.DIM(DIM)) dut (.clk, .rst_n, .w_we, .w_row, .w_data, .in_valid, .in_vec, .out_valid, .out_vec);
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [DIM-1:0][31:0] e;
    e = exp_q.pop_front();
    checks++;
    if (cyc - in_cycle.pop_front() != LAT) begin failures++; $display("latency wrong"); end
    for (int i = 0; i < DIM; i++) begin
      checks++;
      if (out_vec[i] !== e[i]) begin failures++; if (failures < 4) $display("v%0d i%0d got %h exp %h", nout, i, out_vec[i], e[i]); end
    end
    nout++;
  end

  task automatic load_w();
    for (int j = 0; j < DIM; j++) begin
      for (int i = 0; i < DIM; i++) begin
        W[i][j] = 16'($urandom);
        w_data[i] = W[i][j];
      end
      w_row = 5'(j); w_we = 1;
      @(posedge clk); #1;
    end
    w_we = 0;
  endtask

  function automatic logic signed [31:0] dot(int i, logic [DIM-1:0][15:0] x);
    logic signed [31:0] acc;
    acc = 0;
    for (int j = 0; j < DIM; j++) begin
      int wv, xv;
      wv = W[i][j];
      xv = int'(signed'(x[j]));
      acc = acc + wv * xv;
    end
    return acc;
  endfunction

  task automatic send(int k);
    logic [DIM-1:0][31:0] e;
    logic [DIM-1:0][15:0] x;
    for (int j = 0; j < DIM; j++) x[j] = 16'($urandom);
    for (int i = 0; i < DIM; i++) e[i] = dot(i, x);
    in_vec = x;
    exp_q.push_back(e);
    in_cycle.push_back(cyc + 1);
    in_valid = 1;
    @(posedge clk); #1;
    in_valid = 0;
    if (k == NV / 2) repeat (3) @(posedge clk);
    #0;
  endtask

  initial begin
    w_we = 0; in_valid = 0; w_row = '0; w_data = '0; in_vec = '0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    load_w();
    for (int k = 0; k < NV; k++) send(k);
    repeat (LAT + 2) @(posedge clk); #1;
    load_w();
    for (int k = 0; k < 8; k++) send(k);
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (nout != NV + 8) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
