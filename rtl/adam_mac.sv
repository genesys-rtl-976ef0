// adam_mac: one multiply-accumulate cell of the ADAM systolic array
// (weight-stationary). It holds one weight, multiplies the activation passing
// through its row by it and adds the product to the partial sum passing down
// its column: psum_out <= psum_in + x_in * w; x_out <= x_in. Both outputs are
// registered, so activations move one cell right and partial sums one cell down
// per cycle. Operands are signed Q8.8 (16 bit), partial sums signed Q16.16
// (32 bit); the number formats are this design's choice.
module adam_mac (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               w_we,
  input  logic signed [15:0] w_in,
  input  logic signed [15:0] x_in,
  input  logic signed [31:0] psum_in,
  output logic signed [15:0] x_out,
  output logic signed [31:0] psum_out
);
  logic signed [15:0] w;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w <= '0; x_out <= '0; psum_out <= '0;
    end else begin
      if (w_we) w <= w_in;
      x_out    <= x_in;
      psum_out <= psum_in + x_in * w;
    end
  end
endmodule
