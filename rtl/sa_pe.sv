// sa_pe: one processing element of the weight-stationary systolic array.
//
// Holds one signed weight, multiplies the activation passing from left to
// right by it and adds the product to the partial sum passing from top to
// bottom. Both the activation and the new partial sum are registered, so a
// value moves one PE per clock in each direction. The ordinary PEs use an
// 8-bit weight and a 32-bit accumulator, as the paper's arrays do; the
// checksum column instantiates the same PE with a wider weight (the sum of a
// weight row) and a wider accumulator so that the checksum never wraps.
module sa_pe #(
  parameter int unsigned XW = 8,   // activation width
  parameter int unsigned WW = 8,   // weight width
  parameter int unsigned AW = 32   // partial-sum width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 w_we,     // load a new stationary weight
  input  logic signed [WW-1:0] w_in,
  input  logic signed [XW-1:0] x_in,
  input  logic signed [AW-1:0] psum_in,
  output logic signed [XW-1:0] x_out,
  output logic signed [AW-1:0] psum_out
);
  logic signed [WW-1:0]    w_q;
  logic signed [XW+WW-1:0] prod;

  assign prod = x_in * w_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_q      <= '0;
      x_out    <= '0;
      psum_out <= '0;
    end else begin
      if (w_we) w_q <= w_in;
      x_out    <= x_in;
      psum_out <= psum_in + AW'(prod);
    end
  end
endmodule
