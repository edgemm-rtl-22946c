// sa_pe: one weight-stationary processing element of the systolic array.
//
// The PE holds one signed weight. Each cycle it multiplies the activation
// arriving from its left neighbour with that weight, adds the partial sum
// arriving from above, and registers both the sum (to the PE below) and the
// activation (to the PE on the right). psum_comb is the same sum before the
// register; the array takes its bottom row from it so that the last result
// is ready in the cycle the paper's latency formula counts.
//
// Weight-stationary operation with systolic activations follows the paper.
// INT8 operands with 32-bit accumulation, and which way the partial sums
// travel, are choices of this design.
module sa_pe #(
  parameter int unsigned AW = 8,
  parameter int unsigned PW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 w_load,
  input  logic signed [AW-1:0] w_in,
  input  logic signed [AW-1:0] a_in,
  input  logic signed [PW-1:0] psum_in,
  output logic signed [AW-1:0] a_out,
  output logic signed [PW-1:0] psum_out,
  output logic signed [PW-1:0] psum_comb
);
  logic signed [AW-1:0] w_q;

  assign psum_comb = psum_in + PW'(a_in * w_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q      <= '0;
      a_out    <= '0;
      psum_out <= '0;
    end else begin
      if (w_load) w_q <= w_in;
      a_out    <= a_in;
      psum_out <= psum_comb;
    end
  end
endmodule
