// systolic_array: R x C weight-stationary systolic array of sa_pe.
//
// PE(r,c) keeps weight W[r][c]. Activations enter each row from the left and
// move one column per cycle; partial sums move one row down per cycle, so the
// bottom of column c delivers sum_r a[r] * W[r][c]: an M x R activation
// matrix streamed row by row (skewed by one cycle per array row) is
// multiplied by the stationary R x C weights.
//
// Interface: w_row_we/w_row_idx/w_row write one weight row per cycle.
// a_col[r] is the activation presented to row r this cycle (the caller
// applies the skew). psum_bottom[c] is the combinational output of the bottom
// PE of column c. With weights written in cycles 0..R-1 and activation m fed
// to row r in cycle R-1+m+r, result (m,c) appears in cycle 2R-2+m+c, so an
// M-row product needs 2R+C+M-3 cycles, the paper's Eq. (2). How weights are
// written (one row per cycle, by address) is this design's choice.
module systolic_array #(
  parameter int unsigned R  = 16,
  parameter int unsigned C  = 16,
  parameter int unsigned AW = 8,
  parameter int unsigned PW = 32
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        w_row_we,
  input  logic [$clog2(R)-1:0]        w_row_idx,
  input  logic signed [C-1:0][AW-1:0] w_row,
  input  logic signed [R-1:0][AW-1:0] a_col,
  output logic signed [C-1:0][PW-1:0] psum_bottom
);
  // a_h[r][c]: activation into PE(r,c); p_v[r][c]: partial sum into PE(r,c)
  logic signed [AW-1:0] a_h [R][C+1];
  logic signed [PW-1:0] p_v [R+1][C];
  logic signed [PW-1:0] p_c [R][C];

  for (genvar r = 0; r < R; r++) begin : g_row
    assign a_h[r][0] = a_col[r];
    for (genvar c = 0; c < C; c++) begin : g_col
      sa_pe #(.AW(AW), .PW(PW)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .w_load   (w_row_we && (w_row_idx == r[$clog2(R)-1:0])),
        .w_in     (w_row[c]),
        .a_in     (a_h[r][c]),
        .psum_in  (p_v[r][c]),
        .a_out    (a_h[r][c+1]),
        .psum_out (p_v[r+1][c]),
        .psum_comb(p_c[r][c])
      );
    end
  end

  for (genvar c = 0; c < C; c++) begin : g_out
    assign p_v[0][c]      = '0;
    assign psum_bottom[c] = p_c[R-1][c];
  end
endmodule
