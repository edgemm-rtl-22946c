// tb_systolic_array: runs M x R by R x C products through the weight-
// stationary array with the schedule of the paper's Eq. (2): weight rows in
// cycles 0..R-1, activation m into row r in cycle R-1+m+r, result (m,c)
// sampled in cycle 2R-2+m+c. Compares every result with a software matrix
// product and checks that the last result lands in cycle 2R+C+M-4, i.e. the
// operation takes 2R+C+M-3 cycles.
module tb_systolic_array;
  localparam int R = 16, C = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                      w_row_we;
  logic [$clog2(R)-1:0]      w_row_idx;
  logic signed [C-1:0][7:0]  w_row;
  logic signed [R-1:0][7:0]  a_col;
  logic signed [C-1:0][31:0] psum_bottom;

  systolic_array #(.R(R), .C(C)) dut (.*);

  logic signed [7:0]  A [R][R];
  logic signed [7:0]  Wt [R][C];
  logic signed [31:0] ref_y;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int M);
    int last_t, got;
    got = 0;
    last_t = -1;
    for (int i = 0; i < R; i++)
      for (int j = 0; j < R; j++) A[i][j] = 8'($urandom);
    for (int i = 0; i < R; i++)
      for (int j = 0; j < C; j++) Wt[i][j] = 8'($urandom);
    for (int t = 0; t < 2 * R + C + M + 4; t++) begin
      @(negedge clk);
      w_row_we = (t < R);
      w_row_idx = t[$clog2(R)-1:0];
      for (int c = 0; c < C; c++) w_row[c] = (t < R) ? Wt[t][c] : 8'd0;
      for (int r = 0; r < R; r++) begin
        int m; m = t - (R - 1) - r;
        a_col[r] = (m >= 0 && m < M) ? A[m][r] : 8'sd0;
      end
      #1;
      for (int c = 0; c < C; c++) begin
        int m; m = t - 2 * (R - 1) - c;
        if (m >= 0 && m < M) begin
          ref_y = 0;
          for (int r = 0; r < R; r++) ref_y += 32'(A[m][r]) * 32'(Wt[r][c]);
          checks++;
          got++;
          last_t = t;
          if (signed'(psum_bottom[c]) !== ref_y) begin
            failures++;
            $display("M=%0d m=%0d c=%0d got %0d exp %0d", M, m, c, signed'(psum_bottom[c]), ref_y);
          end
        end
      end
    end
    checks++;
    if (last_t + 1 != 2 * R + C + M - 3 || got != M * C) begin
      failures++;
      $display("latency: last result in cycle %0d, %0d cycles, expected %0d", last_t, last_t + 1, 2*R+C+M-3);
    end
  endtask

  initial begin
    w_row_we = 0; w_row_idx = 0; w_row = '0; a_col = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(1);
    run(16);
    run(7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
