// tb_cim_column: fills one CIM column with random signed weights through its
// 4-word write port, reads some back, then drives random int8 activations
// bit-serially (MSB first, as the macro controller does) at random wordlines
// and compares the shift-and-accumulator result with the dot product
// computed in software.
module tb_cim_column;
  localparam int R = 32, M = 128, N = 8, K = 4, W = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re, bit_en, first, msb;
  logic [$clog2(R*M/K)-1:0] line;
  logic [K-1:0] wmask;
  logic [K-1:0][N-1:0] wdata, rdata;
  logic [$clog2(M)-1:0] wl;
  logic [R-1:0] act_bits;
  logic signed [31:0] acc;
  cim_column #(.R(R), .M(M), .N(N), .K(K)) dut (.*);

  logic signed [7:0] wt [R][M];
  logic signed [7:0] a [R];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; bit_en = 0; first = 0; msb = 0; line = 0; wmask = 0; wdata = 0; wl = 0; act_bits = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < R * M / K; l++) begin
      @(negedge clk);
      we = 1; wmask = '1; line = l[$clog2(R*M/K)-1:0];
      for (int j = 0; j < K; j++) begin
        wdata[j] = 8'($urandom);
        wt[(l*K + j) / M][(l*K + j) % M] = wdata[j];
      end
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 50; it++) begin
      int l; l = $urandom_range(R * M / K - 1);
      @(negedge clk); re = 1; line = l[$clog2(R*M/K)-1:0];
      @(negedge clk); re = 0;
      for (int j = 0; j < K; j++) begin
        checks++;
        if (rdata[j] !== wt[(l*K + j) / M][(l*K + j) % M]) failures++;
      end
    end
    for (int it = 0; it < 100; it++) begin
      int exp_v, w_sel;
      w_sel = $urandom_range(M - 1);
      exp_v = 0;
      for (int r = 0; r < R; r++) begin
        a[r] = (it == 0) ? -8'sd128 : 8'($urandom);
        exp_v += int'(a[r]) * int'(wt[r][w_sel]);
      end
      for (int b = W - 1; b >= 0; b--) begin
        @(negedge clk);
        wl = w_sel[$clog2(M)-1:0]; bit_en = 1; first = (b == W - 1); msb = (b == W - 1);
        for (int r = 0; r < R; r++) act_bits[r] = a[r][b];
      end
      @(negedge clk); bit_en = 0;
      checks++;
      if (acc !== exp_v) begin failures++; $display("wl %0d got %0d exp %0d", w_sel, acc, exp_v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
