// tb_cluster_barrier: cores arrive at a barrier in random order and at
// random times; checks that release pulses for all cores exactly one cycle
// after the last arrival and never before.
module tb_cluster_barrier;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [N-1:0] arrive, release_o;
  logic [31:0] count;
  cluster_barrier #(.N(N)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    arrive = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 50; round++) begin
      logic [N-1:0] done;
      done = '0;
      while (done != '1) begin
        @(negedge clk);
        checks++;
        if (release_o != '0) begin failures++; $display("early release"); end
        arrive = '0;
        for (int i = 0; i < N; i++)
          if (!done[i] && $urandom_range(3) == 0) begin arrive[i] = 1; done[i] = 1; end
      end
      @(negedge clk);
      arrive = '0;
      checks++;
      if (release_o != '1) begin failures++; $display("no release in round %0d", round); end
    end
    checks++;
    if (count != 50) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
