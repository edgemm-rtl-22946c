// tb_bw_pmc: a requester that issues a beat whenever allowed. Checks that in
// each interval of T cycles exactly B+1 beats pass (blocked once d > B, as
// the paper words it), that the counter resets at the interval boundary, and
// that interval 0 never blocks.
module tb_bw_pmc;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] budget, interval, usage;
  logic beat, allow;
  logic [31:0] blocked;
  bw_pmc #(.CW(16)) dut (.*);

  assign beat = allow;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(int B, int T, int nint);
    int cnt;
    @(negedge clk);
    rst_n = 0; budget = 16'(B); interval = 16'(T);
    @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < nint; k++) begin
      cnt = 0;
      for (int t = 0; t < T; t++) begin
        @(posedge clk);
        if (beat) cnt++;
      end
      checks++;
      if (cnt != ((T == 0) ? 0 : (B + 1 < T ? B + 1 : T))) begin
        failures++; $display("B=%0d T=%0d interval %0d: %0d beats", B, T, k, cnt);
      end
    end
  endtask

  initial begin
    budget = 0; interval = 0;
    measure(7, 64, 5);
    measure(3, 32, 5);
    measure(0, 16, 5);
    measure(100, 50, 3);
    // interval 0: never blocks
    @(negedge clk); rst_n = 0; interval = 0; budget = 0;
    @(negedge clk); rst_n = 1;
    repeat (100) begin
      @(posedge clk);
      checks++;
      if (!allow) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
