// tb_sa_pe: checks one systolic PE against a software multiply-accumulate:
// weight capture, combinational sum, and the registered activation and
// partial-sum outputs, with random signed operands.
module tb_sa_pe;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_load;
  logic signed [7:0]  w_in, a_in, a_out;
  logic signed [31:0] psum_in, psum_out, psum_comb;

  sa_pe dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [7:0] w;
    w_load = 0; w_in = 0; a_in = 0; psum_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      if (it % 50 == 0) begin
        w = 8'($urandom);
        @(negedge clk); w_load = 1; w_in = w;
        @(negedge clk); w_load = 0; w_in = 8'($urandom);
      end
      @(negedge clk);
      a_in    = 8'($urandom);
      psum_in = 32'($urandom) >>> 8;
      #1;
      checks++;
      if (psum_comb !== psum_in + 32'(a_in * w)) begin
        failures++; $display("comb mismatch a=%0d w=%0d p=%0d got %0d", a_in, w, psum_in, psum_comb);
      end
      begin
        logic signed [31:0] exp_p; logic signed [7:0] exp_a;
        exp_p = psum_in + 32'(a_in * w); exp_a = a_in;
        @(posedge clk); #1;
        checks++;
        if (psum_out !== exp_p || a_out !== exp_a) begin
          failures++; $display("reg mismatch");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
