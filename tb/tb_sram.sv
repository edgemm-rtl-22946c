// tb_sram: writes random lines with random byte enables into the memory and
// reads them back one cycle later, against a software copy.
module tb_sram;
  import edgemm_pkg::*;
  localparam int D = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en;
  mem_req_t req;
  logic [LINE_W-1:0] rdata;
  logic [LINE_W-1:0] model [D];
  sram #(.DEPTH(D)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; req = '0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      en = 1; req = '0; req.we = 1; req.addr = 32'(i * 64); req.strb = '1;
      for (int j = 0; j < 16; j++) req.wdata[32*j +: 32] = $urandom;
      model[i] = req.wdata;
    end
    for (int it = 0; it < 2000; it++) begin
      int i;
      i = $urandom_range(D - 1);
      @(negedge clk);
      en = 1; req = '0; req.addr = 32'(i * 64);
      if ($urandom_range(1)) begin
        req.we = 1;
        for (int j = 0; j < 16; j++) req.wdata[32*j +: 32] = $urandom;
        req.strb = {$urandom, $urandom};
        for (int b = 0; b < 64; b++) if (req.strb[b]) model[i][8*b +: 8] = req.wdata[8*b +: 8];
      end else begin
        @(negedge clk);
        en = 0;
        checks++;
        if (rdata !== model[i]) begin failures++; $display("line %0d mismatch", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
