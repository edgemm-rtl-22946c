// tb_axi_xbar: four masters, each with a DRAM-side model behind the
// crossbar, issue tagged reads. Checks that each master gets exactly its own
// responses, in order, with its own ID restored, and that the ID on the
// slave side carries the master index in its low bits.
module tb_axi_xbar;
  import edgemm_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] m_valid, m_ready, m_rvalid;
  mem_req_t [N-1:0] m_req;
  mem_rsp_t m_rsp, s_rsp;
  logic s_valid, s_ready, s_rvalid;
  mem_req_t s_req;

  axi_xbar #(.N(N)) dut (.*);
  dram_model #(.LATENCY(5)) u_dram (.clk, .rst_n, .valid(s_valid), .req(s_req), .ready(s_ready),
                                   .rvalid(s_rvalid), .rsp(s_rsp));

  int issued [N], got [N];
  logic [31:0] addrq [N][$];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (s_valid && s_ready) begin
      checks++;
      if (s_req.id[1:0] != 2'(s_req.addr[15:12])) begin failures++; $display("bad slave id"); end
    end
    for (int i = 0; i < N; i++) begin
      if (m_valid[i] && m_ready[i]) begin
        addrq[i].push_back(m_req[i].addr);
        issued[i]++;
      end
      if (m_rvalid[i]) begin
        logic [31:0] a;
        a = addrq[i].pop_front();
        checks++;
        got[i]++;
        if (m_rsp.rdata !== u_dram.pattern(a >> 6) || m_rsp.id != 8'(8'h10 + i)) begin
          failures++; $display("master %0d wrong response", i);
        end
      end
      if (!m_valid[i] || m_ready[i]) begin
        m_valid[i] <= (issued[i] + (m_valid[i] && m_ready[i] ? 1 : 0) < 40) && $urandom_range(1);
        m_req[i].addr <= {16'd0, 4'(i), 6'($urandom), 6'd0};
        m_req[i].id <= 8'(8'h10 + i);
        m_req[i].we <= 1'b0;
      end
    end
  end

  initial begin
    m_valid = '0; m_req = '0;
    for (int i = 0; i < N; i++) begin issued[i] = 0; got[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      checks++;
      if (got[i] != 40) begin failures++; $display("master %0d got %0d of 40", i, got[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
