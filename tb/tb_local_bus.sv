// tb_local_bus: four masters issue random reads and writes through the
// cluster bus to one memory. Checks that every read returns the data a
// software model predicts (one cycle after the grant, to the right master),
// that grants are one-hot, and that each master is served within N grants
// when all request (round-robin fairness).
module tb_local_bus;
  import edgemm_pkg::*;
  localparam int N = 4, D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] m_valid, m_ready, m_rvalid;
  mem_req_t [N-1:0] m_req;
  logic [LINE_W-1:0] m_rdata, s_rdata;
  logic s_en;
  mem_req_t s_req;

  local_bus #(.N(N)) dut (.clk, .rst_n, .m_valid, .m_req, .m_ready, .m_rvalid, .m_rdata,
                          .s_en, .s_req, .s_ready(1'b1), .s_rdata);
  sram #(.DEPTH(D)) u_mem (.clk, .en(s_en), .req(s_req), .rdata(s_rdata));

  logic [LINE_W-1:0] model [D];
  logic [LINE_W-1:0] expd [N];
  logic [N-1:0] exp_valid, exp_wr;
  int wait_cnt [N];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // random masters
  bit rand_en = 0;
  always_ff @(posedge clk) if (rst_n && rand_en) begin
    for (int i = 0; i < N; i++) begin
      if (!m_valid[i] || m_ready[i]) begin
        m_valid[i] <= ($urandom_range(3) != 0);
        m_req[i].addr <= 32'($urandom_range(D - 1) * 64);
        m_req[i].we <= $urandom_range(1);
        m_req[i].strb <= '1;
        m_req[i].wdata <= {16{$urandom}};
      end
    end
  end

  // scoreboard
  always @(negedge clk) if (rst_n) begin
    // responses for requests granted last cycle
    for (int i = 0; i < N; i++) begin
      if (exp_valid[i]) begin
        checks++;
        if (!m_rvalid[i] || (!exp_wr[i] && m_rdata !== expd[i])) begin
          failures++; $display("master %0d bad response", i);
        end
      end else if (m_rvalid[i]) begin
        failures++; $display("stray response to %0d", i);
      end
    end
    exp_valid = '0;
    checks++;
    if (!$onehot0(m_ready)) begin failures++; $display("grant not one-hot"); end
    for (int i = 0; i < N; i++) begin
      if (m_valid[i] && m_ready[i]) begin
        int l; l = int'(m_req[i].addr >> 6);
        exp_valid[i] = 1;
        exp_wr[i] = m_req[i].we;
        expd[i] = model[l];
        if (m_req[i].we) model[l] = m_req[i].wdata;
        wait_cnt[i] = 0;
      end else if (m_valid[i]) begin
        wait_cnt[i]++;
        if (wait_cnt[i] > N) begin failures++; $display("master %0d starved", i); end
      end
    end
  end

  initial begin
    m_valid = '0; m_req = '0; exp_valid = '0;
    for (int i = 0; i < N; i++) wait_cnt[i] = 0;
    for (int l = 0; l < D; l++) model[l] = '0;
    // clear memory through master 0 before random traffic
    rst_n = 0;
    @(posedge clk);
    #1 rst_n = 1;
    for (int l = 0; l < D; l++) begin
      m_valid[0] = 1; m_req[0] = '0; m_req[0].we = 1; m_req[0].strb = '1; m_req[0].addr = 32'(l * 64);
      @(posedge clk);
      #1;
    end
    m_valid[0] = 0;
    rand_en = 1;
    repeat (3000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
