// tb_cc_cluster: a compute-centric cluster with a DRAM model, running one
// GEMM tile per core the way the cluster's software would: the DMA core
// copies an activation tile A and a weight tile W from DRAM into the data
// memory; all four cores load both (at the same time, so they stall on the
// cluster bus), multiply and store their 16x16 int32 result to their own
// part of the data memory; the DMA writes all results back to DRAM, where
// they are compared with a reference product. Core i uses the activation
// rows shifted by i so the four results differ. Also checks: instruction
// fetch from code copied into the instruction memory by the DMA, a shared
// ACU division, and a five-party barrier. Counts bus stalls; none is a failure.
module tb_cc_cluster;
  import edgemm_pkg::*;
  localparam int NC = 4, R = 16, C = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic      [NC-1:0] core_req_valid, core_req_ready, core_rsp_valid, core_rsp_ready, core_busy;
  dlcx_req_t [NC-1:0] core_req;
  dlcx_rsp_t [NC-1:0] core_rsp;
  logic      [NC:0]   fetch_valid, fetch_ready, fetch_rvalid;
  logic [NC:0][31:0]  fetch_addr;
  logic [LINE_W-1:0]  fetch_rdata;
  logic      [NC:0]   acu_valid, acu_ready, acu_rvalid;
  acu_req_t  [NC:0]   acu_req;
  logic [31:0]        acu_rdata;
  logic      [NC:0]   bar_arrive, bar_release;
  logic               dma_cfg_valid, dma_cfg_ready, dma_busy;
  dma_desc_t          dma_cfg;
  logic [15:0]        bw_budget, bw_interval;
  logic [31:0]        bw_blocked;
  logic               ext_valid, ext_ready, ext_rvalid;
  mem_req_t           ext_req;
  mem_rsp_t           ext_rsp;

  cc_cluster #(.NCORE(NC), .R(R), .C(C), .CLUSTER_ID(32'd1)) dut (.*);
  dram_model #(.LATENCY(20)) u_dram (.clk, .rst_n, .valid(ext_valid), .req(ext_req), .ready(ext_ready),
                                    .rvalid(ext_rvalid), .rsp(ext_rsp));

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int stalls = 0;
  always @(posedge clk) stalls += $countones(dut.dm_valid & ~dut.dm_ready);

  task automatic dma_go(logic [31:0] s, logic [31:0] d, int rl, int rows, bit tl);
    @(negedge clk);
    dma_cfg = '0; dma_cfg.src = s; dma_cfg.dst = d; dma_cfg.row_lines = 16'(rl); dma_cfg.rows = 16'(rows);
    dma_cfg.src_stride = 32'(rl * 64); dma_cfg.dst_stride = 32'(rl * 64); dma_cfg.to_local = tl;
    dma_cfg_valid = 1;
    do @(posedge clk); while (!dma_cfg_ready);
    #1 dma_cfg_valid = 0;
    @(negedge clk);
    while (dma_busy) @(negedge clk);
  endtask

  task automatic issue(int i, logic [31:0] instr, logic [31:0] rs1);
    @(negedge clk);
    core_req_valid[i] = 1; core_req[i].instr = instr; core_req[i].rs1 = rs1;
    do @(posedge clk); while (!core_req_ready[i]);
    #1 core_req_valid[i] = 0;
    @(negedge clk);
    while (core_busy[i]) @(negedge clk);
  endtask

  task automatic core_seq(int i);
    issue(i, enc_mm(F_MLD, 2'd0, 3'd0, 3'd0, 3'd0, 2'd0), 32'(i * 64));
    issue(i, enc_mm(F_MLD, 2'd0, 3'd0, 3'd0, 3'd1, 2'd0), 32'(32 * 64));
    issue(i, enc_mm(F_MMUL, 2'd0, 3'd1, 3'd0, 3'd2, 2'd0), 0);
    issue(i, enc_mm(F_MST, 2'd0, 3'd0, 3'd2, 3'd0, 2'd2), 32'((64 + 16 * i) * 64));
  endtask

  localparam logic [31:0] A_BASE = 32'h0010_0000, W_BASE = 32'h0020_0000, O_BASE = 32'h0030_0000;
  localparam logic [31:0] C_BASE = 32'h0040_0000;

  function automatic int a_el(int row, int col);
    logic [LINE_W-1:0] l; l = u_dram.pattern((A_BASE >> 6) + 32'(row));
    return int'(signed'(l[8*col +: 8]));
  endfunction
  function automatic int w_el(int row, int col);
    logic [LINE_W-1:0] l; l = u_dram.pattern((W_BASE >> 6) + 32'(row));
    return int'(signed'(l[8*col +: 8]));
  endfunction

  initial begin
    core_req_valid = 0; core_req = '0; core_rsp_ready = '1; fetch_valid = 0; fetch_addr = '0;
    acu_valid = 0; acu_req = '0; bar_arrive = 0; dma_cfg_valid = 0; dma_cfg = '0;
    bw_budget = 16'd0; bw_interval = 16'd0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // A: 19 rows (for the shifted tiles), W: 16 rows, code: 4 lines into imem
    dma_go(A_BASE, 32'h0, 1, R + NC - 1, 1);
    dma_go(W_BASE, 32'(32 * 64), 1, R, 1);
    dma_go(C_BASE, 32'h0010_0000, 4, 1, 1);
    fork
      core_seq(0);
      core_seq(1);
      core_seq(2);
      core_seq(3);
      // instruction fetch, ACU and barrier meanwhile
      begin
        for (int f = 0; f <= NC; f++) begin
          @(negedge clk); fetch_valid[f] = 1; fetch_addr[f] = 32'h0010_0000 + 32'((f % 4) * 64);
        end
        for (int f = 0; f <= NC; f++) begin
          while (!fetch_rvalid[f]) @(negedge clk);
          checks++;
          if (fetch_rdata !== u_dram.pattern((C_BASE >> 6) + 32'(f % 4))) begin failures++; $display("fetch %0d", f); end
          fetch_valid[f] = 0;
          @(negedge clk);
        end
      end
      begin
        @(negedge clk); acu_valid[NC] = 1; acu_req[NC].op = ACU_DIV; acu_req[NC].a = -32'sd1000; acu_req[NC].b = 32'sd7;
        do @(posedge clk); while (!acu_ready[NC]);
        #1 acu_valid[NC] = 0;
        while (!acu_rvalid[NC]) @(negedge clk);
        checks++;
        if (acu_rdata !== -32'sd142) begin failures++; $display("acu div %0d", acu_rdata); end
      end
    join
    // barrier: all five arrive at different times
    for (int i = 0; i <= NC; i++) begin
      @(negedge clk); bar_arrive[i] = 1;
      @(negedge clk); bar_arrive[i] = 0;
      checks++;
      if ((bar_release != 0) != (i == NC)) begin failures++; $display("barrier released early/late at %0d", i); end
    end
    // results back to DRAM: 4 x 16 lines
    dma_go(32'(64 * 64), O_BASE, 1, 16 * NC, 0);
    for (int i = 0; i < NC; i++)
      for (int m = 0; m < R; m++) begin
        logic [LINE_W-1:0] l;
        l = u_dram.peek(O_BASE + 32'((16 * i + m) * 64));
        for (int c = 0; c < C; c++) begin
          int e; e = 0;
          for (int r = 0; r < R; r++) e += a_el(m + i, r) * w_el(r, c);
          checks++;
          if (l[32*c +: 32] !== 32'(e)) begin
            failures++; if (failures < 10) $display("core %0d C[%0d][%0d]=%0d exp %0d", i, m, c, l[32*c +: 32], e);
          end
        end
      end
    $display("bus stall cycles: %0d", stalls);
    checks++;
    if (stalls == 0) begin failures++; $display("no bus contention happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
