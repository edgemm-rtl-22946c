// tb_mc_cluster: a memory-centric cluster with a DRAM model running two
// layers of pruned matrix-vector products on both cores at once, the way
// the decode stage would: the DMA brings each core's activation vector into
// the shared buffer; each core loads it (VLD), sets the pruner's gather
// bases (DRAM weight rows -> subarrays of its own CIM macro) and k = d, and
// runs PRUNE with gather while the DMA core runs one gather-mode descriptor
// over the merged lists of both cores. Then GEMV on the packed activations
// must equal the product over the kept channels only, computed from the
// DRAM contents. The second layer starts from the reduced k. Counts the
// gathered rows and checks that pruning reduced k.
module tb_mc_cluster;
  import edgemm_pkg::*;
  localparam int NC = 2, R = 32, C = 16, M = 128;
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
  logic [31:0]        bw_blocked, gather_rows;
  logic               ext_valid, ext_ready, ext_rvalid;
  mem_req_t           ext_req;
  mem_rsp_t           ext_rsp;

  mc_cluster #(.NCORE(NC), .R(R), .C(C), .M(M), .CLUSTER_ID(32'd2)) dut (.*);
  dram_model #(.LATENCY(20)) u_dram (.clk, .rst_n, .valid(ext_valid), .req(ext_req), .ready(ext_ready),
                                    .rvalid(ext_rvalid), .rsp(ext_rsp));

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic dma_go(logic [31:0] s, logic [31:0] d, int rows, bit ga);
    @(negedge clk);
    dma_cfg = '0; dma_cfg.src = s; dma_cfg.dst = d; dma_cfg.row_lines = 16'd1; dma_cfg.rows = 16'(rows);
    dma_cfg.src_stride = 32'd64; dma_cfg.dst_stride = 32'd64; dma_cfg.to_local = 1; dma_cfg.gather = ga;
    dma_cfg_valid = 1;
    do @(posedge clk); while (!dma_cfg_ready);
    #1 dma_cfg_valid = 0;
    @(negedge clk);
    while (dma_busy) @(negedge clk);
  endtask

  logic [31:0] rsp_v [NC];
  task automatic issue(int i, logic [31:0] instr, logic [31:0] rs1);
    @(negedge clk);
    core_req_valid[i] = 1; core_req[i].instr = instr; core_req[i].rs1 = rs1;
    do @(posedge clk); while (!core_req_ready[i]);
    #1 core_req_valid[i] = 0;
    @(negedge clk);
    while (core_busy[i]) @(negedge clk);
    if (instr[31:27] == 5'(F_CSRR)) begin
      while (!core_rsp_valid[i]) @(negedge clk);
      rsp_v[i] = core_rsp[i].data;
    end
  endtask

  localparam logic [31:0] ACT_BASE = 32'h0050_0000, W_BASE = 32'h0100_0000;

  // per-core views into the coprocessors (result register v2 and k)
  logic [31:0] y_probe [NC][C];
  logic [7:0]  k_probe [NC];
  for (genvar g = 0; g < NC; g++) begin : g_probe
    assign k_probe[g] = dut.g_core[g].u_cop.pr_k;
    for (genvar c = 0; c < C; c++) begin : g_c
      assign y_probe[g][c] = dut.g_core[g].u_cop.vreg[2][c];
    end
  end

  int kk [NC];
  int act [NC][R];

  task automatic core_setup(int i);
    issue(i, enc_mv(F_VLD, 2'd0, 5'd0, 5'd0, 3'd0, 5'd0, OPC_MC), 32'(i * 64));
    issue(i, enc_cfg(F_CSRW, CSR_PR_SRC, OPC_MC), W_BASE + 32'(i) * 32'h1_0000);
    issue(i, enc_cfg(F_CSRW, CSR_PR_SSTR, OPC_MC), 32'd64);
    issue(i, enc_cfg(F_CSRW, CSR_PR_DST, OPC_MC), 32'(LOC_CIM0 + i) << 20);
    issue(i, enc_cfg(F_CSRW, CSR_PR_K, OPC_MC), 32'(R));
  endtask

  task automatic core_prune(int i);
    issue(i, enc_mv(F_PRUNE, 2'd1, 5'd0, 5'd0, 3'd0, 5'd1, OPC_MC), 0);
  endtask

  // after the gathered weights have landed (the DMA core's barrier)
  task automatic core_gemv(int i);
    issue(i, enc_cfg(F_CSRW, CSR_MROWS, OPC_MC), 32'd1);
    issue(i, enc_mv(F_GEMV, 2'd0, 5'd1, 5'd0, 3'd0, 5'd2, OPC_MC), 32'd0);
  endtask

  task automatic check_layer(int i);
    int mag [R];
    int mx, n, e;
    logic [R-1:0] sel;
    mx = 0;
    for (int r = 0; r < R; r++) begin mag[r] = act[i][r] < 0 ? -act[i][r] : act[i][r]; if (mag[r] > mx) mx = mag[r]; end
    n = 0;
    for (int r = 0; r < R; r++) if (mag[r] > (mx >> 4)) n++;
    for (int r = 0; r < R; r++) begin
      int rank; rank = 0;
      for (int x = 0; x < R; x++) if (mag[x] > mag[r] || (mag[x] == mag[r] && x < r)) rank++;
      sel[r] = rank < kk[i];
    end
    for (int c = 0; c < C; c++) begin
      e = 0;
      for (int r = 0; r < R; r++) if (sel[r]) begin
        logic [LINE_W-1:0] l; l = u_dram.peek(W_BASE + 32'(i) * 32'h1_0000 + 32'(r * 64));
        e += act[i][r] * int'(signed'(l[8*c +: 8]));
      end
      checks++;
      if (y_probe[i][c] !== 32'(e)) begin
        failures++; if (failures < 10) $display("core %0d y[%0d]=%0d exp %0d", i, c, y_probe[i][c], e);
      end
    end
    if (n < kk[i]) kk[i] = n;
    checks++;
    if (32'(k_probe[i]) != 32'(kk[i])) begin failures++; $display("core %0d k", i); end
  endtask

  initial begin
    int g_before;
    core_req_valid = 0; core_req = '0; core_rsp_ready = '1; fetch_valid = 0; fetch_addr = '0;
    acu_valid = 0; acu_req = '0; bar_arrive = 0; dma_cfg_valid = 0; dma_cfg = '0;
    bw_budget = 16'd0; bw_interval = 16'd0;
    // activation vectors: noise plus a few outliers (as in LLM activations)
    for (int i = 0; i < NC; i++) begin
      logic [LINE_W-1:0] l;
      l = '0;
      for (int r = 0; r < R; r++) begin
        act[i][r] = $urandom_range(0, 10) - 5;
        if ($urandom_range(7) == 0) act[i][r] = ($urandom_range(1) ? 1 : -1) * (60 + $urandom_range(60));
        l[8*r +: 8] = 8'(act[i][r]);
      end
      u_dram.poke(ACT_BASE + 32'(i * 64), l);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    dma_go(ACT_BASE, 32'h0, NC, 0);
    fork core_setup(0); core_setup(1); join
    for (int i = 0; i < NC; i++) kk[i] = R;
    for (int layer = 0; layer < 2; layer++) begin
      g_before = gather_rows;
      fork
        dma_go(32'h0, 32'h0, kk[0] + kk[1], 1);
        core_prune(0);
        core_prune(1);
      join
      fork core_gemv(0); core_gemv(1); join
      checks++;
      if (gather_rows - g_before != 32'(kk[0] + kk[1])) begin failures++; $display("gathered %0d rows", gather_rows - g_before); end
      for (int i = 0; i < NC; i++) check_layer(i);
    end
    $display("k after two layers: %0d %0d, gathered rows %0d", kk[0], kk[1], gather_rows);
    checks++;
    if (kk[0] == R && kk[1] == R) begin failures++; $display("pruning never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
