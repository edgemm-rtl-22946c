// tb_edgemm_top: end-to-end run of the chip top on a DRAM model with one
// group (NG = 1: 2 compute-centric clusters of 4 cores and 2 memory-centric
// clusters of 2 cores, every cluster at full size; the four-group chip is
// four copies of this group behind the system crossbar and is too large to
// simulate here), following one multimodal-LLM step:
//  1. prefill mode: every compute-centric cluster's DMA brings an activation
//     tile and the weight tile from DRAM (all DMAs at once, so the
//     crossbars and DRAM port stall; cluster 0 of group 0 runs under a tight
//     bandwidth budget); all cores multiply (MMUL), requantise row 0 to
//     int8 with the vector unit (shift, saturate) and store; the DMAs write
//     the results back to DRAM, where every element is checked;
//  2. mode switch to decode: each memory-centric core takes the int8 row
//     produced by a compute-centric core as its activation vector, prunes it
//     (Top-k, k = d in the first layer) and gathers only the kept weight
//     rows from DRAM into its CIM macro, then runs GEMV; two layers, the
//     second with the reduced k; results are checked against the product
//     over the kept channels.
// Also a barrier and a shared-ACU division in one cluster. Each mechanism is
// counted and a mechanism that never happened is a failure: DRAM stall,
// crossbar contention, cluster-bus stall, budget throttling, GEMM, vector
// requantisation, pruning that lowered k, gathered rows, GEMV, mode switch,
// barrier release, ACU result.
module tb_edgemm_top;
  import edgemm_pkg::*;
  localparam int NG = 1, NCC = 2, NMC = 2, CCN = 4, MCN = 2, NCL = NCC + NMC;
  localparam int R = 16, C = 16, MR = 32, MC_ = 16, SHIFT = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic      [NG-1:0][NCC-1:0][CCN-1:0] cc_req_valid, cc_req_ready, cc_rsp_valid, cc_rsp_ready, cc_busy;
  dlcx_req_t [NG-1:0][NCC-1:0][CCN-1:0] cc_req;
  dlcx_rsp_t [NG-1:0][NCC-1:0][CCN-1:0] cc_rsp;
  logic      [NG-1:0][NCC-1:0][CCN:0]   cc_fetch_valid, cc_fetch_ready, cc_fetch_rvalid;
  logic      [NG-1:0][NCC-1:0][CCN:0][31:0] cc_fetch_addr;
  logic      [NG-1:0][NCC-1:0][LINE_W-1:0] cc_fetch_rdata;
  logic      [NG-1:0][NCC-1:0][CCN:0]   cc_acu_valid, cc_acu_ready, cc_acu_rvalid;
  acu_req_t  [NG-1:0][NCC-1:0][CCN:0]   cc_acu_req;
  logic      [NG-1:0][NCC-1:0][31:0]    cc_acu_rdata;
  logic      [NG-1:0][NCC-1:0][CCN:0]   cc_bar_arrive, cc_bar_release;
  logic      [NG-1:0][NMC-1:0][MCN-1:0] mc_req_valid, mc_req_ready, mc_rsp_valid, mc_rsp_ready, mc_busy;
  dlcx_req_t [NG-1:0][NMC-1:0][MCN-1:0] mc_req;
  dlcx_rsp_t [NG-1:0][NMC-1:0][MCN-1:0] mc_rsp;
  logic      [NG-1:0][NMC-1:0][MCN:0]   mc_fetch_valid, mc_fetch_ready, mc_fetch_rvalid;
  logic      [NG-1:0][NMC-1:0][MCN:0][31:0] mc_fetch_addr;
  logic      [NG-1:0][NMC-1:0][LINE_W-1:0] mc_fetch_rdata;
  logic      [NG-1:0][NMC-1:0][MCN:0]   mc_acu_valid, mc_acu_ready, mc_acu_rvalid;
  acu_req_t  [NG-1:0][NMC-1:0][MCN:0]   mc_acu_req;
  logic      [NG-1:0][NMC-1:0][31:0]    mc_acu_rdata;
  logic      [NG-1:0][NMC-1:0][MCN:0]   mc_bar_arrive, mc_bar_release;
  logic      [NG-1:0][NMC-1:0][31:0]    mc_gather_rows;
  logic      [NG-1:0][NCL-1:0]          dma_cfg_valid, dma_cfg_ready, dma_busy;
  dma_desc_t [NG-1:0][NCL-1:0]          dma_cfg;
  logic      [NG-1:0][NCL-1:0][15:0]    bw_budget, bw_interval;
  logic      [NG-1:0][NCL-1:0][31:0]    bw_blocked;
  logic     dram_valid, dram_ready, dram_rvalid;
  mem_req_t dram_req;
  mem_rsp_t dram_rsp;

  edgemm_top #(.N_GROUP(NG)) dut (.*);
  dram_model #(.LATENCY(30)) u_dram (.clk, .rst_n, .valid(dram_valid), .req(dram_req), .ready(dram_ready),
                                    .rvalid(dram_rvalid), .rsp(dram_rsp));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters --------------------------------
  int n_dram_stall = 0, n_xbar_wait = 0, n_bus_stall = 0;
  always @(posedge clk) if (rst_n) begin
    if (dram_valid && !dram_ready) n_dram_stall++;
    n_xbar_wait += $countones(dut.x_valid & ~dut.x_ready);
    n_bus_stall += $countones(dut.g_grp[0].u_grp.g_cc[0].u_cl.dm_valid & ~dut.g_grp[0].u_grp.g_cc[0].u_cl.dm_ready);
  end
  int n_gemm = 0, n_requant = 0, n_gemv = 0, n_k_drop = 0, n_mode_switch = 0, n_barrier = 0, n_acu = 0;

  // ---------------- drivers -------------------------------------------
  task automatic dma_go(int g, int k, logic [31:0] s, logic [31:0] d, int rl, int rows,
                        logic [31:0] ss, logic [31:0] ds, bit tl, bit ga);
    @(negedge clk);
    dma_cfg[g][k] = '0;
    dma_cfg[g][k].src = s; dma_cfg[g][k].dst = d; dma_cfg[g][k].row_lines = 16'(rl);
    dma_cfg[g][k].rows = 16'(rows); dma_cfg[g][k].src_stride = ss; dma_cfg[g][k].dst_stride = ds;
    dma_cfg[g][k].to_local = tl; dma_cfg[g][k].gather = ga;
    dma_cfg_valid[g][k] = 1;
    do @(posedge clk); while (!dma_cfg_ready[g][k]);
    #1 dma_cfg_valid[g][k] = 0;
    @(negedge clk);
    while (dma_busy[g][k]) @(negedge clk);
  endtask

  task automatic cc_issue(int g, int k, int i, logic [31:0] instr, logic [31:0] rs1);
    @(negedge clk);
    cc_req_valid[g][k][i] = 1; cc_req[g][k][i].instr = instr; cc_req[g][k][i].rs1 = rs1;
    do @(posedge clk); while (!cc_req_ready[g][k][i]);
    #1 cc_req_valid[g][k][i] = 0;
    @(negedge clk);
    while (cc_busy[g][k][i]) @(negedge clk);
  endtask

  logic [31:0] mc_rsp_v [NG][NMC][MCN];
  task automatic mc_issue(int g, int k, int i, logic [31:0] instr, logic [31:0] rs1);
    @(negedge clk);
    mc_req_valid[g][k][i] = 1; mc_req[g][k][i].instr = instr; mc_req[g][k][i].rs1 = rs1;
    do @(posedge clk); while (!mc_req_ready[g][k][i]);
    #1 mc_req_valid[g][k][i] = 0;
    @(negedge clk);
    while (mc_busy[g][k][i]) @(negedge clk);
    if (instr[31:27] == 5'(F_CSRR)) begin
      while (!mc_rsp_valid[g][k][i]) @(negedge clk);
      mc_rsp_v[g][k][i] = mc_rsp[g][k][i].data;
    end
  endtask

  localparam logic [31:0] A_BASE = 32'h0100_0000, W_BASE = 32'h0200_0000, O_BASE = 32'h0300_0000;
  localparam logic [31:0] MW_BASE = 32'h0400_0000;

  function automatic logic [31:0] a_addr(int cl, int row); return A_BASE + 32'(cl) * 32'h1_0000 + 32'(row * 64); endfunction
  function automatic logic [31:0] o_addr(int cl, int line); return O_BASE + 32'(cl) * 32'h1000 + 32'(line * 64); endfunction
  function automatic logic [31:0] mw_addr(int g, int k, int i, int row);
    return MW_BASE + 32'(((g * NMC + k) * MCN + i)) * 32'h1_0000 + 32'(row * 64);
  endfunction
  function automatic int dram_b(logic [31:0] addr, int b);
    logic [LINE_W-1:0] l; l = u_dram.peek(addr);
    return int'(signed'(l[8*b +: 8]));
  endfunction

  function automatic logic [LINE_W-1:0] rand_line();
    logic [LINE_W-1:0] l;
    for (int w = 0; w < LINE_W / 32; w++) l[32*w +: 32] = $urandom;
    return l;
  endfunction

  // ---------------- phase 1: prefill on the compute-centric cores -----
  task automatic cc_core(int g, int k, int i);
    cc_issue(g, k, i, enc_mm(F_MLD, 2'd0, 3'd0, 3'd0, 3'd0, 2'd0), 32'(i * 64));
    cc_issue(g, k, i, enc_mm(F_MLD, 2'd0, 3'd0, 3'd0, 3'd1, 2'd0), 32'(32 * 64));
    cc_issue(g, k, i, enc_mm(F_MMUL, 2'd0, 3'd1, 3'd0, 3'd2, 2'd0), 0);
    // requantise row 0: shift right, saturate to int8
    cc_issue(g, k, i, enc_cfg(F_CSRW, CSR_VROW, OPC_CC), 0);
    cc_issue(g, k, i, enc_mv(F_VV, 2'd0, 5'(SHIFT), 5'd2, 3'(V_SRA), 5'd2, OPC_CC), 0);
    cc_issue(g, k, i, enc_cfg(F_CSRW, CSR_VROW, OPC_CC), 0);
    cc_issue(g, k, i, enc_mv(F_VV, 2'd0, 5'd0, 5'd2, 3'(V_SAT8), 5'd2, OPC_CC), 0);
    // clear the lines (m3 is zero), then store int8
    cc_issue(g, k, i, enc_mm(F_MST, 2'd0, 3'd0, 3'd3, 3'd0, 2'd2), 32'((64 + 16 * i) * 64));
    cc_issue(g, k, i, enc_mm(F_MST, 2'd0, 3'd0, 3'd2, 3'd0, 2'd0), 32'((64 + 16 * i) * 64));
  endtask

  task automatic cc_cluster_run(int g, int k);
    int cl; cl = g * NCC + k;
    dma_go(g, k, a_addr(cl, 0), 32'h0, 1, R + CCN - 1, 32'd64, 32'd64, 1, 0);
    dma_go(g, k, W_BASE, 32'(32 * 64), 1, R, 32'd64, 32'd64, 1, 0);
    fork cc_core(g, k, 0); cc_core(g, k, 1); cc_core(g, k, 2); cc_core(g, k, 3); join
    dma_go(g, k, 32'(64 * 64), o_addr(cl, 0), 1, 16 * CCN, 32'd64, 32'd64, 0, 0);
  endtask

  task automatic cc_check(int g, int k);
    int cl; cl = g * NCC + k;
    for (int i = 0; i < CCN; i++) begin
      bit ok; ok = 1;
      for (int m = 0; m < R; m++)
        for (int c = 0; c < C; c++) begin
          int e, q, got;
          e = 0;
          for (int r = 0; r < R; r++) e += dram_b(a_addr(cl, m + i), r) * dram_b(W_BASE + 32'(r * 64), c);
          if (m == 0) begin q = e >>> SHIFT; q = q > 127 ? 127 : q < -128 ? -128 : q; end
          else q = int'(signed'(8'(e)));
          got = dram_b(o_addr(cl, 16 * i + m), c);
          checks++;
          if (got != q) begin ok = 0; failures++; if (failures < 10) $display("cc %0d.%0d.%0d [%0d][%0d] %0d exp %0d", g, k, i, m, c, got, q); end
        end
      if (ok) begin n_gemm++; n_requant++; end
    end
  endtask

  // ---------------- phase 2: decode on the memory-centric cores -------
  int kk [NG][NMC][MCN];   // model k (checker)
  int kr [NG][NMC][MCN];   // k read back from the cores (driver)
  int act [NG][NMC][MCN][MR];

  task automatic mc_setup(int g, int k, int i);
    mc_issue(g, k, i, enc_mv(F_VLD, 2'd0, 5'd0, 5'd0, 3'd0, 5'd0, OPC_MC), 32'(i * 64));
    mc_issue(g, k, i, enc_cfg(F_CSRW, CSR_PR_SRC, OPC_MC), mw_addr(g, k, i, 0));
    mc_issue(g, k, i, enc_cfg(F_CSRW, CSR_PR_SSTR, OPC_MC), 32'd64);
    mc_issue(g, k, i, enc_cfg(F_CSRW, CSR_PR_DST, OPC_MC), 32'(LOC_CIM0 + i) << 20);
    mc_issue(g, k, i, enc_cfg(F_CSRW, CSR_PR_K, OPC_MC), 32'(MR));
    mc_issue(g, k, i, enc_cfg(F_CSRW, CSR_MROWS, OPC_MC), 32'd1);
  endtask

  task automatic mc_layer(int g, int k, int lay);
    int J; J = NCC + k;
    fork
      dma_go(g, J, 32'h0, 32'h0, 1, kr[g][k][0] + kr[g][k][1], 32'd0, 32'd0, 1, 1);
      mc_issue(g, k, 0, enc_mv(F_PRUNE, 2'd1, 5'd0, 5'd0, 3'd0, 5'd1, OPC_MC), 0);
      mc_issue(g, k, 1, enc_mv(F_PRUNE, 2'd1, 5'd0, 5'd0, 3'd0, 5'd1, OPC_MC), 0);
    join
    fork
      mc_issue(g, k, 0, enc_mv(F_GEMV, 2'd0, 5'd1, 5'd0, 3'd0, 5'(2 + lay), OPC_MC), 32'd0);
      mc_issue(g, k, 1, enc_mv(F_GEMV, 2'd0, 5'd1, 5'd0, 3'd0, 5'(2 + lay), OPC_MC), 32'd0);
    join
    // k for the next layer, as the host core would read it
    fork
      mc_issue(g, k, 0, enc_cfg(F_CSRR, CSR_PR_K, OPC_MC), 0);
      mc_issue(g, k, 1, enc_cfg(F_CSRR, CSR_PR_K, OPC_MC), 0);
    join
    for (int i = 0; i < MCN; i++) kr[g][k][i] = int'(mc_rsp_v[g][k][i]);
    // store the result (int32) for checking: v(2+lay) -> shared buffer line 4+2*i+lay
    fork
      mc_issue(g, k, 0, enc_mv(F_VST, 2'd0, 5'(2 + lay), 5'd0, 3'd2, 5'd0, OPC_MC), 32'((4 + lay) * 64));
      mc_issue(g, k, 1, enc_mv(F_VST, 2'd0, 5'(2 + lay), 5'd0, 3'd2, 5'd0, OPC_MC), 32'((6 + lay) * 64));
    join
  endtask

  task automatic mc_cluster_run(int g, int k);
    int J, cl; J = NCC + k; cl = g * NCC + k;
    // mode switch: activation rows written by compute-centric cluster (g, k), cores 0 and 1, row 0
    dma_go(g, J, o_addr(cl, 0), 32'h0, 1, MCN, 32'(16 * 64), 32'd64, 1, 0);
    fork mc_setup(g, k, 0); mc_setup(g, k, 1); join
    for (int i = 0; i < MCN; i++) kr[g][k][i] = MR;
    for (int lay = 0; lay < 2; lay++) begin
      mc_layer(g, k, lay);
    end
    dma_go(g, J, 32'(4 * 64), O_BASE + 32'h10_0000 + 32'(cl * 4 * 64), 1, 4, 32'd64, 32'd64, 0, 0);
  endtask

  task automatic mc_check(int g, int k);
    int cl; cl = g * NCC + k;
    for (int i = 0; i < MCN; i++) begin
      bit ok; ok = 1;
      kk[g][k][i] = MR;
      for (int r = 0; r < MR; r++) act[g][k][i][r] = dram_b(o_addr(cl, 16 * i), r);
      for (int lay = 0; lay < 2; lay++) begin
        int mag [MR];
        int mx, n;
        logic [MR-1:0] sel;
        logic [LINE_W-1:0] res;
        mx = 0;
        for (int r = 0; r < MR; r++) begin mag[r] = act[g][k][i][r] < 0 ? -act[g][k][i][r] : act[g][k][i][r]; if (mag[r] > mx) mx = mag[r]; end
        n = 0;
        for (int r = 0; r < MR; r++) if (mag[r] > (mx >> 4)) n++;
        for (int r = 0; r < MR; r++) begin
          int rank; rank = 0;
          for (int x = 0; x < MR; x++) if (mag[x] > mag[r] || (mag[x] == mag[r] && x < r)) rank++;
          sel[r] = rank < kk[g][k][i];
        end
        res = u_dram.peek(O_BASE + 32'h10_0000 + 32'((cl * 4 + 2 * i + lay) * 64));
        for (int c = 0; c < MC_; c++) begin
          int e; e = 0;
          for (int r = 0; r < MR; r++) if (sel[r]) e += act[g][k][i][r] * dram_b(mw_addr(g, k, i, r), c);
          checks++;
          if (res[32*c +: 32] !== 32'(e)) begin
            ok = 0; failures++;
            if (failures < 10) $display("mc %0d.%0d.%0d layer %0d y[%0d]=%0d exp %0d", g, k, i, lay, c, res[32*c +: 32], e);
          end
        end
        if (n < kk[g][k][i]) begin kk[g][k][i] = n; n_k_drop++; end
        if (ok) n_gemv++;
      end
      if (ok) n_mode_switch++;
    end
  endtask

  // ---------------- sequence ------------------------------------------
  initial begin
    int gsum;
    cc_req_valid = '0; cc_req = '0; cc_rsp_ready = '1; cc_fetch_valid = '0; cc_fetch_addr = '0;
    cc_acu_valid = '0; cc_acu_req = '0; cc_bar_arrive = '0;
    mc_req_valid = '0; mc_req = '0; mc_rsp_ready = '1; mc_fetch_valid = '0; mc_fetch_addr = '0;
    mc_acu_valid = '0; mc_acu_req = '0; mc_bar_arrive = '0;
    dma_cfg_valid = '0; dma_cfg = '0; bw_budget = '0; bw_interval = '0;
    // cluster (0,0) gets B = 1 line per T = 16 cycles
    bw_budget[0][0] = 16'd1; bw_interval[0][0] = 16'd16;
    // random INT8 activations and weights in DRAM
    for (int cl = 0; cl < NG * NCC; cl++)
      for (int r = 0; r < R + CCN - 1; r++) u_dram.poke(a_addr(cl, r), rand_line());
    for (int r = 0; r < R; r++) u_dram.poke(W_BASE + 32'(r * 64), rand_line());
    for (int g = 0; g < NG; g++) for (int k = 0; k < NMC; k++) for (int i = 0; i < MCN; i++)
      for (int r = 0; r < MR; r++) u_dram.poke(mw_addr(g, k, i, r), rand_line());
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      if (NG > 0) cc_cluster_run(0, 0);
      if (NG > 0) cc_cluster_run(0, 1);
      if (NG > 1) cc_cluster_run(1, 0);
      if (NG > 1) cc_cluster_run(1, 1);
      if (NG > 2) cc_cluster_run(2, 0);
      if (NG > 2) cc_cluster_run(2, 1);
      if (NG > 3) cc_cluster_run(3, 0);
      if (NG > 3) cc_cluster_run(3, 1);
      begin   // ACU division on cluster (0,1)'s DMA core
        @(negedge clk);
        cc_acu_valid[0][1][CCN] = 1; cc_acu_req[0][1][CCN].op = ACU_DIV;
        cc_acu_req[0][1][CCN].a = 32'd1_000_000; cc_acu_req[0][1][CCN].b = 32'd7;
        do @(posedge clk); while (!cc_acu_ready[0][1][CCN]);
        #1 cc_acu_valid[0][1][CCN] = 0;
        while (!cc_acu_rvalid[0][1][CCN]) @(negedge clk);
        checks++;
        if (cc_acu_rdata[0][1] == 32'd142857) n_acu++; else begin failures++; $display("acu %0d", cc_acu_rdata[0][1]); end
      end
    join
    for (int g = 0; g < NG; g++) for (int k = 0; k < NCC; k++) cc_check(g, k);
    $display("prefill done at cycle %0d: gemm tiles ok %0d", $time / 10, n_gemm);
    // barrier of cluster (0,0) before the switch
    for (int i = 0; i <= CCN; i++) begin
      @(negedge clk); cc_bar_arrive[0][0][i] = 1;
      @(negedge clk); cc_bar_arrive[0][0][i] = 0;
      if (cc_bar_release[0][0] != 0) n_barrier++;
    end
    checks++;
    if (n_barrier != 1) begin failures++; $display("barrier released %0d times", n_barrier); end
    fork
      if (NG > 0) mc_cluster_run(0, 0);
      if (NG > 0) mc_cluster_run(0, 1);
      if (NG > 1) mc_cluster_run(1, 0);
      if (NG > 1) mc_cluster_run(1, 1);
      if (NG > 2) mc_cluster_run(2, 0);
      if (NG > 2) mc_cluster_run(2, 1);
      if (NG > 3) mc_cluster_run(3, 0);
      if (NG > 3) mc_cluster_run(3, 1);
    join
    for (int g = 0; g < NG; g++) for (int k = 0; k < NMC; k++) mc_check(g, k);
    gsum = 0;
    for (int g = 0; g < NG; g++) for (int k = 0; k < NMC; k++) gsum += int'(mc_gather_rows[g][k]);
    $display("decode done at cycle %0d", $time / 10);
    $display("mechanisms: dram_stall=%0d xbar_wait=%0d bus_stall=%0d throttled=%0d gemm=%0d requant=%0d",
             n_dram_stall, n_xbar_wait, n_bus_stall, bw_blocked[0][0], n_gemm, n_requant);
    $display("            k_drop=%0d gathered_rows=%0d gemv=%0d mode_switch=%0d barrier=%0d acu=%0d",
             n_k_drop, gsum, n_gemv, n_mode_switch, n_barrier, n_acu);
    checks++; if (n_dram_stall == 0)   begin failures++; $display("no DRAM stall"); end
    checks++; if (n_xbar_wait == 0)    begin failures++; $display("no crossbar contention"); end
    checks++; if (n_bus_stall == 0)    begin failures++; $display("no cluster-bus stall"); end
    checks++; if (bw_blocked[0][0] == 0) begin failures++; $display("budget never throttled"); end
    checks++; if (n_gemm == 0)         begin failures++; $display("no GEMM"); end
    checks++; if (n_requant == 0)      begin failures++; $display("no requantisation"); end
    checks++; if (n_k_drop == 0)       begin failures++; $display("pruning never lowered k"); end
    checks++; if (gsum == 0)           begin failures++; $display("no gathered rows"); end
    checks++; if (n_gemv == 0)         begin failures++; $display("no GEMV"); end
    checks++; if (n_mode_switch == 0)  begin failures++; $display("no mode switch"); end
    checks++; if (n_acu == 0)          begin failures++; $display("no ACU result"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
