// tb_mc_coprocessor: one memory-centric coprocessor with a shared-buffer
// memory that grants at random. Weights are written into the CIM macro
// through the DMA port; activation vectors are loaded with VLD; GEMV over
// MROWS vectors is checked element by element against a reference and its
// time against the paper's Eq. (3), MROWS*W+1 cycles (wall clock and the
// CYCLES CSR). PRUNE with gather is checked for the packed vector, n, the new
// k and every gather entry; VST writes a result back to the shared buffer.
module tb_mc_coprocessor;
  import edgemm_pkg::*;
  localparam int R = 32, C = 16, M = 128, N = 8, W = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, req_ready, rsp_valid, rsp_ready, busy;
  dlcx_req_t req;
  dlcx_rsp_t rsp;
  logic sb_valid, sb_ready, sb_rvalid;
  mem_req_t sb_req;
  logic [LINE_W-1:0] sb_rdata;
  logic cim_valid, cim_ready, cim_rvalid;
  mem_req_t cim_req;
  logic [LINE_W-1:0] cim_rdata;
  logic g_valid, g_ready;
  gather_t g_entry;

  mc_coprocessor #(.R(R), .C(C), .M(M), .N(N), .W(W), .CORE_ID(32'd1), .CLUSTER_ID(32'd2)) dut (.*);

  logic [LINE_W-1:0] mem [64];
  always_ff @(posedge clk) begin
    sb_ready  <= ($urandom_range(3) != 0);
    sb_rvalid <= 1'b0;
    if (sb_valid && sb_ready) begin
      sb_rvalid <= 1'b1;
      if (sb_req.we) begin
        for (int b = 0; b < LINE_B; b++)
          if (sb_req.strb[b]) mem[sb_req.addr[11:6]][8*b +: 8] <= sb_req.wdata[8*b +: 8];
      end else sb_rdata <= mem[sb_req.addr[11:6]];
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int ncyc;
  task automatic issue(logic [31:0] instr, logic [31:0] rs1);
    @(negedge clk);
    req_valid = 1; req.instr = instr; req.rs1 = rs1; req.rs2 = 0; req.rd = 5'd9;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    ncyc = 0;
    @(negedge clk);
    while (busy) begin ncyc++; @(negedge clk); end
  endtask

  task automatic csrr(logic [4:0] csr, output logic [31:0] v);
    issue(enc_cfg(F_CSRR, csr, OPC_MC), 0);
    while (!rsp_valid) @(negedge clk);
    v = rsp.data;
    @(posedge clk); #1;
  endtask

  task automatic cim_write(int line, logic [LINE_W-1:0] d);
    @(negedge clk);
    cim_valid = 1; cim_req = '0; cim_req.addr = 32'(line * 64); cim_req.we = 1; cim_req.wdata = d; cim_req.strb = '1;
    do @(posedge clk); while (!cim_ready);
    #1 cim_valid = 0;
  endtask

  logic signed [7:0] wt [R][4][C];   // weights of the 4 wordlines 4q..4q+3
  logic signed [7:0] av [4][R];

  initial begin
    logic [31:0] v;
    logic [LINE_W-1:0] d;
    int q, wl, nv, kk, mx, n, j;
    int mag [R];
    logic [R-1:0] sel;
    req_valid = 0; req = '0; rsp_ready = 1; cim_valid = 0; cim_req = '0; g_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weights
    q = $urandom_range(M / 4 - 1);
    for (int r = 0; r < R; r++) begin
      for (int b = 0; b < LINE_B; b++) d[8*b +: 8] = 8'($urandom);
      for (int jj = 0; jj < 4; jj++)
        for (int c = 0; c < C; c++) wt[r][jj][c] = d[(jj*C + c)*N +: N];
      cim_write(r * M / 4 + q, d);
    end
    // activations in shared-buffer lines 0..3, loaded into v0..v3
    for (int m = 0; m < 4; m++) begin
      mem[m] = '0;
      for (int r = 0; r < R; r++) begin av[m][r] = 8'($urandom); mem[m][8*r +: 8] = av[m][r]; end
      issue(enc_mv(F_VLD, 2'd0, 5'd0, 5'd0, 3'd0, 5'(m), OPC_MC), 32'(m * 64));
    end
    for (int rep = 0; rep < 6; rep++) begin
      nv = 1 + (rep % 4);
      wl = 4 * q + $urandom_range(3);
      issue(enc_cfg(F_CSRW, CSR_MROWS, OPC_MC), 32'(nv));
      issue(enc_mv(F_GEMV, 2'd0, 5'd0, 5'd0, 3'd0, 5'd8, OPC_MC), 32'(wl));
      checks++;
      if (ncyc != nv * W + 1) begin failures++; $display("GEMV nvec=%0d took %0d cycles", nv, ncyc); end
      csrr(CSR_CYCLES, v);
      checks++;
      if (v != 32'(nv * W + 1)) begin failures++; $display("CYCLES csr %0d", v); end
      for (int m = 0; m < nv; m++)
        for (int c = 0; c < C; c++) begin
          int e; e = 0;
          for (int r = 0; r < R; r++) e += int'(av[m][r]) * int'(wt[r][wl - 4*q][c]);
          checks++;
          if (dut.vreg[8 + m][c] !== 32'(e)) begin
            failures++; if (failures < 10) $display("GEMV v%0d[%0d] = %0d exp %0d", 8+m, c, dut.vreg[8+m][c], e);
          end
        end
    end
    // store v8 (int32, first 16 elements) to line 10
    issue(enc_mv(F_VST, 2'd0, 5'd8, 5'd0, 3'd2, 5'd0, OPC_MC), 32'(10 * 64));
    for (int c = 0; c < C; c++) begin
      checks++;
      if (mem[10][32*c +: 32] !== dut.vreg[8][c]) failures++;
    end
    // pruning with gather: vector with outliers in line 20 -> v20, k = d first
    mem[20] = '0;
    for (int r = 0; r < R; r++) mem[20][8*r +: 8] = 8'($urandom_range(0, 12)) - 8'd6;
    mem[20][8*3 +: 8] = 8'd120; mem[20][8*17 +: 8] = -8'sd110; mem[20][8*30 +: 8] = 8'd97;
    issue(enc_mv(F_VLD, 2'd0, 5'd0, 5'd0, 3'd0, 5'd20, OPC_MC), 32'(20 * 64));
    issue(enc_cfg(F_CSRW, CSR_PR_SRC, OPC_MC), 32'h4000_0000);
    issue(enc_cfg(F_CSRW, CSR_PR_SSTR, OPC_MC), 32'd64);
    issue(enc_cfg(F_CSRW, CSR_PR_DST, OPC_MC), 32'h0020_0000);
    issue(enc_cfg(F_CSRW, CSR_PR_K, OPC_MC), 32'(R));
    kk = R;
    for (int layer = 0; layer < 2; layer++) begin
      mx = 0;
      for (int r = 0; r < R; r++) begin
        mag[r] = (dut.vreg[20][r][31]) ? -int'(dut.vreg[20][r]) : int'(dut.vreg[20][r]);
        if (mag[r] > mx) mx = mag[r];
      end
      n = 0;
      for (int r = 0; r < R; r++) if (mag[r] > (mx >> 4)) n++;
      for (int r = 0; r < R; r++) begin
        int rank; rank = 0;
        for (int x = 0; x < R; x++) if (mag[x] > mag[r] || (mag[x] == mag[r] && x < r)) rank++;
        sel[r] = rank < kk;
      end
      fork
        issue(enc_mv(F_PRUNE, 2'd1, 5'd0, 5'd20, 3'd0, 5'd21, OPC_MC), 0);
        begin
          j = 0;
          for (int r = 0; r < R; r++) if (sel[r]) begin
            @(negedge clk); g_ready = ($urandom_range(1) == 0);
            while (!(g_valid && g_ready)) begin @(negedge clk); g_ready = ($urandom_range(1) == 0); end
            checks++;
            if (g_entry.src != 32'h4000_0000 + 32'(r * 64) || g_entry.dst != 32'h0020_0000 + 32'(j * M * C * N / 8)) begin
              failures++; $display("gather %0d src %h dst %h", j, g_entry.src, g_entry.dst);
            end
            j++;
            @(posedge clk); #1 g_ready = 0;
          end
        end
      join
      j = 0;
      for (int r = 0; r < R; r++) if (sel[r]) begin
        checks++;
        if (dut.vreg[21][j] !== dut.vreg[20][r]) failures++;
        j++;
      end
      if (n < kk) kk = n;
      csrr(CSR_PR_K, v);
      checks++;
      if (v != 32'(kk)) begin failures++; $display("k %0d exp %0d", v, kk); end
      csrr(CSR_PR_N, v);
      checks++;
      if (v != 32'(n)) begin failures++; $display("n %0d exp %0d", v, n); end
      csrr(CSR_PR_INDEX, v);
      checks++;
      if (v != 32'(sel)) begin failures++; $display("index %h exp %h", v, sel); end
    end
    checks++;
    if (kk >= R) begin failures++; $display("pruning never reduced k"); end
    csrr(CSR_CORE_TYPE, v);
    checks++; if (v != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
