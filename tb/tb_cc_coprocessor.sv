// tb_cc_coprocessor: one compute-centric coprocessor driven through its
// direct-linked instruction port, with a line memory that grants requests at
// random. Loads an activation matrix A and a weight matrix W (INT8), runs
// MMUL for random M and checks every result element against a reference
// product and the instruction time against the paper's systolic latency
// 2R+C+M-3 (measured from acceptance to the end of busy, and through the
// CYCLES CSR). Also checks accumulate-MMUL, a store of the result, a vector
// add on one matrix row and the read-only identification CSRs.
module tb_cc_coprocessor;
  import edgemm_pkg::*;
  localparam int R = 16, C = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, req_ready, rsp_valid, rsp_ready, busy;
  dlcx_req_t req;
  dlcx_rsp_t rsp;
  logic mem_valid, mem_ready, mem_rvalid;
  mem_req_t mem_req;
  logic [LINE_W-1:0] mem_rdata;

  cc_coprocessor #(.R(R), .C(C), .CORE_ID(32'd3), .CLUSTER_ID(32'd5)) dut (.*);

  logic [LINE_W-1:0] mem [64];
  always_ff @(posedge clk) begin
    mem_ready  <= ($urandom_range(3) != 0);
    mem_rvalid <= 1'b0;
    if (mem_valid && mem_ready) begin
      mem_rvalid <= 1'b1;
      if (mem_req.we) begin
        for (int b = 0; b < LINE_B; b++)
          if (mem_req.strb[b]) mem[mem_req.addr[11:6]][8*b +: 8] <= mem_req.wdata[8*b +: 8];
      end else mem_rdata <= mem[mem_req.addr[11:6]];
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
    req_valid = 1; req.instr = instr; req.rs1 = rs1; req.rs2 = 0; req.rd = 5'd7;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    ncyc = 0;
    @(negedge clk);
    while (busy) begin ncyc++; @(negedge clk); end
  endtask

  task automatic csrr(logic [4:0] csr, output logic [31:0] v);
    issue(enc_cfg(F_CSRR, csr, OPC_CC), 0);
    while (!rsp_valid) @(negedge clk);
    v = rsp.data;
    @(posedge clk); #1;
  endtask

  logic signed [7:0] A [R][R];
  logic signed [7:0] W [R][C];
  int ref_p [R][C];

  initial begin
    logic [31:0] v;
    int M, vr;
    req_valid = 0; req = '0; rsp_ready = 1;
    for (int r = 0; r < R; r++) begin
      mem[r] = '0; mem[16 + r] = '0;
      for (int c = 0; c < R; c++) begin A[r][c] = 8'($urandom); mem[r][8*c +: 8] = A[r][c]; end
      for (int c = 0; c < C; c++) begin W[r][c] = 8'($urandom); mem[16 + r][8*c +: 8] = W[r][c]; end
    end
    for (int m = 0; m < R; m++)
      for (int c = 0; c < C; c++) begin
        ref_p[m][c] = 0;
        for (int r = 0; r < R; r++) ref_p[m][c] += int'(A[m][r]) * int'(W[r][c]);
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    issue(enc_mm(F_MLD, 2'd0, 3'd0, 3'd0, 3'd0, 2'd0), 32'd0);
    issue(enc_mm(F_MLD, 2'd0, 3'd0, 3'd0, 3'd1, 2'd0), 32'd16 * 64);
    checks++;
    if (dut.mreg[1][5][7] !== 32'(W[5][7])) begin failures++; $display("MLD wrong"); end
    foreach (M_list[i]) begin
      M = M_list[i];
      issue(enc_cfg(F_CSRW, CSR_MROWS, OPC_CC), 32'(M));
      issue(enc_mm(F_MMUL, 2'd0, 3'd1, 3'd0, 3'd2, 2'd0), 0);
      checks++;
      if (ncyc != 2 * R + C + M - 3) begin failures++; $display("MMUL M=%0d took %0d cycles", M, ncyc); end
      csrr(CSR_CYCLES, v);
      checks++;
      if (v != 32'(2 * R + C + M - 3)) begin failures++; $display("CYCLES csr %0d", v); end
      for (int m = 0; m < M; m++)
        for (int c = 0; c < C; c++) begin
          checks++;
          if (dut.mreg[2][m][c] !== ref_p[m][c]) begin
            failures++; if (failures < 10) $display("M=%0d P[%0d][%0d]=%0d exp %0d", M, m, c, dut.mreg[2][m][c], ref_p[m][c]);
          end
        end
    end
    // accumulate: m2 += A x W (M = 16 after the last setting)
    issue(enc_cfg(F_CSRW, CSR_MROWS, OPC_CC), 32'(R));
    issue(enc_mm(F_MMUL, 2'd0, 3'd1, 3'd0, 3'd2, 2'd0), 0);
    issue(enc_mm(F_MMUL, 2'd1, 3'd1, 3'd0, 3'd2, 2'd0), 0);
    for (int m = 0; m < R; m++)
      for (int c = 0; c < C; c++) begin
        checks++;
        if (dut.mreg[2][m][c] !== 2 * ref_p[m][c]) failures++;
      end
    // store m2 as 32-bit rows at line 32 (stride 64 B: first 16 elements per line)
    issue(enc_mm(F_MST, 2'd0, 3'd0, 3'd2, 3'd0, 2'd2), 32'd32 * 64);
    for (int m = 0; m < R; m++)
      for (int c = 0; c < C; c++) begin
        checks++;
        if (mem[32 + m][32*c +: 32] !== 32'(2 * ref_p[m][c])) failures++;
      end
    // vector add on row vr: m3 = m2 + m0
    vr = $urandom_range(R - 1);
    issue(enc_cfg(F_CSRW, CSR_VROW, OPC_CC), 32'(vr));
    issue(enc_mv(F_VV, 2'd0, 5'd0, 5'd2, 3'(V_ADD), 5'd3, OPC_CC), 0);
    for (int c = 0; c < C; c++) begin
      checks++;
      if (dut.mreg[3][vr][c] !== 2 * ref_p[vr][c] + int'(A[vr][c])) failures++;
    end
    csrr(CSR_VROW, v);
    checks++;
    if (v != 32'((vr + 1) % R)) begin failures++; $display("VROW did not advance"); end
    csrr(CSR_CORE_ID, v);
    checks++; if (v != 3) failures++;
    csrr(CSR_CLUSTER_ID, v);
    checks++; if (v != 5) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  int M_list [4] = '{16, 1, 7, 12};
endmodule
