// tb_cim_macro: writes random weights into the whole macro through its
// 512-bit write circuits, then runs GEMV (1 vector) and GEMM (several
// vectors) at random wordlines. Checks every column result against a
// software matrix-vector product, that an operation of nvec vectors keeps
// the macro busy for exactly nvec*W+1 cycles (the paper's Eq. (3)), that the
// write port is not ready while computing, and read-back through the port.
module tb_cim_macro;
  import edgemm_pkg::*;
  localparam int R = 32, C = 16, M = 128, N = 8, W = 8, K = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, res_valid, busy, mem_valid, mem_ready, mem_rvalid;
  logic [7:0] nvec, act_idx, res_idx;
  logic [$clog2(M)-1:0] wl;
  logic [R-1:0][W-1:0] act;
  logic signed [C-1:0][31:0] res;
  mem_req_t mem_req;
  logic [LINE_W-1:0] mem_rdata;
  cim_macro #(.R(R), .C(C), .M(M), .N(N), .W(W)) dut (.*);

  logic signed [7:0] wt [R][M][C];
  logic signed [7:0] av [8][R];
  logic [LINE_W-1:0] lines [R*M/K];

  assign act = {<<8{av[act_idx > 7 ? 0 : act_idx]}};

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int busy_cycles;
  always @(posedge clk) if (busy) busy_cycles++;

  task automatic run(int nv, int w);
    int got;
    for (int m = 0; m < nv; m++)
      for (int r = 0; r < R; r++) av[m][r] = 8'($urandom);
    busy_cycles = 0;
    got = 0;
    @(negedge clk);
    start = 1; nvec = 8'(nv); wl = w[$clog2(M)-1:0];
    @(negedge clk);
    start = 0;
    while (got < nv) begin
      if (mem_ready) begin failures++; $display("write port ready while busy"); end
      if (res_valid) begin
        for (int c = 0; c < C; c++) begin
          int e; e = 0;
          for (int r = 0; r < R; r++) e += int'(av[res_idx][r]) * int'(wt[r][w][c]);
          checks++;
          if (res[c] !== e) begin failures++; $display("vec %0d col %0d got %0d exp %0d", res_idx, c, res[c], e); end
        end
        got++;
      end
      @(negedge clk);
    end
    checks++;
    if (busy_cycles != nv * W + 1) begin failures++; $display("nvec=%0d busy %0d cycles, expected %0d", nv, busy_cycles, nv*W+1); end
  endtask

  initial begin
    start = 0; nvec = 0; wl = 0; mem_valid = 0; mem_req = '0;
    for (int m = 0; m < 8; m++) for (int r = 0; r < R; r++) av[m][r] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill all lines
    for (int l = 0; l < R * M / K; l++) begin
      @(negedge clk);
      mem_valid = 1; mem_req = '0; mem_req.we = 1; mem_req.strb = '1;
      mem_req.addr = 32'(l * 64);
      for (int j = 0; j < K; j++)
        for (int c = 0; c < C; c++) begin
          logic [7:0] v; v = 8'($urandom);
          mem_req.wdata[(j*C + c)*N +: N] = v;
          wt[(l*K + j) / M][(l*K + j) % M][c] = v;
        end
      lines[l] = mem_req.wdata;
    end
    @(negedge clk); mem_valid = 0;
    // read back a few
    for (int it = 0; it < 20; it++) begin
      int l; l = $urandom_range(R * M / K - 1);
      @(negedge clk); mem_valid = 1; mem_req.we = 0; mem_req.addr = 32'(l * 64);
      @(negedge clk); mem_valid = 0;
      checks++;
      if (!mem_rvalid || mem_rdata !== lines[l]) begin failures++; $display("readback line %0d", l); end
    end
    run(1, 0);
    run(1, 77);
    run(3, 5);
    run(8, 127);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
