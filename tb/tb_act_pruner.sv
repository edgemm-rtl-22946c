// tb_act_pruner: runs the layer-wise dynamic Top-k scheme over a sequence of
// "layers" of random activation slices with a few large outliers. For each
// layer a software model computes the Top-k index set (ties to the lower
// channel), n = #(|v| > max/16), the new k = min(k, n), the packed vector and
// the gather addresses; the pruner must match all of them. The first layer
// starts from k = d (written by software), as in the paper's algorithm.
module tb_act_pruner;
  import edgemm_pkg::*;
  localparam int VLEN = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, gather_en, k_set, busy, done, g_valid, g_ready;
  logic signed [VLEN-1:0][31:0] vs, vd;
  logic [7:0] k_wdata, n_count, k;
  logic [31:0] src_base, src_stride, dst_base, dst_stride;
  logic [VLEN-1:0] index;
  gather_t g_entry;
  act_pruner #(.VLEN(VLEN)) dut (.*);

  int kk;   // model k

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic layer(int lidx);
    int mag [VLEN];
    int mx, n, j;
    logic [VLEN-1:0] sel;
    logic signed [31:0] packed_v [VLEN];
    int outliers;
    // data: small noise, a few outliers growing with depth
    outliers = 2 + (lidx % 5);
    for (int i = 0; i < VLEN; i++) vs[i] = 32'(signed'(8'($urandom_range(0, 20)) - 8'sd10));
    for (int o = 0; o < outliers; o++) vs[$urandom_range(VLEN - 1)] = (o % 2) ? -32'(100 + 30 * lidx) : 32'(90 + 30 * lidx);
    if (lidx == 3) for (int i = 0; i < VLEN; i++) vs[i] = 32'sd5;   // all ties
    // model
    mx = 0;
    for (int i = 0; i < VLEN; i++) begin
      mag[i] = (signed'(vs[i]) < 0) ? -signed'(vs[i]) : signed'(vs[i]);
      if (mag[i] > mx) mx = mag[i];
    end
    n = 0;
    for (int i = 0; i < VLEN; i++) if (mag[i] > (mx >> 4)) n++;
    for (int i = 0; i < VLEN; i++) begin
      int rank; rank = 0;
      for (int q = 0; q < VLEN; q++) if (mag[q] > mag[i] || (mag[q] == mag[i] && q < i)) rank++;
      sel[i] = rank < kk;
    end
    j = 0;
    for (int i = 0; i < VLEN; i++) packed_v[i] = 0;
    for (int i = 0; i < VLEN; i++) if (sel[i]) begin packed_v[j] = vs[i]; j++; end
    // run
    @(negedge clk);
    start = 1; gather_en = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (index !== sel || n_count != 8'(n)) begin
      failures++; $display("layer %0d index %h exp %h n %0d exp %0d", lidx, index, sel, n_count, n);
    end
    for (int i = 0; i < VLEN; i++) begin
      checks++;
      if (vd[i] !== packed_v[i]) begin failures++; $display("vd[%0d]", i); end
    end
    j = 0;
    for (int i = 0; i < VLEN; i++) if (sel[i]) begin
      while (!g_valid) @(negedge clk);
      checks++;
      if (g_entry.src != src_base + 32'(i) * src_stride || g_entry.dst != dst_base + 32'(j) * dst_stride) begin
        failures++; $display("gather %0d: src %h dst %h", j, g_entry.src, g_entry.dst);
      end
      j++;
      @(negedge clk);   // accepted at the posedge between
    end
    while (!done) @(negedge clk);
    if (n < kk) kk = n;
    checks++;
    if (k != 8'(kk)) begin failures++; $display("layer %0d k %0d exp %0d", lidx, k, kk); end
  endtask

  initial begin
    start = 0; gather_en = 0; k_set = 0; k_wdata = 0; g_ready = 1;
    src_base = 32'h1000_0000; src_stride = 32'd4096; dst_base = 32'h0020_0000; dst_stride = 32'd2048;
    vs = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int tok = 0; tok < 3; tok++) begin
      // layer 1: k = d (no pruning)
      @(negedge clk); k_set = 1; k_wdata = 8'(VLEN);
      @(negedge clk); k_set = 0;
      kk = VLEN;
      for (int l = 0; l < 8; l++) layer(l);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
