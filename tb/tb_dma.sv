// tb_dma: the cluster DMA between a DRAM model and a local memory on a
// cluster bus shared with a random second master. Checks 2-D DRAM-to-local
// and local-to-DRAM transfers line by line, a gather-mode transfer whose row
// addresses come from a list, and the bandwidth budget: with B = 3 and
// T = 64 no interval may carry more than B+1 = 4 DRAM beats, and the
// transfer must have been blocked for some cycles.
module tb_dma;
  import edgemm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_valid, cfg_ready, busy, g_valid, g_ready;
  dma_desc_t cfg;
  gather_t g_entry;
  logic ext_valid, ext_ready, ext_rvalid;
  mem_req_t ext_req;
  mem_rsp_t ext_rsp;
  logic loc_valid, loc_ready, loc_rvalid;
  mem_req_t loc_req;
  logic [LINE_W-1:0] loc_rdata;
  logic [15:0] budget, interval;
  logic [31:0] stat_blocked;

  dma #(.MAXOUT(8)) dut (.*);
  dram_model #(.LATENCY(12)) u_dram (.clk, .rst_n, .valid(ext_valid), .req(ext_req), .ready(ext_ready),
                                    .rvalid(ext_rvalid), .rsp(ext_rsp));

  // local memory behind a 2-master bus
  logic [1:0] bv, br, brv;
  mem_req_t [1:0] breq;
  logic [LINE_W-1:0] brdata, srd;
  logic s_en;
  mem_req_t s_req;
  assign bv[0] = loc_valid;
  assign breq[0] = loc_req;
  assign loc_ready = br[0];
  assign loc_rvalid = brv[0];
  assign loc_rdata = brdata;
  local_bus #(.N(2)) u_bus (.clk, .rst_n, .m_valid(bv), .m_req(breq), .m_ready(br), .m_rvalid(brv),
                            .m_rdata(brdata), .s_en, .s_req, .s_ready(1'b1), .s_rdata(srd));
  sram #(.DEPTH(256)) u_mem (.clk, .en(s_en), .req(s_req), .rdata(srd));
  // second master: random reads of the upper half
  always_ff @(posedge clk) begin
    bv[1] <= ($urandom_range(2) == 0);
    breq[1] <= '0;
    breq[1].addr <= 32'(($urandom_range(127) + 128) * 64);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // beats per interval monitor (throttle phase)
  bit mon = 0;
  int beats_in_win = 0, win_t = 0, max_beats = 0;
  always @(posedge clk) if (mon) begin
    if (ext_valid && ext_ready) beats_in_win++;
    win_t++;
    if (win_t == 64) begin
      if (beats_in_win > max_beats) max_beats = beats_in_win;
      beats_in_win = 0; win_t = 0;
    end
  end

  task automatic go(dma_desc_t d);
    @(negedge clk);
    cfg = d; cfg_valid = 1;
    do @(posedge clk); while (!cfg_ready);
    #1 cfg_valid = 0;
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  function automatic dma_desc_t desc(logic [31:0] s, logic [31:0] dd, int rl, int rows,
                                     logic [31:0] ss, logic [31:0] ds, bit tl, bit ga);
    dma_desc_t x;
    x.src = s; x.dst = dd; x.row_lines = 16'(rl); x.rows = 16'(rows);
    x.src_stride = ss; x.dst_stride = ds; x.to_local = tl; x.gather = ga;
    return x;
  endfunction

  initial begin
    dma_desc_t d;
    gather_t gl [4];
    int t0, t1;
    cfg_valid = 0; cfg = '0; g_valid = 0; g_entry = '0; budget = 0; interval = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // 1. DRAM -> local, 4 rows x 2 lines
    go(desc(32'h0001_0000, 32'h0, 2, 4, 32'h1000, 32'd128, 1, 0));
    for (int r = 0; r < 4; r++)
      for (int l = 0; l < 2; l++) begin
        checks++;
        if (u_mem.mem[r*2 + l] !== u_dram.pattern((32'h0001_0000 + r*32'h1000 + l*64) >> 6)) begin
          failures++; $display("to_local row %0d line %0d", r, l);
        end
      end
    // 2. local -> DRAM, 8 lines
    go(desc(32'h0, 32'h0008_0000, 8, 1, 32'd0, 32'd0, 0, 0));
    for (int l = 0; l < 8; l++) begin
      checks++;
      if (u_dram.peek(32'h0008_0000 + l*64) !== u_mem.mem[l]) begin failures++; $display("to_dram line %0d", l); end
    end
    // 3. gather mode, 4 rows of 1 line
    for (int i = 0; i < 4; i++) begin
      gl[i].src = 32'h0020_0000 + 32'($urandom_range(1000)) * 64;
      gl[i].dst = 32'(64 * (20 + 3 * i));
    end
    fork
      go(desc(32'h0, 32'h0, 1, 4, 32'd0, 32'd0, 1, 1));
      for (int i = 0; i < 4; i++) begin
        @(negedge clk); g_valid = 1; g_entry = gl[i];
        do @(posedge clk); while (!g_ready);
        #1 g_valid = 0;
        repeat ($urandom_range(3)) @(negedge clk);
      end
    join
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (u_mem.mem[20 + 3*i] !== u_dram.pattern(gl[i].src >> 6)) begin failures++; $display("gather %0d", i); end
    end
    // 4. throttled transfer: B = 3, T = 64, 32 lines
    budget = 3; interval = 64;
    mon = 1;
    t0 = $time;
    go(desc(32'h0030_0000, 32'h0, 32, 1, 32'd0, 32'd0, 1, 0));
    t1 = $time;
    mon = 0;
    checks++;
    if (max_beats > 4) begin failures++; $display("budget exceeded: %0d beats in an interval", max_beats); end
    checks++;
    if (stat_blocked == 0 || (t1 - t0) / 10 < 7 * 64) begin
      failures++; $display("throttle not effective: %0d cycles, blocked %0d", (t1 - t0) / 10, stat_blocked);
    end
    for (int l = 0; l < 32; l++) begin
      checks++;
      if (u_mem.mem[l] !== u_dram.pattern((32'h0030_0000 >> 6) + l)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
