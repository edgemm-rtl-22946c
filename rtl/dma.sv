// dma: cluster DMA engine with gather list and bandwidth throttle.
//
// Moves data between DRAM (ext port, through the crossbars) and the
// cluster-local memories (loc port, through the cluster bus) in 64-byte
// lines. A descriptor describes a 2-D transfer: 'rows' rows of 'row_lines'
// lines, source and destination advancing by their strides per row. In
// gather mode each row's source and destination are instead taken from the
// gather list, which the memory-centric cores' pruners fill with the
// addresses of the weight rows that survive pruning; this is how pruned rows
// are never read from DRAM. Every DRAM request passes the bw_pmc budget check
// (the paper's PMC in the DMA), so a cluster over budget stalls until the
// interval ends.
//
// Interface: cfg_valid/cfg_ready hands over a descriptor when idle; busy is
// high until the last line is written (DRAM to local: local write accepted;
// local to DRAM: DRAM acknowledge received). ext and loc use valid/ready
// requests; ext responses arrive in order without back-pressure; loc
// responses come one cycle after the grant. At most MAXOUT lines are in
// flight. Descriptor layout, ordering and the in-flight limit are this
// design's choices; the paper gives the DMA's function, its 512-bit width
// and the PMC rule.
//
// Lint: the FIFOs' full/empty flags and count are unused because the credit
// counter bounds their occupancy (at most MAXOUT lines in flight); the budget
// counter's usage output and the upper descriptor bits (unused in to-DRAM
// direction) and response ID are likewise unused.
module dma
  import edgemm_pkg::*;
#(
  parameter int unsigned MAXOUT = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_valid,
  input  dma_desc_t         cfg,
  output logic              cfg_ready,
  output logic              busy,
  // gather list
  input  logic              g_valid,
  input  gather_t           g_entry,
  output logic              g_ready,
  // DRAM side
  output logic              ext_valid,
  output mem_req_t          ext_req,
  input  logic              ext_ready,
  input  logic              ext_rvalid,
  input  mem_rsp_t          ext_rsp,
  // local side
  output logic              loc_valid,
  output mem_req_t          loc_req,
  input  logic              loc_ready,
  input  logic              loc_rvalid,
  input  logic [LINE_W-1:0] loc_rdata,
  // bandwidth management
  input  logic [15:0]       budget,
  input  logic [15:0]       interval,
  output logic [31:0]       stat_blocked
);
  localparam int unsigned CNTW = $clog2(MAXOUT + 1);

  dma_desc_t     d_q;
  logic          active_q;      // descriptor loaded
  logic          issuing_q;     // lines left to issue
  logic [15:0]   row_q, line_q;
  logic [31:0]   row_src_q, row_dst_q;
  logic          row_open_q;    // gather entry taken for the current row
  logic [31:0]   total_q, done_q;
  logic [CNTW-1:0] credit_q;

  // address / data FIFOs
  logic          af_push, af_pop, af_full, af_empty;
  logic [31:0]   af_dout;
  logic          df_push, df_pop, df_full, df_empty;
  logic [32+LINE_W-1:0] df_din, df_dout;

  logic          allow;
  logic [31:0]   issue_src, issue_dst;
  logic          row_ready;   // source/destination of the row known
  logic          beat;
  logic [15:0]   usage;

  bw_pmc #(.CW(16)) u_pmc (
    .clk, .rst_n, .budget, .interval, .beat, .allow, .usage, .blocked(stat_blocked)
  );

  sync_fifo #(.W(32), .DEPTH(MAXOUT)) u_af (
    .clk, .rst_n, .push(af_push), .din(issue_dst), .pop(af_pop), .dout(af_dout),
    .full(af_full), .empty(af_empty), .count()
  );
  sync_fifo #(.W(32 + LINE_W), .DEPTH(MAXOUT)) u_df (
    .clk, .rst_n, .push(df_push), .din(df_din), .pop(df_pop), .dout(df_dout),
    .full(df_full), .empty(df_empty), .count()
  );

  // current line addresses
  assign issue_src = row_src_q + 32'({line_q, 6'd0});
  assign issue_dst = row_dst_q + 32'({line_q, 6'd0});
  assign row_ready = !d_q.gather || row_open_q;

  assign cfg_ready = !active_q;
  assign busy      = active_q;
  assign g_ready   = active_q && issuing_q && d_q.gather && !row_open_q;

  logic can_issue;
  assign can_issue = active_q && issuing_q && row_ready && (credit_q != 0);

  // issue side
  logic issue_fire;
  always_comb begin
    ext_valid = 1'b0;
    ext_req   = '0;
    ext_req.strb = '1;
    loc_valid = 1'b0;
    loc_req   = '0;
    loc_req.strb = '1;
    issue_fire = 1'b0;
    df_pop     = 1'b0;
    beat       = 1'b0;
    if (d_q.to_local) begin
      // DRAM read, then local write
      ext_valid    = can_issue && allow;
      ext_req.addr = issue_src;
      ext_req.we   = 1'b0;
      issue_fire   = ext_valid && ext_ready;
      beat         = issue_fire;
      loc_valid    = !df_empty;
      loc_req.addr = df_dout[LINE_W +: 32];
      loc_req.we   = 1'b1;
      loc_req.wdata = df_dout[LINE_W-1:0];
      df_pop       = loc_valid && loc_ready;
    end else begin
      // local read, then DRAM write
      loc_valid    = can_issue;
      loc_req.addr = issue_src;
      loc_req.we   = 1'b0;
      issue_fire   = loc_valid && loc_ready;
      ext_valid    = !df_empty && allow;
      ext_req.addr = df_dout[LINE_W +: 32];
      ext_req.we   = 1'b1;
      ext_req.wdata = df_dout[LINE_W-1:0];
      df_pop       = ext_valid && ext_ready;
      beat         = df_pop;
    end
  end

  assign af_push = issue_fire;
  assign af_pop  = d_q.to_local ? (active_q && ext_rvalid) : (active_q && loc_rvalid);
  assign df_push = af_pop;
  assign df_din  = {af_dout, d_q.to_local ? ext_rsp.rdata : loc_rdata};

  // completion of a line
  logic line_done;
  assign line_done = d_q.to_local ? df_pop : (active_q && ext_rvalid);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_q        <= '0;
      active_q   <= 1'b0;
      issuing_q  <= 1'b0;
      row_q      <= '0;
      line_q     <= '0;
      row_src_q  <= '0;
      row_dst_q  <= '0;
      row_open_q <= 1'b0;
      total_q    <= '0;
      done_q     <= '0;
      credit_q   <= CNTW'(MAXOUT);
    end else begin
      if (!active_q) begin
        if (cfg_valid) begin
          d_q        <= cfg;
          active_q   <= 1'b1;
          issuing_q  <= (cfg.rows != 0) && (cfg.row_lines != 0);
          row_q      <= '0;
          line_q     <= '0;
          row_src_q  <= cfg.src;
          row_dst_q  <= cfg.dst;
          row_open_q <= 1'b0;
          total_q    <= cfg.rows * cfg.row_lines;
          done_q     <= '0;
        end
      end else begin
        if (g_valid && g_ready) begin
          row_src_q  <= g_entry.src;
          row_dst_q  <= g_entry.dst;
          row_open_q <= 1'b1;
        end
        if (issue_fire) begin
          if (line_q == d_q.row_lines - 1'b1) begin
            line_q     <= '0;
            row_open_q <= 1'b0;
            row_src_q  <= row_src_q + d_q.src_stride;
            row_dst_q  <= row_dst_q + d_q.dst_stride;
            if (row_q == d_q.rows - 1'b1) issuing_q <= 1'b0;
            row_q <= row_q + 1'b1;
          end else begin
            line_q <= line_q + 1'b1;
          end
        end
        credit_q <= credit_q - CNTW'(issue_fire) + CNTW'(line_done);
        if (line_done) begin
          done_q <= done_q + 1;
          if (done_q + 1 == total_q) active_q <= 1'b0;
        end
        if (total_q == 0) active_q <= 1'b0;
      end
    end
  end

  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n) cfg_valid && cfg_ready |-> !busy);
  a_no_stray_rsp: assert property (@(posedge clk) disable iff (!rst_n) ext_rvalid |-> active_q);
endmodule
