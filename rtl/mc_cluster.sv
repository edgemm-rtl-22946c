// mc_cluster: memory-centric cluster.
//
// NCORE memory-centric cores, each a host core plus a CIM-based coprocessor
// whose CIM macro is the core's own weight memory (64 kB each, 128 kB per
// cluster with the default sizes), a small shared buffer for activations and
// inter-core transfers, an instruction memory, a DMA with its own host core,
// the shared ACU and a barrier. The host cores are outside this RTL; their
// coprocessor, fetch, ACU and barrier signals are ports (DMA core last).
//
// Local address map (bits 23:20 of a byte address): 0 shared buffer,
// 1 instruction memory, 2+i CIM macro of core i. The DMA writes weights into
// the macros through their write/read circuits; in gather mode it takes the
// row addresses from the cores' pruners, merged by a round-robin arbiter, so
// only the weight rows of kept activation channels are fetched from DRAM.
// Structure and sizes follow the paper's architecture figure and
// configuration table; the address map, shared-buffer size and merging of
// the gather lists are this design's choices.
//
// Lint: the barrier count output is left open on purpose.
module mc_cluster
  import edgemm_pkg::*;
#(
  parameter int unsigned NCORE      = 2,
  parameter int unsigned R          = 32,
  parameter int unsigned C          = 16,
  parameter int unsigned M          = 128,
  parameter int unsigned SB_LINES   = 128,   // 8 kB shared buffer
  parameter int unsigned IMEM_LINES = 128,   // 8 kB
  parameter logic [31:0] CLUSTER_ID = 32'd0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic      [NCORE-1:0]    core_req_valid,
  input  dlcx_req_t [NCORE-1:0]    core_req,
  output logic      [NCORE-1:0]    core_req_ready,
  output logic      [NCORE-1:0]    core_rsp_valid,
  output dlcx_rsp_t [NCORE-1:0]    core_rsp,
  input  logic      [NCORE-1:0]    core_rsp_ready,
  output logic      [NCORE-1:0]    core_busy,
  input  logic      [NCORE:0]      fetch_valid,
  input  logic      [NCORE:0][31:0] fetch_addr,
  output logic      [NCORE:0]      fetch_ready,
  output logic      [NCORE:0]      fetch_rvalid,
  output logic      [LINE_W-1:0]   fetch_rdata,
  input  logic      [NCORE:0]      acu_valid,
  input  acu_req_t  [NCORE:0]      acu_req,
  output logic      [NCORE:0]      acu_ready,
  output logic      [NCORE:0]      acu_rvalid,
  output logic      [31:0]         acu_rdata,
  input  logic      [NCORE:0]      bar_arrive,
  output logic      [NCORE:0]      bar_release,
  input  logic                     dma_cfg_valid,
  input  dma_desc_t                dma_cfg,
  output logic                     dma_cfg_ready,
  output logic                     dma_busy,
  input  logic      [15:0]         bw_budget,
  input  logic      [15:0]         bw_interval,
  output logic      [31:0]         bw_blocked,
  output logic      [31:0]         gather_rows,   // pruned rows fetched (statistics)
  output logic                     ext_valid,
  output mem_req_t                 ext_req,
  input  logic                     ext_ready,
  input  logic                     ext_rvalid,
  input  mem_rsp_t                 ext_rsp
);
  // ---------------- shared buffer + cluster bus ---------------------
  logic     [NCORE:0] sb_valid, sb_ready, sb_rvalid;
  mem_req_t [NCORE:0] sb_req;
  logic [LINE_W-1:0]  sb_rdata, sb_rdata_q;
  logic               sb_en;
  mem_req_t           sb_sreq;

  local_bus #(.N(NCORE + 1)) u_sbus (
    .clk, .rst_n, .m_valid(sb_valid), .m_req(sb_req), .m_ready(sb_ready),
    .m_rvalid(sb_rvalid), .m_rdata(sb_rdata),
    .s_en(sb_en), .s_req(sb_sreq), .s_ready(1'b1), .s_rdata(sb_rdata_q)
  );
  sram #(.DEPTH(SB_LINES)) u_sbuf (.clk, .en(sb_en), .req(sb_sreq), .rdata(sb_rdata_q));

  // ---------------- memory-centric cores ----------------------------
  logic     [NCORE-1:0]             cim_valid, cim_ready, cim_rvalid;
  logic     [NCORE-1:0][LINE_W-1:0] cim_rdata;
  mem_req_t                         loc_req;
  logic     [NCORE-1:0]             g_valid, g_ready;
  gather_t  [NCORE-1:0]             g_entry;

  for (genvar i = 0; i < NCORE; i++) begin : g_core
    mc_coprocessor #(.R(R), .C(C), .M(M), .CORE_ID(32'(i)), .CLUSTER_ID(CLUSTER_ID)) u_cop (
      .clk, .rst_n,
      .req_valid(core_req_valid[i]), .req(core_req[i]), .req_ready(core_req_ready[i]),
      .rsp_valid(core_rsp_valid[i]), .rsp(core_rsp[i]), .rsp_ready(core_rsp_ready[i]),
      .sb_valid(sb_valid[i]), .sb_req(sb_req[i]), .sb_ready(sb_ready[i]),
      .sb_rvalid(sb_rvalid[i]), .sb_rdata(sb_rdata),
      .cim_valid(cim_valid[i]), .cim_req(loc_req), .cim_ready(cim_ready[i]),
      .cim_rvalid(cim_rvalid[i]), .cim_rdata(cim_rdata[i]),
      .g_valid(g_valid[i]), .g_entry(g_entry[i]), .g_ready(g_ready[i]),
      .busy(core_busy[i])
    );
  end

  // ---------------- instruction memory ------------------------------
  logic     [NCORE+1:0] im_valid, im_ready, im_rvalid;
  mem_req_t [NCORE+1:0] im_req;
  logic [LINE_W-1:0]    im_rdata, im_rdata_q;
  logic                 im_en;
  mem_req_t             im_sreq;

  for (genvar i = 0; i <= NCORE; i++) begin : g_fetch
    assign im_valid[i] = fetch_valid[i];
    always_comb begin
      im_req[i]      = '0;
      im_req[i].addr = fetch_addr[i];
    end
  end
  assign fetch_ready  = im_ready[NCORE:0];
  assign fetch_rvalid = im_rvalid[NCORE:0];
  assign fetch_rdata  = im_rdata;

  local_bus #(.N(NCORE + 2)) u_ibus (
    .clk, .rst_n, .m_valid(im_valid), .m_req(im_req), .m_ready(im_ready),
    .m_rvalid(im_rvalid), .m_rdata(im_rdata),
    .s_en(im_en), .s_req(im_sreq), .s_ready(1'b1), .s_rdata(im_rdata_q)
  );
  sram #(.DEPTH(IMEM_LINES)) u_imem (.clk, .en(im_en), .req(im_sreq), .rdata(im_rdata_q));

  // ---------------- gather-list merge -------------------------------
  logic [NCORE-1:0]         gm_gnt;
  logic [(NCORE > 1 ? $clog2(NCORE) : 1)-1:0] gm_idx;
  logic                     gm_any, dg_ready;

  rr_arbiter #(.N(NCORE)) u_garb (
    .clk, .rst_n, .req(g_valid), .advance(dg_ready), .gnt(gm_gnt), .idx(gm_idx), .any(gm_any)
  );
  assign g_ready = dg_ready ? gm_gnt : '0;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)               gather_rows <= '0;
    else if (gm_any && dg_ready) gather_rows <= gather_rows + 1;

  // ---------------- DMA and local address decode --------------------
  logic       loc_valid, loc_ready, loc_rvalid;
  logic [3:0] tgt;
  logic [LINE_W-1:0] loc_rdata;
  assign tgt = loc_req.addr[23:20];

  always_comb begin
    sb_valid[NCORE]   = loc_valid && tgt == LOC_DATA;
    sb_req[NCORE]     = loc_req;
    im_valid[NCORE+1] = loc_valid && tgt == LOC_IMEM;
    im_req[NCORE+1]   = loc_req;
    loc_ready = 1'b0;
    if (tgt == LOC_DATA) loc_ready = sb_ready[NCORE];
    if (tgt == LOC_IMEM) loc_ready = im_ready[NCORE+1];
    for (int i = 0; i < NCORE; i++) begin
      cim_valid[i] = loc_valid && (tgt == LOC_CIM0 + 4'(i));
      if (tgt == LOC_CIM0 + 4'(i)) loc_ready = cim_ready[i];
    end
    loc_rvalid = sb_rvalid[NCORE] || im_rvalid[NCORE+1] || (|cim_rvalid);
    loc_rdata  = sb_rdata;
    if (im_rvalid[NCORE+1]) loc_rdata = im_rdata;
    for (int i = 0; i < NCORE; i++)
      if (cim_rvalid[i]) loc_rdata = cim_rdata[i];
  end

  dma #(.MAXOUT(8)) u_dma (
    .clk, .rst_n,
    .cfg_valid(dma_cfg_valid), .cfg(dma_cfg), .cfg_ready(dma_cfg_ready), .busy(dma_busy),
    .g_valid(gm_any), .g_entry(g_entry[gm_idx]), .g_ready(dg_ready),
    .ext_valid, .ext_req, .ext_ready, .ext_rvalid, .ext_rsp,
    .loc_valid, .loc_req, .loc_ready, .loc_rvalid, .loc_rdata,
    .budget(bw_budget), .interval(bw_interval), .stat_blocked(bw_blocked)
  );

  shared_acu #(.N(NCORE + 1)) u_acu (
    .clk, .rst_n, .req_valid(acu_valid), .req(acu_req), .req_ready(acu_ready),
    .rsp_valid(acu_rvalid), .rsp_data(acu_rdata)
  );

  cluster_barrier #(.N(NCORE + 1)) u_bar (
    .clk, .rst_n, .arrive(bar_arrive), .release_o(bar_release), .count()
  );
endmodule
