// edgemm_group: one group of EdgeMM, N_CC compute-centric and N_MC
// memory-centric clusters on a cluster crossbar.
//
// Clusters 0..N_CC-1 are compute-centric, N_CC..N_CC+N_MC-1 memory-centric
// (the paper's group holds 2 + 2). Their DMAs reach DRAM through the group's
// axi_xbar, whose single master port goes to the system crossbar. All host
// core signals of the clusters are passed through as ports, indexed
// [cluster][core]; per-cluster DMA and bandwidth-budget signals are indexed
// by the cluster number in the group. GROUP_ID numbers the clusters
// (cluster index = GROUP_ID * (N_CC + N_MC) + k) for their read-only CSRs.
module edgemm_group
  import edgemm_pkg::*;
#(
  parameter int unsigned N_CC     = 2,
  parameter int unsigned N_MC     = 2,
  parameter int unsigned CC_NCORE = 4,
  parameter int unsigned MC_NCORE = 2,
  parameter int unsigned GROUP_ID = 0
) (
  input  logic clk,
  input  logic rst_n,
  // compute-centric clusters
  input  logic      [N_CC-1:0][CC_NCORE-1:0]       cc_req_valid,
  input  dlcx_req_t [N_CC-1:0][CC_NCORE-1:0]       cc_req,
  output logic      [N_CC-1:0][CC_NCORE-1:0]       cc_req_ready,
  output logic      [N_CC-1:0][CC_NCORE-1:0]       cc_rsp_valid,
  output dlcx_rsp_t [N_CC-1:0][CC_NCORE-1:0]       cc_rsp,
  input  logic      [N_CC-1:0][CC_NCORE-1:0]       cc_rsp_ready,
  output logic      [N_CC-1:0][CC_NCORE-1:0]       cc_busy,
  input  logic      [N_CC-1:0][CC_NCORE:0]         cc_fetch_valid,
  input  logic      [N_CC-1:0][CC_NCORE:0][31:0]   cc_fetch_addr,
  output logic      [N_CC-1:0][CC_NCORE:0]         cc_fetch_ready,
  output logic      [N_CC-1:0][CC_NCORE:0]         cc_fetch_rvalid,
  output logic      [N_CC-1:0][LINE_W-1:0]         cc_fetch_rdata,
  input  logic      [N_CC-1:0][CC_NCORE:0]         cc_acu_valid,
  input  acu_req_t  [N_CC-1:0][CC_NCORE:0]         cc_acu_req,
  output logic      [N_CC-1:0][CC_NCORE:0]         cc_acu_ready,
  output logic      [N_CC-1:0][CC_NCORE:0]         cc_acu_rvalid,
  output logic      [N_CC-1:0][31:0]               cc_acu_rdata,
  input  logic      [N_CC-1:0][CC_NCORE:0]         cc_bar_arrive,
  output logic      [N_CC-1:0][CC_NCORE:0]         cc_bar_release,
  // memory-centric clusters
  input  logic      [N_MC-1:0][MC_NCORE-1:0]       mc_req_valid,
  input  dlcx_req_t [N_MC-1:0][MC_NCORE-1:0]       mc_req,
  output logic      [N_MC-1:0][MC_NCORE-1:0]       mc_req_ready,
  output logic      [N_MC-1:0][MC_NCORE-1:0]       mc_rsp_valid,
  output dlcx_rsp_t [N_MC-1:0][MC_NCORE-1:0]       mc_rsp,
  input  logic      [N_MC-1:0][MC_NCORE-1:0]       mc_rsp_ready,
  output logic      [N_MC-1:0][MC_NCORE-1:0]       mc_busy,
  input  logic      [N_MC-1:0][MC_NCORE:0]         mc_fetch_valid,
  input  logic      [N_MC-1:0][MC_NCORE:0][31:0]   mc_fetch_addr,
  output logic      [N_MC-1:0][MC_NCORE:0]         mc_fetch_ready,
  output logic      [N_MC-1:0][MC_NCORE:0]         mc_fetch_rvalid,
  output logic      [N_MC-1:0][LINE_W-1:0]         mc_fetch_rdata,
  input  logic      [N_MC-1:0][MC_NCORE:0]         mc_acu_valid,
  input  acu_req_t  [N_MC-1:0][MC_NCORE:0]         mc_acu_req,
  output logic      [N_MC-1:0][MC_NCORE:0]         mc_acu_ready,
  output logic      [N_MC-1:0][MC_NCORE:0]         mc_acu_rvalid,
  output logic      [N_MC-1:0][31:0]               mc_acu_rdata,
  input  logic      [N_MC-1:0][MC_NCORE:0]         mc_bar_arrive,
  output logic      [N_MC-1:0][MC_NCORE:0]         mc_bar_release,
  output logic      [N_MC-1:0][31:0]               mc_gather_rows,
  // per-cluster DMA control and bandwidth budget
  input  logic      [N_CC+N_MC-1:0]                dma_cfg_valid,
  input  dma_desc_t [N_CC+N_MC-1:0]                dma_cfg,
  output logic      [N_CC+N_MC-1:0]                dma_cfg_ready,
  output logic      [N_CC+N_MC-1:0]                dma_busy,
  input  logic      [N_CC+N_MC-1:0][15:0]          bw_budget,
  input  logic      [N_CC+N_MC-1:0][15:0]          bw_interval,
  output logic      [N_CC+N_MC-1:0][31:0]          bw_blocked,
  // to the system crossbar
  output logic     ext_valid,
  output mem_req_t ext_req,
  input  logic     ext_ready,
  input  logic     ext_rvalid,
  input  mem_rsp_t ext_rsp
);
  localparam int unsigned NCL = N_CC + N_MC;

  logic     [NCL-1:0] x_valid, x_ready, x_rvalid;
  mem_req_t [NCL-1:0] x_req;
  mem_rsp_t           x_rsp;

  for (genvar k = 0; k < N_CC; k++) begin : g_cc
    cc_cluster #(.NCORE(CC_NCORE), .CLUSTER_ID(32'(GROUP_ID * NCL + k))) u_cl (
      .clk, .rst_n,
      .core_req_valid(cc_req_valid[k]), .core_req(cc_req[k]), .core_req_ready(cc_req_ready[k]),
      .core_rsp_valid(cc_rsp_valid[k]), .core_rsp(cc_rsp[k]), .core_rsp_ready(cc_rsp_ready[k]),
      .core_busy(cc_busy[k]),
      .fetch_valid(cc_fetch_valid[k]), .fetch_addr(cc_fetch_addr[k]), .fetch_ready(cc_fetch_ready[k]),
      .fetch_rvalid(cc_fetch_rvalid[k]), .fetch_rdata(cc_fetch_rdata[k]),
      .acu_valid(cc_acu_valid[k]), .acu_req(cc_acu_req[k]), .acu_ready(cc_acu_ready[k]),
      .acu_rvalid(cc_acu_rvalid[k]), .acu_rdata(cc_acu_rdata[k]),
      .bar_arrive(cc_bar_arrive[k]), .bar_release(cc_bar_release[k]),
      .dma_cfg_valid(dma_cfg_valid[k]), .dma_cfg(dma_cfg[k]), .dma_cfg_ready(dma_cfg_ready[k]),
      .dma_busy(dma_busy[k]), .bw_budget(bw_budget[k]), .bw_interval(bw_interval[k]),
      .bw_blocked(bw_blocked[k]),
      .ext_valid(x_valid[k]), .ext_req(x_req[k]), .ext_ready(x_ready[k]),
      .ext_rvalid(x_rvalid[k]), .ext_rsp(x_rsp)
    );
  end

  for (genvar k = 0; k < N_MC; k++) begin : g_mc
    localparam int unsigned J = N_CC + k;
    mc_cluster #(.NCORE(MC_NCORE), .CLUSTER_ID(32'(GROUP_ID * NCL + J))) u_cl (
      .clk, .rst_n,
      .core_req_valid(mc_req_valid[k]), .core_req(mc_req[k]), .core_req_ready(mc_req_ready[k]),
      .core_rsp_valid(mc_rsp_valid[k]), .core_rsp(mc_rsp[k]), .core_rsp_ready(mc_rsp_ready[k]),
      .core_busy(mc_busy[k]),
      .fetch_valid(mc_fetch_valid[k]), .fetch_addr(mc_fetch_addr[k]), .fetch_ready(mc_fetch_ready[k]),
      .fetch_rvalid(mc_fetch_rvalid[k]), .fetch_rdata(mc_fetch_rdata[k]),
      .acu_valid(mc_acu_valid[k]), .acu_req(mc_acu_req[k]), .acu_ready(mc_acu_ready[k]),
      .acu_rvalid(mc_acu_rvalid[k]), .acu_rdata(mc_acu_rdata[k]),
      .bar_arrive(mc_bar_arrive[k]), .bar_release(mc_bar_release[k]),
      .dma_cfg_valid(dma_cfg_valid[J]), .dma_cfg(dma_cfg[J]), .dma_cfg_ready(dma_cfg_ready[J]),
      .dma_busy(dma_busy[J]), .bw_budget(bw_budget[J]), .bw_interval(bw_interval[J]),
      .bw_blocked(bw_blocked[J]), .gather_rows(mc_gather_rows[k]),
      .ext_valid(x_valid[J]), .ext_req(x_req[J]), .ext_ready(x_ready[J]),
      .ext_rvalid(x_rvalid[J]), .ext_rsp(x_rsp)
    );
  end

  axi_xbar #(.N(NCL)) u_xbar (
    .clk, .rst_n,
    .m_valid(x_valid), .m_req(x_req), .m_ready(x_ready), .m_rvalid(x_rvalid), .m_rsp(x_rsp),
    .s_valid(ext_valid), .s_req(ext_req), .s_ready(ext_ready), .s_rvalid(ext_rvalid), .s_rsp(ext_rsp)
  );
endmodule
