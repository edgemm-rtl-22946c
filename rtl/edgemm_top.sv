// edgemm_top: the EdgeMM chip, N_GROUP groups on the system crossbar.
//
// EdgeMM is a multi-core RISC-V CPU whose cores carry AI coprocessors of two
// kinds: compute-centric cores with systolic arrays for the GEMM-heavy
// modality encoder and LLM prefill, and memory-centric cores with digital
// compute-in-memory macros for the memory-bound GEMV of LLM decoding. The
// chip holds 4 groups of 2 compute-centric clusters (4 cores each) and
// 2 memory-centric clusters (2 cores each). Every cluster has a DMA with a
// bandwidth-budget counter; all DMAs share one DRAM port through a group
// crossbar and this system crossbar.
//
// The host cores, the DRAM controller and the DRAM are outside this RTL:
// the top's ports carry, per group [g], cluster [k] and core [i], the
// coprocessor requests of the host cores, their instruction fetches, shared
// ACU requests and barrier signals, the DMA descriptors and bandwidth
// budgets programmed by the DMA host cores, and the DRAM request/response
// channel (64-byte lines, in-order responses, ID-routed). Structure and
// counts follow the paper; the port-level protocols are this design's.
//
// Lint: the reset is also sampled synchronously by the assertions' disable
// conditions, which the linter reports as a net used both ways; the
// flip-flops themselves all use the asynchronous reset.
module edgemm_top
  import edgemm_pkg::*;
#(
  parameter int unsigned N_GROUP  = 4,
  parameter int unsigned N_CC     = 2,
  parameter int unsigned N_MC     = 2,
  parameter int unsigned CC_NCORE = 4,
  parameter int unsigned MC_NCORE = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE-1:0] cc_req_valid,
  input  dlcx_req_t [N_GROUP-1:0][N_CC-1:0][CC_NCORE-1:0] cc_req,
  output logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE-1:0] cc_req_ready,
  output logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE-1:0] cc_rsp_valid,
  output dlcx_rsp_t [N_GROUP-1:0][N_CC-1:0][CC_NCORE-1:0] cc_rsp,
  input  logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE-1:0] cc_rsp_ready,
  output logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE-1:0] cc_busy,
  input  logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE:0] cc_fetch_valid,
  input  logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE:0][31:0] cc_fetch_addr,
  output logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE:0] cc_fetch_ready,
  output logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE:0] cc_fetch_rvalid,
  output logic      [N_GROUP-1:0][N_CC-1:0][LINE_W-1:0] cc_fetch_rdata,
  input  logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE:0] cc_acu_valid,
  input  acu_req_t  [N_GROUP-1:0][N_CC-1:0][CC_NCORE:0] cc_acu_req,
  output logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE:0] cc_acu_ready,
  output logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE:0] cc_acu_rvalid,
  output logic      [N_GROUP-1:0][N_CC-1:0][31:0] cc_acu_rdata,
  input  logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE:0] cc_bar_arrive,
  output logic      [N_GROUP-1:0][N_CC-1:0][CC_NCORE:0] cc_bar_release,
  input  logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE-1:0] mc_req_valid,
  input  dlcx_req_t [N_GROUP-1:0][N_MC-1:0][MC_NCORE-1:0] mc_req,
  output logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE-1:0] mc_req_ready,
  output logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE-1:0] mc_rsp_valid,
  output dlcx_rsp_t [N_GROUP-1:0][N_MC-1:0][MC_NCORE-1:0] mc_rsp,
  input  logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE-1:0] mc_rsp_ready,
  output logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE-1:0] mc_busy,
  input  logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE:0] mc_fetch_valid,
  input  logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE:0][31:0] mc_fetch_addr,
  output logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE:0] mc_fetch_ready,
  output logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE:0] mc_fetch_rvalid,
  output logic      [N_GROUP-1:0][N_MC-1:0][LINE_W-1:0] mc_fetch_rdata,
  input  logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE:0] mc_acu_valid,
  input  acu_req_t  [N_GROUP-1:0][N_MC-1:0][MC_NCORE:0] mc_acu_req,
  output logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE:0] mc_acu_ready,
  output logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE:0] mc_acu_rvalid,
  output logic      [N_GROUP-1:0][N_MC-1:0][31:0] mc_acu_rdata,
  input  logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE:0] mc_bar_arrive,
  output logic      [N_GROUP-1:0][N_MC-1:0][MC_NCORE:0] mc_bar_release,
  output logic      [N_GROUP-1:0][N_MC-1:0][31:0] mc_gather_rows,
  input  logic      [N_GROUP-1:0][N_CC+N_MC-1:0] dma_cfg_valid,
  input  dma_desc_t [N_GROUP-1:0][N_CC+N_MC-1:0] dma_cfg,
  output logic      [N_GROUP-1:0][N_CC+N_MC-1:0] dma_cfg_ready,
  output logic      [N_GROUP-1:0][N_CC+N_MC-1:0] dma_busy,
  input  logic      [N_GROUP-1:0][N_CC+N_MC-1:0][15:0] bw_budget,
  input  logic      [N_GROUP-1:0][N_CC+N_MC-1:0][15:0] bw_interval,
  output logic      [N_GROUP-1:0][N_CC+N_MC-1:0][31:0] bw_blocked,
  // DRAM controller port
  output logic     dram_valid,
  output mem_req_t dram_req,
  input  logic     dram_ready,
  input  logic     dram_rvalid,
  input  mem_rsp_t dram_rsp
);
  logic     [N_GROUP-1:0] x_valid, x_ready, x_rvalid;
  mem_req_t [N_GROUP-1:0] x_req;
  mem_rsp_t               x_rsp;

  for (genvar g = 0; g < N_GROUP; g++) begin : g_grp
    edgemm_group #(.N_CC(N_CC), .N_MC(N_MC), .CC_NCORE(CC_NCORE), .MC_NCORE(MC_NCORE),
                   .GROUP_ID(g)) u_grp (
      .clk, .rst_n,
      .cc_req_valid(cc_req_valid[g]),
      .cc_req(cc_req[g]),
      .cc_req_ready(cc_req_ready[g]),
      .cc_rsp_valid(cc_rsp_valid[g]),
      .cc_rsp(cc_rsp[g]),
      .cc_rsp_ready(cc_rsp_ready[g]),
      .cc_busy(cc_busy[g]),
      .cc_fetch_valid(cc_fetch_valid[g]),
      .cc_fetch_addr(cc_fetch_addr[g]),
      .cc_fetch_ready(cc_fetch_ready[g]),
      .cc_fetch_rvalid(cc_fetch_rvalid[g]),
      .cc_fetch_rdata(cc_fetch_rdata[g]),
      .cc_acu_valid(cc_acu_valid[g]),
      .cc_acu_req(cc_acu_req[g]),
      .cc_acu_ready(cc_acu_ready[g]),
      .cc_acu_rvalid(cc_acu_rvalid[g]),
      .cc_acu_rdata(cc_acu_rdata[g]),
      .cc_bar_arrive(cc_bar_arrive[g]),
      .cc_bar_release(cc_bar_release[g]),
      .mc_req_valid(mc_req_valid[g]),
      .mc_req(mc_req[g]),
      .mc_req_ready(mc_req_ready[g]),
      .mc_rsp_valid(mc_rsp_valid[g]),
      .mc_rsp(mc_rsp[g]),
      .mc_rsp_ready(mc_rsp_ready[g]),
      .mc_busy(mc_busy[g]),
      .mc_fetch_valid(mc_fetch_valid[g]),
      .mc_fetch_addr(mc_fetch_addr[g]),
      .mc_fetch_ready(mc_fetch_ready[g]),
      .mc_fetch_rvalid(mc_fetch_rvalid[g]),
      .mc_fetch_rdata(mc_fetch_rdata[g]),
      .mc_acu_valid(mc_acu_valid[g]),
      .mc_acu_req(mc_acu_req[g]),
      .mc_acu_ready(mc_acu_ready[g]),
      .mc_acu_rvalid(mc_acu_rvalid[g]),
      .mc_acu_rdata(mc_acu_rdata[g]),
      .mc_bar_arrive(mc_bar_arrive[g]),
      .mc_bar_release(mc_bar_release[g]),
      .mc_gather_rows(mc_gather_rows[g]),
      .dma_cfg_valid(dma_cfg_valid[g]),
      .dma_cfg(dma_cfg[g]),
      .dma_cfg_ready(dma_cfg_ready[g]),
      .dma_busy(dma_busy[g]),
      .bw_budget(bw_budget[g]),
      .bw_interval(bw_interval[g]),
      .bw_blocked(bw_blocked[g]),
      .ext_valid(x_valid[g]), .ext_req(x_req[g]), .ext_ready(x_ready[g]),
      .ext_rvalid(x_rvalid[g]), .ext_rsp(x_rsp)
    );
  end

  axi_xbar #(.N(N_GROUP)) u_sys_xbar (
    .clk, .rst_n,
    .m_valid(x_valid), .m_req(x_req), .m_ready(x_ready), .m_rvalid(x_rvalid), .m_rsp(x_rsp),
    .s_valid(dram_valid), .s_req(dram_req), .s_ready(dram_ready),
    .s_rvalid(dram_rvalid), .s_rsp(dram_rsp)
  );
endmodule
