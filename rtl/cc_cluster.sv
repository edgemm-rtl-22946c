// cc_cluster: compute-centric cluster.
//
// NCORE compute-centric cores share the cluster's data memory (32 kB) and
// instruction memory; one more host core drives the DMA. Each core is a host
// core plus its systolic-array coprocessor; the host cores themselves (small
// RISC-V cores reused from an existing cluster design) are outside this RTL,
// so their coprocessor (DL-CX) requests, instruction fetches, shared-ACU
// requests and barrier signals are ports of this module, one per core and
// the DMA core last.
//
// Local address map (bits 23:20 of a byte address): 0 data memory,
// 1 instruction memory. The coprocessors' load/store units and the DMA share
// the data memory through a round-robin cluster bus (one 512-bit access per
// cycle); fetches and DMA writes share the instruction memory the same way.
// The DMA's DRAM port (ext_*) goes to the group crossbar; bw_budget and
// bw_interval set the cluster's memory-access budget B per interval T.
// Structure and sizes follow the paper's architecture figure and
// configuration table; the address map and bus are this design's choices.
//
// Lint: unused outputs (the DMA's gather ready, the barrier count) are left
// open on purpose.
module cc_cluster
  import edgemm_pkg::*;
#(
  parameter int unsigned NCORE      = 4,
  parameter int unsigned R          = 16,
  parameter int unsigned C          = 16,
  parameter int unsigned DMEM_LINES = 512,   // 32 kB
  parameter int unsigned IMEM_LINES = 128,   // 8 kB
  parameter logic [31:0] CLUSTER_ID = 32'd0
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // coprocessor requests from the host cores
  input  logic      [NCORE-1:0]    core_req_valid,
  input  dlcx_req_t [NCORE-1:0]    core_req,
  output logic      [NCORE-1:0]    core_req_ready,
  output logic      [NCORE-1:0]    core_rsp_valid,
  output dlcx_rsp_t [NCORE-1:0]    core_rsp,
  input  logic      [NCORE-1:0]    core_rsp_ready,
  output logic      [NCORE-1:0]    core_busy,
  // instruction fetch (NCORE cores + DMA core)
  input  logic      [NCORE:0]      fetch_valid,
  input  logic      [NCORE:0][31:0] fetch_addr,
  output logic      [NCORE:0]      fetch_ready,
  output logic      [NCORE:0]      fetch_rvalid,
  output logic      [LINE_W-1:0]   fetch_rdata,
  // shared ACU
  input  logic      [NCORE:0]      acu_valid,
  input  acu_req_t  [NCORE:0]      acu_req,
  output logic      [NCORE:0]      acu_ready,
  output logic      [NCORE:0]      acu_rvalid,
  output logic      [31:0]         acu_rdata,
  // barrier
  input  logic      [NCORE:0]      bar_arrive,
  output logic      [NCORE:0]      bar_release,
  // DMA control (DMA core)
  input  logic                     dma_cfg_valid,
  input  dma_desc_t                dma_cfg,
  output logic                     dma_cfg_ready,
  output logic                     dma_busy,
  input  logic      [15:0]         bw_budget,
  input  logic      [15:0]         bw_interval,
  output logic      [31:0]         bw_blocked,
  // DRAM side
  output logic                     ext_valid,
  output mem_req_t                 ext_req,
  input  logic                     ext_ready,
  input  logic                     ext_rvalid,
  input  mem_rsp_t                 ext_rsp
);
  // ---------------- data memory + cluster bus -----------------------
  logic     [NCORE:0] dm_valid, dm_ready, dm_rvalid;
  mem_req_t [NCORE:0] dm_req;
  logic [LINE_W-1:0]  dm_rdata;
  logic               dm_en;
  mem_req_t           dm_sreq;
  logic [LINE_W-1:0]  dm_rdata_q;

  local_bus #(.N(NCORE + 1)) u_dbus (
    .clk, .rst_n, .m_valid(dm_valid), .m_req(dm_req), .m_ready(dm_ready),
    .m_rvalid(dm_rvalid), .m_rdata(dm_rdata),
    .s_en(dm_en), .s_req(dm_sreq), .s_ready(1'b1), .s_rdata(dm_rdata_q)
  );
  sram #(.DEPTH(DMEM_LINES)) u_dmem (.clk, .en(dm_en), .req(dm_sreq), .rdata(dm_rdata_q));

  // ---------------- compute-centric cores ---------------------------
  for (genvar i = 0; i < NCORE; i++) begin : g_core
    cc_coprocessor #(.R(R), .C(C), .NMREG(4), .CORE_ID(32'(i)), .CLUSTER_ID(CLUSTER_ID)) u_cop (
      .clk, .rst_n,
      .req_valid(core_req_valid[i]), .req(core_req[i]), .req_ready(core_req_ready[i]),
      .rsp_valid(core_rsp_valid[i]), .rsp(core_rsp[i]), .rsp_ready(core_rsp_ready[i]),
      .mem_valid(dm_valid[i]), .mem_req(dm_req[i]), .mem_ready(dm_ready[i]),
      .mem_rvalid(dm_rvalid[i]), .mem_rdata(dm_rdata), .busy(core_busy[i])
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

  // ---------------- DMA ---------------------------------------------
  logic      loc_valid, loc_ready, loc_rvalid;
  mem_req_t  loc_req;
  logic      to_imem;
  assign to_imem = (loc_req.addr[23:20] == LOC_IMEM);

  assign dm_valid[NCORE]   = loc_valid && !to_imem;
  assign dm_req[NCORE]     = loc_req;
  assign im_valid[NCORE+1] = loc_valid && to_imem;
  assign im_req[NCORE+1]   = loc_req;
  assign loc_ready  = to_imem ? im_ready[NCORE+1] : dm_ready[NCORE];
  assign loc_rvalid = dm_rvalid[NCORE] || im_rvalid[NCORE+1];

  dma #(.MAXOUT(8)) u_dma (
    .clk, .rst_n,
    .cfg_valid(dma_cfg_valid), .cfg(dma_cfg), .cfg_ready(dma_cfg_ready), .busy(dma_busy),
    .g_valid(1'b0), .g_entry('0), .g_ready(),
    .ext_valid, .ext_req, .ext_ready, .ext_rvalid, .ext_rsp,
    .loc_valid, .loc_req, .loc_ready, .loc_rvalid,
    .loc_rdata(im_rvalid[NCORE+1] ? im_rdata : dm_rdata),
    .budget(bw_budget), .interval(bw_interval), .stat_blocked(bw_blocked)
  );

  // ---------------- shared ACU and barrier --------------------------
  shared_acu #(.N(NCORE + 1)) u_acu (
    .clk, .rst_n, .req_valid(acu_valid), .req(acu_req), .req_ready(acu_ready),
    .rsp_valid(acu_rvalid), .rsp_data(acu_rdata)
  );

  cluster_barrier #(.N(NCORE + 1)) u_bar (
    .clk, .rst_n, .arrive(bar_arrive), .release_o(bar_release), .count()
  );
endmodule
