// mc_coprocessor: AI coprocessor of a memory-centric (MC) core.
//
// Executes the matrix-vector extension on a digital CIM macro that is at the
// same time the core's weight memory (filled by the cluster DMA through the
// cim_* port), so weights are never loaded into registers:
//   GEMV  vd, vs1, (rs1)  for m < MROWS: vd+m[0..C-1] = W[wordline rs1]^T x
//                         (vs1+m)[0..R-1], activations int8, bit-serial in
//                         the macro; MROWS*W+1 cycles (paper's Eq. (3));
//   PRUNE vd, vs1         activation-aware pruning of vs1 (act_pruner):
//                         vd = kept values packed to the front, index/n/k
//                         updated; with uop[0] the address generator sends
//                         the DRAM rows of the kept channels to the DMA;
//   VLD   vd, (rs1)       load a vector from the cluster's shared buffer;
//   VST   vs1, (rs1)      store one (func3: 0 int8, 1 int16, 2 int32);
//   VV    vd, vs1, vs2    element-wise op (vector_unit), op = {uop, func3};
//   CSRW / CSRR           configuration and status registers, including the
//                         pruner's k (written to d at the first layer), n,
//                         index register and the gather address bases.
// 32 vector registers of R = 32 elements x 32 bits.
//
// Interface: DL-CX req/rsp as in cc_coprocessor; sb_* to the shared buffer
// through the cluster bus; cim_* is the DMA's port into the macro (stalled
// while the macro computes); g_* is the pruner's gather list to the DMA.
// The instruction fields follow the paper's figure; codes, register count
// and sizes not printed there are this design's choices.
//
// Lint: each instruction view leaves some bits unused; the macro's busy flag
// and the upper bits of its vector index are not needed because the
// controller tracks GEMV itself.
module mc_coprocessor
  import edgemm_pkg::*;
#(
  parameter int unsigned R     = 32,
  parameter int unsigned C     = 16,
  parameter int unsigned M     = 128,
  parameter int unsigned N     = 8,
  parameter int unsigned W     = 8,
  parameter int unsigned NVREG = 32,
  parameter logic [31:0] CORE_ID    = 32'd0,
  parameter logic [31:0] CLUSTER_ID = 32'd0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  input  dlcx_req_t         req,
  output logic              req_ready,
  output logic              rsp_valid,
  output dlcx_rsp_t         rsp,
  input  logic              rsp_ready,
  // shared buffer
  output logic              sb_valid,
  output mem_req_t          sb_req,
  input  logic              sb_ready,
  input  logic              sb_rvalid,
  input  logic [LINE_W-1:0] sb_rdata,
  // DMA port into the CIM macro
  input  logic              cim_valid,
  input  mem_req_t          cim_req,
  output logic              cim_ready,
  output logic              cim_rvalid,
  output logic [LINE_W-1:0] cim_rdata,
  // gather list to the DMA
  output logic              g_valid,
  output gather_t           g_entry,
  input  logic              g_ready,
  output logic              busy
);
  localparam int unsigned VW = $clog2(NVREG);

  typedef enum logic [2:0] {S_IDLE, S_GEMV, S_PRUNE, S_LD, S_ST} state_e;

  state_e            st_q;
  logic [31:0]       vreg [NVREG][R];
  instr_mv_t         ins_q;
  logic [31:0]       base_q;
  logic              sent_q;
  logic [31:0]       csr_mrows, csr_src, csr_sstr, csr_dst, csr_dstr, csr_cycles, cyc_q;

  instr_mv_t  ins;
  instr_cfg_t insc;
  assign ins  = instr_mv_t'(req.instr);
  assign insc = instr_cfg_t'(req.instr);

  assign req_ready = (st_q == S_IDLE) && !rsp_valid;
  assign busy      = (st_q != S_IDLE);

  logic fire;
  assign fire = req_valid && req_ready && (ins.opcode == OPC_MC);

  // ---------------- CIM macro ----------------------------------------
  logic                      cim_start;
  logic [7:0]                act_idx, res_idx;
  logic [R-1:0][W-1:0]       act;
  logic                      res_valid, cim_busy;
  logic signed [C-1:0][31:0] res;

  assign cim_start = fire && (ins.func == F_GEMV);

  always_comb
    for (int r = 0; r < R; r++)
      act[r] = vreg[VW'(ins_q.vs1 + VW'(act_idx))][r][W-1:0];

  cim_macro #(.R(R), .C(C), .M(M), .N(N), .W(W)) u_cim (
    .clk, .rst_n,
    .start(cim_start), .nvec(csr_mrows[7:0]), .wl(req.rs1[$clog2(M)-1:0]),
    .act, .act_idx, .res_valid, .res_idx, .res, .busy(cim_busy),
    .mem_valid(cim_valid), .mem_req(cim_req), .mem_ready(cim_ready),
    .mem_rvalid(cim_rvalid), .mem_rdata(cim_rdata)
  );

  // ---------------- pruner -------------------------------------------
  logic signed [R-1:0][31:0] pr_vs, pr_vd;
  logic [R-1:0]              pr_index;
  logic [7:0]                pr_n, pr_k;
  logic                      pr_busy, pr_done, pr_kset;

  always_comb
    for (int r = 0; r < R; r++) pr_vs[r] = vreg[ins.rs1][r];
  assign pr_kset = fire && ins.func == F_CSRW && insc.csr == CSR_PR_K;

  act_pruner #(.VLEN(R), .T_SHIFT(4)) u_pruner (
    .clk, .rst_n,
    .start(fire && ins.func == F_PRUNE), .gather_en(ins.uop[0]), .vs(pr_vs),
    .k_set(pr_kset), .k_wdata(req.rs1[7:0]),
    .src_base(csr_src), .src_stride(csr_sstr), .dst_base(csr_dst), .dst_stride(csr_dstr),
    .vd(pr_vd), .index(pr_index), .n_count(pr_n), .k(pr_k), .busy(pr_busy), .done(pr_done),
    .g_valid, .g_entry, .g_ready
  );

  // ---------------- vector unit --------------------------------------
  logic signed [R-1:0][31:0] va, vb, vy;
  always_comb
    for (int r = 0; r < R; r++) begin
      va[r] = vreg[ins.rs1][r];   // V-V vs1 field (19:15)
      vb[r] = vreg[ins.vs1][r];   // V-V vs2 field (24:20)
    end
  vector_unit #(.LANES(R), .EW(32)) u_vu (
    .op(vop_e'({ins.uop, ins.func3})), .a(va), .b(vb), .imm(ins.vs1), .y(vy)
  );

  // ---------------- shared-buffer access -----------------------------
  always_comb begin
    sb_valid     = 1'b0;
    sb_req       = '0;
    sb_req.addr  = base_q;
    if (st_q == S_LD && !sent_q) sb_valid = 1'b1;
    if (st_q == S_ST && !sent_q) begin
      sb_valid  = 1'b1;
      sb_req.we = 1'b1;
      for (int r = 0; r < R; r++) begin
        unique case (ins_q.func3)
          3'd0: begin sb_req.wdata[8*r +: 8] = vreg[ins_q.vs1][r][7:0];  sb_req.strb[r] = 1'b1; end
          3'd1: begin sb_req.wdata[16*r +: 16] = vreg[ins_q.vs1][r][15:0]; sb_req.strb[2*r +: 2] = 2'b11; end
          default: if (r < LINE_B / 4) begin
            sb_req.wdata[32*r +: 32] = vreg[ins_q.vs1][r]; sb_req.strb[4*r +: 4] = 4'hf;
          end
        endcase
      end
    end
  end

  function automatic logic [31:0] ld_elem(logic [LINE_W-1:0] line, logic [2:0] f3, int r);
    unique case (f3)
      3'd0:    return 32'(signed'(line[8*r +: 8]));
      3'd1:    return 32'(signed'(line[16*r +: 16]));
      default: return (r < LINE_B / 4) ? line[32*r +: 32] : 32'd0;
    endcase
  endfunction

  function automatic logic [31:0] csr_read(logic [4:0] a);
    unique case (a)
      CSR_CORE_ID:    return CORE_ID;
      CSR_CLUSTER_ID: return CLUSTER_ID;
      CSR_CORE_TYPE:  return 32'd1;
      CSR_MROWS:      return csr_mrows;
      CSR_PR_K:       return 32'(pr_k);
      CSR_PR_N:       return 32'(pr_n);
      CSR_PR_SRC:     return csr_src;
      CSR_PR_SSTR:    return csr_sstr;
      CSR_PR_DST:     return csr_dst;
      CSR_PR_DSTR:    return csr_dstr;
      CSR_PR_INDEX:   return 32'(pr_index);
      CSR_CYCLES:     return csr_cycles;
      default:        return 32'd0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_IDLE;
      ins_q      <= '0;
      base_q     <= '0;
      sent_q     <= 1'b0;
      csr_mrows  <= 32'd1;
      csr_src    <= '0;
      csr_sstr   <= 32'(LINE_B);
      csr_dst    <= '0;
      csr_dstr   <= 32'(M * C * N / 8);
      csr_cycles <= '0;
      cyc_q      <= '0;
      rsp_valid  <= 1'b0;
      rsp        <= '0;
      for (int i = 0; i < NVREG; i++)
        for (int r = 0; r < R; r++) vreg[i][r] <= '0;
    end else begin
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;
      if (busy) cyc_q <= cyc_q + 1;
      unique case (st_q)
        S_IDLE: if (fire) begin
          ins_q  <= ins;
          base_q <= req.rs1;
          sent_q <= 1'b0;
          cyc_q  <= 32'd0;
          unique case (ins.func)
            F_GEMV:  st_q <= (csr_mrows == 0) ? S_IDLE : S_GEMV;
            F_PRUNE: st_q <= S_PRUNE;
            F_VLD:   st_q <= S_LD;
            F_VST:   st_q <= S_ST;
            F_VV: begin
              for (int r = 0; r < R; r++) vreg[ins.vd][r] <= vy[r];
              csr_cycles <= 32'd1;
            end
            F_CSRW: begin
              unique case (insc.csr)
                CSR_MROWS:   csr_mrows <= (req.rs1 > 32'(NVREG)) ? 32'(NVREG) : req.rs1;
                CSR_PR_SRC:  csr_src   <= req.rs1;
                CSR_PR_SSTR: csr_sstr  <= req.rs1;
                CSR_PR_DST:  csr_dst   <= req.rs1;
                CSR_PR_DSTR: csr_dstr  <= req.rs1;
                default: ;
              endcase
              csr_cycles <= 32'd1;
            end
            F_CSRR: begin
              rsp_valid <= 1'b1;
              rsp.data  <= csr_read(insc.csr);
              rsp.rd    <= req.rd;
            end
            default: ;
          endcase
        end
        S_GEMV: begin
          if (res_valid) begin
            for (int r = 0; r < R; r++)
              vreg[VW'(ins_q.vd + VW'(res_idx))][r] <= (r < C) ? res[r % C] : 32'd0;
            if (res_idx == csr_mrows[7:0] - 1'b1) begin
              st_q <= S_IDLE;
              csr_cycles <= cyc_q + 1;   // busy cycles of the macro
            end
          end
        end
        S_PRUNE: if (pr_done) begin
          for (int r = 0; r < R; r++) vreg[ins_q.vd][r] <= pr_vd[r];
          st_q <= S_IDLE;
          csr_cycles <= cyc_q + 1;
        end
        S_LD: begin
          if (sb_valid && sb_ready) sent_q <= 1'b1;
          if (sb_rvalid) begin
            for (int r = 0; r < R; r++) vreg[ins_q.vd][r] <= ld_elem(sb_rdata, ins_q.func3, r);
            st_q <= S_IDLE;
            csr_cycles <= cyc_q + 1;
          end
        end
        S_ST: begin
          if (sb_valid && sb_ready) sent_q <= 1'b1;
          if (sb_rvalid) begin st_q <= S_IDLE; csr_cycles <= cyc_q + 1; end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  a_cim_idle_when_idle: assert property (@(posedge clk) disable iff (!rst_n)
    st_q == S_IDLE |-> !pr_busy);
endmodule
