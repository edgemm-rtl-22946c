// cc_coprocessor: AI coprocessor of a compute-centric (CC) core.
//
// Receives extended instructions from its host core over the direct-linked
// interface (DL-CX) and executes them one at a time:
//   MLD  md, (rs1)      load R rows of matrix register md from the cluster
//                       data memory, row r at rs1 + r*STRIDE; the size field
//                       selects 8/16/32-bit elements (sign-extended);
//   MST  ms1, (rs1)     store a matrix register the same way;
//   MMUL md, ms1, ms2   md = A x Wt with A the first M rows of ms1 (M x R
//                       activations) and Wt = ms2 (R x C weights, held
//                       stationary in the systolic array); uop[0] adds to md;
//                       takes exactly 2R+C+M-3 cycles (paper's Eq. (2));
//   VV   vd, vs1, vs2   element-wise op on row VROW of three matrix
//                       registers (op = {uop, func3}, imm = vs2 field),
//                       VROW then advances; one cycle;
//   CSRW / CSRR         write / read a CSR (CSRR answers on the response
//                       channel); core index, cluster index and core type
//                       are read-only.
// Four R x C matrix registers of 32-bit elements are shared by the array,
// the vector unit and the load/store unit, as in the paper. Operands of the
// array are the low 8 bits (INT8) of the elements.
//
// Interface: req_valid/req_ready (ready only when idle), rsp_valid/rsp_ready
// for CSRR, mem_* to the cluster bus (valid/ready, response one cycle after
// the grant). busy is high while an instruction runs; CSR_CYCLES holds the
// busy cycles of the last instruction. Field positions follow the paper's
// instruction-format figure; function codes, CSR numbers, row addressing of
// vector ops and element widths are this design's choices.
//
// Lint: the instruction views (M-M, M-V, config) each leave some bits unused,
// and rs2 is not used by any instruction here.
module cc_coprocessor
  import edgemm_pkg::*;
#(
  parameter int unsigned R     = 16,
  parameter int unsigned C     = 16,
  parameter int unsigned NMREG = 4,
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
  output logic              mem_valid,
  output mem_req_t          mem_req,
  input  logic              mem_ready,
  input  logic              mem_rvalid,
  input  logic [LINE_W-1:0] mem_rdata,
  output logic              busy
);
  localparam int unsigned RW = $clog2(R);
  localparam int unsigned MW = $clog2(NMREG);
  localparam int unsigned TW = 16;

  typedef enum logic [2:0] {S_IDLE, S_LD, S_ST, S_MUL} state_e;

  state_e            st_q;
  logic signed [31:0] mreg [NMREG][R][C];
  instr_mm_t         ins_q;
  logic [31:0]       base_q;
  logic [TW-1:0]     t_q;          // cycle counter inside an instruction
  logic [RW:0]       ri_q, rr_q;   // rows issued / rows answered
  logic [31:0]       csr_mrows, csr_stride, csr_vrow, csr_cycles;
  logic [31:0]       cyc_q;

  instr_mm_t  ins;
  instr_mv_t  insv;
  instr_cfg_t insc;
  assign ins  = instr_mm_t'(req.instr);
  assign insv = instr_mv_t'(req.instr);
  assign insc = instr_cfg_t'(req.instr);

  assign req_ready = (st_q == S_IDLE) && !rsp_valid;
  assign busy      = (st_q != S_IDLE);

  logic fire;
  assign fire = req_valid && req_ready && (ins.opcode == OPC_CC);

  // ---------------- systolic array ----------------------------------
  logic                        w_we;
  logic [RW-1:0]               w_idx;
  logic signed [C-1:0][7:0]    w_row;
  logic signed [R-1:0][7:0]    a_col;
  logic signed [C-1:0][31:0]   psum;
  logic [TW-1:0]               mrows;
  logic [TW-1:0]               mul_len;

  assign mrows   = TW'(csr_mrows);
  assign mul_len = TW'(2 * R + C - 3) + mrows;

  systolic_array #(.R(R), .C(C), .AW(8), .PW(32)) u_sa (
    .clk, .rst_n, .w_row_we(w_we), .w_row_idx(w_idx), .w_row, .a_col,
    .psum_bottom(psum)
  );

  always_comb begin
    w_we  = (st_q == S_MUL) && (t_q < TW'(R));
    w_idx = t_q[RW-1:0];
    for (int c = 0; c < C; c++)
      w_row[c] = mreg[ins_q.ms2[MW-1:0]][w_idx][c][7:0];
    for (int r = 0; r < R; r++) begin
      int m;
      m = int'(t_q) - (R - 1) - r;
      a_col[r] = '0;
      if (st_q == S_MUL && m >= 0 && m < int'(mrows))
        a_col[r] = mreg[ins_q.ms1[MW-1:0]][m[RW-1:0]][r % C][7:0];
    end
  end

  // ---------------- vector unit -------------------------------------
  logic signed [C-1:0][31:0] va, vb, vy;
  logic [RW-1:0]             vrow;
  assign vrow = csr_vrow[RW-1:0];
  always_comb
    for (int c = 0; c < C; c++) begin
      va[c] = mreg[insv.rs1[MW-1:0]][vrow][c];
      vb[c] = mreg[insv.vs1[MW-1:0]][vrow][c];
    end
  vector_unit #(.LANES(C), .EW(32)) u_vu (
    .op(vop_e'({insv.uop, insv.func3})), .a(va), .b(vb), .imm(insv.vs1), .y(vy)
  );

  // ---------------- load / store unit -------------------------------
  function automatic logic signed [31:0] get_elem(logic [LINE_W-1:0] line,
                                                  logic [1:0] size, int c);
    unique case (size)
      2'd0:    return 32'(signed'(line[8*c +: 8]));
      2'd1:    return 32'(signed'(line[16*c +: 16]));
      default: return line[32*c +: 32];
    endcase
  endfunction

  always_comb begin
    mem_valid    = 1'b0;
    mem_req      = '0;
    mem_req.addr = base_q + 32'(ri_q) * csr_stride;
    if (st_q == S_LD && ri_q < (RW+1)'(R)) mem_valid = 1'b1;
    if (st_q == S_ST && ri_q < (RW+1)'(R)) begin
      mem_valid  = 1'b1;
      mem_req.we = 1'b1;
      for (int c = 0; c < C; c++) begin
        logic signed [31:0] e;
        e = mreg[ins_q.ms1[MW-1:0]][ri_q[RW-1:0]][c];
        unique case (ins_q.size)
          2'd0:    begin mem_req.wdata[8*c +: 8]   = e[7:0];  mem_req.strb[c]        = 1'b1;  end
          2'd1:    begin mem_req.wdata[16*c +: 16] = e[15:0]; mem_req.strb[2*c +: 2] = 2'b11; end
          default: begin mem_req.wdata[32*c +: 32] = e;       mem_req.strb[4*c +: 4] = 4'hf;  end
        endcase
      end
    end
  end

  // ---------------- CSR read ----------------------------------------
  function automatic logic [31:0] csr_read(logic [4:0] a);
    unique case (a)
      CSR_CORE_ID:    return CORE_ID;
      CSR_CLUSTER_ID: return CLUSTER_ID;
      CSR_CORE_TYPE:  return 32'd0;
      CSR_MROWS:      return csr_mrows;
      CSR_STRIDE:     return csr_stride;
      CSR_VROW:       return csr_vrow;
      CSR_CYCLES:     return csr_cycles;
      default:        return 32'd0;
    endcase
  endfunction

  // ---------------- control -----------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_IDLE;
      ins_q      <= '0;
      base_q     <= '0;
      t_q        <= '0;
      ri_q       <= '0;
      rr_q       <= '0;
      csr_mrows  <= 32'(R);
      csr_stride <= 32'(LINE_B);
      csr_vrow   <= '0;
      csr_cycles <= '0;
      cyc_q      <= '0;
      rsp_valid  <= 1'b0;
      rsp        <= '0;
      for (int i = 0; i < NMREG; i++)
        for (int r = 0; r < R; r++)
          for (int c = 0; c < C; c++) mreg[i][r][c] <= '0;
    end else begin
      if (rsp_valid && rsp_ready) rsp_valid <= 1'b0;
      if (busy) cyc_q <= cyc_q + 1;
      unique case (st_q)
        S_IDLE: if (fire) begin
          ins_q  <= ins;
          base_q <= req.rs1;
          t_q    <= '0;
          ri_q   <= '0;
          rr_q   <= '0;
          cyc_q  <= 32'd1;
          unique case (ins.func)
            F_MLD:  st_q <= S_LD;
            F_MST:  st_q <= S_ST;
            F_MMUL: st_q <= S_MUL;
            F_VV: begin
              for (int c = 0; c < C; c++) mreg[insv.vd[MW-1:0]][vrow][c] <= vy[c];
              csr_vrow   <= (csr_vrow == 32'(R - 1)) ? '0 : csr_vrow + 1;
              csr_cycles <= 32'd1;
            end
            F_CSRW: begin
              unique case (insc.csr)
                CSR_MROWS:  csr_mrows  <= (req.rs1 == 0 || req.rs1 > 32'(R)) ? 32'(R) : req.rs1;
                CSR_STRIDE: csr_stride <= req.rs1;
                CSR_VROW:   csr_vrow   <= req.rs1 % R;
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
        S_LD: begin
          if (mem_valid && mem_ready) ri_q <= ri_q + 1'b1;
          if (mem_rvalid) begin
            for (int c = 0; c < C; c++)
              mreg[ins_q.md[MW-1:0]][rr_q[RW-1:0]][c] <= get_elem(mem_rdata, ins_q.size, c);
            rr_q <= rr_q + 1'b1;
            if (rr_q == (RW+1)'(R - 1)) begin st_q <= S_IDLE; csr_cycles <= cyc_q; end
          end
        end
        S_ST: begin
          if (mem_valid && mem_ready) ri_q <= ri_q + 1'b1;
          if (mem_rvalid) begin
            rr_q <= rr_q + 1'b1;
            if (rr_q == (RW+1)'(R - 1)) begin st_q <= S_IDLE; csr_cycles <= cyc_q; end
          end
        end
        S_MUL: begin
          for (int c = 0; c < C; c++) begin
            int m;
            m = int'(t_q) - 2 * (R - 1) - c;
            if (m >= 0 && m < int'(mrows))
              mreg[ins_q.md[MW-1:0]][m[RW-1:0]][c] <=
                (ins_q.uop[0] ? mreg[ins_q.md[MW-1:0]][m[RW-1:0]][c] : 32'sd0) + psum[c];
          end
          t_q <= t_q + 1'b1;
          if (t_q == mul_len - 1'b1) begin st_q <= S_IDLE; csr_cycles <= cyc_q; end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp));
endmodule
