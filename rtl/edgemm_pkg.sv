// edgemm_pkg: types and constants shared by the EdgeMM blocks.
//
// Holds the instruction field layout of the AI extensions (bit positions as
// printed in the instruction-format figure of the paper), the function codes
// chosen for them (the paper does not print codes), the request/response
// structs of the direct-linked coprocessor interface (DL-CX), the memory
// request/response structs used by DMA, cluster bus and crossbars, the DMA
// descriptor and the gather entry produced by the activation-aware pruner.
package edgemm_pkg;

  // ------------------------------------------------------------------
  // Memory side: 64-byte (512-bit) lines, as the DMA width of the paper.
  // ------------------------------------------------------------------
  localparam int unsigned ADDR_W  = 32;
  localparam int unsigned LINE_W  = 512;
  localparam int unsigned LINE_B  = LINE_W / 8;
  localparam int unsigned ID_W    = 8;

  typedef struct packed {
    logic [ADDR_W-1:0] addr;   // byte address, 64-byte aligned
    logic              we;     // 1 = write
    logic [LINE_W-1:0] wdata;
    logic [LINE_B-1:0] strb;   // byte enables of a write
    logic [ID_W-1:0]   id;     // source tag, extended by each crossbar level
  } mem_req_t;

  typedef struct packed {
    logic [LINE_W-1:0] rdata;  // read data, don't care for writes
    logic [ID_W-1:0]   id;
  } mem_rsp_t;

  // Cluster-local address map: bits [23:20] select the target.
  localparam logic [3:0] LOC_DATA = 4'd0;  // data memory / shared buffer
  localparam logic [3:0] LOC_IMEM = 4'd1;  // instruction memory
  localparam logic [3:0] LOC_CIM0 = 4'd2;  // CIM macro of MC core i at 2+i

  // ------------------------------------------------------------------
  // DMA descriptor and gather entry
  // ------------------------------------------------------------------
  typedef struct packed {
    logic [ADDR_W-1:0] src;
    logic [ADDR_W-1:0] dst;
    logic [15:0]       row_lines;   // 64-byte lines per row
    logic [15:0]       rows;
    logic [ADDR_W-1:0] src_stride;  // bytes
    logic [ADDR_W-1:0] dst_stride;  // bytes
    logic              to_local;    // 1: DRAM -> local, 0: local -> DRAM
    logic              gather;      // take each row's src/dst from the gather list
  } dma_desc_t;

  typedef struct packed {
    logic [ADDR_W-1:0] src;  // DRAM address of a kept weight row
    logic [ADDR_W-1:0] dst;  // local destination
  } gather_t;

  // ------------------------------------------------------------------
  // DL-CX interface between host core and coprocessor
  // ------------------------------------------------------------------
  typedef struct packed {
    logic [31:0] instr;
    logic [31:0] rs1;    // value of the host register named by the rs1 field
    logic [31:0] rs2;
    logic [4:0]  rd;     // host destination for replies
  } dlcx_req_t;

  typedef struct packed {
    logic [31:0] data;
    logic [4:0]  rd;
  } dlcx_rsp_t;

  // Instruction fields (figure: instruction format of the extensions)
  typedef struct packed {
    logic [4:0] func;    // 31:27
    logic [1:0] uop;     // 26:25
    logic       rsv;     // 24
    logic [2:0] ms2;     // 23:21
    logic [2:0] ms1;     // 20:18
    logic [2:0] md;      // 17:15
    logic [2:0] func3;   // 14:12
    logic [1:0] size;    // 11:10
    logic [2:0] uimm;    // 9:7
    logic [6:0] opcode;  // 6:0
  } instr_mm_t;

  typedef struct packed {
    logic [4:0] func;    // 31:27
    logic [1:0] uop;     // 26:25
    logic [4:0] vs1;     // 24:20  (vs2 in the V-V form)
    logic [4:0] rs1;     // 19:15  (vs1 in the V-V form)
    logic [2:0] func3;   // 14:12
    logic [4:0] vd;      // 11:7
    logic [6:0] opcode;  // 6:0
  } instr_mv_t;

  typedef struct packed {
    logic [4:0] func;    // 31:27
    logic [1:0] uop;     // 26:25
    logic [4:0] rs1;     // 24:20
    logic [4:0] csr;     // 19:15
    logic [2:0] func3;   // 14:12
    logic [1:0] size;    // 11:10
    logic [2:0] nul;     // 9:7
    logic [6:0] opcode;  // 6:0
  } instr_cfg_t;

  // Major opcodes: RISC-V custom-0 / custom-1 (choice of this design)
  localparam logic [6:0] OPC_CC = 7'b0001011;
  localparam logic [6:0] OPC_MC = 7'b0101011;

  // Function codes (choice of this design)
  typedef enum logic [4:0] {
    F_MMUL  = 5'd0,   // CC: md = ms1 x ms2  (uop[0]: md += ...)
    F_MLD   = 5'd1,   // CC: load matrix register md from rs1
    F_MST   = 5'd2,   // CC: store matrix register ms1 to rs1
    F_GEMV  = 5'd3,   // MC: vd.. = W[rs1] x vs1..  (CIM)
    F_VLD   = 5'd4,   // MC: load vd from shared buffer at rs1
    F_VST   = 5'd5,   // MC: store vs1 to shared buffer at rs1
    F_PRUNE = 5'd6,   // MC: vd = pruned(vs1), gather rows to DMA
    F_VV    = 5'd8,   // both: vector op (func3/uop select the op)
    F_CSRW  = 5'd16,  // config: CSR = rs1
    F_CSRR  = 5'd17   // config: reply with CSR
  } func_e;

  // Vector unit operations: {uop, func3}
  typedef enum logic [4:0] {
    V_ADD   = 5'd0,
    V_SUB   = 5'd1,
    V_MUL   = 5'd2,
    V_MAX   = 5'd3,
    V_MIN   = 5'd4,
    V_RELU  = 5'd5,
    V_SRA   = 5'd6,   // shift by imm
    V_SAT8  = 5'd7,   // saturate to int8 (precision conversion)
    V_MOV   = 5'd8
  } vop_e;

  // CSR numbers (csr field of the config form)
  localparam logic [4:0] CSR_CORE_ID    = 5'd0;   // read-only
  localparam logic [4:0] CSR_CLUSTER_ID = 5'd1;   // read-only
  localparam logic [4:0] CSR_CORE_TYPE  = 5'd2;   // read-only: 0 CC, 1 MC
  localparam logic [4:0] CSR_MROWS      = 5'd3;   // M of GEMM / number of vectors
  localparam logic [4:0] CSR_STRIDE     = 5'd4;   // matrix row stride (bytes)
  localparam logic [4:0] CSR_VROW       = 5'd5;   // CC: matrix row used by vector ops
  localparam logic [4:0] CSR_PR_K       = 5'd6;   // MC: pruner k
  localparam logic [4:0] CSR_PR_N       = 5'd7;   // MC: last n (read-only)
  localparam logic [4:0] CSR_PR_SRC     = 5'd8;   // MC: DRAM base of W
  localparam logic [4:0] CSR_PR_SSTR    = 5'd9;   // MC: DRAM row stride of W
  localparam logic [4:0] CSR_PR_DST     = 5'd10;  // MC: local base of W'
  localparam logic [4:0] CSR_PR_DSTR    = 5'd11;  // MC: local stride of W'
  localparam logic [4:0] CSR_PR_INDEX   = 5'd12;  // MC: index register (read-only)
  localparam logic [4:0] CSR_CYCLES     = 5'd13;  // cycles of the last instruction

  // Shared ACU
  typedef enum logic [2:0] {
    ACU_MUL = 3'd0, ACU_MULH = 3'd1, ACU_MULHSU = 3'd2, ACU_MULHU = 3'd3,
    ACU_DIV = 3'd4, ACU_DIVU = 3'd5, ACU_REM = 3'd6, ACU_REMU = 3'd7
  } acu_op_e;

  typedef struct packed {
    acu_op_e     op;
    logic [31:0] a;
    logic [31:0] b;
  } acu_req_t;

  // Instruction word builders, used by testbenches and software models
  function automatic logic [31:0] enc_mm(func_e f, logic [1:0] uop, logic [2:0] ms2,
                                         logic [2:0] ms1, logic [2:0] md, logic [1:0] size);
    return {f, uop, 1'b0, ms2, ms1, md, 3'd0, size, 3'd0, OPC_CC};
  endfunction

  function automatic logic [31:0] enc_mv(func_e f, logic [1:0] uop, logic [4:0] vs1,
                                         logic [4:0] rs1, logic [2:0] func3, logic [4:0] vd,
                                         logic [6:0] opc);
    return {f, uop, vs1, rs1, func3, vd, opc};
  endfunction

  function automatic logic [31:0] enc_cfg(func_e f, logic [4:0] csr, logic [6:0] opc);
    return {f, 2'd0, 5'd0, csr, 3'd0, 2'd0, 3'd0, opc};
  endfunction

endpackage
