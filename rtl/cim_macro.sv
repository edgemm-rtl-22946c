// cim_macro: digital compute-in-memory macro of a memory-centric core.
//
// C columns (cim_column) share a controller, a wordline decoder and the
// write/read circuits. A GEMV multiplies an R-element activation vector by
// the R x C weight tile stored at wordline 'wl' (one weight per subarray and
// column): the controller broadcasts the activation bit-serially, one bit of
// all R activations per cycle, for W cycles; each column's shift-and-
// accumulator then holds its dot product. An M-row GEMM repeats this for
// nvec activation vectors against the same weights; the result of one vector
// is delivered while the next one's first bit is processed, so nvec vectors
// take nvec*W + 1 cycles (the paper's Eq. (3), W+1 for a GEMV).
//
// Interface: start/nvec/wl begin an operation when idle; the macro asks for
// vector act_idx and reads 'act' combinationally in the same cycle;
// res_valid/res_idx/res deliver each result vector for one cycle; busy spans
// all nvec*W+1 cycles. The 512-bit write/read port (mem_*) reaches four
// consecutive word addresses (line * 4 + j, word address = subarray * M +
// wordline); within a line, word j, column c is bits [(j*C + c)*N +: N]. It
// is ready only while the macro is not computing. Read data follows one
// cycle after the access. The port width and the stall rule are this
// design's choices.
//
// Lint: the request ID and address bits outside the line index are unused.
module cim_macro
  import edgemm_pkg::*;
#(
  parameter int unsigned R = 32,
  parameter int unsigned C = 16,
  parameter int unsigned M = 128,
  parameter int unsigned N = 8,
  parameter int unsigned W = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // compute
  input  logic                         start,
  input  logic [7:0]                   nvec,
  input  logic [$clog2(M)-1:0]         wl,
  input  logic [R-1:0][W-1:0]          act,
  output logic [7:0]                   act_idx,
  output logic                         res_valid,
  output logic [7:0]                   res_idx,
  output logic signed [C-1:0][31:0]    res,
  output logic                         busy,
  // write / read circuits
  input  logic                         mem_valid,
  input  mem_req_t                     mem_req,
  output logic                         mem_ready,
  output logic                         mem_rvalid,
  output logic [LINE_W-1:0]            mem_rdata
);
  localparam int unsigned K  = LINE_W / (C * N);   // words per line
  localparam int unsigned LW = $clog2(R * M / K);

  logic                    run_q;
  logic [$clog2(W)-1:0]    bit_q;
  logic [7:0]              vec_q, nvec_q;
  logic [$clog2(M)-1:0]    wl_q;
  logic                    pend_q;

  logic                    bit_en, first, msb;
  logic [R-1:0]            act_bits;
  logic [$clog2(W)-1:0]    bpos;

  assign bit_en  = run_q;
  assign first   = (bit_q == 0);
  assign msb     = first;
  assign bpos    = $clog2(W)'(W - 1) - bit_q;   // MSB first
  assign act_idx = vec_q;

  always_comb
    for (int r = 0; r < R; r++) act_bits[r] = act[r][bpos];

  assign busy      = run_q || pend_q;
  assign res_valid = pend_q;
  assign mem_ready = !busy && !start;

  logic mem_fire;
  assign mem_fire = mem_valid && mem_ready;

  logic [LW-1:0] line;
  assign line = mem_req.addr[$clog2(LINE_B) +: LW];

  for (genvar c = 0; c < C; c++) begin : g_col
    logic [K-1:0][N-1:0] wd, rd;
    logic [K-1:0]        wm;
    for (genvar j = 0; j < K; j++) begin : g_w
      assign wd[j] = mem_req.wdata[(j*C + c)*N +: N];
      assign wm[j] = &mem_req.strb[(j*C + c)*N/8 +: (N+7)/8];
      assign mem_rdata[(j*C + c)*N +: N] = rd[j];
    end
    cim_column #(.R(R), .M(M), .N(N), .K(K), .AW(32)) u_col (
      .clk, .rst_n,
      .we(mem_fire && mem_req.we), .re(mem_fire && !mem_req.we), .line,
      .wmask(wm), .wdata(wd), .rdata(rd),
      .wl(wl_q), .act_bits, .bit_en, .first, .msb, .acc(res[c])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q      <= 1'b0;
      bit_q      <= '0;
      vec_q      <= '0;
      nvec_q     <= '0;
      wl_q       <= '0;
      pend_q     <= 1'b0;
      res_idx    <= '0;
      mem_rvalid <= 1'b0;
    end else begin
      mem_rvalid <= mem_fire;
      pend_q     <= 1'b0;
      if (!busy && start && nvec != 0) begin
        run_q  <= 1'b1;
        bit_q  <= '0;
        vec_q  <= '0;
        nvec_q <= nvec;
        wl_q   <= wl;
      end else if (run_q) begin
        if (bit_q == $clog2(W)'(W - 1)) begin
          bit_q   <= '0;
          pend_q  <= 1'b1;
          res_idx <= vec_q;
          vec_q   <= vec_q + 1'b1;
          if (vec_q + 1'b1 == nvec_q) run_q <= 1'b0;
        end else begin
          bit_q <= bit_q + 1'b1;
        end
      end
    end
  end

  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n) mem_fire |-> !busy);
endmodule
