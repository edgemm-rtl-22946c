// shared_acu: auxiliary compute unit shared by the host cores of a cluster.
//
// Holds the 32-bit multiplier and divider that the paper moves out of the
// small host cores ("uncommon calculations"). N cores request operations
// (RISC-V M-extension semantics: MUL, MULH, MULHSU, MULHU, DIV, DIVU, REM,
// REMU, including the division-by-zero and overflow results of the RISC-V
// specification) with valid/ready; a round-robin arbiter admits one at a
// time. A multiplication answers in the next cycle; a division iterates one
// quotient bit per cycle and answers after 33 cycles. The answer appears on
// rsp_data with rsp_valid[i] for the requesting core for one cycle.
// Sharing follows the paper; latencies and the iterative divider are this
// design's choices.
//
// Lint: the top two bits of the 66-bit signed product are never needed (MULH*
// take bits 63:32).
module shared_acu
  import edgemm_pkg::*;
#(
  parameter int unsigned N = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N-1:0]       req_valid,
  input  acu_req_t [N-1:0]   req,
  output logic [N-1:0]       req_ready,
  output logic [N-1:0]       rsp_valid,
  output logic [31:0]        rsp_data
);
  logic [N-1:0]         gnt;
  logic [$clog2(N)-1:0] idx;
  logic                 any;
  logic                 busy_q;
  logic [$clog2(N)-1:0] who_q;
  acu_req_t             r_q;
  logic [5:0]           cnt_q;
  logic [31:0]          quo_q, rem_q, div_q;
  logic                 neg_q, rneg_q;

  rr_arbiter #(.N(N)) u_arb (
    .clk, .rst_n, .req(req_valid), .advance(!busy_q), .gnt, .idx, .any
  );
  assign req_ready = busy_q ? '0 : gnt;

  // multiplication
  logic signed [65:0] prod;
  logic signed [32:0] ma, mb;
  always_comb begin
    ma = 33'(signed'({(r_q.op == ACU_MULH || r_q.op == ACU_MULHSU) && r_q.a[31], r_q.a}));
    mb = 33'(signed'({(r_q.op == ACU_MULH) && r_q.b[31], r_q.b}));
    prod = 66'(ma * mb);
  end

  logic is_div;
  assign is_div = r_q.op inside {ACU_DIV, ACU_DIVU, ACU_REM, ACU_REMU};

  // one restoring-division step
  logic [32:0] trial;
  assign trial = {rem_q, quo_q[31]} - {1'b0, div_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q    <= 1'b0;
      who_q     <= '0;
      r_q       <= '0;
      cnt_q     <= '0;
      quo_q     <= '0;
      rem_q     <= '0;
      div_q     <= '0;
      neg_q     <= 1'b0;
      rneg_q    <= 1'b0;
      rsp_valid <= '0;
      rsp_data  <= '0;
    end else begin
      rsp_valid <= '0;
      if (!busy_q) begin
        if (any) begin
          logic sgn;
          busy_q <= 1'b1;
          who_q  <= idx;
          r_q    <= req[idx];
          cnt_q  <= '0;
          sgn    = (req[idx].op == ACU_DIV) || (req[idx].op == ACU_REM);
          quo_q  <= (sgn && req[idx].a[31]) ? -req[idx].a : req[idx].a;
          div_q  <= (sgn && req[idx].b[31]) ? -req[idx].b : req[idx].b;
          rem_q  <= '0;
          neg_q  <= sgn && (req[idx].a[31] ^ req[idx].b[31]);
          rneg_q <= sgn && req[idx].a[31];
        end
      end else if (!is_div) begin
        busy_q           <= 1'b0;
        rsp_valid[who_q] <= 1'b1;
        rsp_data         <= (r_q.op == ACU_MUL) ? prod[31:0] : prod[63:32];
      end else if (cnt_q < 6'd32) begin
        cnt_q <= cnt_q + 1'b1;
        if (!trial[32]) begin
          rem_q <= trial[31:0];
          quo_q <= {quo_q[30:0], 1'b1};
        end else begin
          rem_q <= {rem_q[30:0], quo_q[31]};
          quo_q <= {quo_q[30:0], 1'b0};
        end
      end else begin
        busy_q           <= 1'b0;
        rsp_valid[who_q] <= 1'b1;
        if (r_q.b == 0)
          rsp_data <= (r_q.op inside {ACU_DIV, ACU_DIVU}) ? 32'hffff_ffff : r_q.a;
        else if (r_q.op inside {ACU_DIV, ACU_DIVU})
          rsp_data <= neg_q ? -quo_q : quo_q;
        else
          rsp_data <= rneg_q ? -rem_q : rem_q;
      end
    end
  end
endmodule
