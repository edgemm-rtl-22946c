// axi_xbar: N-to-1 crossbar level on the path from the clusters to DRAM.
//
// Instanced once per group (its four clusters) and once at system level (the
// four groups). Requests use a valid/ready handshake; a round-robin arbiter
// forwards one per cycle and appends the master's index to the low bits of
// the request ID (the ID is shifted left by log2(N)). Responses carry the ID
// back; the crossbar strips the low bits and routes the response to that
// master in the same cycle, without back-pressure (masters bound their
// outstanding requests and always accept responses).
// The paper names hierarchical AXI crossbars; the single request channel
// and single response channel used here in place of AXI's five channels are
// this design's simplification.
module axi_xbar
  import edgemm_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N-1:0]     m_valid,
  input  mem_req_t [N-1:0] m_req,
  output logic [N-1:0]     m_ready,
  output logic [N-1:0]     m_rvalid,
  output mem_rsp_t         m_rsp,
  output logic             s_valid,
  output mem_req_t         s_req,
  input  logic             s_ready,
  input  logic             s_rvalid,
  input  mem_rsp_t         s_rsp
);
  localparam int unsigned SW = (N > 1 ? $clog2(N) : 1);

  logic [N-1:0]  gnt;
  logic [SW-1:0] idx;
  logic          any;

  rr_arbiter #(.N(N)) u_arb (
    .clk, .rst_n, .req(m_valid), .advance(s_ready), .gnt, .idx, .any
  );

  always_comb begin
    s_valid  = any;
    s_req    = m_req[idx];
    s_req.id = {m_req[idx].id[ID_W-SW-1:0], idx};
    m_ready  = s_ready ? gnt : '0;
  end

  always_comb begin
    m_rvalid = '0;
    m_rvalid[s_rsp.id[SW-1:0]] = s_rvalid;
    m_rsp    = s_rsp;
    m_rsp.id = ID_W'(s_rsp.id >> SW);
  end

  // A master's request must stay stable while it waits for ready.
  for (genvar i = 0; i < N; i++) begin : g_chk
    a_stable: assert property (@(posedge clk) disable iff (!rst_n)
      m_valid[i] && !m_ready[i] |=> m_valid[i] && $stable(m_req[i]));
  end
endmodule
