// local_bus: the cluster bus, sharing one single-cycle memory among masters.
//
// N masters present requests with a valid/ready handshake. A round-robin
// arbiter grants one per cycle (ready is the grant); the memory performs it
// at the clock edge and the bus returns a response to the granted master one
// cycle later (read data for reads, an acknowledge for writes), which the
// master must accept. Throughput: one access per cycle over all masters.
// The paper only names the cluster bus; this arbitration is the design's
// own, the simplest that lets the cores and the DMA share a memory.
module local_bus
  import edgemm_pkg::*;
#(
  parameter int unsigned N = 5
) (
  input  logic              clk,
  input  logic              rst_n,
  // masters
  input  logic [N-1:0]      m_valid,
  input  mem_req_t [N-1:0]  m_req,
  output logic [N-1:0]      m_ready,
  output logic [N-1:0]      m_rvalid,
  output logic [LINE_W-1:0] m_rdata,
  // memory
  output logic              s_en,
  output mem_req_t          s_req,
  input  logic              s_ready,     // memory can accept this cycle
  input  logic [LINE_W-1:0] s_rdata
);
  logic [N-1:0]         gnt;
  logic [(N > 1 ? $clog2(N) : 1)-1:0] idx;
  logic                 any;
  logic [N-1:0]         pend_q;

  rr_arbiter #(.N(N)) u_arb (
    .clk, .rst_n, .req(m_valid), .advance(s_ready), .gnt, .idx, .any
  );

  assign s_en    = any && s_ready;
  assign s_req   = m_req[idx];
  assign m_ready = s_ready ? gnt : '0;
  assign m_rvalid = pend_q;
  assign m_rdata  = s_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pend_q <= '0;
    else        pend_q <= s_en ? gnt : '0;
  end
endmodule
