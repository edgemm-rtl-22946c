// dram_model: behavioural model of the DRAM controller and DRAM.
//
// Not synthesizable; used only by testbenches. Accepts one 64-byte line
// request per cycle when 'ready' (ready is low on a pseudo-random 1 in 8
// cycles if STALLS is set), and answers every request, reads with data and
// writes with an acknowledge, in order after LATENCY cycles, echoing the
// request ID. Storage is a sparse associative array of lines; lines never
// written read as a pattern derived from their address, so tests can
// predict them: word j of line L is {L[23:0], j[7:0]}.
module dram_model
  import edgemm_pkg::*;
#(
  parameter int unsigned LATENCY = 10,
  parameter bit          STALLS  = 1'b1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     valid,
  input  mem_req_t req,
  output logic     ready,
  output logic     rvalid,
  output mem_rsp_t rsp
);
  logic [LINE_W-1:0] mem [logic [31:0]];
  typedef struct { int unsigned due; mem_rsp_t r; } pend_t;
  pend_t       q [$];
  int unsigned now;
  int unsigned nreq;

  function automatic logic [LINE_W-1:0] pattern(logic [31:0] line);
    logic [LINE_W-1:0] v;
    for (int j = 0; j < LINE_W / 32; j++) v[32*j +: 32] = {line[23:0], 8'(j)};
    return v;
  endfunction

  function automatic logic [LINE_W-1:0] peek(logic [31:0] byte_addr);
    logic [31:0] l;
    l = byte_addr >> 6;
    return mem.exists(l) ? mem[l] : pattern(l);
  endfunction

  task automatic poke(logic [31:0] byte_addr, logic [LINE_W-1:0] d);
    mem[byte_addr >> 6] = d;
  endtask

  always_comb ready = !STALLS || (((now * 7) % 8) != 3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      now    <= 0;
      rvalid <= 1'b0;
      rsp    <= '0;
      nreq   <= 0;
      q.delete();
    end else begin
      now    <= now + 1;
      rvalid <= 1'b0;
      if (valid && ready) begin
        pend_t p;
        logic [31:0] l;
        l = req.addr >> 6;
        p.due = now + LATENCY;
        p.r.id = req.id;
        if (req.we) begin
          logic [LINE_W-1:0] old;
          old = mem.exists(l) ? mem[l] : pattern(l);
          for (int b = 0; b < LINE_B; b++) if (req.strb[b]) old[8*b +: 8] = req.wdata[8*b +: 8];
          mem[l] = old;
          p.r.rdata = '0;
        end else begin
          p.r.rdata = mem.exists(l) ? mem[l] : pattern(l);
        end
        q.push_back(p);
        nreq <= nreq + 1;
      end
      if (q.size() > 0 && q[0].due <= now) begin
        rvalid <= 1'b1;
        rsp    <= q[0].r;
        void'(q.pop_front());
      end
    end
  end
endmodule
