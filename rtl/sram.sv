// sram: single-port memory array of 512-bit lines with byte enables.
//
// Used for the compute-centric cluster's data memory (32 kB by default, as
// in the paper's configuration table), the memory-centric cluster's shared
// buffer and the instruction memories. A request with en=1 is performed at
// the clock edge; read data is valid in the next cycle (one-cycle latency).
// The byte address is taken modulo the size. Written as a plain array; the
// chip uses foundry memory macros, whose banking the paper does not give.
//
// Lint: the request ID and the address bits outside the line index are
// unused.
module sram
  import edgemm_pkg::*;
#(
  parameter int unsigned DEPTH = 512   // lines of 64 bytes: 32 kB
) (
  input  logic              clk,
  input  logic              en,
  input  mem_req_t          req,
  output logic [LINE_W-1:0] rdata
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [LINE_W-1:0] mem [DEPTH];
  logic [AW-1:0]     idx;

  assign idx = req.addr[$clog2(LINE_B) +: AW];

  always_ff @(posedge clk) begin
    if (en) begin
      if (req.we) begin
        for (int b = 0; b < LINE_B; b++)
          if (req.strb[b]) mem[idx][8*b +: 8] <= req.wdata[8*b +: 8];
      end else begin
        rdata <= mem[idx];
      end
    end
  end
endmodule
