// sync_fifo: small synchronous FIFO with registered storage.
//
// push/pop in the same cycle are allowed. full/empty are registered-state
// based; pushing when full or popping when empty is a caller error and is
// flagged by assertions. dout shows the head entry whenever !empty.
module sync_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         full,
  output logic         empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rp_q, wp_q;

  assign empty = (count == 0);
  assign full  = (32'(count) == DEPTH);
  assign dout  = mem[rp_q];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp_q  <= '0;
      wp_q  <= '0;
      count <= '0;
    end else begin
      if (push) begin
        mem[wp_q] <= din;
        wp_q      <= (wp_q == PW'(DEPTH - 1)) ? '0 : wp_q + 1'b1;
      end
      if (pop) rp_q <= (rp_q == PW'(DEPTH - 1)) ? '0 : rp_q + 1'b1;
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
endmodule
