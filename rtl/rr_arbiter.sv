// rr_arbiter: round-robin arbiter.
//
// Grants one of N requesters per cycle. The search starts one past the last
// requester that was granted with advance=1, so every requester is served
// within N grants. gnt is one-hot and combinational; idx is its index.
//
// Lint: only the low bits of the loop index are used.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         req,
  input  logic                 advance,   // the granted request was taken
  output logic [N-1:0]         gnt,
  output logic [(N > 1 ? $clog2(N) : 1)-1:0] idx,
  output logic                 any
);
  logic [(N > 1 ? $clog2(N) : 1)-1:0] last_q;

  always_comb begin
    gnt = '0;
    idx = '0;
    any = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned j;
      j = (int'(last_q) + k) % N;
      if (!any && req[j]) begin
        any    = 1'b1;
        gnt[j] = 1'b1;
        idx    = j[(N > 1 ? $clog2(N) : 1)-1:0];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)             last_q <= (N > 1 ? $clog2(N) : 1)'(N - 1);
    else if (any && advance) last_q <= idx;
  end
endmodule
