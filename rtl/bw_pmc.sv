// bw_pmc: performance monitoring counter with bandwidth budget throttling.
//
// Implements the paper's throttling-based bandwidth allocation for one
// cluster: within every interval of T cycles the counter d accumulates the
// DRAM request beats the cluster's DMA issues; while d > B, 'allow' is low
// and further requests are blocked, until the interval elapses and d is
// reset. As in the paper's wording (block once d > B), up to B+1 beats pass
// per interval. An interval of 0 is
// treated as "no throttling". The unit of d (one 64-byte beat) and the
// counter width are this design's choices.
//
// A beat in the last cycle of an interval is counted in the next one.
// Timing: 'allow' is combinational from the registered d, so a beat issued
// in cycle t is seen by the check in cycle t+1.
module bw_pmc #(
  parameter int unsigned CW = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] budget,    // B
  input  logic [CW-1:0] interval,  // T, cycles; 0 disables throttling
  input  logic          beat,      // one request issued this cycle
  output logic          allow,
  output logic [CW-1:0] usage,     // d
  output logic [31:0]   blocked    // cycles with allow = 0 (statistics)
);
  logic [CW-1:0] t_q;

  assign allow = (interval == '0) || (usage <= budget);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      t_q     <= '0;
      usage   <= '0;
      blocked <= '0;
    end else begin
      if (!allow) blocked <= blocked + 1;
      if (interval != '0 && t_q >= interval - 1'b1) begin
        t_q   <= '0;
        usage <= CW'(beat);
      end else begin
        t_q <= t_q + 1'b1;
        if (beat && usage != '1) usage <= usage + 1'b1;
      end
    end
  end
endmodule
