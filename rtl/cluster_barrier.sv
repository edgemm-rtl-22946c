// cluster_barrier: hardware barrier for core synchronization in a cluster.
//
// Each core raises arrive[i] (a pulse or a level) when it reaches the
// barrier; the arrival is remembered. When all N cores have arrived (the
// last arrival may be in the current cycle), 'release' pulses for every
// core in the next cycle and the barrier re-arms. The paper states only that
// core synchronization is supported; this mechanism is this design's choice.
module cluster_barrier #(
  parameter int unsigned N = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] arrive,
  output logic [N-1:0] release_o,
  output logic [31:0]  count      // completed barriers
);
  logic [N-1:0] arrived_q;
  logic [N-1:0] now;
  assign now = arrived_q | arrive;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arrived_q <= '0;
      release_o <= '0;
      count     <= '0;
    end else if (&now) begin
      arrived_q <= '0;
      release_o <= '1;
      count     <= count + 1;
    end else begin
      arrived_q <= now;
      release_o <= '0;
    end
  end
endmodule
