// act_pruner: activation-aware weight pruner of a memory-centric core.
//
// Runs one step of the paper's layer-wise dynamic Top-k pruning on a core's
// local slice vs of the activation vector:
//   Top-k engine  finds max|vs| and marks in the index register the k
//                 channels of largest magnitude (ties: lower channel first);
//   th-mask       counts n, the channels with |vs[i]| > max/t (t = 16,
//                 a right shift by T_SHIFT = 4), and lowers k to n if n < k,
//                 so k only shrinks with layer depth; software writes k
//                 (k_set) to the full width d at the first layer;
//   mask + aggr.  packs the kept values to the front of vd (rest zero), so
//                 the CIM macro sees only the kept channels;
//   addr gen      emits, one per cycle, a gather entry for each kept channel
//                 i in channel order: source src_base + i*src_stride (the
//                 DRAM row of W for that channel) and destination
//                 dst_base + j*dst_stride (the j-th kept row's place in the
//                 CIM macro), so pruned rows are never fetched.
//
// Timing: start in cycle t (while idle) registers index, vd, n and the new k
// at the end of cycle t; gather entries follow from cycle t+1 under a
// valid/ready handshake; done pulses in the cycle after the last entry is
// accepted (in cycle t+2 if nothing is kept or gather is off).
// The Top-k / th-mask / aggregation / address-generator structure and t = 16
// follow the paper; the rank-counting selection, tie rule, absolute-value
// magnitudes and the address formula are this design's choices.
module act_pruner
  import edgemm_pkg::*;
#(
  parameter int unsigned VLEN    = 32,
  parameter int unsigned T_SHIFT = 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic                          gather_en,
  input  logic signed [VLEN-1:0][31:0]  vs,
  input  logic                          k_set,
  input  logic [7:0]                    k_wdata,
  input  logic [31:0]                   src_base,
  input  logic [31:0]                   src_stride,
  input  logic [31:0]                   dst_base,
  input  logic [31:0]                   dst_stride,
  output logic signed [VLEN-1:0][31:0]  vd,
  output logic [VLEN-1:0]               index,
  output logic [7:0]                    n_count,
  output logic [7:0]                    k,
  output logic                          busy,
  output logic                          done,
  output logic                          g_valid,
  output gather_t                       g_entry,
  input  logic                          g_ready
);
  localparam int unsigned IW = $clog2(VLEN);

  // ---------------- Top-k engine and th-mask (combinational) ----------
  logic [31:0]      mag [VLEN];
  logic [31:0]      vmax;
  logic [VLEN-1:0]  sel;
  logic [7:0]       n_c;
  logic signed [VLEN-1:0][31:0] packed_v;

  always_comb begin
    vmax = '0;
    for (int i = 0; i < VLEN; i++) begin
      mag[i] = vs[i][31] ? 32'(-vs[i]) : 32'(vs[i]);
      if (mag[i] > vmax) vmax = mag[i];
    end
    n_c = '0;
    for (int i = 0; i < VLEN; i++)
      if (mag[i] > (vmax >> T_SHIFT)) n_c = n_c + 1'b1;
    for (int i = 0; i < VLEN; i++) begin
      int unsigned rank;
      rank = 0;
      for (int j = 0; j < VLEN; j++)
        if (mag[j] > mag[i] || (mag[j] == mag[i] && j < i)) rank++;
      sel[i] = (rank < int'(k));
    end
    // mask and aggregate
    packed_v = '0;
    begin
      int unsigned pos;
      pos = 0;
      for (int i = 0; i < VLEN; i++)
        if (sel[i]) begin
          packed_v[pos[IW-1:0]] = vs[i];
          pos++;
        end
    end
  end

  // ---------------- registers ----------------------------------------
  logic [VLEN-1:0] left_q;
  logic [7:0]      j_q;
  logic            run_q;
  logic [IW-1:0]   ch;      // lowest channel still to emit

  always_comb begin
    ch = '0;
    for (int i = VLEN - 1; i >= 0; i--)
      if (left_q[i]) ch = i[IW-1:0];
  end

  assign busy    = run_q;
  assign g_valid = run_q && (left_q != '0);
  assign g_entry.src = src_base + 32'(ch) * src_stride;
  assign g_entry.dst = dst_base + 32'(j_q) * dst_stride;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vd      <= '0;
      index   <= '0;
      n_count <= '0;
      k       <= 8'(VLEN);
      left_q  <= '0;
      j_q     <= '0;
      run_q   <= 1'b0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      if (k_set && !run_q) k <= k_wdata;
      if (start && !run_q) begin
        vd      <= packed_v;
        index   <= sel;
        n_count <= n_c;
        if (n_c < k) k <= n_c;
        left_q  <= gather_en ? sel : '0;
        j_q     <= '0;
        run_q   <= 1'b1;
      end else if (run_q) begin
        if (left_q == '0) begin
          run_q <= 1'b0;
          done  <= 1'b1;
        end else if (g_ready) begin
          left_q[ch] <= 1'b0;
          j_q        <= j_q + 1'b1;
          if (left_q == (VLEN'(1) << ch)) begin
            run_q <= 1'b0;
            done  <= 1'b1;
          end
        end
      end
    end
  end

  a_k_never_grows: assert property (@(posedge clk) disable iff (!rst_n)
    !k_set && !$past(k_set) |-> k <= $past(k));
endmodule
