// cim_column: one column of the digital compute-in-memory macro.
//
// A column holds R subarrays; each subarray stores M weights of N bits (the
// paper's M x N 6T bit-cells) and owns local compute cells. During a GEMV the
// macro broadcasts one bit of each of the R activations per cycle, bit r to
// subarray r. Each subarray reads the weight at wordline 'wl' and its compute
// cells form the 1-bit x N-bit product (the weight or zero); an adder tree
// sums the R products and the shift-and-accumulator folds the sums of
// successive bits: acc = 2*acc + s, starting from the most significant bit,
// whose sum enters with negative sign (two's complement activations). After
// W bit-cycles acc holds sum_r a[r] * w[r][wl].
//
// Interface: a K-word write/read port (K consecutive word addresses
// line*K .. line*K+K-1, word address = subarray*M + wordline) with one-cycle
// read latency; compute inputs act_bits/bit_en/first/msb, result 'acc'
// registered. The column structure follows the paper's figure; bit order,
// signedness and the K-word port are this design's choices. The bit-cells
// are modelled as a logic array.
module cim_column #(
  parameter int unsigned R  = 32,
  parameter int unsigned M  = 128,
  parameter int unsigned N  = 8,
  parameter int unsigned K  = 4,
  parameter int unsigned AW = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // write / read port
  input  logic                         we,
  input  logic                         re,
  input  logic [$clog2(R*M/K)-1:0]     line,
  input  logic [K-1:0]                 wmask,
  input  logic [K-1:0][N-1:0]          wdata,
  output logic [K-1:0][N-1:0]          rdata,
  // compute
  input  logic [$clog2(M)-1:0]         wl,
  input  logic [R-1:0]                 act_bits,
  input  logic                         bit_en,
  input  logic                         first,
  input  logic                         msb,
  output logic signed [AW-1:0]         acc
);
  logic [N-1:0] sub [R][M];

  // word address j of a line -> subarray / wordline
  function automatic int unsigned sub_of(int unsigned w);
    return w / M;
  endfunction

  always_ff @(posedge clk) begin
    for (int j = 0; j < K; j++) begin
      int unsigned w;
      w = int'(line) * K + j;
      if (we && wmask[j]) sub[sub_of(w)][w % M] <= wdata[j];
      if (re)             rdata[j] <= sub[sub_of(w)][w % M];
    end
  end

  // local compute cells + adder tree
  logic signed [AW-1:0] tree_sum;
  always_comb begin
    tree_sum = '0;
    for (int r = 0; r < R; r++)
      if (act_bits[r]) tree_sum = tree_sum + AW'(signed'(sub[r][wl]));
  end

  // shift-and-accumulator
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (bit_en) acc <= (first ? '0 : (acc <<< 1)) + (msb ? -tree_sum : tree_sum);
  end
endmodule
