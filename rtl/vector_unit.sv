// vector_unit: lane-parallel element-wise unit of both coprocessors.
//
// Applies one operation to LANES signed elements at once: a row of a matrix
// register in the compute-centric core, a vector register in the
// memory-centric core. The paper states only that the unit runs a subset of
// RISC-V vector instructions for activation functions and precision
// conversion; the operations below (add, sub, mul, max, min, ReLU,
// arithmetic shift right by an immediate, saturation to int8, move) are this
// design's choice. Purely combinational: the coprocessor registers y.
module vector_unit
  import edgemm_pkg::*;
#(
  parameter int unsigned LANES = 16,
  parameter int unsigned EW    = 32
) (
  input  vop_e                        op,
  input  logic signed [LANES-1:0][EW-1:0] a,
  input  logic signed [LANES-1:0][EW-1:0] b,
  input  logic [4:0]                  imm,
  output logic signed [LANES-1:0][EW-1:0] y
);
  localparam logic signed [EW-1:0] SAT_HI = EW'(127);
  localparam logic signed [EW-1:0] SAT_LO = -EW'(128);

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      logic signed [EW-1:0] ai, bi;  // packed-array elements are unsigned
      ai = signed'(a[i]);
      bi = signed'(b[i]);
      unique case (op)
        V_ADD:  y[i] = ai + bi;
        V_SUB:  y[i] = ai - bi;
        V_MUL:  y[i] = EW'(ai * bi);
        V_MAX:  y[i] = (ai > bi) ? ai : bi;
        V_MIN:  y[i] = (ai < bi) ? ai : bi;
        V_RELU: y[i] = (ai < 0) ? '0 : ai;
        V_SRA:  y[i] = ai >>> imm;
        V_SAT8: y[i] = (ai > SAT_HI) ? SAT_HI : (ai < SAT_LO) ? SAT_LO : ai;
        V_MOV:  y[i] = ai;
        default: y[i] = ai;
      endcase
    end
  end
endmodule
