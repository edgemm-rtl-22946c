// tb_vector_unit: random operands for every vector operation, compared with
// a software model of each lane.
module tb_vector_unit;
  import edgemm_pkg::*;
  localparam int L = 16;
  int checks = 0, failures = 0;
  vop_e op;
  logic signed [L-1:0][31:0] a, b, y;
  logic [4:0] imm;
  vector_unit #(.LANES(L), .EW(32)) dut (.*);

  function automatic logic signed [31:0] model(vop_e o, logic signed [31:0] x, logic signed [31:0] z, logic [4:0] s);
    case (o)
      V_ADD: return x + z;
      V_SUB: return x - z;
      V_MUL: return 32'(x * z);
      V_MAX: return x > z ? x : z;
      V_MIN: return x < z ? x : z;
      V_RELU: return x < 0 ? 0 : x;
      V_SRA: return x >>> s;
      V_SAT8: return x > 127 ? 127 : x < -128 ? -128 : x;
      default: return x;
    endcase
  endfunction

  initial begin
    for (int it = 0; it < 300; it++) begin
      op = vop_e'(it % 9);
      imm = 5'($urandom);
      for (int i = 0; i < L; i++) begin
        a[i] = (it % 3 == 0) ? 32'(signed'(16'($urandom))) : 32'($urandom);
        b[i] = 32'($urandom);
      end
      #1;
      for (int i = 0; i < L; i++) begin
        checks++;
        if (y[i] !== model(op, a[i], b[i], imm)) begin
          failures++;
          $display("op %s lane %0d a=%0d b=%0d got %0d", op.name(), i, signed'(a[i]), signed'(b[i]), signed'(y[i]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
