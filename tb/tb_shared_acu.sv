// tb_shared_acu: three cores send random multiply/divide operations to the
// shared unit at once. Each answer is compared with the RISC-V M-extension
// result computed in software (including division by zero and the signed
// overflow case); the multiply latency (1 cycle) and divide latency
// (33 cycles) after acceptance are checked too.
module tb_shared_acu;
  import edgemm_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [N-1:0] req_valid, req_ready, rsp_valid;
  acu_req_t [N-1:0] req;
  logic [31:0] rsp_data;
  shared_acu #(.N(N)) dut (.*);

  function automatic logic [31:0] model(acu_req_t r);
    logic signed [63:0] ss; logic [63:0] uu; logic signed [64:0] su;
    case (r.op)
      ACU_MUL:    return r.a * r.b;
      ACU_MULH:   begin ss = 64'(signed'(r.a)) * 64'(signed'(r.b)); return ss[63:32]; end
      ACU_MULHU:  begin uu = 64'(r.a) * 64'(r.b); return uu[63:32]; end
      ACU_MULHSU: begin su = 65'(signed'(r.a)) * signed'({33'd0, r.b}); return su[63:32]; end
      ACU_DIV:    return (r.b == 0) ? 32'hffffffff : (r.a == 32'h80000000 && r.b == 32'hffffffff) ? r.a : 32'(signed'(r.a) / signed'(r.b));
      ACU_DIVU:   return (r.b == 0) ? 32'hffffffff : r.a / r.b;
      ACU_REM:    return (r.b == 0) ? r.a : (r.a == 32'h80000000 && r.b == 32'hffffffff) ? 0 : 32'(signed'(r.a) % signed'(r.b));
      default:    return (r.b == 0) ? r.a : r.a % r.b;
    endcase
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar i = 0; i < N; i++) begin : g_m
    initial begin
      acu_req_t r;
      int t0;
      req_valid[i] = 0; req[i] = '0;
      wait (rst_n);
      for (int it = 0; it < 150; it++) begin
        @(negedge clk);
        r.op = acu_op_e'($urandom_range(7));
        r.a  = $urandom;
        r.b  = (it % 10 == 0) ? 0 : (it % 10 == 1) ? 32'hffffffff : (it % 3 == 0) ? $urandom_range(1000) : $urandom;
        if (it % 10 == 1) r.a = 32'h80000000;
        req_valid[i] = 1; req[i] = r;
        do @(posedge clk); while (!req_ready[i]);
        t0 = $time;
        #1 req_valid[i] = 0;
        do @(posedge clk); while (!rsp_valid[i]);
        checks++;
        if (rsp_data !== model(r)) begin
          failures++; $display("core %0d op %s a=%h b=%h got %h exp %h", i, r.op.name(), r.a, r.b, rsp_data, model(r));
        end
        checks++;
        if (($time - t0) / 10 != ((r.op inside {ACU_MUL, ACU_MULH, ACU_MULHSU, ACU_MULHU}) ? 2 : 34)) begin
          failures++; $display("latency %0d", ($time - t0) / 10);
        end
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (checks == 2 * 150 * N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
