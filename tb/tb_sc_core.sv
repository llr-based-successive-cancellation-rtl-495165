// tb_sc_core: random test of the P-lane decoder core at its default width.
//
// Random LLR vectors and partial-sum vectors are applied with the f and g
// functions; every lane must equal the behavioural min-sum update. The core
// is combinational (one operation per clock cycle in the decoder).
module tb_sc_core;
  import scl_pkg::*;
  import scl_ref_pkg::*;
  localparam int P = 64;
  localparam int Q = 6;
  logic signed [Q-1:0] alpha [P], beta [P], result [P];
  logic [P-1:0] u;
  op_func_e func;
  int checks = 0, failures = 0;

  sc_core #(.P(P), .Q(Q)) dut (.alpha, .beta, .u, .func, .result);

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int p = 0; p < P; p++) begin
        alpha[p] = Q'($urandom);
        beta[p]  = Q'($urandom);
        u[p]     = 1'($urandom);
      end
      func = (t % 2 == 0) ? OP_F : OP_G;
      #1;
      for (int p = 0; p < P; p++) begin
        automatic int expv = (func == OP_G) ? g_fn(int'(alpha[p]), int'(beta[p]), u[p], Q)
                                            : f_ms(int'(alpha[p]), int'(beta[p]), Q);
        checks++;
        if (int'(result[p]) != expv) begin
          failures++;
          if (failures < 10) $display("t=%0d lane %0d: got %0d expected %0d", t, p, result[p], expv);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
