// tb_llr_pe: exhaustive test of one processing element.
//
// Every (alpha, beta, u) combination of the Q = 6 bit input range is applied
// in both modes and the result compared with the min-sum update
// f~(a,b) = sign(a)sign(b)min(|a|,|b|) and g(a,b,u) = (-1)^u a + b, both
// saturated to +-(2^(Q-1)-1). The PE is combinational (0 cycles).
module tb_llr_pe;
  import scl_ref_pkg::*;
  localparam int Q = 6;
  logic signed [Q-1:0] alpha, beta, result;
  logic u, is_g;
  int checks = 0, failures = 0;

  llr_pe #(.Q(Q)) dut (.alpha, .beta, .u, .is_g, .result);

  initial begin
    #100000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int a = -(1 << (Q - 1)); a < (1 << (Q - 1)); a++)
      for (int b = -(1 << (Q - 1)); b < (1 << (Q - 1)); b++)
        for (int m = 0; m < 4; m++) begin
          automatic int expv;
          alpha = Q'(a); beta = Q'(b); u = m[0]; is_g = m[1];
          #1;
          expv = is_g ? g_fn(a, b, u, Q) : f_ms(a, b, Q);
          checks++;
          if (int'(result) != expv) begin
            failures++;
            if (failures < 10)
              $display("a=%0d b=%0d u=%0d g=%0d: got %0d expected %0d", a, b, u, is_g, result, expv);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
