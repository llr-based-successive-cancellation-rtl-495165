// llr_pe: one processing element of an SC decoder core.
//
// Computes, in one combinational step, either the min-sum check-node update
//   f~(a, b) = sign(a) * sign(b) * min(|a|, |b|)
// or the variable-node update
//   g(a, b, u) = (-1)^u * a + b.
// Both follow the SC update rules of the LLR-domain decoder (f~ is the
// min-sum approximation of f-). Inputs and output are Q-bit two's complement
// LLRs; the output is saturated to +-(2^(Q-1)-1), which is this design's
// choice (the quantiser bound 2^(Q-1)-1 per step comes from the paper's
// metric-width argument). A zero input gives f~ = 0.
module llr_pe #(
  parameter int Q = 6
) (
  input  logic signed [Q-1:0] alpha,
  input  logic signed [Q-1:0] beta,
  input  logic                u,
  input  logic                is_g,
  output logic signed [Q-1:0] result
);
  import scl_pkg::*;

  logic signed [Q:0]   a_ext, b_ext;
  logic        [Q:0]   mag_a, mag_b, mag_min;
  logic signed [Q+1:0] g_sum;
  logic signed [31:0]  wide;

  always_comb begin
    a_ext   = {alpha[Q-1], alpha};
    b_ext   = {beta[Q-1], beta};
    mag_a   = alpha[Q-1] ? (Q+1)'(-a_ext) : (Q+1)'(a_ext);
    mag_b   = beta[Q-1]  ? (Q+1)'(-b_ext) : (Q+1)'(b_ext);
    mag_min = (mag_a < mag_b) ? mag_a : mag_b;
    g_sum   = u ? ((Q+2)'(b_ext) - (Q+2)'(a_ext)) : ((Q+2)'(b_ext) + (Q+2)'(a_ext));
    if (is_g) begin
      wide = 32'(g_sum);
    end else if (alpha[Q-1] ^ beta[Q-1]) begin
      wide = -$signed({1'b0, 31'(mag_min)});
    end else begin
      wide = $signed({1'b0, 31'(mag_min)});
    end
    result = Q'(sat_llr(wide, Q));
  end
endmodule
