// sc_core: one semi-parallel SC decoder core (the datapath of one list path).
//
// P processing elements work side by side on one word of the LLR memories:
// lane p combines alpha[p] (upper half of the parent node) and beta[p]
// (lower half) into one LLR of the child node, with the f~ or g rule chosen
// by `func` for the whole word, and with u[p] as the partial sum for g.
// Lanes are independent; a node with fewer than P LLRs simply leaves the
// upper lanes unused. Purely combinational: the controller reads the two
// operand words, the core computes, and the result is written back in the
// same clock cycle. The L cores of the decoder run in lock step.
//
// The core count (one per path) and the PE count P follow the paper's
// architecture; the core insides (P identical PEs) are this design's
// simplest reading of the semi-parallel SC decoder it builds on.
module sc_core #(
  parameter int P = 64,
  parameter int Q = 6
) (
  input  logic signed [Q-1:0] alpha  [P],
  input  logic signed [Q-1:0] beta   [P],
  input  logic        [P-1:0] u,
  input  scl_pkg::op_func_e   func,
  output logic signed [Q-1:0] result [P]
);
  for (genvar p = 0; p < P; p++) begin : g_pe
    llr_pe #(.Q(Q)) u_pe (
      .alpha (alpha[p]),
      .beta  (beta[p]),
      .u     (u[p]),
      .is_g  (func == scl_pkg::OP_G),
      .result(result[p])
    );
  end
endmodule
