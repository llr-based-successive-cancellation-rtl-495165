// path_mem: the path memory, L registers of N decided bits u_hat[l].
//
// Each bit cell has an L-input multiplexer in front of it (the L x L
// crossbar), steered by the metric sorter through the commit signals:
//  * CM_INFO:   slot s takes the whole register of slot src[s] and writes
//               u[s] at the current bit index (path extension after a
//               duplication or a plain survival),
//  * CM_FROZEN: every slot writes the frozen value 0 at the bit index,
//  * CM_RESORT: slot s takes slot src[s] unchanged.
// The copy takes the single commit cycle. `bits_out` is the register of the
// path chosen by codeword selection (the output multiplexer).
// The organisation and the one-cycle crossbar copy follow the paper; the
// all-zero frozen vector is this design's assumption.
module path_mem #(
  parameter int N = 1024,
  parameter int L = 4,
  localparam int NL = $clog2(N),
  localparam int LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic                 clk,
  input  logic [NL-1:0]        bit_idx,
  input  scl_pkg::commit_kind_e commit_kind,
  input  logic [LW-1:0]        commit_src [L],
  input  logic [L-1:0]         commit_u,
  input  logic [LW-1:0]        sel,
  output logic [N-1:0]         bits_out
);
  import scl_pkg::*;

  logic [N-1:0] u_hat [L];

  always_ff @(posedge clk) begin
    for (int s = 0; s < L; s++) begin
      unique case (commit_kind)
        CM_FROZEN: u_hat[s][bit_idx] <= 1'b0;
        CM_INFO: begin
          u_hat[s]          <= u_hat[commit_src[s]];
          u_hat[s][bit_idx] <= commit_u[s];
        end
        CM_RESORT: u_hat[s] <= u_hat[commit_src[s]];
        default: ;
      endcase
    end
  end

  assign bits_out = u_hat[sel];
endmodule
