// scl_pkg: types and helpers shared by the LLR-based successive cancellation
// list (SCL) decoder.
//
// LLRs are Q-bit two's-complement numbers saturated symmetrically to
// +-(2^(Q-1)-1); path metrics are unsigned M-bit numbers that saturate at
// 2^M-1. The saturation points are a choice of this design; Q and M follow
// the quantisation used for the decoder's synthesis results (Q=6, M=8).
//
// All path-state memories (path bits, partial sums, pointers, CRC registers,
// metrics) change only through a "commit": for every path slot it names the
// slot it copies from (the L x L crossbar select) and, if a bit is decided in
// that cycle, the value of that bit. One commit happens per decided bit and
// one per re-sort at the end of a run of frozen bits.
package scl_pkg;

  // Kinds of commit.
  typedef enum logic [1:0] {
    CM_NONE   = 2'd0,  // nothing changes
    CM_FROZEN = 2'd1,  // frozen bit: every slot keeps its own state, bit = 0
    CM_INFO   = 2'd2,  // information bit: slot k copies slot src[k], bit = u[k]
    CM_RESORT = 2'd3   // re-sort after a frozen run: slot k copies src[k], no bit
  } commit_kind_e;

  // Operation performed by the L decoder cores in one cycle.
  typedef enum logic [0:0] {
    OP_F = 1'b0,  // min-sum f~ (upper branch)
    OP_G = 1'b1   // g = f+ (lower branch, uses partial sums)
  } op_func_e;

  // Symmetric saturation of a wide signed value to Q bits.
  function automatic logic signed [31:0] sat_llr(input logic signed [31:0] v, input int q);
    logic signed [31:0] lim;
    lim = (32'sd1 <<< (q - 1)) - 32'sd1;
    if (v > lim) return lim;
    if (v < -lim) return -lim;
    return v;
  endfunction

endpackage
