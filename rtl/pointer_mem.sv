// pointer_mem: the address translation unit.
//
// Every list path owns a virtual internal-LLR memory whose levels are spread
// over the L physical banks. Row l of this small memory holds, for each
// internal tree level k (1..n-1), the bank that currently stores path l's
// level-k LLRs.
//  * Lookup: combinational; for level `rd_level` it returns the bank of every
//    path, which steers the read multiplexers in front of the cores.
//  * Write: when the cores write level `wr_level`, every path writes into its
//    own bank, so entry (l, wr_level) becomes l.
//  * Commit (path duplication / re-sort): row k is overwritten with row
//    src[k] through an L x L crossbar, so a copied path shares the parent's
//    LLRs without moving any of them.
//  * init: every row points at its own bank.
// All L cores run in lock step and always write the same level together, so
// a bank level shared by several paths is only overwritten when each of those
// paths rewrites that level in its own bank in the same cycle.
// The pointer memory and its crossbar copy follow the paper; the rule
// "write to the own bank" is this design's reading of the cited scheme.
module pointer_mem #(
  parameter int N = 1024,
  parameter int L = 4,
  localparam int NL = $clog2(N),
  localparam int LW = (L > 1) ? $clog2(L) : 1
) (
  input  logic                 clk,
  input  logic                 init,
  input  logic [$clog2(NL+1)-1:0] rd_level,
  output logic [LW-1:0]        rd_bank [L],
  input  logic                 wr_en,
  input  logic [$clog2(NL+1)-1:0] wr_level,
  input  scl_pkg::commit_kind_e commit_kind,
  input  logic [LW-1:0]        commit_src [L]
);
  import scl_pkg::*;

  logic [LW-1:0] ptr [L][NL+1];  // entry NL (the channel) is never used

  always_ff @(posedge clk) begin
    if (init) begin
      for (int l = 0; l < L; l++)
        for (int k = 0; k <= NL; k++) ptr[l][k] <= LW'(l);
    end else if (commit_kind == CM_INFO || commit_kind == CM_RESORT) begin
      for (int l = 0; l < L; l++) ptr[l] <= ptr[commit_src[l]];
    end else if (wr_en) begin
      for (int l = 0; l < L; l++) ptr[l][wr_level] <= LW'(l);
    end
  end

  always_comb begin
    for (int l = 0; l < L; l++) rd_bank[l] = ptr[l][rd_level];
  end
endmodule
