// metric_sort_unit: path metric memory, metric update and metric sorter.
//
// Holds the L path metrics (M-bit, unsigned, saturating at 2^M-1) together
// with an active flag per path slot, and decides how the list evolves. The
// metric update is the hardware-friendly form of the LLR-based path metric:
// extending path l with bit u costs nothing if u agrees with the hard
// decision of its decision LLR lambda_l (u = 1 iff lambda_l < 0) and costs
// |lambda_l| otherwise.
//
// Cycle types (one strobe per cycle, from the controller):
//  * frozen_upd : decision LLRs of a frozen bit arrive; every active path is
//                 extended with 0 and its metric updated; commit CM_FROZEN.
//  * info_cap   : decision LLRs of an information bit arrive and are stored
//                 (the cores then wait one cycle).
//  * info_sort  : 2L candidates are formed, m_{2l} = own metric (bit = hard
//                 decision) and m_{2l+1} = metric + |lambda_l| (other bit), the
//                 sorter keeps the L best, sorted, and the commit tells every
//                 slot which parent to copy and which bit to append
//                 (CM_INFO). A parent with both children kept is duplicated;
//                 one with none is dropped.
//  * frozen_sort: (pruned sorter only) the metrics, changed by a run of
//                 frozen bits, are re-sorted so the next information bit
//                 again finds them in order (CM_RESORT).
// The sort key is {inactive, metric}: inactive slots sort behind all active
// ones, so while fewer than L paths exist every path is simply duplicated.
// init makes slot 0 the only active path, metric 0.
//
// The metric rule, the candidate list, both sorters and the re-sort after
// frozen runs are the paper's; the active flag and saturation are this
// design's.
module metric_sort_unit #(
  parameter int L      = 4,
  parameter int Q      = 6,
  parameter int M      = 8,
  parameter bit PRUNED = 1'b1,
  localparam int LW = (L > 1) ? $clog2(L) : 1,
  localparam int KW = M + 1,
  localparam int EW = $clog2(2 * L)
) (
  input  logic                  clk,
  input  logic                  init,
  input  logic signed [Q-1:0]   llr_dec [L],
  input  logic                  frozen_upd,
  input  logic                  info_cap,
  input  logic                  info_sort,
  input  logic                  frozen_sort,
  output scl_pkg::commit_kind_e commit_kind,
  output logic [LW-1:0]         commit_src [L],
  output logic [L-1:0]          commit_u,
  output logic [M-1:0]          pm    [L],
  output logic [L-1:0]          valid
);
  import scl_pkg::*;

  logic signed [Q-1:0] lam [L];
  logic [KW-1:0]       cand    [2*L];
  logic [EW-1:0]       srt_sel [L];
  logic [KW-1:0]       srt_key [L];
  logic [M-1:0]        pm_frz  [L];
  logic [L-1:0]        hd;

  function automatic logic [M-1:0] sat_add(input logic [M-1:0] a, input logic [Q-1:0] b);
    logic [M:0] s;
    s = {1'b0, a} + (M + 1)'(b);
    return s[M] ? {M{1'b1}} : s[M-1:0];
  endfunction

  function automatic logic [Q-1:0] abs_llr(input logic signed [Q-1:0] v);
    return v[Q-1] ? Q'(-v) : Q'(v);
  endfunction

  // candidate list for the sorter
  always_comb begin
    for (int l = 0; l < L; l++) begin
      hd[l] = lam[l][Q-1];
      if (frozen_sort) begin
        cand[2*l]   = (l == L - 1) ? {~valid[l], pm[l]} : '0;
        cand[2*l+1] = (l == L - 1) ? '1 : {~valid[l], pm[l]};
      end else begin
        cand[2*l]   = {~valid[l], pm[l]};
        cand[2*l+1] = {~valid[l], sat_add(pm[l], abs_llr(lam[l]))};
      end
      pm_frz[l] = (valid[l] && llr_dec[l][Q-1]) ? sat_add(pm[l], abs_llr(llr_dec[l])) : pm[l];
    end
  end

  if (PRUNED) begin : g_pruned
    pruned_sorter #(.L(L), .KW(KW)) u_sorter (
      .m(cand), .frozen_mode(frozen_sort), .sel(srt_sel), .sorted(srt_key));
  end else begin : g_full
    radix2l_sorter #(.L(L), .KW(KW)) u_sorter (
      .m(cand), .sel(srt_sel), .sorted(srt_key));
  end

  // commit towards the path-state memories
  always_comb begin
    commit_kind = CM_NONE;
    if (frozen_upd) commit_kind = CM_FROZEN;
    else if (info_sort) commit_kind = CM_INFO;
    else if (frozen_sort && PRUNED) commit_kind = CM_RESORT;
    for (int s = 0; s < L; s++) begin
      if (commit_kind == CM_INFO || commit_kind == CM_RESORT) begin
        commit_src[s] = LW'(srt_sel[s] >> 1);
        commit_u[s]   = (commit_kind == CM_INFO) ? (hd[LW'(srt_sel[s] >> 1)] ^ srt_sel[s][0]) : 1'b0;
      end else begin
        commit_src[s] = LW'(s);
        commit_u[s]   = 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (init) begin
      for (int l = 0; l < L; l++) pm[l] <= '0;
      valid <= L'(1);
    end else begin
      unique case (commit_kind)
        CM_FROZEN: pm <= pm_frz;
        CM_INFO, CM_RESORT: begin
          for (int s = 0; s < L; s++) begin
            pm[s]    <= srt_key[s][M-1:0];
            valid[s] <= ~srt_key[s][M];
          end
        end
        default: ;
      endcase
    end
    if (info_cap) lam <= llr_dec;
  end
endmodule
