// pruned_sorter: pruned radix-2L metric sorter.
//
// Input: a list m_0 .. m_{2L-1} with m_{2l} <= m_{2l+2} (the existing path
// metrics, already sorted) and m_{2l} <= m_{2l+1} (each path's second
// candidate adds a non-negative penalty). Output: the indices (`sel`) and
// values (`sorted`) of the L smallest elements, smallest first.
//
// Because of the two ordering properties, an even element precedes every
// later element, and m_{2L-1} is never needed (at least L elements are not
// larger), so it is placed last. Only the pairs (i odd, i < j <= 2L-2) are
// compared: (L-1)^2 comparators. Each comparator evaluates "m_j <= m_i", so
// on equal values the later element is ordered first; together with the
// fixed results this is a strict total order in which, among equal values,
// even-indexed elements come first. The sorting logic counts, for every
// element, how many elements precede it (its rank) and L multiplexers pick
// the element of each rank.
//
// frozen_mode sorts L arbitrary non-negative metrics a_0..a_{L-1}: the caller
// feeds [0, a_0, 0, a_1, ..., 0, a_{L-2}, a_{L-1}, +inf] and the sorter
// returns ranks L-1 .. 2L-2, which are the a's in ascending order (ties: the
// higher slot first). The comparator network is shared by both modes.
// Fully combinational; one sort per clock cycle. The comparator pruning,
// the comparator count and the L-number sorting mode are the paper's; the
// rank-based sorting logic and the tie rule are this design's.
module pruned_sorter #(
  parameter int L  = 4,
  parameter int KW = 9,
  localparam int EW = $clog2(2 * L)
) (
  input  logic [KW-1:0] m      [2*L],
  input  logic          frozen_mode,
  output logic [EW-1:0] sel    [L],
  output logic [KW-1:0] sorted [L]
);
  // later[i][j] (i < j): element j is ordered before element i
  logic [2*L-1:0] later [2*L];
  logic [EW:0]    rank  [2*L];

  for (genvar i = 0; i < 2 * L; i++) begin : g_row
    for (genvar j = 0; j < 2 * L; j++) begin : g_col
      if (j <= i || (i % 2) == 0 || j == 2 * L - 1) begin : g_known
        assign later[i][j] = 1'b0;
      end else begin : g_cmp
        assign later[i][j] = (m[j] <= m[i]);
      end
    end
  end

  always_comb begin
    for (int e = 0; e < 2 * L; e++) begin
      rank[e] = '0;
      for (int o = 0; o < 2 * L; o++) begin
        if (o < e && !later[o][e]) rank[e] = rank[e] + 1'b1;
        if (o > e && later[e][o])  rank[e] = rank[e] + 1'b1;
      end
    end
    for (int q = 0; q < L; q++) begin
      sel[q]    = '0;
      sorted[q] = '0;
      for (int e = 0; e < 2 * L; e++) begin
        if (int'(rank[e]) == q + (frozen_mode ? L - 1 : 0)) begin
          sel[q]    = EW'(e);
          sorted[q] = m[e];
        end
      end
    end
  end
endmodule
