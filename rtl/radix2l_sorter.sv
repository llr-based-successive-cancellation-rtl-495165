// radix2l_sorter: full radix-2L metric sorter.
//
// Compares every pair of the 2L candidates (L(2L-1) comparators, i < j
// evaluates "m_i <= m_j"), turns the results into the rank of each element
// (equal values keep index order) and selects the L smallest with L
// 2L-to-1 multiplexers, smallest first. Makes no assumption on the input
// order, so a decoder using it needs no re-sort after frozen bits. Fully
// combinational, one sort per cycle. Structure as in the paper; the
// rank-based sorting logic is this design's.
module radix2l_sorter #(
  parameter int L  = 4,
  parameter int KW = 9,
  localparam int EW = $clog2(2 * L)
) (
  input  logic [KW-1:0] m      [2*L],
  output logic [EW-1:0] sel    [L],
  output logic [KW-1:0] sorted [L]
);
  logic [2*L-1:0] le   [2*L];  // le[i][j], i < j: m_i <= m_j
  logic [EW:0]    rank [2*L];

  for (genvar i = 0; i < 2 * L; i++) begin : g_row
    for (genvar j = 0; j < 2 * L; j++) begin : g_col
      if (j > i) begin : g_cmp
        assign le[i][j] = (m[i] <= m[j]);
      end else begin : g_none
        assign le[i][j] = 1'b0;
      end
    end
  end

  always_comb begin
    for (int e = 0; e < 2 * L; e++) begin
      rank[e] = '0;
      for (int o = 0; o < 2 * L; o++) begin
        if (o < e && le[o][e])  rank[e] = rank[e] + 1'b1;
        if (o > e && !le[e][o]) rank[e] = rank[e] + 1'b1;
      end
    end
    for (int q = 0; q < L; q++) begin
      sel[q]    = '0;
      sorted[q] = '0;
      for (int e = 0; e < 2 * L; e++) begin
        if (int'(rank[e]) == q) begin
          sel[q]    = EW'(e);
          sorted[q] = m[e];
        end
      end
    end
  end
endmodule
