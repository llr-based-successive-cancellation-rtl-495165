// partial_sum_mem: the partial sum memory, L partial-sum networks (PSNs).
//
// The g update of a node needs the re-encoded bits (partial sums) of the
// node's already decoded upper sibling. Each path keeps, for every tree level
// k = 0..n-1, the 2^k partial sums of the most recently completed upper
// sibling at that level, in a heap-ordered N-bit register (bit 2^k + j is
// level k, position j; bit 0 is unused): N-1 flip-flops per path.
//
// When bit i is decided with value u, a combinational XOR cascade builds the
// completed nodes bottom-up: node_0 = u and, while bit k of i is 1,
//   node_{k+1} = [ left_k xor node_k , node_k ]
// (polar transform in natural order). The first level k where bit k of i is
// 0 stores node_k as the new left_k. This is the recursion of the partial
// sums; it also equals polar-encoding the decided bits of the subtree.
//
// Copying follows the commit of the metric sorter: on an information bit
// slot s takes the PSN of slot src[s] and appends u[s]; on a frozen bit each
// slot appends 0 to its own PSN; on a re-sort slot s takes src[s] as is. The
// L x L crossbar copy in one cycle follows the paper; the PSN insides are
// this design's.
//
// Read port (combinational): for a g operation writing level `rd_level`,
// cycle `rd_cyc`, path l gets the P partial sums left_k[cyc*P +: P].
module partial_sum_mem #(
  parameter int N = 1024,
  parameter int L = 4,
  parameter int P = 64,
  localparam int NL = $clog2(N),
  localparam int LW = (L > 1) ? $clog2(L) : 1,
  localparam int CW = (N / P > 1) ? $clog2(N / P) : 1
) (
  input  logic                 clk,
  input  logic [NL-1:0]        bit_idx,
  input  scl_pkg::commit_kind_e commit_kind,
  input  logic [LW-1:0]        commit_src [L],
  input  logic [L-1:0]         commit_u,
  input  logic [$clog2(NL+1)-1:0] rd_level,
  input  logic [CW-1:0]        rd_cyc,
  output logic [P-1:0]         rd_u [L]
);
  import scl_pkg::*;

  logic [N-1:0] left     [L];
  logic [N-1:0] src_left [L];
  logic [N-1:0] node     [L];
  logic [N-1:0] new_left [L];
  logic [L-1:0] app_u;
  int unsigned  tones;

  // number of trailing ones of the bit index = level where the new node lands
  always_comb begin
    tones = 0;
    for (int k = 0; k < NL; k++) begin
      if (bit_idx[k] && (tones == k)) tones = k + 1;
    end
  end

  for (genvar s = 0; s < L; s++) begin : g_slot
    always_comb begin
      if (commit_kind == CM_FROZEN) begin
        src_left[s] = left[s];
        app_u[s]    = 1'b0;
      end else begin
        src_left[s] = left[commit_src[s]];
        app_u[s]    = commit_u[s];
      end
      node[s]    = '0;
      node[s][1] = app_u[s];
      for (int k = 0; k < NL - 1; k++) begin
        for (int j = 0; j < (1 << k); j++) begin
          node[s][(2 << k) + j]          = src_left[s][(1 << k) + j] ^ node[s][(1 << k) + j];
          node[s][(2 << k) + (1 << k) + j] = node[s][(1 << k) + j];
        end
      end
      new_left[s] = src_left[s];
      for (int k = 0; k < NL; k++) begin
        if (tones == k) begin
          for (int j = 0; j < (1 << k); j++) new_left[s][(1 << k) + j] = node[s][(1 << k) + j];
        end
      end
    end

    always_ff @(posedge clk) begin
      unique case (commit_kind)
        CM_FROZEN, CM_INFO: left[s] <= new_left[s];
        CM_RESORT:          left[s] <= src_left[s];
        default:            ;
      endcase
    end

    assign rd_u[s] = left[s][((1 << rd_level) + int'(rd_cyc) * P) +: P];
  end
endmodule
