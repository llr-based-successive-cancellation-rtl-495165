// tb_partial_sum_mem: partial sums of every path under random commits.
//
// N = 64, L = 4, P = 4 (so the upper levels are read in several P-bit
// slices). Bit by bit a random frozen or information commit is applied
// (information commits copy random source paths, so paths are duplicated and
// dropped), sometimes followed by a re-sort. Before the next bit i+1, whose
// first operation is g at level t = trailing zeros of i+1, every path's
// partial sums at level t are read slice by slice and must equal the polar
// transform x = [enc(left) ^ enc(right), enc(right)] of that path's last 2^t
// decided bits. Commits take effect the next cycle; reads are combinational.
module tb_partial_sum_mem;
  import scl_pkg::*;
  import scl_ref_pkg::*;
  localparam int N = 64;
  localparam int L = 4;
  localparam int P = 4;
  localparam int NL = $clog2(N);
  localparam int LW = $clog2(L);
  localparam int CW = $clog2(N / P);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [NL-1:0] bit_idx;
  commit_kind_e commit_kind;
  logic [LW-1:0] commit_src [L];
  logic [L-1:0] commit_u;
  logic [$clog2(NL+1)-1:0] rd_level;
  logic [CW-1:0] rd_cyc;
  logic [P-1:0] rd_u [L];
  bitq_t path [L], nxt [L];
  int checks = 0, failures = 0;

  partial_sum_mem #(.N(N), .L(L), .P(P)) dut (.clk, .bit_idx, .commit_kind, .commit_src, .commit_u,
                                              .rd_level, .rd_cyc, .rd_u);

  task automatic commit(commit_kind_e k, int i);
    commit_kind = k;
    bit_idx = NL'(i);
    for (int s = 0; s < L; s++) begin
      commit_src[s] = LW'($urandom);
      commit_u[s]   = 1'($urandom);
      case (k)
        CM_FROZEN: begin nxt[s] = path[s]; nxt[s].push_back(1'b0); end
        CM_INFO:   begin nxt[s] = path[commit_src[s]]; nxt[s].push_back(commit_u[s]); end
        default:   nxt[s] = path[commit_src[s]];
      endcase
    end
    @(posedge clk); #1;
    path = nxt;
    commit_kind = CM_NONE;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    commit_kind = CM_NONE; rd_level = '0; rd_cyc = '0; bit_idx = '0;
    for (int cw = 0; cw < 30; cw++) begin
      for (int s = 0; s < L; s++) path[s] = {};
      for (int i = 0; i < N; i++) begin
        commit(($urandom % 2 == 0) ? CM_FROZEN : CM_INFO, i);
        if ($urandom % 4 == 0) commit(CM_RESORT, i);
        if (i < N - 1) begin
          automatic int t = 0;
          while (((i + 1) >> t) % 2 == 0) t++;
          rd_level = ($clog2(NL+1))'(t);
          for (int s = 0; s < L; s++) begin
            automatic bitq_t seg, x;
            for (int j = i + 1 - (1 << t); j <= i; j++) seg.push_back(path[s][j]);
            x = polar_encode(seg);
            for (int c = 0; c < (((1 << t) > P) ? (1 << t) / P : 1); c++) begin
              rd_cyc = CW'(c);
              #1;
              for (int p = 0; p < P && p < (1 << t); p++) begin
                checks++;
                if (rd_u[s][p] != x[c * P + p]) begin
                  failures++;
                  if (failures < 5) $display("bit %0d level %0d path %0d lane %0d", i + 1, t, s, c * P + p);
                end
              end
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
