// tb_path_mem: random commit sequences on the decided-bit memory.
//
// Bit by bit (N = 64, L = 4) a random commit is applied: frozen (every path
// appends 0), information (slot s becomes a copy of path src[s] with bit u[s]
// appended, with random sources so paths are duplicated and dropped) or
// re-sort (slot s becomes a copy of path src[s]). A behavioural list of paths
// is kept alongside; after every commit (1-cycle latency) every path is read
// through the selection port and its decided bits compared.
module tb_path_mem;
  import scl_pkg::*;
  localparam int N = 64;
  localparam int L = 4;
  localparam int NL = $clog2(N);
  localparam int LW = $clog2(L);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic [NL-1:0] bit_idx;
  commit_kind_e commit_kind;
  logic [LW-1:0] commit_src [L], sel;
  logic [L-1:0] commit_u;
  logic [N-1:0] bits_out;
  bit model [L][N], nxt [L][N];
  int checks = 0, failures = 0;

  path_mem #(.N(N), .L(L)) dut (.clk, .bit_idx, .commit_kind, .commit_src, .commit_u, .sel, .bits_out);

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    commit_kind = CM_NONE;
    for (int cw = 0; cw < 20; cw++) begin
      for (int i = 0; i < N; i++) begin
        automatic int nsub = ($urandom % 4 == 0) ? 2 : 1;
        for (int sub = 0; sub < nsub; sub++) begin
          bit_idx = NL'(i);
          if (sub == 1) commit_kind = CM_RESORT;
          else commit_kind = ($urandom % 2 == 0) ? CM_FROZEN : CM_INFO;
          for (int s = 0; s < L; s++) begin
            commit_src[s] = LW'($urandom);
            commit_u[s]   = 1'($urandom);
          end
          for (int s = 0; s < L; s++) begin
            case (commit_kind)
              CM_FROZEN: begin nxt[s] = model[s]; nxt[s][i] = 1'b0; end
              CM_INFO:   begin nxt[s] = model[commit_src[s]]; nxt[s][i] = commit_u[s]; end
              default:   nxt[s] = model[commit_src[s]];
            endcase
          end
          @(posedge clk); #1;
          model = nxt;
          commit_kind = CM_NONE;
          for (int s = 0; s < L; s++) begin
            sel = LW'(s);
            #1;
            for (int j = 0; j <= i; j++) begin
              checks++;
              if (bits_out[j] != model[s][j]) failures++;
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
