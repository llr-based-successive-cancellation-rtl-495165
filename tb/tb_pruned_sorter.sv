// tb_pruned_sorter: random and tie-heavy test of the pruned radix-2L sorter
// at the default L = 4 ((L-1)^2 = 9 comparators), key width 9.
//
// Normal mode: the inputs follow the decoder's list structure: m_{2l} are
// the sorted existing path metrics and m_{2l+1} = m_{2l} + a non-negative
// penalty; small value ranges make ties frequent, and the top key bit
// (invalid path) is sometimes set on the tail of the list. The L outputs
// must be the L first elements of the reference order (value; on ties even
// indices ascending before odd indices descending; m_{2L-1} last), both index
// and value. Frozen mode: an arbitrary vector a_0..a_{L-1} is fed as
// [0, a_0, 0, a_1, ..., 0, a_{L-2}, a_{L-1}, all-ones] and the outputs must
// be the a_l in ascending order, higher slot first on equal values. The
// sorter is combinational (one sort per cycle in the decoder).
module tb_pruned_sorter;
  import scl_ref_pkg::*;
  localparam int L = 4;
  localparam int KW = 9;
  localparam int EW = $clog2(2 * L);
  logic [KW-1:0] m [2*L];
  logic frozen_mode;
  logic [EW-1:0] sel [L];
  logic [KW-1:0] sorted [L];
  int order [2*L];
  int checks = 0, failures = 0;

  pruned_sorter #(.L(L), .KW(KW)) dut (.m, .frozen_mode, .sel, .sorted);

  initial begin
    #100000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      automatic int range = (t % 3 == 0) ? 3 : 50;
      if (t % 2 == 0) begin
        automatic int base = 0;
        automatic int ninv = ($urandom % 4 == 0) ? int'($urandom % L) : 0;
        frozen_mode = 1'b0;
        for (int l = 0; l < L; l++) begin
          base += $urandom % range;
          m[2*l]   = KW'(base);
          m[2*l+1] = KW'(base + $urandom % range);
          if (l >= L - ninv) begin m[2*l][KW-1] = 1'b1; m[2*l+1][KW-1] = 1'b1; end
        end
        for (int e = 0; e < 2 * L; e++) order[e] = e;
        for (int x = 0; x < 2 * L; x++)
          for (int y = 0; y < 2 * L - 1 - x; y++)
            if (before_pruned(int'(m[order[y + 1]]), order[y + 1], int'(m[order[y]]), order[y], 2 * L)) begin
              automatic int tmp = order[y]; order[y] = order[y + 1]; order[y + 1] = tmp;
            end
        #1;
        for (int q = 0; q < L; q++) begin
          checks += 2;
          if (int'(sel[q]) != order[q]) failures++;
          if (sorted[q] != m[order[q]]) failures++;
        end
      end else begin
        automatic int a [L];
        automatic int slot [L];
        frozen_mode = 1'b1;
        for (int l = 0; l < L; l++) begin
          a[l] = $urandom % range;
          if ($urandom % 5 == 0) a[l] += 256;  // invalid path
          slot[l] = l;
          m[2*l]   = (l == L - 1) ? KW'(a[l]) : '0;
          m[2*l+1] = (l == L - 1) ? '1 : KW'(a[l]);
        end
        // ascending, higher slot first on ties
        for (int x = 0; x < L; x++)
          for (int y = 0; y < L - 1 - x; y++)
            if (a[slot[y + 1]] < a[slot[y]] || (a[slot[y + 1]] == a[slot[y]] && slot[y + 1] > slot[y])) begin
              automatic int tmp = slot[y]; slot[y] = slot[y + 1]; slot[y + 1] = tmp;
            end
        #1;
        for (int q = 0; q < L; q++) begin
          automatic int e = (slot[q] == L - 1) ? 2 * L - 2 : 2 * slot[q] + 1;
          checks += 2;
          if (int'(sel[q]) != e) failures++;
          if (int'(sorted[q]) != a[slot[q]]) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
