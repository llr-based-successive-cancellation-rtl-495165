// tb_radix2l_sorter: random and tie-heavy test of the full radix-2L sorter
// (all 2L(2L-1)/2 pairs compared) at L = 4 and L = 2, key width 9.
//
// Arbitrary 2L-element lists with small value ranges (many ties) and large
// ones; the L outputs must be the L smallest elements in ascending order,
// lower index first on equal values, both index and value. Combinational.
module tb_radix2l_sorter;
  import scl_ref_pkg::*;
  localparam int KW = 9;
  logic [KW-1:0] m4 [8], sorted4 [4], m2 [4], sorted2 [2];
  logic [2:0] sel4 [4];
  logic [1:0] sel2 [2];
  int checks = 0, failures = 0;

  radix2l_sorter #(.L(4), .KW(KW)) dut4 (.m(m4), .sel(sel4), .sorted(sorted4));
  radix2l_sorter #(.L(2), .KW(KW)) dut2 (.m(m2), .sel(sel2), .sorted(sorted2));

  function automatic void ref_order(int n, int v [], output int order []);
    order = new[n];
    for (int e = 0; e < n; e++) order[e] = e;
    for (int x = 0; x < n; x++)
      for (int y = 0; y < n - 1 - x; y++)
        if (before_full(v[order[y + 1]], order[y + 1], v[order[y]], order[y])) begin
          automatic int tmp = order[y]; order[y] = order[y + 1]; order[y + 1] = tmp;
        end
  endfunction

  initial begin
    #100000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int t = 0; t < 20000; t++) begin
      automatic int range = (t % 2 == 0) ? 4 : 512;
      automatic int v4 [] = new[8];
      automatic int v2 [] = new[4];
      automatic int o4 [], o2 [];
      for (int e = 0; e < 8; e++) begin v4[e] = $urandom % range; m4[e] = KW'(v4[e]); end
      for (int e = 0; e < 4; e++) begin v2[e] = $urandom % range; m2[e] = KW'(v2[e]); end
      ref_order(8, v4, o4);
      ref_order(4, v2, o2);
      #1;
      for (int q = 0; q < 4; q++) begin
        checks += 2;
        if (int'(sel4[q]) != o4[q]) failures++;
        if (int'(sorted4[q]) != v4[o4[q]]) failures++;
      end
      for (int q = 0; q < 2; q++) begin
        checks += 2;
        if (int'(sel2[q]) != o2[q]) failures++;
        if (int'(sorted2[q]) != v2[o2[q]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
