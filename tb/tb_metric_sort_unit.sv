// tb_metric_sort_unit: path-metric update, sorting and commit decisions.
//
// Two instances: L = 4 with the pruned sorter and L = 2 with the full sorter
// (M = 8, Q = 6). Each is driven with the decoder's strobe pattern: init,
// then runs of frozen bits (frozen_upd with the leaf LLRs, PM += |LLR| where
// the LLR is negative; with the pruned sorter a frozen_sort cycle ends each
// run) and information bits (info_cap with the leaf LLRs, then info_sort in
// the next cycle). A behavioural model keeps the L metrics; at every
// info_sort it builds the 2L candidates (keep the hard decision at no cost,
// or flip it at cost |LLR|, invalid paths sorting last), orders them by the
// sorter's rule and checks commit kind, source paths, decided bits, and the
// new metrics and valid flags in the next cycle. Saturation at 2^M - 1 is
// exercised by large LLRs. Commits are combinational in the strobe cycle;
// metrics update at the clock edge.
module tb_metric_sort_unit;
  import scl_pkg::*;
  import scl_ref_pkg::*;
  localparam int Q = 6;
  localparam int M = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---- L = 4, pruned ----
  logic init4, fu4, ic4, is4, fs4;
  logic signed [Q-1:0] llr4 [4];
  commit_kind_e ck4;
  logic [1:0] src4 [4];
  logic [3:0] cu4, valid4;
  logic [M-1:0] pm4 [4];
  metric_sort_unit #(.L(4), .Q(Q), .M(M), .PRUNED(1'b1)) dut4 (
    .clk, .init(init4), .llr_dec(llr4), .frozen_upd(fu4), .info_cap(ic4), .info_sort(is4),
    .frozen_sort(fs4), .commit_kind(ck4), .commit_src(src4), .commit_u(cu4), .pm(pm4), .valid(valid4));

  // ---- L = 2, full ----
  logic init2, fu2, ic2, is2, fs2;
  logic signed [Q-1:0] llr2 [2];
  commit_kind_e ck2;
  logic src2 [2];
  logic [1:0] cu2, valid2;
  logic [M-1:0] pm2 [2];
  metric_sort_unit #(.L(2), .Q(Q), .M(M), .PRUNED(1'b0)) dut2 (
    .clk, .init(init2), .llr_dec(llr2), .frozen_upd(fu2), .info_cap(ic2), .info_sort(is2),
    .frozen_sort(fs2), .commit_kind(ck2), .commit_src(src2), .commit_u(cu2), .pm(pm2), .valid(valid2));

  // behavioural state, indexed [instance][slot]
  int mpm [2][4];
  bit mval [2][4];
  int lam [2][4];

  function automatic int satm(int v);
    return (v > (1 << M) - 1) ? (1 << M) - 1 : v;
  endfunction

  function automatic int rand_llr(bit big);
    int v = big ? int'($urandom % 63) - 31 : int'($urandom % 21) - 10;
    return v;
  endfunction

  task automatic check_state(int x, int l_size);
    for (int s = 0; s < l_size; s++) begin
      automatic int dpm = (x == 0) ? int'(pm4[s]) : int'(pm2[s]);
      automatic bit dv  = (x == 0) ? valid4[s] : valid2[s];
      checks += 2;
      if (dv != mval[x][s]) failures++;
      if (mval[x][s] && dpm != mpm[x][s]) failures++;
    end
  endtask

  // one decoding run on instance x
  task automatic run(int x, int l_size, bit pruned);
    int nbits = 40;
    bit big = 1'($urandom);
    bit frozen_bit [40];
    if (x == 0) begin init4 = 1; end else begin init2 = 1; end
    @(posedge clk); #1;
    init4 = 0; init2 = 0;
    for (int s = 0; s < l_size; s++) begin mpm[x][s] = 0; mval[x][s] = (s == 0); end
    foreach (frozen_bit[b]) frozen_bit[b] = ($urandom % 3 == 0);
    for (int b = 0; b < nbits; b++) begin
      automatic bit frz = frozen_bit[b];
      automatic bit run_end = frz && (b == nbits - 1 || !frozen_bit[b + 1]);
      automatic int lv [4];
      for (int s = 0; s < l_size; s++) lv[s] = rand_llr(big);
      if (x == 0) for (int s = 0; s < 4; s++) llr4[s] = Q'(lv[s]);
      else for (int s = 0; s < 2; s++) llr2[s] = Q'(lv[s]);
      if (frz) begin
        if (x == 0) fu4 = 1; else fu2 = 1;
        #1;
        checks++;
        if (((x == 0) ? ck4 : ck2) != CM_FROZEN) failures++;
        @(posedge clk); #1;
        fu4 = 0; fu2 = 0;
        for (int s = 0; s < l_size; s++)
          if (mval[x][s] && lv[s] < 0) mpm[x][s] = satm(mpm[x][s] - lv[s]);
        check_state(x, l_size);
        if (run_end && pruned) begin
          // re-sort: ascending, higher slot first on ties, invalid last
          automatic int slot [4];
          automatic int key [4];
          automatic int npm [4];
          automatic bit nv [4];
          for (int s = 0; s < l_size; s++) begin slot[s] = s; key[s] = (mval[x][s] ? 0 : 256) + mpm[x][s]; end
          for (int a = 0; a < l_size; a++)
            for (int c = 0; c < l_size - 1 - a; c++)
              if (key[slot[c + 1]] < key[slot[c]] || (key[slot[c + 1]] == key[slot[c]] && slot[c + 1] > slot[c])) begin
                automatic int tmp = slot[c]; slot[c] = slot[c + 1]; slot[c + 1] = tmp;
              end
          fs4 = 1;
          #1;
          checks++;
          if (ck4 != CM_RESORT) failures++;
          for (int s = 0; s < l_size; s++) begin
            checks++;
            if (int'(src4[s]) != slot[s]) failures++;
            npm[s] = mpm[x][slot[s]]; nv[s] = mval[x][slot[s]];
          end
          @(posedge clk); #1;
          fs4 = 0;
          for (int s = 0; s < l_size; s++) begin mpm[x][s] = npm[s]; mval[x][s] = nv[s]; end
          check_state(x, l_size);
        end
      end else begin
        automatic int key [8];
        automatic int order [8];
        if (x == 0) ic4 = 1; else ic2 = 1;
        @(posedge clk); #1;
        ic4 = 0; ic2 = 0;
        if (x == 0) for (int s = 0; s < 4; s++) llr4[s] = Q'(rand_llr(1));  // not used any more
        for (int s = 0; s < l_size; s++) begin
          automatic int inv = mval[x][s] ? 0 : 256;
          key[2*s]   = inv + mpm[x][s];
          key[2*s+1] = inv + satm(mpm[x][s] + (lv[s] < 0 ? -lv[s] : lv[s]));
        end
        for (int e = 0; e < 2 * l_size; e++) order[e] = e;
        for (int a = 0; a < 2 * l_size; a++)
          for (int c = 0; c < 2 * l_size - 1 - a; c++)
            if (pruned ? before_pruned(key[order[c + 1]], order[c + 1], key[order[c]], order[c], 2 * l_size)
                       : before_full(key[order[c + 1]], order[c + 1], key[order[c]], order[c])) begin
              automatic int tmp = order[c]; order[c] = order[c + 1]; order[c + 1] = tmp;
            end
        if (x == 0) is4 = 1; else is2 = 1;
        #1;
        checks++;
        if (((x == 0) ? ck4 : ck2) != CM_INFO) failures++;
        for (int s = 0; s < l_size; s++) begin
          automatic int e = order[s];
          automatic int p = e / 2;
          automatic bit u = (lv[p] < 0) ^ (e % 2 == 1);
          checks += 2;
          if (((x == 0) ? int'(src4[s]) : int'(src2[s])) != p) failures++;
          if (((x == 0) ? cu4[s] : cu2[s]) != u) failures++;
        end
        @(posedge clk); #1;
        is4 = 0; is2 = 0;
        begin
          automatic int npm [4];
          automatic bit nv [4];
          for (int s = 0; s < l_size; s++) begin
            npm[s] = key[order[s]] % 256;
            nv[s]  = key[order[s]] < 256;
          end
          for (int s = 0; s < l_size; s++) begin mpm[x][s] = npm[s]; mval[x][s] = nv[s]; end
        end
        check_state(x, l_size);
      end
    end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    {init4, fu4, ic4, is4, fs4} = '0;
    {init2, fu2, ic2, is2, fs2} = '0;
    for (int s = 0; s < 4; s++) llr4[s] = '0;
    for (int s = 0; s < 2; s++) llr2[s] = '0;
    for (int r = 0; r < 200; r++) begin
      run(0, 4, 1'b1);
      run(1, 2, 1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
