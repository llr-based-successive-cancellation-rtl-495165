// tb_scl_controller: schedule, addresses and latency of the controller.
//
// Two controllers at the default size N = 1024, P = 64: one for the pruned
// sorter (frozen-run re-sort cycles) and one for the full sorter. For every
// frozen set the behavioural schedule is built first: bit 0 starts with f at
// level n-1, bit i > 0 with g at level tz(i) (trailing zeros of i) and then
// f down to level 0; level k takes max(1, 2^k/P) cycles; an information bit
// adds one sort cycle, and with the pruned sorter the last bit of every run
// of frozen bits adds one re-sort cycle. Every busy cycle is compared with
// it: function, level, slice, bit index, strobes, the parent read positions
// (channel: c*P and c*P + 2^k; else 2^(k+1) + c*P and that + 2^k), the
// child write position 2^k + c*P and its lane mask. The number of busy
// cycles before done must be D = 2N + (N/P) log2(N/(4P)) + |A| (+ F_C, the
// number of frozen runs, with the pruned sorter). A directed frozen set with
// |A| = 512 and 57 frozen runs reproduces the paper's (1024, 512) figures:
// 2592 cycles with the full sorter and 2649 with the pruned one.
module tb_scl_controller;
  import scl_pkg::*;
  localparam int N = 1024;
  localparam int P = 64;
  localparam int NL = $clog2(N);
  localparam int AW = $clog2(N / P);
  localparam int KLW = $clog2(NL + 1);
  localparam int OW = $clog2(P + 1);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, start;
  logic [N-1:0] frozen;
  int checks = 0, failures = 0;

  typedef struct {
    int kind;   // 0 op, 1 info sort, 2 frozen re-sort
    int k, c, bit_i;
    bit g;
  } step_t;

  // ---- two instances ----
  logic busy [2], done [2], init [2], op_valid [2], rd_chan [2], wr_en [2];
  op_func_e op_func [2];
  logic [KLW-1:0] op_level [2], rd_level [2];
  logic [AW-1:0] op_cyc [2], rd_word_a [2], rd_word_b [2], wr_word [2];
  logic [NL-1:0] bit_idx [2];
  logic [OW-1:0] rd_off_a [2], rd_off_b [2], wr_off [2];
  logic [P-1:0] wr_mask [2];
  logic frozen_upd [2], info_cap [2], info_sort [2], frozen_sort [2];

  for (genvar x = 0; x < 2; x++) begin : g_dut
    scl_controller #(.N(N), .P(P), .PRUNED(x == 0)) dut (
      .clk, .rst_n, .start, .frozen_in(frozen), .busy(busy[x]), .done(done[x]), .init(init[x]),
      .op_valid(op_valid[x]), .op_func(op_func[x]), .op_level(op_level[x]), .op_cyc(op_cyc[x]),
      .bit_idx(bit_idx[x]), .rd_chan(rd_chan[x]), .rd_level(rd_level[x]),
      .rd_word_a(rd_word_a[x]), .rd_word_b(rd_word_b[x]), .rd_off_a(rd_off_a[x]),
      .rd_off_b(rd_off_b[x]), .wr_en(wr_en[x]), .wr_word(wr_word[x]), .wr_off(wr_off[x]),
      .wr_mask(wr_mask[x]), .frozen_upd(frozen_upd[x]), .info_cap(info_cap[x]),
      .info_sort(info_sort[x]), .frozen_sort(frozen_sort[x]));
  end

  function automatic int ncyc(int k);
    return ((1 << k) > P) ? (1 << k) / P : 1;
  endfunction

  function automatic void build(bit pruned, output step_t sched [$]);
    sched = {};
    for (int i = 0; i < N; i++) begin
      int top = 0;
      if (i == 0) top = NL - 1;
      else while (((i >> top) & 1) == 0) top++;
      for (int k = top; k >= 0; k--)
        for (int c = 0; c < ncyc(k); c++)
          sched.push_back('{kind: 0, k: k, c: c, bit_i: i, g: (i != 0 && k == top)});
      if (!frozen[i]) sched.push_back('{kind: 1, k: 0, c: 0, bit_i: i, g: 0});
      else if (pruned && (i == N - 1 || !frozen[i + 1])) sched.push_back('{kind: 2, k: 0, c: 0, bit_i: i, g: 0});
    end
  endfunction

  task automatic check_step(int x, step_t st);
    int pa, pb, pw, lanes;
    bit ok = 1;
    pa = ((st.k == NL - 1) ? 0 : (2 << st.k)) + st.c * P;
    pb = pa + (1 << st.k);
    pw = (1 << st.k) + st.c * P;
    lanes = ((1 << st.k) < P) ? (1 << st.k) : P;
    if (st.kind == 0) begin
      ok &= op_valid[x] && !info_sort[x] && !frozen_sort[x];
      ok &= (op_func[x] == (st.g ? OP_G : OP_F));
      ok &= (int'(op_level[x]) == st.k) && (int'(op_cyc[x]) == st.c) && (int'(bit_idx[x]) == st.bit_i);
      ok &= (rd_chan[x] == (st.k == NL - 1)) && (int'(rd_level[x]) == st.k + 1);
      ok &= (int'(rd_word_a[x]) == pa / P) && (int'(rd_off_a[x]) == pa % P);
      ok &= (int'(rd_word_b[x]) == pb / P) && (int'(rd_off_b[x]) == pb % P);
      ok &= (wr_en[x] == (st.k != 0));
      if (st.k != 0) begin
        ok &= (int'(wr_word[x]) == pw / P) && (int'(wr_off[x]) == pw % P);
        for (int p = 0; p < P; p++) ok &= (wr_mask[x][p] == (p >= pw % P && p < pw % P + lanes));
      end
      ok &= (frozen_upd[x] == (st.k == 0 && frozen[st.bit_i]));
      ok &= (info_cap[x] == (st.k == 0 && !frozen[st.bit_i]));
    end else begin
      ok &= !op_valid[x] && !wr_en[x] && !frozen_upd[x] && !info_cap[x];
      ok &= (info_sort[x] == (st.kind == 1)) && (frozen_sort[x] == (st.kind == 2));
      ok &= (int'(bit_idx[x]) == st.bit_i);
    end
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10)
        $display("ctrl %0d: bit %0d kind %0d level %0d slice %0d mismatch", x, st.bit_i, st.kind, st.k, st.c);
    end
  endtask

  task automatic decode(int expect_pruned, int expect_full);
    step_t s0 [$], s1 [$];
    int n [2];
    bit fin [2];
    build(1'b1, s0);
    build(1'b0, s1);
    start = 1'b1;
    #1;
    checks += 2;
    if (!init[0] || !init[1]) failures++;
    if (busy[0] || busy[1]) failures++;
    @(posedge clk); #1;
    start = 1'b0;
    n = '{0, 0};
    fin = '{0, 0};
    while (!(fin[0] && fin[1])) begin
      for (int x = 0; x < 2; x++) if (done[x]) fin[x] = 1'b1;
      for (int x = 0; x < 2; x++) if (!fin[x]) begin
        checks++;
        if (!busy[x]) failures++;
        if (x == 0 && n[0] < s0.size()) check_step(0, s0[n[0]]);
        if (x == 1 && n[1] < s1.size()) check_step(1, s1[n[1]]);
        n[x]++;
      end
      @(posedge clk); #1;
    end
    checks += 4;
    if (n[0] != expect_pruned || n[0] != s0.size()) failures++;
    if (n[1] != expect_full || n[1] != s1.size()) failures++;
    $display("decode: %0d cycles (pruned sorter, expected %0d), %0d cycles (full sorter, expected %0d)",
             n[0], expect_pruned, n[1], expect_full);
    @(posedge clk); #1;
    if (busy[0] || busy[1]) failures++;
    if (done[0] || done[1]) failures++;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    rst_n = 1'b0; start = 1'b0; frozen = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    // directed: 57 frozen runs, 512 frozen and 512 information bits
    begin
      automatic int pos = 0;
      for (int r = 0; r < 57; r++) begin
        automatic int len = (r < 56) ? 9 : 8;
        for (int j = 0; j < len; j++) frozen[pos++] = 1'b1;
        for (int j = 0; j < len; j++) frozen[pos++] = 1'b0;
      end
    end
    decode(2649, 2592);
    // random frozen sets
    for (int t = 0; t < 6; t++) begin
      automatic int na = 0, fc = 0, base;
      for (int i = 0; i < N; i++) frozen[i] = ($urandom % 100) < ((t == 5) ? 100 : 20 * t + 5);
      for (int i = 0; i < N; i++) begin
        if (!frozen[i]) na++;
        if (frozen[i] && (i == N - 1 || !frozen[i + 1])) fc++;
      end
      base = 2 * N + (N / P) * $clog2(N / (4 * P)) + na;
      decode(base + fc, base);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
