// tb_scl_decoder: end-to-end test of the SCL decoder at reduced size.
//
// Two decoders of length N = 64 with P = 4 PEs per core (so the upper tree
// levels take several cycles per operation) and a 7-bit path metric:
//  * dut_p: L = 4, pruned radix-2L sorter, CRC-8 (x^8+x^7+x^6+x^4+x^2+1),
//  * dut_f: L = 2, full radix-2L sorter,  CRC-4 (x^4+x+1),
// each driven by scl_tb_harness over many codewords and compared with the
// behavioural reference. Every mechanism (information-bit sort, re-sort
// after frozen runs, multi-cycle operations, path duplication, path drop,
// metric saturation, CRC-driven choice, no-CRC-pass fallback) must have
// happened at least once per decoder where it applies.
module tb_scl_decoder;
  import scl_pkg::*;

  localparam int N = 64;
  localparam int P = 4;
  localparam int Q = 6;
  localparam int M = 7;  // one bit narrower than the paper so that N = 64 can saturate it
  localparam int AW = $clog2(N / P);
  localparam int NCW = 60;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks, failures;

  // ---------------- pruned sorter, L = 4 ----------------
  localparam int L1 = 4;
  logic rst_n1, llr_v1, start1, crc_en1, busy1, done1, pass1;
  logic [AW-1:0] llr_a1;
  logic signed [Q-1:0] llr_d1 [P];
  logic [N-1:0] frozen1, u_hat1;
  logic [M-1:0] metric1;
  int chk1, fail1, cnt1 [8];
  bit fin1;

  scl_decoder #(.N(N), .L(L1), .P(P), .Q(Q), .M(M), .PRUNED(1'b1),
                .CRC_LEN(8), .CRC_POLY(8'hD5)) dut_p (
    .clk, .rst_n(rst_n1), .llr_in_valid(llr_v1), .llr_in_addr(llr_a1), .llr_in_data(llr_d1),
    .start(start1), .frozen(frozen1), .crc_en(crc_en1), .busy(busy1), .done(done1),
    .u_hat(u_hat1), .out_metric(metric1), .out_crc_pass(pass1));

  scl_tb_harness #(.N(N), .L(L1), .P(P), .Q(Q), .M(M), .PRUNED(1'b1), .CRC_LEN(8),
                   .CRC_POLY(32'hD5), .NCW(NCW)) h_p (
    .clk, .rst_n(rst_n1), .llr_in_valid(llr_v1), .llr_in_addr(llr_a1), .llr_in_data(llr_d1),
    .start(start1), .frozen(frozen1), .crc_en(crc_en1), .busy(busy1), .done(done1),
    .u_hat(u_hat1), .out_metric(metric1), .out_crc_pass(pass1),
    .commit_kind(dut_p.commit_kind), .commit_src(dut_p.commit_src), .valid(dut_p.valid),
    .pm(dut_p.pm), .op_valid(dut_p.op_valid), .op_cyc(dut_p.op_cyc),
    .checks(chk1), .failures(fail1), .finished(fin1), .cnt(cnt1));

  // ---------------- full sorter, L = 2 ----------------
  localparam int L2 = 2;
  logic rst_n2, llr_v2, start2, crc_en2, busy2, done2, pass2;
  logic [AW-1:0] llr_a2;
  logic signed [Q-1:0] llr_d2 [P];
  logic [N-1:0] frozen2, u_hat2;
  logic [M-1:0] metric2;
  int chk2, fail2, cnt2 [8];
  bit fin2;

  scl_decoder #(.N(N), .L(L2), .P(P), .Q(Q), .M(M), .PRUNED(1'b0),
                .CRC_LEN(4), .CRC_POLY(4'h3)) dut_f (
    .clk, .rst_n(rst_n2), .llr_in_valid(llr_v2), .llr_in_addr(llr_a2), .llr_in_data(llr_d2),
    .start(start2), .frozen(frozen2), .crc_en(crc_en2), .busy(busy2), .done(done2),
    .u_hat(u_hat2), .out_metric(metric2), .out_crc_pass(pass2));

  scl_tb_harness #(.N(N), .L(L2), .P(P), .Q(Q), .M(M), .PRUNED(1'b0), .CRC_LEN(4),
                   .CRC_POLY(32'h3), .NCW(NCW)) h_f (
    .clk, .rst_n(rst_n2), .llr_in_valid(llr_v2), .llr_in_addr(llr_a2), .llr_in_data(llr_d2),
    .start(start2), .frozen(frozen2), .crc_en(crc_en2), .busy(busy2), .done(done2),
    .u_hat(u_hat2), .out_metric(metric2), .out_crc_pass(pass2),
    .commit_kind(dut_f.commit_kind), .commit_src(dut_f.commit_src), .valid(dut_f.valid),
    .pm(dut_f.pm), .op_valid(dut_f.op_valid), .op_cyc(dut_f.op_cyc),
    .checks(chk2), .failures(fail2), .finished(fin2), .cnt(cnt2));

  localparam string NAMES [8] = '{"info sort", "re-sort after frozen run", "multi-cycle op",
                                  "path duplication", "path dropped", "metric saturation",
                                  "CRC chose non-minimum path", "no path passed CRC"};

  task automatic report();
    checks   = chk1 + chk2;
    failures = fail1 + fail2;
    for (int j = 0; j < 8; j++) begin
      $display("mechanism %-28s L=4 pruned: %0d   L=2 full: %0d", NAMES[j], cnt1[j], cnt2[j]);
      checks++;
      if (cnt1[j] == 0) failures++;
      if (j != 1) begin
        checks++;
        if (cnt2[j] == 0) failures++;
      end else begin
        checks++;
        if (cnt2[j] != 0) failures++;  // the full sorter never re-sorts
      end
    end
  endtask

  initial begin
    wait (fin1 && fin2);
    report();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    report();
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
