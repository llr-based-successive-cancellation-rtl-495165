// tb_scl_decoder_full: the decoder at its default (full) size.
//
// Instantiates scl_decoder with no parameter overrides, i.e. N = 1024,
// L = 4, P = 64, Q = 6, M = 8, pruned radix-2L sorter and CRC-8, and runs a
// handful of codewords through scl_tb_harness: noiseless, random full-scale
// LLRs, and AWGN at several Eb/N0, half of them with the CRC. Each codeword
// is checked bit for bit, metric and CRC flag against the behavioural
// reference, and its latency against 2N + (N/P)log2(N/(4P)) + |A| + F_C
// (2048 + 32 + |A| + number of frozen runs), the paper's latency model.
module tb_scl_decoder_full;
  import scl_pkg::*;

  localparam int N = 1024;
  localparam int L = 4;
  localparam int P = 64;
  localparam int Q = 6;
  localparam int M = 8;
  localparam int AW = $clog2(N / P);
  localparam int NCW = 6;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, llr_v, start, crc_en, busy, done, pass;
  logic [AW-1:0] llr_a;
  logic signed [Q-1:0] llr_d [P];
  logic [N-1:0] frozen, u_hat;
  logic [M-1:0] metric;
  int checks, failures, cnt [8];
  bit fin;

  scl_decoder dut (
    .clk, .rst_n, .llr_in_valid(llr_v), .llr_in_addr(llr_a), .llr_in_data(llr_d),
    .start, .frozen, .crc_en, .busy, .done, .u_hat, .out_metric(metric), .out_crc_pass(pass));

  scl_tb_harness #(.N(N), .L(L), .P(P), .Q(Q), .M(M), .PRUNED(1'b1), .CRC_LEN(8),
                   .CRC_POLY(32'hD5), .NCW(NCW)) h (
    .clk, .rst_n, .llr_in_valid(llr_v), .llr_in_addr(llr_a), .llr_in_data(llr_d),
    .start, .frozen, .crc_en, .busy, .done, .u_hat, .out_metric(metric), .out_crc_pass(pass),
    .commit_kind(dut.commit_kind), .commit_src(dut.commit_src), .valid(dut.valid),
    .pm(dut.pm), .op_valid(dut.op_valid), .op_cyc(dut.op_cyc),
    .checks, .failures, .finished(fin), .cnt);

  initial begin
    wait (fin);
    $display("info sorts %0d, re-sorts %0d, duplications %0d, drops %0d",
             cnt[0], cnt[1], cnt[3], cnt[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NCW * 4000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
