// tb_scl_decoder_l8: the list size 8 configuration with CRC-16.
//
// One decoder with L = 8, the pruned radix-2L sorter (49 comparators) and
// CRC-16 (x^16 + x^15 + x^2 + 1), the combination found best for L = 8,
// at a reduced length N = 128 with P = 8 PEs per core. scl_tb_harness runs
// 30 codewords (noiseless, random full-scale, AWGN from 0 to 4 dB; every
// second codeword CRC-aided with |A| = N/2 + 16) and compares decided bits,
// metric, CRC flag and the cycle count 2N + (N/P)log2(N/(4P)) + |A| + F_C
// with the behavioural reference.
module tb_scl_decoder_l8;
  import scl_pkg::*;
  localparam int N = 128;
  localparam int L = 8;
  localparam int P = 8;
  localparam int Q = 6;
  localparam int M = 8;
  localparam int AW = $clog2(N / P);
  localparam int NCW = 30;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, llr_v, start, crc_en, busy, done, pass;
  logic [AW-1:0] llr_a;
  logic signed [Q-1:0] llr_d [P];
  logic [N-1:0] frozen, u_hat;
  logic [M-1:0] metric;
  int checks, failures, cnt [8];
  bit fin;

  scl_decoder #(.N(N), .L(L), .P(P), .Q(Q), .M(M), .PRUNED(1'b1),
                .CRC_LEN(16), .CRC_POLY(16'h8005)) dut (
    .clk, .rst_n, .llr_in_valid(llr_v), .llr_in_addr(llr_a), .llr_in_data(llr_d),
    .start, .frozen, .crc_en, .busy, .done, .u_hat, .out_metric(metric), .out_crc_pass(pass));

  scl_tb_harness #(.N(N), .L(L), .P(P), .Q(Q), .M(M), .PRUNED(1'b1), .CRC_LEN(16),
                   .CRC_POLY(32'h8005), .NCW(NCW)) h (
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
    repeat (NCW * 2000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
