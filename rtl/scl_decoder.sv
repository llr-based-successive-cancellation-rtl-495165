// scl_decoder: LLR-based successive cancellation list decoder for polar codes.
//
// L copies of a semi-parallel SC decoder (P processing elements each) run in
// lock step, one per list path, all computing in the LLR domain. After each
// decision LLR the paths are ranked by the LLR-based path metric, the L best
// of the 2L extensions survive and the path state is copied between slots by
// L x L crossbars in one cycle. Blocks:
//   scl_controller    schedule, addresses, frozen set
//   channel_llr_mem   one copy of the channel LLRs (loaded through llr_in_*)
//   llr_bank x L      physical internal-LLR banks
//   pointer_mem       maps every path's virtual LLR memory onto the banks
//   sc_core x L       P PEs each
//   metric_sort_unit  path metrics + pruned (or full) radix-2L sorter
//   partial_sum_mem   L partial-sum networks
//   path_mem          L decided-bit registers
//   crc_unit          per-path CRC check (used when crc_en is set)
//   codeword_select   picks the output path
//
// Interface / timing:
//  * Load the N channel LLRs while idle: llr_in_valid with llr_in_addr = word
//    w and llr_in_data = LLRs w*P .. w*P+P-1 (Q-bit two's complement,
//    positive = bit 0 more likely), one word per cycle.
//  * Pulse `start` with `frozen` (bit i = 1: u_i is frozen to 0) and
//    `crc_en` valid. `busy` is high until `done` pulses; then `u_hat` holds
//    the N decided bits of the chosen path (frozen positions are 0),
//    `out_metric` its path metric and `out_crc_pass` whether it passed the
//    CRC. The decoding takes 2N + (N/P)log2(N/(4P)) + |A| cycles, plus one
//    per run of frozen bits with the pruned sorter, from the cycle after
//    `start` to the cycle before `done`.
// Defaults: N = 1024, L = 4, P = 64, Q = 6, M = 8, pruned sorter, CRC-8, the
// configuration for which the paper reports results; the interface and the
// register-level details are this design's.
module scl_decoder #(
  parameter int                 N        = 1024,
  parameter int                 L        = 4,
  parameter int                 P        = 64,
  parameter int                 Q        = 6,
  parameter int                 M        = 8,
  parameter bit                 PRUNED   = 1'b1,
  parameter int                 CRC_LEN  = 8,
  parameter logic [CRC_LEN-1:0] CRC_POLY = 8'hD5,
  localparam int NL  = $clog2(N),
  localparam int AW  = (N / P > 1) ? $clog2(N / P) : 1,
  localparam int LW  = (L > 1) ? $clog2(L) : 1,
  localparam int KLW = $clog2(NL + 1),
  localparam int OW  = $clog2(P + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                llr_in_valid,
  input  logic [AW-1:0]       llr_in_addr,
  input  logic signed [Q-1:0] llr_in_data [P],
  input  logic                start,
  input  logic [N-1:0]        frozen,
  input  logic                crc_en,
  output logic                busy,
  output logic                done,
  output logic [N-1:0]        u_hat,
  output logic [M-1:0]        out_metric,
  output logic                out_crc_pass
);
  import scl_pkg::*;

  // ---------------- control ----------------
  logic           init, op_valid, rd_chan, wr_en;
  op_func_e       op_func;
  logic [KLW-1:0] op_level, rd_level;
  logic [AW-1:0]  op_cyc, rd_word_a, rd_word_b, wr_word;
  logic [NL-1:0]  bit_idx;
  logic [OW-1:0]  rd_off_a, rd_off_b, wr_off;
  logic [P-1:0]   wr_mask;
  logic           frozen_upd, info_cap, info_sort, frozen_sort;
  logic           crc_en_q;

  scl_controller #(.N(N), .P(P), .PRUNED(PRUNED)) u_ctrl (
    .clk, .rst_n, .start, .frozen_in(frozen), .busy, .done, .init,
    .op_valid, .op_func, .op_level, .op_cyc, .bit_idx,
    .rd_chan, .rd_level, .rd_word_a, .rd_word_b, .rd_off_a, .rd_off_b,
    .wr_en, .wr_word, .wr_off, .wr_mask,
    .frozen_upd, .info_cap, .info_sort, .frozen_sort);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) crc_en_q <= 1'b0;
    else if (init) crc_en_q <= crc_en;
  end

  // ---------------- memories and cores ----------------
  logic signed [Q-1:0] ch_a [P], ch_b [P];
  logic signed [Q-1:0] bk_a [L][P], bk_b [L][P];
  logic signed [Q-1:0] alpha [L][P], beta [L][P], res [L][P], wdata [L][P];
  logic signed [Q-1:0] llr_dec [L];
  logic [LW-1:0]       bank_of [L];
  logic [P-1:0]        ps_u [L];

  channel_llr_mem #(.N(N), .P(P), .Q(Q)) u_chmem (
    .clk, .wr_en(llr_in_valid && !busy), .wr_addr(llr_in_addr), .wr_data(llr_in_data),
    .rd_addr_a(rd_word_a), .rd_addr_b(rd_word_b), .rd_data_a(ch_a), .rd_data_b(ch_b));

  commit_kind_e  commit_kind;
  logic [LW-1:0] commit_src [L];
  logic [L-1:0]  commit_u;

  pointer_mem #(.N(N), .L(L)) u_ptr (
    .clk, .init, .rd_level, .rd_bank(bank_of), .wr_en, .wr_level(op_level),
    .commit_kind, .commit_src);

  for (genvar l = 0; l < L; l++) begin : g_path
    llr_bank #(.N(N), .P(P), .Q(Q)) u_bank (
      .clk, .wr_en, .wr_addr(wr_word), .wr_mask, .wr_data(wdata[l]),
      .rd_addr_a(rd_word_a), .rd_addr_b(rd_word_b), .rd_data_a(bk_a[l]), .rd_data_b(bk_b[l]));

    // read multiplexers (bank chosen by the pointer memory) and lane alignment
    always_comb begin
      for (int p = 0; p < P; p++) begin
        alpha[l][p] = '0;
        beta[l][p]  = '0;
        if (p + int'(rd_off_a) < P)
          alpha[l][p] = rd_chan ? ch_a[p + int'(rd_off_a)] : bk_a[bank_of[l]][p + int'(rd_off_a)];
        if (p + int'(rd_off_b) < P)
          beta[l][p]  = rd_chan ? ch_b[p + int'(rd_off_b)] : bk_b[bank_of[l]][p + int'(rd_off_b)];
      end
    end

    sc_core #(.P(P), .Q(Q)) u_core (
      .alpha(alpha[l]), .beta(beta[l]), .u(ps_u[l]), .func(op_func), .result(res[l]));

    // write data shifted to the lanes of the level being produced
    always_comb begin
      for (int p = 0; p < P; p++) begin
        wdata[l][p] = '0;
        if (p >= int'(wr_off)) wdata[l][p] = res[l][p - int'(wr_off)];
      end
    end

    assign llr_dec[l] = res[l][0];
  end

  // ---------------- path management ----------------
  logic [M-1:0]  pm [L];
  logic [L-1:0]  valid, pass;
  logic [LW-1:0] sel;
  logic [N-1:0]  bits_out;

  metric_sort_unit #(.L(L), .Q(Q), .M(M), .PRUNED(PRUNED)) u_msu (
    .clk, .init, .llr_dec, .frozen_upd, .info_cap, .info_sort, .frozen_sort,
    .commit_kind, .commit_src, .commit_u, .pm, .valid);

  partial_sum_mem #(.N(N), .L(L), .P(P)) u_psm (
    .clk, .bit_idx, .commit_kind, .commit_src, .commit_u,
    .rd_level(op_level), .rd_cyc(op_cyc), .rd_u(ps_u));

  path_mem #(.N(N), .L(L)) u_pathm (
    .clk, .bit_idx, .commit_kind, .commit_src, .commit_u, .sel, .bits_out);

  crc_unit #(.L(L), .CRC_LEN(CRC_LEN), .CRC_POLY(CRC_POLY)) u_crc (
    .clk, .init, .commit_kind, .commit_src, .commit_u, .pass);

  codeword_select #(.L(L), .M(M)) u_sel (
    .pm, .valid, .pass, .crc_en(crc_en_q), .sel);

  always_ff @(posedge clk) begin
    if (done) begin
      u_hat        <= bits_out;
      out_metric   <= pm[sel];
      out_crc_pass <= pass[sel];
    end
  end

  // the cores only compute while the controller says so
  a_write_in_op: assert property (@(posedge clk) wr_en |-> op_valid)
    else $error("LLR write outside a compute cycle");
endmodule
