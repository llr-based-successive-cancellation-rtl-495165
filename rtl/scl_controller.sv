// scl_controller: control unit of the SCL decoder.
//
// Walks the SC decoding tree for bit indices i = 0..N-1 and drives the L
// lock-step cores, the memories and the metric sorting unit. It also holds
// the frozen-bit set A^c (an N-bit mask, 1 = frozen) for the codeword.
//
// Schedule. Tree level k holds 2^k LLRs (level n = channel, level 0 = the
// decision LLR of bit i). Bit 0 starts with f operations from level n-1 down
// to 0; bit i > 0 starts with a g operation producing level t = number of
// trailing zeros of i, followed by f operations down to level 0. Producing
// level k takes max(1, 2^k/P) cycles, P LLRs per cycle, reading parent level
// k+1 through the two read ports and writing level k. Producing level 0
// (the decision LLR) takes one cycle and:
//  * frozen bit: the metrics, path bits and partial sums are updated in the
//    same cycle; with the pruned sorter, the last bit of every run of frozen
//    bits is followed by one re-sort cycle (state FSORT);
//  * information bit: the decision LLRs are captured and the next cycle is
//    the sort-and-copy cycle (state ISORT), while the cores wait.
// This gives 2N + (N/P)log2(N/(4P)) + |A| (+ number of frozen runs with
// the pruned sorter) cycles per codeword, counted from the cycle after
// `start` to the cycle before `done`.
//
// Memory addresses (heap positions, word = pos / P, lane offset = pos % P):
// parent upper half at 2^(k+1) + cP, lower half at 2^(k+1) + 2^k + cP (for
// the channel, level n, the same minus N); child written at 2^k + cP under a
// mask of min(P, 2^k) lanes.
//
// Interface: `start` (in IDLE) latches `frozen_in` and starts; `done` is a
// one-cycle pulse after the last decoding cycle. `init` pulses with start
// to clear the path state. The schedule and the cycle count follow the
// paper's latency formula; the state machine, address generation and the
// start/done handshake are this design's (the paper defers these details to
// earlier work).
module scl_controller #(
  parameter int N      = 1024,
  parameter int P      = 64,
  parameter bit PRUNED = 1'b1,
  localparam int NL = $clog2(N),
  localparam int AW = (N / P > 1) ? $clog2(N / P) : 1,
  localparam int KLW = $clog2(NL + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [N-1:0]       frozen_in,
  output logic               busy,
  output logic               done,
  output logic               init,
  // operation of this cycle
  output logic               op_valid,   // cores compute this cycle
  output scl_pkg::op_func_e  op_func,
  output logic [KLW-1:0]     op_level,   // level being produced
  output logic [AW-1:0]      op_cyc,     // P-LLR slice within the level
  output logic [NL-1:0]      bit_idx,
  // memory addresses
  output logic               rd_chan,    // parent is the channel memory
  output logic [KLW-1:0]     rd_level,   // parent level (k+1)
  output logic [AW-1:0]      rd_word_a,
  output logic [AW-1:0]      rd_word_b,
  output logic [$clog2(P+1)-1:0] rd_off_a,
  output logic [$clog2(P+1)-1:0] rd_off_b,
  output logic               wr_en,
  output logic [AW-1:0]      wr_word,
  output logic [$clog2(P+1)-1:0] wr_off,
  output logic [P-1:0]       wr_mask,
  // strobes to the metric sorting unit
  output logic               frozen_upd,
  output logic               info_cap,
  output logic               info_sort,
  output logic               frozen_sort
);
  import scl_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_RUN, S_ISORT, S_FSORT, S_FIN} state_e;

  initial begin
    assert (N >= 2 * P && P >= 1) else $error("scl_controller: need N >= 2P");
  end

  state_e        state;
  logic [N-1:0]  frozen;
  logic [KLW-1:0] k;
  logic [AW-1:0] c;
  op_func_e      func;
  logic [NL-1:0] i;
  logic          last_bit, cluster_end;

  function automatic logic [KLW-1:0] tzeros(input logic [NL-1:0] v);
    logic [KLW-1:0] t;
    logic           stop;
    t    = '0;
    stop = 1'b0;
    for (int b = 0; b < NL; b++) begin
      if (!stop && !v[b]) t = t + 1'b1;
      else stop = 1'b1;
    end
    return t;
  endfunction

  function automatic int ncyc(input int lev);
    return ((1 << lev) > P) ? ((1 << lev) / P) : 1;
  endfunction

  assign last_bit    = (i == NL'(N - 1));
  assign cluster_end = frozen[i] && (last_bit || !frozen[i + 1'b1]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      frozen <= '0;
      k      <= '0;
      c      <= '0;
      func   <= OP_F;
      i      <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          frozen <= frozen_in;
          i      <= '0;
          k      <= KLW'(NL - 1);
          c      <= '0;
          func   <= OP_F;
          state  <= S_RUN;
        end
        S_RUN: begin
          if (k != '0) begin
            if (int'(c) == ncyc(int'(k)) - 1) begin
              k    <= k - 1'b1;
              c    <= '0;
              func <= OP_F;
            end else begin
              c <= c + 1'b1;
            end
          end else if (!frozen[i]) begin
            state <= S_ISORT;
          end else if (PRUNED && cluster_end) begin
            state <= S_FSORT;
          end else if (last_bit) begin
            state <= S_FIN;
          end else begin
            i     <= i + 1'b1;
            k     <= tzeros(i + 1'b1);
            c     <= '0;
            func  <= OP_G;
          end
        end
        S_ISORT, S_FSORT: begin
          if (last_bit) begin
            state <= S_FIN;
          end else begin
            i     <= i + 1'b1;
            k     <= tzeros(i + 1'b1);
            c     <= '0;
            func  <= OP_G;
            state <= S_RUN;
          end
        end
        S_FIN: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy        = (state != S_IDLE);
  assign done        = (state == S_FIN);
  assign init        = (state == S_IDLE) && start;
  assign op_valid    = (state == S_RUN);
  assign op_func     = func;
  assign op_level    = k;
  assign op_cyc      = c;
  assign bit_idx     = i;
  assign frozen_upd  = (state == S_RUN) && (k == '0) && frozen[i];
  assign info_cap    = (state == S_RUN) && (k == '0) && !frozen[i];
  assign info_sort   = (state == S_ISORT);
  assign frozen_sort = (state == S_FSORT);

  // address generation
  int pos_a, pos_b, pos_w, half, lanes;
  always_comb begin
    half     = 1 << k;
    rd_level = k + 1'b1;
    rd_chan  = (int'(k) == NL - 1);
    pos_a    = (rd_chan ? 0 : (2 << k)) + int'(c) * P;
    pos_b    = pos_a + half;
    pos_w    = half + int'(c) * P;
    lanes    = (half < P) ? half : P;
    rd_word_a = AW'(pos_a / P);
    rd_word_b = AW'(pos_b / P);
    rd_off_a  = ($clog2(P+1))'(pos_a % P);
    rd_off_b  = ($clog2(P+1))'(pos_b % P);
    wr_word   = AW'(pos_w / P);
    wr_off    = ($clog2(P+1))'(pos_w % P);
    wr_en     = (state == S_RUN) && (k != '0);
    for (int p = 0; p < P; p++) wr_mask[p] = (p >= pos_w % P) && (p < pos_w % P + lanes);
  end
endmodule
