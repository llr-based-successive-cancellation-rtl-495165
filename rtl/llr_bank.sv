// llr_bank: one physical bank of internal LLR memory.
//
// The decoder has L such banks. A bank stores the intermediate LLRs of the
// SC tree in a heap layout: the 2^k LLRs of tree level k (k = 1..n-1, level
// n being the channel and level 0 the decision LLR) sit at positions
// 2^k .. 2^(k+1)-1. With P-LLR words this gives N/P words; the levels shorter
// than P share word 0 (level k in lanes 2^k .. 2^(k+1)-1), so that the N-1
// useful positions fill the bank with one lane (lane 0, and lane 1 since the
// decision LLR is kept in a register instead) left over.
//
// Two combinational read ports return whole words; the core aligns lanes.
// One write port writes a word under a per-lane mask, so a short level can
// be written into word 0 without disturbing the other levels there.
// Register storage and two read ports follow the paper; the heap layout is
// this design's choice. Contents are not reset: every position is written
// before it is read.
module llr_bank #(
  parameter int N = 1024,
  parameter int P = 64,
  parameter int Q = 6,
  localparam int W  = N / P,
  localparam int AW = (W > 1) ? $clog2(W) : 1
) (
  input  logic                clk,
  input  logic                wr_en,
  input  logic [AW-1:0]       wr_addr,
  input  logic [P-1:0]        wr_mask,
  input  logic signed [Q-1:0] wr_data   [P],
  input  logic [AW-1:0]       rd_addr_a,
  input  logic [AW-1:0]       rd_addr_b,
  output logic signed [Q-1:0] rd_data_a [P],
  output logic signed [Q-1:0] rd_data_b [P]
);
  logic signed [Q-1:0] mem [W][P];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int p = 0; p < P; p++) begin
        if (wr_mask[p]) mem[wr_addr][p] <= wr_data[p];
      end
    end
  end

  assign rd_data_a = mem[rd_addr_a];
  assign rd_data_b = mem[rd_addr_b];
endmodule
